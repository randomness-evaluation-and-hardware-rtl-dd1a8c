// ca_video_crypto_link: real-time video encryption and decryption system.
//
// What it does: models the two-board demonstrator. On the transmitter board a
// video decoder delivers one 40-bit video word per clock to an FPGA, which
// encrypts it with the CA keystream and hands it to an LVDS transmitter. On the
// receiver board the LVDS receiver delivers the encrypted word to a second FPGA,
// which decrypts it with an identical keystream generator and passes the plain
// video to a video encoder. Both FPGAs hold the same design, ca_stream_cipher.
//
// How it is wired: the video decoder, the LVDS cable/transceivers and the
// video encoder are board parts, not logic, so their signals are ports of this
// module: video_in_* (from the decoder), link_tx_* (to the LVDS transmitter),
// link_rx_* (from the LVDS receiver) and video_out_* (to the encoder). The two
// halves run on their own clocks and resets (tx_clk, rx_clk), as the two boards
// do; nothing crosses between the clock domains inside this module.
//
// Timing: each half has one clock of latency and takes one word per clock.
// The receiver must be loaded with the same key as the transmitter and must
// see exactly the words the transmitter sent, in order.
//
// Following the described system: two FPGAs, encryption on one and decryption
// on the other, 40 bits per clock, LVDS between them. Local choices: separate
// key ports per side (key distribution is not part of the design) and a
// valid bit travelling with each word over the link.
module ca_video_crypto_link
  import ca_pkg::*;
#(
  parameter int unsigned N    = CA_N_DEFAULT,
  parameter int unsigned ROT  = CA_ROT_DEFAULT,
  parameter int unsigned KS_W = KS_W_DEFAULT,
  parameter ca_rule_e    RULE = RULE_CA5
) (
  // transmitter board
  input  logic            tx_clk,
  input  logic            tx_rst_n,
  input  logic            tx_key_load,
  input  logic [N-1:0]    tx_key,
  input  logic            video_in_valid,
  input  logic [KS_W-1:0] video_in_data,
  output logic            link_tx_valid,
  output logic [KS_W-1:0] link_tx_data,
  // receiver board
  input  logic            rx_clk,
  input  logic            rx_rst_n,
  input  logic            rx_key_load,
  input  logic [N-1:0]    rx_key,
  input  logic            link_rx_valid,
  input  logic [KS_W-1:0] link_rx_data,
  output logic            video_out_valid,
  output logic [KS_W-1:0] video_out_data
);

  // Transmitter FPGA: encryption
  ca_stream_cipher #(
    .N   (N),
    .ROT (ROT),
    .KS_W(KS_W),
    .RULE(RULE)
  ) u_encrypt (
    .clk      (tx_clk),
    .rst_n    (tx_rst_n),
    .key_load (tx_key_load),
    .key      (tx_key),
    .in_valid (video_in_valid),
    .in_data  (video_in_data),
    .out_valid(link_tx_valid),
    .out_data (link_tx_data)
  );

  // Receiver FPGA: decryption
  ca_stream_cipher #(
    .N   (N),
    .ROT (ROT),
    .KS_W(KS_W),
    .RULE(RULE)
  ) u_decrypt (
    .clk      (rx_clk),
    .rst_n    (rx_rst_n),
    .key_load (rx_key_load),
    .key      (rx_key),
    .in_valid (link_rx_valid),
    .in_data  (link_rx_data),
    .out_valid(video_out_valid),
    .out_data (video_out_data)
  );

endmodule
