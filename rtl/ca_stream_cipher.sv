// ca_stream_cipher: one FPGA's worth of the CA stream cipher.
//
// What it does: XORs each KS_W-bit data word (a 40-bit video word per clock in
// the reference system) with the KS_W-bit keystream of a ca_prng_core. XOR is
// its own inverse, so the same unit encrypts on the transmitter and decrypts on
// the receiver as long as both are loaded with the same key and see the same
// sequence of valid words.
//
// How it works: the keystream word presented by the core in a cycle with
// in_valid high is XORed with in_data into an output register, and the same
// cycle tells the core to step, so the next valid word meets the next CA
// configuration. Cycles with in_valid low neither produce output nor advance the
// CA, which keeps the two ends aligned across gaps in the video stream.
//
// Interface and timing:
//   key_load/key  load the initial configuration (the secret key). A word that
//                 arrives in a key_load cycle is dropped; the first valid word
//                 after a load is XORed with the taps of the key itself.
//   in_valid/in_data    one word per clock at most.
//   out_valid/out_data  registered: one clock of latency, one word per clock
//                       throughput (KS_W bits/clock: 40 x 75.55 MHz = 3.02 Gbps
//                       for CA5 in the reported FPGA figures).
//   Reset (synchronous, active low) clears out_valid and the ring.
//
// Following the described design: keystream XOR, 40 bits per clock and one CA
// step per word. Local choices: the valid handshake, the output register, the
// dropping of a word during a key load, and no resynchronisation mechanism.
module ca_stream_cipher
  import ca_pkg::*;
#(
  parameter int unsigned N    = CA_N_DEFAULT,
  parameter int unsigned ROT  = CA_ROT_DEFAULT,
  parameter int unsigned KS_W = KS_W_DEFAULT,
  parameter ca_rule_e    RULE = RULE_CA5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            key_load,
  input  logic [N-1:0]    key,
  input  logic            in_valid,
  input  logic [KS_W-1:0] in_data,
  output logic            out_valid,
  output logic [KS_W-1:0] out_data
);

  logic [KS_W-1:0] keystream;
  logic            step;

  assign step = in_valid && !key_load;

  ca_prng_core #(
    .N   (N),
    .ROT (ROT),
    .KS_W(KS_W),
    .RULE(RULE)
  ) u_core (
    .clk      (clk),
    .rst_n    (rst_n),
    .key_load (key_load),
    .key      (key),
    .step     (step),
    .state    (),
    .keystream(keystream)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= step;
      if (step) out_data <= in_data ^ keystream;
    end
  end

endmodule
