// tb_ca_video_crypto_link: end-to-end test of the video encryption link at
// its default size (1000-cell CA5 rings with rotation 11, 40-bit video words).
//
// The transmitter and receiver run on their own 27 MHz clocks (37.0 ns and
// 37.2 ns periods). A
// queue stands in for the LVDS cable: every word the transmitter emits is
// queued and later offered to the receiver, with its own random gaps. Video is
// a synthetic frame (a gradient pattern with a frame counter). Checks:
//   * every ciphertext word equals plaintext XOR the keystream of an
//     independent reference model of the ring (algebraic normal form of the
//     5-neighbour rule, rotation by modular indexing, taps from growing gaps);
//   * the receiver returns exactly the plaintext, in order;
//   * a back-to-back frame leaves the transmitter at one word per clock with
//     one clock of latency, i.e. 40 bits x 27 MHz = 1.08 Gbps, which must reach
//     the 1 Gbps reported for the 27 MHz demonstrator;
//   * a receiver holding the wrong key does not recover the video.
// Each mechanism (key load, transmit gap, receive gap, back-to-back burst,
// rekey, word dropped in a key-load cycle, wrong key) is counted; one that never
// happened is a failure.
module tb_ca_video_crypto_link;
  import ca_pkg::*;

  localparam int N    = 1000;
  localparam int ROT  = 11;
  localparam int KS_W = 40;

  logic            tx_clk = 1'b0, rx_clk = 1'b0;
  logic            tx_rst_n, rx_rst_n;
  logic            tx_key_load, rx_key_load;
  logic [N-1:0]    tx_key, rx_key;
  logic            video_in_valid;
  logic [KS_W-1:0] video_in_data;
  logic            link_tx_valid;
  logic [KS_W-1:0] link_tx_data;
  logic            link_rx_valid;
  logic [KS_W-1:0] link_rx_data;
  logic            video_out_valid;
  logic [KS_W-1:0] video_out_data;

  // 27 MHz boards, as in the demonstrator; the two crystals differ slightly
  always #18.5 tx_clk = ~tx_clk;   // 27.03 MHz
  always #18.6 rx_clk = ~rx_clk;   // 26.88 MHz

  ca_video_crypto_link dut (.*);

  int checks = 0;
  int failures = 0;

  // mechanism counters
  int n_key_loads = 0, n_tx_gaps = 0, n_rx_gaps = 0, n_bursts = 0;
  int n_rekeys = 0, n_dropped = 0, n_wrong_key_runs = 0;

  // ---------------- reference model of the transmitter ring ----------------
  bit [N-1:0] m;

  function automatic int wrap(int x);
    return ((x % N) + N) % N;
  endfunction

  function automatic bit r5(bit a, bit b, bit c, bit d, bit e);
    return a ^ d ^ e ^ (b & d) ^ (b & e) ^ (c & d) ^ (c & e) ^ (d & e)
             ^ (b & d & e) ^ (c & d & e);
  endfunction

  function automatic bit [N-1:0] model_step(bit [N-1:0] s);
    bit [N-1:0] n;
    for (int i = 0; i < N; i++) begin
      int c = wrap(i + ROT);
      n[i] = r5(s[wrap(c-2)], s[wrap(c-1)], s[c], s[wrap(c+1)], s[wrap(c+2)]);
    end
    return n;
  endfunction

  function automatic bit [KS_W-1:0] model_ks(bit [N-1:0] s);
    bit [KS_W-1:0] k;
    int pos = 0;
    for (int t = 0; t < KS_W; t++) begin
      k[t] = s[pos];
      pos += 6 + t;
    end
    return k;
  endfunction

  function automatic bit [N-1:0] rand_key();
    bit [N-1:0] k;
    for (int i = 0; i < N; i += 32) begin
      bit [31:0] w = $urandom;
      for (int b = 0; b < 32 && i + b < N; b++) k[i+b] = w[b];
    end
    return k;
  endfunction

  // synthetic video: 40-bit word = frame, line, column gradient
  function automatic bit [KS_W-1:0] pixel(int frame, int idx);
    return KS_W'({8'(frame), 8'(idx / 64), 8'(idx % 64), 8'(idx * 3), 8'(255 - idx % 256)});
  endfunction

  // ---------------- queues between the two boards ----------------
  bit [KS_W-1:0] plain_q[$];   // plaintext in order, for the receiver check
  bit [KS_W-1:0] cipher_q[$];  // expected ciphertext, for the transmitter check
  bit [KS_W-1:0] link_q[$];    // words on the cable
  bit            rx_check_plain = 1'b1;
  int            wrong_key_matches = 0, wrong_key_words = 0;
  int            tx_out_count = 0, rx_out_count = 0;

  // transmitter output monitor: ciphertext against the model, onto the cable
  always @(posedge tx_clk) begin
    #1;
    if (tx_rst_n && link_tx_valid) begin
      bit [KS_W-1:0] exp;
      checks++;
      if (cipher_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected ciphertext word at %0t", $time);
      end else begin
        exp = cipher_q.pop_front();
        if (link_tx_data !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL ciphertext %h expected %h at %0t", link_tx_data, exp, $time);
        end
      end
      link_q.push_back(link_tx_data);
      tx_out_count++;
    end
  end

  // receiver output monitor: plaintext back in order
  always @(posedge rx_clk) begin
    #1;
    if (rx_rst_n && video_out_valid) begin
      bit [KS_W-1:0] exp;
      rx_out_count++;
      if (plain_q.size() == 0) begin
        checks++; failures++;
        $display("FAIL unexpected video word at %0t", $time);
      end else begin
        exp = plain_q.pop_front();
        if (rx_check_plain) begin
          checks++;
          if (video_out_data !== exp) begin
            failures++;
            if (failures < 10) $display("FAIL video %h expected %h at %0t", video_out_data, exp, $time);
          end
        end else begin
          wrong_key_words++;
          if (video_out_data === exp) wrong_key_matches++;
        end
      end
    end
  end

  // ---------------- transmitter side driver ----------------
  // inputs change on the falling edge, so they never race the rising edge
  task automatic tx_cycle(bit load, bit [N-1:0] k, bit v, bit [KS_W-1:0] d);
    @(negedge tx_clk);
    tx_key_load = load; tx_key = k; video_in_valid = v; video_in_data = d;
    if (load) begin
      m = k;
      if (v) n_dropped++;
    end else if (v) begin
      cipher_q.push_back(d ^ model_ks(m));
      plain_q.push_back(d);
      m = model_step(m);
    end
    @(posedge tx_clk);
    #1;
  endtask

  task automatic tx_idle();
    tx_cycle(1'b0, '0, 1'b0, '0);
  endtask

  // send a frame of `words` pixels; gap_pct = chance of an idle cycle
  task automatic tx_frame(int frame, int words, int gap_pct);
    int idx = 0;
    while (idx < words) begin
      if (($urandom % 100) < gap_pct) begin
        tx_idle();
        n_tx_gaps++;
      end else begin
        tx_cycle(1'b0, '0, 1'b1, pixel(frame, idx));
        idx++;
      end
    end
    tx_idle();
  endtask

  // ---------------- receiver side driver ----------------
  bit rx_run = 1'b0;
  int rx_gap_pct = 20;

  task automatic rx_load(bit [N-1:0] k);
    @(negedge rx_clk);
    rx_key_load = 1'b1; rx_key = k; link_rx_valid = 1'b0;
    @(negedge rx_clk);
    rx_key_load = 1'b0;
  endtask

  always @(negedge rx_clk) begin
    if (rx_run && !rx_key_load) begin
      if (link_q.size() != 0 && ($urandom % 100) >= rx_gap_pct) begin
        link_rx_valid <= 1'b1;
        link_rx_data  <= link_q.pop_front();
      end else begin
        link_rx_valid <= 1'b0;
        if (link_q.size() != 0) n_rx_gaps++;
      end
    end else if (!rx_key_load) begin
      link_rx_valid <= 1'b0;
    end
  end

  task automatic wait_drain();
    int guard = 0;
    while ((link_q.size() != 0 || plain_q.size() != 0 || cipher_q.size() != 0) && guard < 20000) begin
      @(posedge rx_clk);
      guard++;
    end
    repeat (4) @(posedge rx_clk);
    checks++;
    if (link_q.size() != 0 || plain_q.size() != 0 || cipher_q.size() != 0) begin
      failures++;
      $display("FAIL link did not drain: link=%0d plain=%0d cipher=%0d",
               link_q.size(), plain_q.size(), cipher_q.size());
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge tx_clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- test sequence ----------------
  initial begin
    bit [N-1:0] k1, k2, k3;
    int t_first, t_last, c0;
    realtime rt_first, rt_last;
    real gbps;
    k1 = rand_key(); k2 = rand_key(); k3 = rand_key();

    tx_rst_n = 1'b0; rx_rst_n = 1'b0;
    tx_key_load = 1'b0; rx_key_load = 1'b0; tx_key = '0; rx_key = '0;
    video_in_valid = 1'b0; video_in_data = '0;
    link_rx_valid = 1'b0; link_rx_data = '0;
    repeat (3) @(posedge rx_clk);
    tx_rst_n = 1'b1; rx_rst_n = 1'b1;

    // 1. both boards get key 1; frame 0 with gaps on both sides
    @(posedge tx_clk); #1;
    tx_cycle(1'b1, k1, 1'b0, '0);
    rx_load(k1);
    n_key_loads += 2;
    rx_run = 1'b1;
    tx_frame(0, 1500, 25);
    wait_drain();

    // 2. rekey to key 2, with a video word offered in the load cycle (dropped);
    //    frame 1 back to back: one word per clock, one clock of latency
    rx_run = 1'b0;
    tx_cycle(1'b1, k2, 1'b1, '1);
    rx_load(k2);
    n_key_loads += 2; n_rekeys++;
    rx_run = 1'b1; rx_gap_pct = 0;
    c0 = tx_out_count;
    t_first = -1; t_last = -1;
    for (int idx = 0; idx < 1000; idx++) begin
      tx_cycle(1'b0, '0, 1'b1, pixel(1, idx));
      if (link_tx_valid) begin
        if (t_first < 0) begin
          t_first = idx;
          rt_first = $realtime;
        end
        t_last = idx;
        rt_last = $realtime;
      end
    end
    tx_idle();
    checks++;
    if (t_first != 0 || t_last != 999 || tx_out_count - c0 != 1000) begin
      failures++;
      $display("FAIL burst: first=%0d last=%0d words=%0d", t_first, t_last, tx_out_count - c0);
    end else n_bursts++;
    // 999 word intervals between the first and the last word of the burst
    gbps = 40.0 * 999.0 / (rt_last - rt_first);   // bits per ns = Gbit/s
    $display("burst throughput %f Gbit/s", gbps);
    checks++;
    if (gbps < 1.0) begin
      failures++;
      $display("FAIL burst throughput %f Gbit/s is below 1 Gbit/s", gbps);
    end
    wait_drain();

    // 3. receiver holds the wrong key: the video must not come back
    rx_run = 1'b0; rx_gap_pct = 20;
    tx_cycle(1'b1, k1, 1'b0, '0);
    rx_load(k3);
    n_key_loads += 2; n_rekeys++;
    @(posedge rx_clk); #1;
    rx_check_plain = 1'b0;
    rx_run = 1'b1;
    tx_frame(2, 300, 10);
    wait_drain();
    rx_check_plain = 1'b1;
    checks++;
    if (wrong_key_words != 300 || wrong_key_matches > 3) begin
      failures++;
      $display("FAIL wrong key: %0d of %0d words came back", wrong_key_matches, wrong_key_words);
    end else n_wrong_key_runs++;

    // 4. both back on the same key; frame 3 with heavy gaps
    rx_run = 1'b0;
    tx_cycle(1'b1, k3, 1'b0, '0);
    rx_load(k3);
    n_key_loads += 2; n_rekeys++;
    rx_run = 1'b1; rx_gap_pct = 50;
    tx_frame(3, 800, 50);
    wait_drain();

    // mechanisms
    checks++;
    if (n_key_loads == 0 || n_tx_gaps == 0 || n_rx_gaps == 0 || n_bursts == 0 ||
        n_rekeys == 0 || n_dropped == 0 || n_wrong_key_runs == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("key_loads=%0d tx_gaps=%0d rx_gaps=%0d bursts=%0d rekeys=%0d dropped=%0d wrong_key_runs=%0d tx_words=%0d rx_words=%0d",
             n_key_loads, n_tx_gaps, n_rx_gaps, n_bursts, n_rekeys, n_dropped,
             n_wrong_key_runs, tx_out_count, rx_out_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
