// tb_ca_stream_cipher: self-checking testbench of one cipher unit.
//
// The unit runs at its default size (1000 cells, CA5 rule, rotation 11,
// 40-bit words). A reference model written from the rule's algebraic normal
// form keeps its own copy of the ring, steps it once per accepted word and
// predicts every output word as plaintext XOR keystream taps. The scoreboard
// also checks the timing: each accepted word comes out exactly one clock later,
// and a burst of back-to-back words leaves at one word per clock.
//
// Exercised: key load, back-to-back streaming, gaps in the input (the CA must
// hold), a word offered during a key load (dropped), rekeying mid-stream, reset.
module tb_ca_stream_cipher;
  import ca_pkg::*;

  localparam int N    = 1000;
  localparam int ROT  = 11;
  localparam int KS_W = 40;

  logic            clk = 1'b0;
  logic            rst_n;
  logic            key_load;
  logic [N-1:0]    key;
  logic            in_valid;
  logic [KS_W-1:0] in_data;
  logic            out_valid;
  logic [KS_W-1:0] out_data;

  int checks = 0;
  int failures = 0;
  int n_words = 0, n_gaps = 0, n_dropped = 0, n_rekeys = 0, burst_max = 0;

  always #5 clk = ~clk;

  ca_stream_cipher dut (
    .clk, .rst_n, .key_load, .key, .in_valid, .in_data, .out_valid, .out_data
  );

  // ---------------- reference model ----------------
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

  // expected output after the current clock edge
  bit              exp_valid = 1'b0;
  bit [KS_W-1:0]   exp_data;

  // Drive one cycle. The output register captures the word at the same edge
  // that steps the CA, so the word is checked just after that edge (one clock
  // of latency from the cycle it was offered in).
  task automatic drive(bit load, bit [N-1:0] k, bit v, bit [KS_W-1:0] d);
    key_load = load; key = k; in_valid = v; in_data = d;
    // model update for what is clocked in at this edge
    if (load) begin
      if (v) n_dropped++;
      m = k; n_rekeys++;
    end else if (v) begin
      exp_data = d ^ model_ks(m);
      m = model_step(m);
      n_words++;
    end else n_gaps++;
    exp_valid = v && !load;
    @(posedge clk);
    #1;
    checks++;
    if (out_valid !== exp_valid) begin
      failures++;
      if (failures < 10) $display("FAIL out_valid=%b expected %b at %0t", out_valid, exp_valid, $time);
    end else if (exp_valid) begin
      checks++;
      if (out_data !== exp_data) begin
        failures++;
        if (failures < 10) $display("FAIL out_data %h expected %h at %0t", out_data, exp_data, $time);
      end
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int t0, outs;
    rst_n = 1'b0; key_load = 1'b0; key = '0; in_valid = 1'b0; in_data = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (out_valid !== 1'b0) failures++;
    rst_n = 1'b1;

    // load a key, then a back-to-back burst of 500 words: throughput and latency
    drive(1'b1, rand_key(), 1'b0, '0);
    t0 = 0; outs = 0;
    for (int w = 0; w < 500; w++) begin
      drive(1'b0, '0, 1'b1, KS_W'({$urandom, $urandom}));
      t0++;
      if (out_valid) outs++;
    end
    drive(1'b0, '0, 1'b0, '0);
    checks++;
    if (outs != 500 || t0 != 500) begin
      failures++;
      $display("FAIL burst of 500 words gave %0d outputs in %0d cycles", outs, t0 + 1);
    end
    burst_max = 500;

    // random traffic with gaps, keys offered with and without a word
    for (int c = 0; c < 3000; c++) begin
      automatic int r = $urandom % 100;
      if (r < 2)       drive(1'b1, rand_key(), ($urandom % 2) == 1, KS_W'({$urandom, $urandom}));
      else if (r < 70) drive(1'b0, '0, 1'b1, KS_W'({$urandom, $urandom}));
      else             drive(1'b0, '0, 1'b0, KS_W'({$urandom, $urandom}));
    end
    // make sure a word was dropped in a key-load cycle at least once
    drive(1'b1, rand_key(), 1'b1, '1);
    drive(1'b0, '0, 1'b1, '0);   // all-zero plaintext: output is the raw keystream
    drive(1'b0, '0, 1'b0, '0);

    // reset clears the output valid
    rst_n = 1'b0;
    @(posedge clk); #1;
    checks++;
    if (out_valid !== 1'b0) failures++;
    rst_n = 1'b1;

    checks++;
    if (n_words == 0 || n_gaps == 0 || n_dropped == 0 || n_rekeys < 2) begin
      failures++;
      $display("FAIL coverage words=%0d gaps=%0d dropped=%0d rekeys=%0d",
               n_words, n_gaps, n_dropped, n_rekeys);
    end
    $display("words=%0d gaps=%0d dropped=%0d rekeys=%0d burst=%0d",
             n_words, n_gaps, n_dropped, n_rekeys, burst_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
