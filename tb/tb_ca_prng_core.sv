// tb_ca_prng_core: self-checking testbench of the CA keystream generator.
//
// Two full-size rings (N = 1000, rotation 11, 40 taps) run side by side: one
// with the 5-neighbour rule 535945230 (the default) and one with rule 30. The
// reference model below is written independently of the RTL: it evaluates the
// rules from their algebraic normal forms (rule 30 as l ^ c ^ r ^ c&r, the
// 5-neighbour rule as the ten-term XOR of products obtained by composing two
// rule-30 steps), applies the rotation by explicit modular indexing, and builds
// the tap list by accumulating the gaps 6, 7, 8, ... It also checks the tap
// cells quoted for the design (1, 7, 14, 22, 31, 41, ..., 932, 976), and that
// both ANF forms reproduce the rule numbers 30 and 535945230.
//
// Checked: key load, one step per clock with step high, hold with step low,
// keystream = taps of the state, zero configuration as a fixed point, reset.
module tb_ca_prng_core;
  import ca_pkg::*;

  localparam int N    = 1000;
  localparam int ROT  = 11;
  localparam int KS_W = 40;

  logic            clk = 1'b0;
  logic            rst_n;
  logic            key_load;
  logic [N-1:0]    key;
  logic            step;
  logic [N-1:0]    state5, state3;
  logic [KS_W-1:0] ks5, ks3;

  int checks = 0;
  int failures = 0;
  int steps_done = 0;
  int holds_done = 0;

  always #5 clk = ~clk;

  ca_prng_core #(.RULE(RULE_CA5)) dut5 (
    .clk, .rst_n, .key_load, .key, .step, .state(state5), .keystream(ks5)
  );
  ca_prng_core #(.N(N), .ROT(ROT), .KS_W(KS_W), .RULE(RULE_ECA30)) dut3 (
    .clk, .rst_n, .key_load, .key, .step, .state(state3), .keystream(ks3)
  );

  // ---------------- reference model ----------------
  bit [N-1:0] m5, m3;
  int         taps [KS_W];

  function automatic bit r30(bit l, bit c, bit r);
    return l ^ c ^ r ^ (c & r);
  endfunction

  function automatic bit r5(bit a, bit b, bit c, bit d, bit e);
    return a ^ d ^ e ^ (b & d) ^ (b & e) ^ (c & d) ^ (c & e) ^ (d & e)
             ^ (b & d & e) ^ (c & d & e);
  endfunction

  function automatic int wrap(int x);
    return ((x % N) + N) % N;
  endfunction

  function automatic bit [N-1:0] model_step(bit [N-1:0] s, bit five);
    bit [N-1:0] n;
    for (int i = 0; i < N; i++) begin
      int c = wrap(i + ROT);
      if (five)
        n[i] = r5(s[wrap(c-2)], s[wrap(c-1)], s[c], s[wrap(c+1)], s[wrap(c+2)]);
      else
        n[i] = r30(s[wrap(c-1)], s[c], s[wrap(c+1)]);
    end
    return n;
  endfunction

  function automatic bit [KS_W-1:0] model_ks(bit [N-1:0] s);
    bit [KS_W-1:0] k;
    for (int t = 0; t < KS_W; t++) k[t] = s[taps[t]];
    return k;
  endfunction

  task automatic check(string what, logic [N-1:0] got, bit [N-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic compare_all(string what);
    check({what, " state CA5"}, state5, m5);
    check({what, " state ECA30"}, state3, m3);
    check({what, " ks CA5"}, N'(ks5), N'(model_ks(m5)));
    check({what, " ks ECA30"}, N'(ks3), N'(model_ks(m3)));
  endtask

  function automatic bit [N-1:0] rand_key();
    bit [N-1:0] k;
    for (int i = 0; i < N; i += 32) begin
      bit [31:0] w = $urandom;
      for (int b = 0; b < 32 && i + b < N; b++) k[i+b] = w[b];
    end
    return k;
  endfunction

  // ---------------- watchdog ----------------
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  initial begin
    automatic int quoted_cells [8] = '{1, 7, 14, 22, 31, 41, 932, 976};
    automatic int quoted_taps  [8] = '{0, 1, 2, 3, 4, 5, 38, 39};

    // the ANF forms used by the model against the rule numbers
    for (int v = 0; v < 32; v++) begin
      checks++;
      if (r5(v[4], v[3], v[2], v[1], v[0]) != RULE535945230_TABLE[v]) failures++;
      if (v < 8) begin
        checks++;
        if (r30(v[2], v[1], v[0]) != RULE30_TABLE[v]) failures++;
      end
    end

    // taps from growing gaps 6, 7, 8, ...
    taps[0] = 0;
    for (int t = 1; t < KS_W; t++) taps[t] = taps[t-1] + 5 + t;
    for (int q = 0; q < 8; q++) begin
      checks++;
      if (taps[quoted_taps[q]] + 1 != quoted_cells[q]) begin
        failures++;
        $display("FAIL tap %0d at cell %0d", quoted_taps[q], taps[quoted_taps[q]] + 1);
      end
    end

    rst_n = 1'b0; key_load = 1'b0; step = 1'b0; key = '0;
    repeat (2) @(posedge clk);
    #1;
    m5 = '0; m3 = '0;
    compare_all("reset");
    rst_n = 1'b1;

    // zero configuration is a fixed point of both rules
    step = 1'b1;
    repeat (3) @(posedge clk);
    #1;
    compare_all("zero fixed point");

    // single seed cell: exercises the rotation and the wrap-around edges
    for (int seed = 0; seed < 3; seed++) begin
      automatic bit [N-1:0] k = '0;
      k[seed == 0 ? 0 : (seed == 1 ? N-1 : 500)] = 1'b1;
      key = k; key_load = 1'b1; step = 1'b1;   // key_load wins over step
      @(posedge clk); #1;
      m5 = k; m3 = k;
      compare_all("seed load");
      key_load = 1'b0;
      for (int s = 0; s < 60; s++) begin
        @(posedge clk); #1;
        m5 = model_step(m5, 1'b1); m3 = model_step(m3, 1'b0);
        steps_done++;
        compare_all("seed step");
      end
    end

    // random keys, random step pattern
    for (int kk = 0; kk < 4; kk++) begin
      automatic bit [N-1:0] k = rand_key();
      key = k; key_load = 1'b1; step = 1'b0;
      @(posedge clk); #1;
      m5 = k; m3 = k;
      compare_all("key load");
      key_load = 1'b0;
      for (int s = 0; s < 200; s++) begin
        step = ($urandom % 4) != 0;
        @(posedge clk); #1;
        if (step) begin
          m5 = model_step(m5, 1'b1); m3 = model_step(m3, 1'b0);
          steps_done++;
        end else holds_done++;
        compare_all("random step");
      end
    end

    // reset clears the ring
    rst_n = 1'b0; step = 1'b1;
    @(posedge clk); #1;
    m5 = '0; m3 = '0;
    compare_all("reset again");

    checks++;
    if (steps_done == 0 || holds_done == 0) begin
      failures++;
      $display("FAIL steps=%0d holds=%0d", steps_done, holds_done);
    end
    $display("steps=%0d holds=%0d", steps_done, holds_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
