// tb_ca_keystream_stats: statistical smoke test of the keystream.
//
// Runs the default generator (1000 cells, 5-neighbour rule 535945230,
// rotation 11, 40 taps) from three fixed keys and applies two tests of the NIST
// SP 800-22 suite at significance level 0.01:
//   * frequency (monobit): s = |#ones - #zeros| / sqrt(n);
//     P = erfc(s / sqrt(2)) >= 0.01  <=>  s <= 2.5758
//   * runs: pi = #ones / n must satisfy |pi - 1/2| < 2 / sqrt(n); with V the
//     number of runs, P = erfc(|V - 2 n pi (1-pi)| / (2 sqrt(2n) pi (1-pi)))
//     >= 0.01  <=>  |V - 2 n pi (1-pi)| / (2 sqrt(2n) pi (1-pi)) <= 1.8214
// on two kinds of sequence per key:
//   * the 40-bit sampled keystream, tap 0 first, 10^6 bits (25,000 steps);
//   * a single fixed cell (tap 0, cell 1), 10^6 bits (10^6 steps), the form
//     of keystream used for the fixed-cell evaluations.
// The keys come from a fixed xorshift generator so the result does not depend
// on the simulator seed. This is a small part of the full evaluation (16 tests,
// 1000 sequences of 10^6 bits per key), which is far beyond simulation.
module tb_ca_keystream_stats;
  import ca_pkg::*;

  localparam int N        = 1000;
  localparam int KS_W     = 40;
  localparam int STEPS    = 1000000;
  localparam int WIDE_STEPS = 25000;
  localparam int KEYS     = 3;

  logic            clk = 1'b0;
  logic            rst_n;
  logic            key_load;
  logic [N-1:0]    key;
  logic            step;
  logic [N-1:0]    state;
  logic [KS_W-1:0] keystream;

  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  ca_prng_core dut (.clk, .rst_n, .key_load, .key, .step, .state, .keystream);

  // fixed key source (xorshift32)
  bit [31:0] xs = 32'h2545_F491;
  function automatic bit [31:0] xorshift();
    xs ^= xs << 13;
    xs ^= xs >> 17;
    xs ^= xs << 5;
    return xs;
  endfunction

  // streaming statistics of one sequence
  typedef struct {
    longint n;
    longint ones;
    longint runs;
    bit     last;
  } seq_stats_t;

  function automatic void add_bit(ref seq_stats_t s, input bit b);
    if (s.n == 0 || b != s.last) s.runs++;
    s.last = b;
    s.ones += b;
    s.n++;
  endfunction

  task automatic judge(string what, int k, seq_stats_t s);
    real n, sobs, pi, tau, vstat;
    n    = real'(s.n);
    sobs = ((2.0 * real'(s.ones)) - n) / $sqrt(n);
    if (sobs < 0.0) sobs = -sobs;
    checks++;
    if (sobs > 2.5758) begin
      failures++;
      $display("FAIL key %0d %s frequency: s_obs=%f", k, what, sobs);
    end
    pi  = real'(s.ones) / n;
    tau = 2.0 / $sqrt(n);
    checks++;
    if ((pi - 0.5 >= tau) || (0.5 - pi >= tau)) begin
      failures++;
      $display("FAIL key %0d %s runs precondition: pi=%f", k, what, pi);
    end else begin
      vstat = (real'(s.runs) - 2.0 * n * pi * (1.0 - pi)) /
              (2.0 * $sqrt(2.0 * n) * pi * (1.0 - pi));
      if (vstat < 0.0) vstat = -vstat;
      checks++;
      if (vstat > 1.8214) begin
        failures++;
        $display("FAIL key %0d %s runs: statistic=%f", k, what, vstat);
      end
      $display("key %0d %-12s n=%0d ones=%0d runs=%0d s_obs=%f runs_stat=%f",
               k, what, s.n, s.ones, s.runs, sobs, vstat);
    end
  endtask

  // watchdog
  initial begin
    repeat (KEYS * (STEPS + 10) + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; key_load = 1'b0; step = 1'b0; key = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    for (int k = 0; k < KEYS; k++) begin
      automatic seq_stats_t wide = '{default: 0};
      automatic seq_stats_t single = '{default: 0};
      for (int i = 0; i < N; i += 32) begin
        automatic bit [31:0] w = xorshift();
        for (int b = 0; b < 32 && i + b < N; b++) key[i+b] = w[b];
      end
      key_load = 1'b1;
      @(posedge clk); #1;
      key_load = 1'b0;
      step = 1'b1;
      for (int t = 0; t < STEPS; t++) begin
        // sample the configuration before the edge that advances it
        add_bit(single, keystream[0]);
        if (t < WIDE_STEPS)
          for (int j = 0; j < KS_W; j++) add_bit(wide, keystream[j]);
        @(posedge clk); #1;
      end
      step = 1'b0;
      judge("40-bit taps", k, wide);
      judge("cell 1", k, single);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
