// ca_prng_core: cellular-automaton keystream generator.
//
// What it does: holds an N-cell ring configuration S_1..S_N (state[i-1] holds
// S_i), loaded from the secret key, and advances it by one CA step on every
// cycle with `step` high. Each step applies the update rule to every cell in
// parallel and rotates the ring by ROT cells, both in the same clock:
//
//   S_i(t+1) = F( window of S(t) centred on cell i+ROT )   (indices mod N)
//
// For ROT = 11 this means cell 1 takes its new value from the neighbourhood of
// cell 12, cell 2 from that of cell 13, ..., cell 1000 from that of cell 11,
// with periodic wrap-around at both ends. F is rule 30 on the 3-cell window
// (RULE_ECA30) or rule 535945230 on the 5-cell window (RULE_CA5, the default,
// equivalent to two rule-30 steps per clock).
//
// Keystream: KS_W cells are sampled every clock, with growing distance between
// neighbouring taps (cells 1, 7, 14, 22, 31, 41, ..., 932, 976 for 40 taps; see
// ca_pkg::tap_index). keystream[k] is tap k of the current register
// configuration, so it is valid in the same cycle as `state` and changes one
// clock after a `step`.
//
// Interface and timing:
//   key_load  loads `key` into the ring at the next clock edge; it wins over step.
//   step      advances the ring by one CA step (plus rotation) at the next edge.
//   state     the register outputs O_1..O_N.
//   keystream KS_W sampled bits of `state`, combinational from the registers.
//   Reset (active low, synchronous) clears the ring to all zeros, which is a
//   fixed point of both rules: a key must be loaded before use.
//
// Elaboration checks: the last tap must fit in the ring, and the rule gates
// must reproduce the rule numbers 30 and 535945230.
//
// Following the described design: ring size, rules, rotation wiring, periodic
// boundary, tap positions and one CA step per clock. Local choices: the key is
// loaded in parallel in one cycle, the step/key_load controls, and the reset
// value.
module ca_prng_core
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
  input  logic            step,
  output logic [N-1:0]    state,
  output logic [KS_W-1:0] keystream
);

  // The last tap must lie inside the ring, and the 5-cell window needs N >= 5.
  if (tap_index(KS_W - 1) >= N || N < 5) begin : g_bad_size
    $error("ca_prng_core: N=%0d too small for %0d taps", N, KS_W);
  end

  if (!rules_match_tables()) begin : g_bad_rule
    $error("ca_prng_core: rule gates do not match rule numbers 30 / 535945230");
  end

  logic [N-1:0] next_state;

  // Per-cell update logic: cell i reads the window centred on (i + ROT) mod N.
  for (genvar i = 0; i < N; i++) begin : g_cell
    localparam int unsigned C  = (i + ROT) % N;
    localparam int unsigned M2 = (C + N - 2) % N;
    localparam int unsigned M1 = (C + N - 1) % N;
    localparam int unsigned P1 = (C + 1) % N;
    localparam int unsigned P2 = (C + 2) % N;
    if (RULE == RULE_CA5) begin : g_ca5
      assign next_state[i] = ca5(state[M2], state[M1], state[C], state[P1], state[P2]);
    end else begin : g_eca30
      assign next_state[i] = eca30(state[M1], state[C], state[P1]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)        state <= '0;
    else if (key_load) state <= key;
    else if (step)     state <= next_state;
  end

  // Keystream sampler
  for (genvar k = 0; k < KS_W; k++) begin : g_tap
    assign keystream[k] = state[tap_index(k)];
  end

endmodule
