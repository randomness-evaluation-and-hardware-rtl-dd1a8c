// ca_pkg: shared types, constants and rule functions of the cellular-automaton
// (CA) stream cipher.
//
// The keystream generator is a ring of N one-bit cells. At every step every
// cell is rewritten from a small neighbourhood of the previous configuration by
// a fixed Boolean rule, and the whole ring is rotated by ROT cells. Two rules
// are provided:
//   * ECA30      - elementary 3-neighbour rule 30: s[i-1] XOR (s[i] OR s[i+1]).
//   * CA5        - 5-neighbour rule 535945230, which equals two steps of rule 30
//                  folded into one clock.
// Rule 30 is written as its gate equation; the 5-neighbour rule is built from
// three rule-30 gates feeding a fourth (two rule-30 steps), which gives the
// truth table 535945230 when the neighbourhood s[i-2..i+2] is read as a binary
// number with s[i-2] as the most significant bit.
//
// Keystream taps: 40 cells are read each clock. Their spacing grows by one
// cell per tap (gaps 6, 7, 8, ...), so tap k (0-based) sits at 1-based cell
// 1 + 6k + k(k-1)/2, i.e. cells 1, 7, 14, 22, 31, 41, ..., 932, 976.
//
// The defaults (N = 1000, rotation 11, 40 taps, CA5) are the configuration the
// cipher was built and measured in. Rule numbers, tap formula and rotation come
// from that description; the enum encoding and function style are local choices.
package ca_pkg;

  // Default geometry
  localparam int unsigned CA_N_DEFAULT   = 1000; // cells in the ring
  localparam int unsigned CA_ROT_DEFAULT = 11;   // rotation shift per step
  localparam int unsigned KS_W_DEFAULT   = 40;   // keystream bits per clock

  // Wolfram rule numbers (truth tables) of the two rules, used for a self-check
  localparam logic [7:0]  RULE30_TABLE        = 8'd30;
  localparam logic [31:0] RULE535945230_TABLE = 32'd535945230;

  typedef enum logic [0:0] {
    RULE_ECA30 = 1'b0,
    RULE_CA5   = 1'b1
  } ca_rule_e;

  // 3-neighbour rule 30: l = s[i-1], c = s[i], r = s[i+1]
  function automatic logic eca30(input logic l, input logic c, input logic r);
    return l ^ (c | r);
  endfunction

  // 5-neighbour rule 535945230 (two rule-30 steps): a = s[i-2] ... e = s[i+2]
  function automatic logic ca5(input logic a, input logic b, input logic c,
                               input logic d, input logic e);
    return eca30(eca30(a, b, c), eca30(b, c, d), eca30(c, d, e));
  endfunction

  // True when the gate forms above reproduce the rule numbers; checked at
  // elaboration by ca_prng_core.
  function automatic bit rules_match_tables();
    bit ok = 1'b1;
    for (int v = 0; v < 32; v++) begin
      logic [4:0] n = 5'(v);
      if (ca5(n[4], n[3], n[2], n[1], n[0]) != RULE535945230_TABLE[v]) ok = 1'b0;
      if (v < 8 && eca30(n[2], n[1], n[0]) != RULE30_TABLE[v]) ok = 1'b0;
    end
    return ok;
  endfunction

  // 0-based cell index of keystream tap k (1-based cell 1 + 6k + k(k-1)/2)
  function automatic int unsigned tap_index(input int unsigned k);
    return 6 * k + (k * (k - 1)) / 2;
  endfunction

endpackage
