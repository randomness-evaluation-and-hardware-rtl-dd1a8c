# A cellular-automaton stream cipher for real-time video

A stream cipher encrypts by XORing the data with a pseudorandom keystream that
both ends can regenerate from a shared secret. Here the keystream comes from a
one-dimensional cellular automaton (CA): a ring of 1000 one-bit cells, all of
which are rewritten in parallel on every clock from their neighbours by one
fixed nonlinear Boolean rule. The secret key is the ring's initial
configuration. The generator needs only local wiring and identical cells, so it
is small and fast in hardware. It produces 40 keystream bits per clock. That
matches a 40-bit-per-clock digital video bus, so one video word is encrypted per
clock with no buffering.

The RTL here implements the reported configuration, which has three parts:

* the **5-neighbour rule 535945230 ("CA5")**: two steps of Wolfram's rule 30
  folded into one clock;
* an **11-cell rotation** of the ring on every step;
* **40 sampled cells** spaced further and further apart.

It also gives the two-board demonstrator built around that generator. One
board encrypts the decoded video and sends it over an LVDS cable. The other
decrypts it and hands it to a video encoder.

## The update rule

Write the ring as S_1 … S_N with periodic wrap-around (S_0 = S_N, S_N+1 = S_1).
Rule 30 gives one cell's next value from its three-cell neighbourhood:

    S_i(t+1) = S_i-1(t) XOR ( S_i(t) OR S_i+1(t) )
             = S_i-1 ⊕ S_i ⊕ S_i+1 ⊕ S_i·S_i+1

Two rule-30 steps make cell i depend on the five cells i-2 … i+2. Expanded, with
a…e standing for S_i-2 … S_i+2, this is

    a ⊕ d ⊕ e ⊕ bd ⊕ be ⊕ cd ⊕ ce ⊕ de ⊕ bde ⊕ cde

Read as a truth table with a as the most significant index bit, this is rule
number 535945230 of the 5-neighbour CA family. The RTL (`ca_pkg::ca5`) builds
it as four rule-30 gates: three in the first layer over (a,b,c), (b,c,d) and
(c,d,e), and one combining them. It does not store the table. An elaboration-time check (`ca_pkg::rules_match_tables`) stops the build if the gates and the rule numbers 30 and 535945230 ever disagree. The testbench
checks the expanded form against the rule number on all 32 neighbourhoods, and
its reference model uses that expanded form. Rule 30 on its own is still
available (`RULE = RULE_ECA30`). It is the cheaper and faster variant, but its
randomness is weaker.

Both rules map the all-zero configuration to itself. An all-zero key is
therefore useless, and reset leaves the ring in exactly that state.

## Rotation: the part that is easy to get wrong

On every step the ring is also rotated by ROT = 11 cells. This is not a separate
shifter. It is built into the wiring: cell i reads the neighbourhood of cell
i + 11, not its own.

    S_i(t+1) = F( S_i+11-2, S_i+11-1, S_i+11, S_i+11+1, S_i+11+2 )   (indices mod N)

So cell 1 is computed from the window around cell 12, cell 2 from that around
cell 13, and cell 1000 from the window around cell 11. The rule-30 version has
the same arrangement with a 3-cell window. The rotation costs no logic and no
extra clock. It moves information around the ring faster than the rule alone
does. In the 0-based RTL, `state[i]` holds S_i+1 and reads the window centred
on `state[(i+ROT) % N]`. Setting ROT = 0 gives the plain CA.

## Sampling the keystream

A single-cell keystream is too slow. Neighbouring cells are no good either:
two adjacent cells in consecutive steps let an attacker run the rule 30
equation backwards and recover the key. The 40 taps are therefore spread
out, and the gap between them grows by one cell per tap (6, 7, 8, …):

    tap k (k = 0 … 39) = cell 1 + 6k + k(k-1)/2
                       = cells 1, 7, 14, 22, 31, 41, 52, …, 889, 932, 976

`keystream[k]` is tap k of the current register contents. A new 40-bit word
appears one clock after each step.

## Encrypting and decrypting (`ca_stream_cipher`)

A cipher unit holds one generator and an output register:

* A word offered with `in_valid` is XORed with the current keystream word. The
  result appears on `out_data`/`out_valid` one clock later.
* In the same clock the CA takes one step. The unit accepts one word per clock,
  so throughput is 40 bits × f_clk.
* Cycles without `in_valid` do not step the CA. The transmitter and receiver
  therefore stay aligned however the video stream is gapped, as long as the
  receiver sees the same words in the same order.
* `key_load` copies `key` into the ring at the next edge. A word offered in the
  same cycle is dropped. The first word after a load is XORed with the taps of
  the key itself. Load a key while the stream is idle.

XOR is its own inverse, so the same unit, loaded with the same key, encrypts on
one board and decrypts on the other.

## The two-board system (`ca_video_crypto_link`, the top level)

    video decoder → [ca_stream_cipher, encrypt] → LVDS ─cable─ LVDS → [ca_stream_cipher, decrypt] → video encoder
          transmitter board (tx_clk)                                       receiver board (rx_clk)

The top level holds the two cipher units, one per board, each with its own
clock, reset and key port. The board parts have no logic and appear as ports:

| part | ports |
|---|---|
| video decoder | `video_in_valid`, `video_in_data` |
| LVDS transmitter | `link_tx_valid`, `link_tx_data` |
| LVDS receiver | `link_rx_valid`, `link_rx_data` |
| video encoder | `video_out_valid`, `video_out_data` |

To build one FPGA, use `ca_stream_cipher` on its own.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 1000 | cells in the ring (the key is N bits) |
| `ROT` | 11 | rotation per step (0 = none) |
| `KS_W` | 40 | keystream/data bits per clock. Needs 6(KS_W-1) + (KS_W-1)(KS_W-2)/2 < N |
| `RULE` | `RULE_CA5` | `RULE_CA5` (rule 535945230) or `RULE_ECA30` (rule 30) |

All defaults are the reported ones. Both rules were built on a Virtex-II FPGA
with N = 1000. The reported results were:

* CA5: about 20,700 gates, 75.55 MHz, 3.02 Gbps.
* Rule 30: about 14,700 gates, 105.83 MHz, 4.23 Gbps.

In both cases throughput equals 40 bits × clock. The demonstrator boards run at
27 MHz, which gives about 1.08 Gbps. A larger N gives a longer key and more
gates; throughput depends only on KS_W and the clock.

## Where this RTL goes beyond the description

The rule, the ring size, the rotation wiring, the periodic boundary, the tap
positions and one step per clock follow the published design. The following
are this implementation's own choices, because the source says nothing on them:

* XOR as the data/keystream combiner. It is the usual stream-cipher combiner
  but is not stated explicitly.
* The `valid` handshake: stepping only on valid words, and the one-clock output
  register.
* Parallel key loading in one cycle, and dropping a word offered during a load.
* The keystream of the first word is the key's own taps. The source does not
  say whether any initial steps are discarded. Discarding some would be a
  sensible hardening; it is not done here.
* Synchronous active-low reset to the all-zero ring.
* There is no resynchronisation over the link. A lost or duplicated word
  desynchronises the receiver until both ends are rekeyed.
* The ring has N cells numbered 1 … N, as in the block diagram of the generator.
  One general statement of the CA numbers its cells 0 … N instead.
* The elided middle of the tap list (after cell 41 and before cell 932) is
  reconstructed from the growing-gap pattern. That pattern reproduces every
  cell quoted at both ends.

The security claims are statistical, and the original authors leave a full
security evaluation open. Treat this as a demonstration cipher, not a vetted
one.

## Verification

Every testbench is self-checking and prints `TB_RESULT checks=… failures=…`.

| testbench | what it checks |
|---|---|
| `tb_ca_prng_core` | Two full-size rings, CA5 and rule 30, run against a reference model built from the algebraic normal forms with explicit modular indexing. It checks single-seed keys at both ends of the ring (for wrap-around), random keys and random step/hold patterns, the quoted tap cells, and reset. |
| `tb_ca_stream_cipher` | One default unit against a model. It checks one-clock latency, a 500-word back-to-back burst at one word per clock, gaps, rekeying, and a word dropped during a key load. |
| `tb_ca_video_crypto_link` | End to end at full default size. Transmitter and receiver run on their own 27 MHz clocks, with a queue standing in for the cable. It checks ciphertext against the model and plaintext recovered in order. A back-to-back burst must run at one word per clock, measured at 1.08 Gbit/s against the 1 Gbit/s demonstrator figure. A wrong receiver key must recover nothing. Each mechanism is counted. |
| `tb_ca_keystream_stats` | NIST SP 800-22 frequency and runs tests at α = 0.01. For each of three fixed keys it tests 10^6 bits of the 40-tap keystream and 10^6 bits of a single fixed cell. |

The full statistical evaluation the design was judged by is well beyond
simulation: 16 tests over 1000 sequences of 10^6 bits for each of 10 keys.

To simulate with Verilator (5.x), from the directory that holds `rtl/` and
`tb/`:

    verilator --binary --timing --top-module tb_ca_video_crypto_link \
        -y rtl -y tb +libext+.sv rtl/ca_pkg.sv tb/tb_ca_video_crypto_link.sv
    ./obj_dir/Vtb_ca_video_crypto_link

Replace the top module name to run any other testbench. Each runs in seconds.
