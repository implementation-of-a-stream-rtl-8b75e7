# A keystream generator built from two digital Bernoulli maps

This is synthesizable SystemVerilog for a small stream-cipher keystream
generator whose randomness comes from a chaotic one-dimensional map. Two
32-bit generators each iterate a modified Bernoulli (doubling) map, and every
clock the eight bytes of their two state words are XORed into one keystream
byte. The idea behind the byte folding is that a chaotic map computed with
finite-precision integers degrades: its most significant bits keep the
structure of the map, while the lower bits wander over the whole range.
Cutting each word into bytes and mixing all of them spreads that lower-order
behaviour over every keystream bit.

The design was published as an FPGA implementation (written in VHDL, run on
an Altera Cyclone IV). The RTL here rebuilds it from the published
description and reproduces, bit for bit, every generator word and keystream
byte printed in the published simulation waveforms.

## The map and its fixed-point form

The analog map is, for a control parameter 0 < mu < 1 and x in [0, 1),

    x' = mu * (2x mod 1) + (1 - mu) / 2

i.e. double, fold back into [0, 1), scale by mu, and add an offset that
centres the scaled range. With the state held as a 32-bit unsigned integer
X (x = X / 2^32) and mu as an 8-bit unsigned fraction M (mu = M / 256) this
becomes pure integer arithmetic:

    X' = floor( ((2X) mod 2^32) * M / 256 )  +  (256 - M) * 2^23

The second term is the *generalization factor* 2^32 (1 - mu) / 2. Because
the scaled product is below M * 2^24, the sum is below (256 + M) * 2^23,
which is always below 2^32: the adder never overflows.

Example: X = 32'hAAAAAAAA, M = 8'hAA (mu = 0.6640625) gives
2X mod 2^32 = 32'h55555554, times 170 over 256 = 32'h38AAAAA9, plus
86 * 2^23 = 32'h2B000000, so X' = 32'h63AAAAA9.

A note on the published equations: the printed piecewise formula gives the
upper branch as 2·mu·x − 1 (+ offset), which is not what the published
hardware computes, mu·(2x − 1) (+ offset). This RTL implements the hardware
form; it is the only one that reproduces the published waveform values.

## One generator (`bernoulli_prng`)

The datapath is a straight chain, one stage per published block:

| stage | RTL | what it does |
| --- | --- | --- |
| input multiplexer | `loop_closure` | passes the initial value until the loop is closed, then the register |
| ×2 | `bernoulli_map` | shift left by one; the 33rd bit is discarded, which is the fold |
| ×mu | `bernoulli_map` | 32 × 8 bit multiply into 40 bits |
| truncation | `bernoulli_map` | drops the 8 low product bits (divide by 256) |
| generalization factor | `gen_factor` | (256 − M) << 23 |
| adder | `bernoulli_map` | 32-bit sum |
| register | `bernoulli_prng` | 32-bit state, reset to 0, loads when `en_i` is high |

The whole step is combinational between two edges of one register, so a
generator produces one new 32-bit word per clock. The critical path is the
32 × 8 multiplier followed by a 32-bit adder.

### Starting up: the loop-closing flip-flop

A chaotic generator must start from an externally given initial value and
then run on its own output. A single flip-flop (`loop_closure`) decides
which: while it is 0 the multiplexer feeds the map with `seed_i`, once set
it feeds back the register, and only reset clears it (an assertion in
`loop_closure` checks this). So:

* after reset the register reads 0 and the loop is open;
* each enabled clock with the loop still open loads f(seed) again;
* the enabled clock on which `close_i` is high loads f(seed) and closes the
  loop; the following enabled clocks load f(f(seed)), f(f(f(seed))), …

`close_i` is only taken on an enabled clock, so the loop can never close
before the generator has loaded at least one word. The usual start is to
raise `en_i` and `close_i` together for the first clock and drop `close_i`
afterwards; holding `close_i` high longer is harmless. To start over with a
new initial value, reset.

The published design clocks this flip-flop from a separate one-shot pulse.
Here it is a set-enable in the single clock domain, which behaves the same
from the outside and keeps the design free of derived clocks.

## Separating and folding (`keystream_xor_array`)

Each 32-bit word is separated into four 8-bit sequences, by taking
floor(x / 2^16) and x mod 2^16, then the same again on each half. The two
generators thus give eight bytes. Keystream bit k is the XOR of bit k of all
eight bytes: numbering word bits 1..32 from the most significant end,
keystream bit j (1 = most significant) combines bits j, j+8, j+16, j+24 of
both words. Each keystream bit is a chain of 7 two-input XOR gates, 56 in
all; synthesis indeed reports 56 one-bit XOR cells.

The separation is written in the RTL with division and modulo by powers of
two, which synthesize to wiring; there is no separate module for it.

## The top: `bernoulli_stream_cipher`

Two generators sharing clock, reset, `en_i` and `close_i`, followed by the
XOR array.

| port | dir | width | meaning |
| --- | --- | --- | --- |
| `clk_i` | in | 1 | clock, rising edge |
| `rst_ni` | in | 1 | asynchronous reset, active low: registers to 0, loops open |
| `en_i` | in | 1 | advance both generators this clock |
| `close_i` | in | 1 | close both feedback loops (taken on an enabled clock) |
| `seed1_i`, `seed2_i` | in | 32 | initial values |
| `mu1_i`, `mu2_i` | in | 8 | feedback factors, as fractions of 256 |
| `ks_o` | out | 8 | keystream byte |
| `x1_o`, `x2_o` | out | 32 | generator words, for observation |
| `closed_o` | out | 1 | both loops closed |

`ks_o` is combinational from the two registers: it is 8'h00 after reset and
shows a new byte after every enabled clock, one byte (8 keystream bits) per
clock. The key material is the pair of initial values and the pair of
factors, 2 × (32 + 8) = 80 bits.

With seeds 32'hAAAAAAAA / 32'hBBBBBBBB and factors 8'hAA / 8'hBB the first
eight bytes are 70 41 A1 AD E3 71 5F C2, the values of the published
waveform.

Encryption itself, XORing `ks_o` with the data, is left to the user: the
published design ends at the keystream and says nothing about how data are
presented, framed or synchronized with it.

## Departures and choices

What follows the published design: the 32-bit state, 8-bit mu, the
double/drop/multiply/truncate/add datapath, the generalization factor, the
sticky loop-closing flip-flop with its multiplexer, two generators, the
separation into four bytes per word and the 56-gate XOR array.

Choices made here where the description is silent:

* the map follows the published datapath, not the printed piecewise
  formula (see above);
* asynchronous active-low reset, register reset value 0 (the published
  waveforms show zero before the first word);
* the step enable `en_i`, and `close_i` counted only on enabled clocks;
* the loop-closing flip-flop runs on the system clock (set-enable) instead
  of its own pulse;
* a single enable and close signal for both generators;
* the observation outputs `x1_o`, `x2_o`, `closed_o`.

mu is an 8-bit fraction, so only multiples of 1/256 exist. The published
statistical run used mu = 0.8, which is not one of them; the workload test
uses 8'hCC = 0.796875. The published initial values for that run are given
only to five digits (1.2885e9 and 8.5899e8); the test takes 32'h4CCCCCCD
and 32'h33333333, which round to them.

The statistical quality of such a generator is a claim of the original
work, checked here only with a handful of NIST SP 800-22 tests on one key.
A keystream built from a piecewise-linear map with an 8-bit parameter has
not had public cryptanalysis; do not rely on it to protect real data.

## Files

`rtl/`

* `bernoulli_pkg.sv` — widths (32-bit state, 8-bit mu and sequences, 2 generators) and types
* `gen_factor.sv` — (256 − M) << 23
* `bernoulli_map.sv` — one combinational map step
* `loop_closure.sv` — loop-closing flip-flop and input multiplexer
* `bernoulli_prng.sv` — one generator with its state register
* `keystream_xor_array.sv` — byte separation and 56-gate XOR array
* `bernoulli_stream_cipher.sv` — top

`tb/` (each prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog)

* `bernoulli_ref_pkg.sv` — reference model (map written in its piecewise
  64-bit integer form, byte-wise XOR) and the published waveform values
* `gen_factor_tb.sv` — all 256 values of mu
* `bernoulli_map_tb.sv` — published sequence, fold edges, 20,000 random steps
* `loop_closure_tb.sv` — open, close, stay closed, reopen by reset
* `bernoulli_prng_tb.sv` — published sequence at one word per clock, open
  loop, close ignored while disabled, random runs with stalls
* `keystream_xor_array_tb.sv` — published bytes, every single input bit,
  random pairs
* `bernoulli_stream_cipher_tb.sv` — end to end at the default sizes: the
  published keystream, then 40 sessions with reseeding, open-loop clocks,
  enable stalls and a mid-run change of mu, all checked every clock; it
  counts each of these events and fails if one never happens
* `nist_workload_tb.sv` — the published statistical run: 4,000,000
  keystream bits (500,000 clocks), every byte checked against the model,
  and the frequency, block-frequency (M = 128), runs and cumulative-sums
  (forward and reverse) statistics computed in the testbench; each P-value
  must reach 0.01. With the key above they come out at 0.968, 0.336, 0.654,
  0.995 and 0.988. The spectral (FFT) test of the published run is not
  computed.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal \
        rtl/bernoulli_pkg.sv tb/bernoulli_ref_pkg.sv rtl/*.sv \
        tb/bernoulli_stream_cipher_tb.sv --top-module bernoulli_stream_cipher_tb
    ./obj_dir/Vbernoulli_stream_cipher_tb

Replace the testbench file and top module name to run another test. All
tests finish in well under a second. The widths live in `bernoulli_pkg`;
the modules take `STATE_W` and `MU_W` as parameters, but the testbenches'
reference model and constants assume 32 and 8.
