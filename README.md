# TPAD: Trojan prevention and detection by encoded, programmable checking

A chip made by an untrusted foundry, or laid out with untrusted tools, may
carry a hardware Trojan: a few extra gates that change a wire at some chosen
moment, forge an input pin, or replay an old state. TPAD detects such attacks
while the chip runs, and makes them hard to plant in the first place. Every
piece of the chip's function is paired with a checker that predicts a short
signature of the correct result and compares it with the actual one.
Three measures stop an attacker from simply disabling those checkers:

* **The checking codes are secret and chosen after fabrication.** The parity
  matrices, the error-encoding polynomial and the seeds are not in the
  netlist. They are programmed into the chip at start-up. Someone who studies
  the layout cannot tell which parity the checker computes, so they cannot
  make a change that the checker will miss.
* **The error signal is never constant.** A plain "error = 0" line can be tied
  to ground by a single added gate. Here every checker's "no error" output is
  a word taken from a pseudo-random sequence (an LFSR). A trusted error
  monitor outside the chip runs the same sequence and raises an alarm as soon
  as the chip's error pins stray from it.
* **Everything that crosses a pin is encoded.** Inputs and outputs travel
  with check bits that also depend on the previous word. A forged pin value
  or a replayed word is therefore caught by the receiving chip.

This repository implements the generic TPAD blocks and a complete
TPAD-protected chip: an LZ77 data compressor. In that chip the checker is
the compressor's own inverse, a decompressor. It also implements a
protected half-precision FFT engine, whose checker rests on the Plancherel
theorem.

## System view

```
         encoded input                        encoded codewords
 sender ───────────────► ┌──────────────────┐ ─────────────────► receiver
 (data + check bits)     │  tpad_lz77_chip  │ (Cp,Cl,Cn + check)
                         │                  │
                         │  error pins (R)  ├──────► error_monitor ──► attack
                         └──────────────────┘         (same LFSR)

 encoded samples ──► ┌─────────────────┐ ──► encoded FFT outputs
                     │  tpad_fft_chip  │
                     │  error pins (R) ├──► error_monitor ──► fft_attack
                     └─────────────────┘
```

`tpad_system` is the top level. It holds one protected chip and its error
monitor. It also holds a second protected chip, `tpad_fft_chip`, a
half-precision FFT, with its own monitor. The sender and the
receiver are not part of the RTL. They are other chips that use the
same input and output codes, and in simulation the testbench plays both.

## Randomized parity codes (`rand_parity`, `switchbox`)

All bit-level checking uses a systematic linear code. The r check bits of a
k-bit word x are p = A·x over GF(2), so each check bit is the XOR of a subset
of the word's bits. A is an r × k matrix chosen at random when the chip is
configured. It must meet one rule: every row and every column is non-zero.
A zero row would give a check bit that is always 0. A zero column would leave
a data bit unprotected, and a flip of that single bit would go undetected.
With this rule every single-bit error is caught. An error pattern of many
bits escapes with probability close to 2^-r, the same as for a code drawn
from all linear codes.

In hardware each matrix entry is a **switchbox**: a 2×2 element that either
passes its two inputs straight through or swaps them. Entry (i, j) is a
switchbox fed with 0 and x[j]. Its configuration decides whether x[j] or 0
reaches the XOR tree of check bit i. The fabricated netlist is therefore the
same for every possible code. `switchbox` has a `crossed` control and
`rand_parity` takes the flattened matrix `h` (row i at `h[i*K +: K]`).

The configuration bits live in `sb_config`, an addressable register file
with an SRAM-like programming port (`addr`, `prg_in`, `we`). In the original
technology these bits are resistive-RAM cells placed above the logic, so they
keep their value without power. Flip-flops are the standard-cell substitute:
they work the same way but lose their contents at power-off, so the chip
must be programmed after every power-up.

## Encoded I/O (`output_encoder`, `input_decoder`)

If an output carried only parity(word), an attacker could replay an earlier
pair of word and check bits. The output code therefore chains the words:

```
check(t) = A·out(t)  XOR  check(t-1),      check(-1) = programmed start value
```

`output_encoder` registers the word and its check bits together. The
receiving `input_decoder` keeps the previous incoming check bits and
recovers A·in(t) = in_check(t) XOR in_check(t-1). It compares this with its
own parity of the incoming word. The chain advances only on a valid word, so
idle cycles cost nothing. The decoder's result is an LFSR-encoded checker
word, described next.

## Error encoding and the error monitor

This is the least conventional part of the design.

`prog_lfsr` is a 64-stage Galois LFSR. The XOR in front of each stage has a
switchbox that selects either 0 or the feedback bit, so the feedback
polynomial is also a configuration value, and so is the seed. The chip uses
r fixed state bits of the LFSR (`tpad_pkg::LFSR_SEL`, spread over the
register) as the expected "no error" word for the current cycle.

Every checker (`ced_checker`) outputs

```
err = lfsr_bits  XOR  actual  XOR  predicted      (when its input is valid)
err = lfsr_bits                                   (otherwise)
```

so a correct checker reproduces the LFSR word exactly.

`error_encoder` merges S checker words into one r-bit error bus. For bit i
it takes the AND of all S checkers' bit i if the LFSR bit is 1, and the OR
if the LFSR bit is 0. When every checker agrees with the LFSR, the result
equals the LFSR bit. If any checker disagrees, the result flips. For
example, with an LFSR bit of 1, a single checker reporting 0 pulls the AND
to 0. The merged word is registered and driven onto the chip's R error pins.

`error_monitor` is the trusted part outside the chip. It holds an LFSR with
the same taps and seed, loads it on the same `start` pulse, and compares the
pins with its own prediction every cycle. `mismatch` marks a cycle with a
difference, and `attack` is sticky. The pins are registered one cycle behind
the chip's LFSR, so the monitor begins comparing two cycles after `start`.
An attacker who forces the error pins to any fixed value, or to last
cycle's value, is caught within a few cycles, because the LFSR sequence
changes constantly.

## Memory checking (`trusted_ram`)

A RAM is checked by storing, next to each data word, the randomized parity
of **{address, data}**. The check bits therefore tie each word to the
location it was written to. The RAM works in write-through mode: during a
write the written word appears on the internal read bus. Output latches
update `dout` only after a read. Two checkers examine the previous cycle's
operation:

| operation | read checker | write checker |
|---|---|---|
| read  | stored check bits = parity(read address, read data); `dout` = read bus | (LFSR word) |
| write | (LFSR word) | read bus = the written word and check bits; check bits = parity(write address, data) |

This catches a corrupted word, a decoder that selects the wrong row, a read
that was silently turned into a write, and a write that never happened. The
word comparisons (`dout` against the bus, bus against the written word) are
OR-folded into r bits before they enter the checker (`tpad_pkg::fold_or`).
Idle cycles are not checked, because it is not defined what the internal bus
carries when neither a read nor a write takes place.

## The protected LZ77 compressor

### Compressor (`lz77_encoder`)

This is a sliding-window LZ77 compressor that accepts one character per
cycle. The dictionary is a shift register of the last D = 256 characters.
A match vector holds one bit per distance: the distances at which the
string collected so far repeats. Each new character is compared with all
dictionary entries in parallel, and the match vector is ANDed with the
result. When no distance survives, or the length reaches LMAX = 255, a
codeword leaves in the same cycle:

* `Cp`: the index of the nearest match (copy distance Cp + 1), 8 bits;
* `Cl`: the match length, 8 bits;
* `Cn`: the character that ended the match, 8 bits.

A codeword is 24 bits wide. `flush` ends a pending string at the end of the
input as (Cp, len − 1, last character).

### Checking by decompression (`lz77_ced`, `lz77_decoder`)

LZ77 is lossless, so the simplest predictor of correct output is the input
itself. A FIFO (512 entries) keeps a copy of every accepted character. A
second FIFO (16 entries) queues the emitted codewords. A decompressor then
expands each codeword: it copies Cl characters from distance Cp + 1 of its
own dictionary and appends Cn. An LFSR-encoded equality checker compares
every decompressed character with the oldest buffered input character. Any
change to a codeword, to the compressor's dictionary or to its match logic
that alters the decompressed text is detected. A replayed old codeword also
fails, because its distances now point at different text.

The decompressor's dictionary is a `trusted_ram` (256 × 8 bits, with 8 check
bits over the 16 address and data bits), so the checker's own memory is
checked too. A copy takes two cycles per character (read, then write) and a
literal takes one cycle, so the checker is slower than the compressor. When
either FIFO is full, `ready` drops and the compressor stalls. Checking
therefore lags the compressor by the FIFO occupancy, and `busy` stays high
until the decompressor has caught up.

A Trojan that only makes compression worse is not detected. For example, a
compressor that never finds a match emits every character as a literal,
which still decompresses correctly.

### The chip (`tpad_lz77_chip`)

| checker word | source |
|---|---|
| 0 | input decoder on the encoded character stream |
| 1 | equality checker (decompressed against buffered input) |
| 2 | dictionary RAM read checker |
| 3 | dictionary RAM write checker |

These four words enter `error_encoder`, whose output becomes the R = 8 error
pins. Codewords leave through `output_encoder` as `cw_data = {Cp, Cl, Cn}`
with `cw_check`.

**Configuration map.** The configuration is one flat vector of 528 bits,
written 8 bits at a time through `prg_addr` (7 bits, words 0 … 65),
`prg_in` and `prg_we`. Word i holds bits [8i+7 : 8i]. Fields, from bit 0:

| field | bits | contents |
|---|---|---|
| H_IN | 8 × 8 = 64 | input code matrix (row i at bits [8i +: 8]) |
| H_OUT | 8 × 24 = 192 | output code matrix over {Cp, Cl, Cn} |
| H_RAM | 8 × 16 = 128 | RAM code matrix over {address, data}, address in the low bits |
| TAPS | 64 | LFSR feedback taps (bit i enables the XOR in front of stage i; bit 0 is unused) |
| SEED | 64 | LFSR start state (must be non-zero) |
| IN_INIT | 8 | the sender's starting check bits |
| OUT_INIT | 8 | starting output check bits |

Matrices that break the non-zero row and column rule still work, but they
weaken detection. Nothing in the hardware enforces the rule, because the
party that programs the chip is trusted.

**Start-up and timing.**
1. Hold `rst_n` low. Reset clears the control state. The configuration
   memory and the RAM arrays have no reset.
2. Write all 66 configuration words.
3. Pulse `start` for one cycle. This loads the LFSR seed and both starting
   check values. No input is accepted in that cycle.
4. Give the monitor the same `mon_taps` and `mon_seed`.
5. Stream characters with `in_valid`/`in_data`/`in_check` and `in_ready`.
   A codeword appears on `cw_valid`/`cw_data`/`cw_check` one cycle after the
   character that ends it.
6. After the last character, raise `flush` until `busy` falls.

The error pins follow the LFSR one register stage later. An error caught by
any checker shows on the pins one cycle after it. An error caught by the
equality checker appears when the decompressor reaches the affected
character, which can be up to the FIFO occupancy later.

## The FFT engine (`fft_engine`, `fp16_pkg`)

This is a radix-2 decimation-in-time Cooley-Tukey FFT, N = 128 points, in
IEEE half precision. A frame goes through three phases:

1. **Load.** The N input samples (FP16 {re, im}) are written at
   bit-reversed addresses of a register file.
2. **Compute.** The engine runs log2 N stages of N/2 butterflies each, at
   one butterfly per cycle: t = w·b, a' = a + t, b' = a − t.
3. **Output.** X_0 … X_{N−1} stream out in natural order, one per cycle.

A 128-point frame takes 128 + 448 + 128 = 704 cycles. The twiddles
exp(−2πi·p/N) are computed at elaboration and rounded to FP16.

`fp16_pkg` supplies the multiply and add. Both round to nearest, with ties
to even. Subnormals are flushed to zero, and a single quiet NaN (7E00) is
used. Because one butterfly is computed per cycle, the engine is compact but
slow. A pipelined engine with one butterfly unit per stage would accept a
sample every cycle. The checker below works unchanged with either, because
it only watches the sample streams.

## Checking an FFT with the Plancherel theorem (`plancherel_ced`)

For an FFT the natural cheap check is Parseval's theorem: the energy of
the input equals the energy of the output, up to a factor N. An attacker
defeats that check easily, because permuting the outputs keeps the energy
unchanged. The Plancherel theorem is the more general form. For any
transform pair y ↔ Y:

```
N · Σ_n x_n · conj(y_n)  =  Σ_k X_k · conj(Y_k)
```

If (y, Y) is a secret pair programmed at start-up, an attacker cannot
change the outputs while keeping this identity true.

* **Predictor.** It accumulates the left side over each input frame.
* **Checker.** It accumulates the right side over the matching output
  frame. It reports an attack if the real or the imaginary part of the
  difference exceeds a programmable threshold T.
* **Why a threshold.** The FFT itself works in half precision, so its
  outputs carry roundoff, and T absorbs that roundoff.
* **Scale of T.** The test is applied to N · Σ x·conj(y) − Σ X·conj(Y),
  the form that needs no division. Stated as
  |Σ x·conj(y) − (1/N) Σ X·conj(Y)| > T', the same test has T = N · T'.
  Each of the real and imaginary parts is compared with T separately,
  instead of comparing the modulus.
* **Choosing (y, Y).** Use small white-noise vectors with no zero entries,
  so that the sums cannot overflow and every output takes part in the check.

Samples and table entries are FP16 pairs {re, im}. Each product of two FP16
numbers is formed exactly from the 11-bit significands and then shifted into
a wide fixed-point accumulator (LSB 2^-48, 95 bits for N = 128). The checker
itself therefore adds no rounding.

Other behaviour:

* An Inf or NaN in a frame counts as an attack.
* So does an output frame that arrives with no input frame before it.
* Up to 4 input frames may be in flight, so a pipelined FFT can run ahead
  of the checker.
* The result goes through an LFSR-encoded checker like every other check.
* T applies to the difference in the form written above, N·Σx·y* − ΣX·Y*.
  That is N times the difference of the normalised form
  Σx·y* − (1/N)·ΣX·Y*.
* Y must be stored in the order in which the FFT emits its outputs.

Timing: the verdict appears on `err` in the cycle that delivers the last
output sample of a frame, marked by `frame_done`.

### The FFT chip (`tpad_fft_chip`)

The FFT chip has the same four TPAD parts as the LZ77 chip:

* input decoding of the 32-bit samples, with 8 check bits each;
* the Plancherel checker as logic CED;
* output encoding of the results;
* an LFSR error encoder that merges two checker words (input decoder and
  Plancherel checker).

Its secret values (I/O matrices, starting check bits, LFSR taps and seed,
transform pair, threshold) come in on ports rather than through a
configuration memory. `start` loads the LFSR and the starting check bits.
An output sample leaves one cycle after the engine produces it, together
with its check bits.

## Simulation

Each block has a self-checking testbench in `tb/`. Every testbench prints a
`TB_RESULT checks=… failures=…` line and stops by itself, and a watchdog
ends a testbench that hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/tpad_pkg.sv rtl/fp16_pkg.sv \
          $(ls rtl/*.sv | grep -v _pkg) tb/tb_tpad_system.sv \
          --top-module tb_tpad_system -o sim && obj_dir/sim
```

(The two packages come first. Any other testbench can replace `tb_tpad_system`.)

* `tb_tpad_system` runs the whole system at full default size.
  * Setup: it programs a random configuration (matrices with non-zero rows
    and columns, a random non-zero seed and taps).
  * Stream: it encodes a generated text with many repeats as the sending
    chip would, and receives the codewords as the receiving chip would,
    checking their check bits and decompressing them back to the original
    text.
  * Clean run: the monitor must stay quiet.
  * Attacks: it then injects three, each of which must raise `attack`:
    * a pin attack (a flipped input bit),
    * a logic attack (a codeword corrupted in the checker's queue),
    * a memory attack (a word of the dictionary RAM changed).
  * FFT chip: it sends encoded samples and decodes the encoded results,
    using the simple pair y = impulse, Y = all ones.
    * Two correct frames must not raise an alarm.
    * A frame with a pin attack must be reported by the FFT monitor.
    * A frame whose sample is changed inside the engine after loading must
      also be reported.
  * Coverage: it counts stalls, literals, copies, maximum-length matches,
    flushes, checked FFT frames and each detected attack. It fails if any
    of them never happened.
  * Run time: a few seconds.
* `tb_fft_engine` transforms random frames, an impulse and a constant at
  N = 128. It compares every output with a double-precision DFT of the same
  FP16 inputs, within 1% of the largest output. The impulse and the
  constant must come out exact. It also checks the compute latency.
* `tb_plancherel_ced` runs the FFT checker at N = 128 against an ideal FP16
  FFT. The testbench computes the DFT in double precision and rounds it to
  FP16. It works out each frame's verdict independently and compares it with
  the checker's. Correct frames must pass. Rotated outputs, a large change
  to one output, a NaN and an unmatched output frame must fail. The swap of
  two outputs and a small change are judged by their actual size against T.
* `tb_parity_detection` measures how well the codes detect errors with
  k = 100 data bits and r = 3 … 8 check bits. Each trial draws a fresh
  random code.
  * Single-bit errors are always detected.
  * For 5 or more flipped bits, the rate must lie within 0.03 of 1 − 2^-r.
  * It prints the measured table, for example 0.996 … 0.998 at r = 8.
* The remaining block testbenches (`tb_switchbox`, `tb_rand_parity`,
  `tb_prog_lfsr`, `tb_ced_checker`, `tb_error_encoder`, `tb_output_encoder`,
  `tb_input_decoder`, `tb_error_monitor`, `tb_trusted_ram`,
  `tb_lz77_encoder`, `tb_lz77_ced`, `tb_sb_config`) compare each block
  with a model written independently inside the testbench.
  * `tb_trusted_ram` and `tb_lz77_ced` also tamper with internal state
    through hierarchical references, to check that the tampering is
    detected.

## How this differs from the original TPAD work

* **Switchbox configuration** is held in flip-flops, not in non-volatile
  resistive RAM, so the chip must be programmed after every power-up.
* **Switchbox placement.** The original flow also inserts switchboxes into
  the predictor logic of a general design (an algorithm that breaks up the
  logic cones so that the predictor cannot be matched to the main function).
  That flow is not part of this RTL. Here switchboxes appear where the
  structure needs them: parity matrices and LFSR taps.
* **Compressor sizes** (256-entry dictionary, 8-bit characters, match length
  up to 255, 24-bit codewords) were chosen within the published ranges. All
  of them are parameters. The compressor's internal match logic is one
  straightforward choice, because the original work does not detail it.
* **Choices not fixed by the original description:**
  * the FIFO depths and the stall rule of the checker;
  * which LFSR bits feed the checkers;
  * the one-cycle register on the error pins;
  * the OR-folding of word comparisons in the memory checker.
* **The FFT engine is iterative**, one butterfly per cycle, where the
  original is pipelined.
* **The FFT threshold** is applied to N times the original difference, and
  per component rather than to the modulus (see the Plancherel section).
* **Idle RAM cycles** are not checked (see the memory section above).
* **Not built:**
  * the general-purpose CPU and FPGA demonstrations;
  * the separate synthesis flow that keeps the checker netlist away from
    the main design's tools.
