# Hybrid temporal computing: a multiply-accumulate unit without multipliers or adders

Hybrid temporal computing (HTC) is a way to compute dot products with almost no
arithmetic logic. The numbers travel as bitstreams, one bit per clock cycle,
over an *epoch* of 2^N cycles (256 cycles for 8-bit operands). Only the number
of ones in the epoch carries the value. One operand of each product is spread
evenly over the epoch. The other is a single pulse that starts with the epoch.
The ones of the spread stream that fall inside the pulse then count, to a good
approximation, the product of the two values. So a product needs one AND gate,
and a sum of products needs one multiplexer and a counter. In the pulse form a
value costs only two signal transitions per epoch, which is where the low
switching power comes from.

This repository holds synthesizable SystemVerilog for:

* the HTC building blocks: stream generators, multiplier gate, scaled adder,
  selector LFSR, accumulator, conversion of a result back into a pulse,
  control FSM and epoch counter;
* a 4-input HTC multiply-accumulate unit (MAC), built from those blocks;
* two accelerators built from pairs of MACs: a 6-tap unipolar FIR filter (used
  as a Gaussian blur) and an 8-point bipolar DCT/IDCT engine;
* a top level, `htc_accel`, with both accelerators;
* self-checking testbenches for every module, and a bit-exact reference
  model the testbenches share.

The structure follows the published description of the HTC framework by
Tasnim, Sachdeva, Liu and Tan ("Hybrid Temporal Computing for Lower Power
Hardware Accelerators"). That description leaves many details open, and the
choices this implementation makes are listed in
[Where this implementation fills gaps](#where-this-implementation-fills-gaps).

## Three ways to carry a value in a bitstream

A value in [0, 1] (*unipolar*) is n/2^N, where n is the number of ones in an
epoch of 2^N cycles. The blocks use three layouts of those ones:

| Stream | Layout of the n ones | Made by |
|---|---|---|
| Regulated bitstream (RB) | spread evenly: bit i of the binary operand is output in 2^i evenly spaced slots | `htc_rb_gen` |
| Temporal bitstream (TB) | one pulse: 1 for the first n cycles, then 0 | `htc_tb_gen` |
| General bitstream (GB) | anywhere: only the count matters | outputs of the multiplier and adder; turned back into a TB by `htc_gb2tb` |

**RB generation.** The generator is a multiplexer that reads the shared epoch
counter. When the count ends in exactly k ones followed by a zero, the output
is operand bit x[N-1-k]. The MSB therefore appears on every even count, the
next bit on every count ending in `01`, and so on. The all-ones count outputs
0. For N = 3 the eight slots are

```
count : 0  1  2  3  4  5  6  7
bit   : X2 X1 X2 X0 X2 X1 X2 0        x = 011 -> 0 1 0 1 0 1 0 0   (3 ones)
```

**TB generation** is a single comparator: `t = count < y`.

**Multiplication.** `p = r AND t`. The TB pulse covers the first y/2^N of the
epoch. The RB spreads each of its bits evenly, so about that fraction of each
bit's slots falls inside the pulse. Example (N = 3): 6/8 as RB is
`11101110`, 5/8 as TB is `11111000`, and the AND is `11101000`: 4/8 = 0.5,
against the exact 0.469. Because the result depends only on positions, not on
random numbers, it is deterministic and repeatable.

**Bipolar values.** A signed value v in [-1, 1) is carried as
n = 2^N (v+1)/2 ones. For an N-bit two's complement operand x (v = x/2^(N-1))
that is n = x + 2^(N-1): the operand with its sign bit inverted. Both
generators do that when `BIPOLAR = 1`, and the multiplier becomes an XNOR gate.
XNOR is the bipolar stochastic product: (1+v_a v_b)/2 = P(a = b).
Example (N = 3): -2/4 (`110`) becomes `010`, giving RB `01000100`; 3/4
(`011`) becomes 7 ones, TB `11111110`. The XNOR gives `01000101`: 3 ones, or
2·3/8 - 1 = -0.25 (exact -0.375).

## The 4-input MAC (`htc_mac`)

```
 x[0] -> RB gen --r0--\                                   +-- LFSR (low 2 bits = select)
 y[0] -> TB gen --t0--- AND/XNOR --p0--\                  |
   ...                                  >-- 4:1 mux (00..11) --s--> incrementer --<<2--> mac_out
 x[3] -> RB gen --r3--\                /                           (ones per epoch)
 y[3] -> TB gen --t3--- AND/XNOR --p3-/                                   |
          ^      ^                                                        +--> GB-to-TB ------> tb_out
          |      |                                                                (next epoch)
       up-counter (shared by all 8 generators)   <-- FSM: clear / en / done
```

All eight generators read one N-bit up-counter. The four product streams go
into a 4:1 multiplexer whose select is the two low bits of an LFSR, so each
cycle one product bit, picked pseudo-randomly, reaches the accumulator. This
is stochastic *scaled addition*: the output stream holds about the mean of the
four products. The accumulator counts its ones (`ones`, 0..2^N) and shifts
left by two to undo the division by four:

* unipolar: `mac_out = ones << 2`. This is the sum at scale 2^N, unsigned,
  N+3 bits.
* bipolar: `mac_out = (ones << 2) - 4·2^(N-1)`. This is the sum at scale
  2^(N-1), two's complement, N+3 bits. The offset follows from the bipolar
  coding of the mean.

The sum is also re-emitted as a temporal bitstream, `tb_out`, during the next
epoch, with the same counter (`htc_gb2tb`). That block multiplies the counted
ones by L again and emits them as one pulse, `count < n_out`:

* unipolar: `n_out = 4·ones`, clamped to 2^N;
* bipolar: `n_out = 4·ones - 3·2^(N-1)`, clamped to 0..2^N.

This is the form in which an HTC result would feed a following HTC stage. A
sum outside the range of one epoch (above 1, or outside [-1, 1] for bipolar)
saturates. With N = 3 and a 2-input adder, the same formulas turn 3 ones
(3/8) into `11111100` (6/8), and bipolar 3 ones (-1/4) into `11000000`
(-2/4). These are the published worked examples.

### Timing

| Event | Cycle |
|---|---|
| `start` seen while idle; counter, LFSR and accumulator cleared | 0 |
| epoch runs: `busy` = 1, count 0 .. 2^N-1 | 1 .. 2^N |
| `done` pulses; `mac_out` and `ones` hold the result | 2^N + 1 |

If `start` is still high in the last cycle of an epoch, the next epoch begins
with no gap, and a result arrives every 2^N cycles. The LFSR is reloaded
with its seed at every epoch boundary, so a given operand set always gives
the same result. The operands are not registered inside the MAC: they must
stay stable while `busy`, and an assertion checks this. With N = 8, an epoch
is 256 cycles, which is 2.56 µs at a 100 MHz clock.

### Accuracy: the cost of the scaled adder

The products themselves are accurate to about one LSB. Almost all of the
error comes from the multiplexer: over 256 cycles each product is sampled
only about 64 times, and the sampled count is then multiplied by four. Over
random 8-bit vectors, the MAC testbench measures an RMS error of the mean of
the four products of about 2 % of full scale (unipolar) and 2.6 % (bipolar,
relative to the range of 2). In absolute terms a bipolar 4-input sum carries
about 0.2 RMS error at a full scale of 1.0. The DCT engine adds two such
sums, so its outputs carry about 0.3 RMS error.

Over 50,000 random vectors at the default size (`tb_htc_mac_accuracy`), the
unipolar MAC's sum is off by 7.8 % RMS of 1.0, the range of one product. That
is 1.95 % of the sum's own range of 0..4. The mean error (bias) is below
0.4 %.

On a generated 32×32 test image (`tb_htc_image_workloads`):

| Workload | Result |
|---|---|
| 6-tap Gaussian blur of every row | 31.5 dB PSNR against an exact blur |
| 8-point DCT of every row in HTC, inverted with an exact IDCT | 16.8 dB PSNR against the original |
| 8-point DCT and IDCT both in HTC, small amplitudes (`tb_htc_accel`) | about 12 dB PSNR |

For comparison, the published evaluation reports an RMSE of 6.96 % for its
4-input unipolar HTC MAC, 17.6–21.3 dB for its HTC blur and 18–22 dB for its
HTC DCT. The last two were measured on photographs. It does not say how its
MAC error is normalised or how its PSNR peak is chosen, so these figures are
not directly comparable with the ones above.

A longer epoch (larger N) reduces these errors. So would an exact binary
adder in place of the multiplexer, but that gives up the point of the
scheme.

## Accelerators

### 6-tap FIR filter (`htc_fir`)

`y[n] = sum_k h[k] x[n-k]`, unsigned 8-bit fractions throughout. Two MACs:
taps 0–3 on the first, taps 4–5 on the second, whose two spare inputs have a
zero coefficient. The two `mac_out` values are added in binary. Coefficients
drive the RB side and sit in a small register file (`coef_we/addr/data`),
written while the filter is idle. The delay line holds the last six samples
and is zero after reset.

Handshake: a sample is taken when `in_valid && in_ready`. `out_valid` pulses
2^N + 2 cycles later (258 cycles at N = 8), with `out_data` at scale 2^N, and
`in_ready` rises again in the same cycle.

### 8-point DCT / IDCT engine (`htc_dct`)

`out[k] = sum_n C[k][n] in[n]`, k = 0..7, signed 8-bit fractions (value/128),
bipolar MACs. Samples 0–3 go to the first MAC and 4–7 to the second. The
8×8 coefficient memory is written at address 8k+n while the engine is idle.
Loading the DCT-II matrix makes it a DCT, and loading its transpose makes it
the inverse. A block of eight samples is taken on `in_valid && in_ready`. The
eight outputs then follow, one per epoch, each marked by `out_valid` with its
`out_index`; `out_last` marks k = 7. Each output takes 2^N + 2 cycles, so a
block takes 2064 cycles at N = 8. `out_data` is two's complement at scale 128
and can reach about ±2.8 (±362) for a DCT.

### Top level (`htc_accel`)

The two accelerators sit side by side, sharing `clk` and `rst_n` (asynchronous,
active low). All ports of `htc_fir` appear with the prefix `fir_` and all ports
of `htc_dct` with the prefix `dct_`. They run independently.

## Where this implementation fills gaps

The published description gives the block diagram of the 4-input MAC, the
stream formats with worked examples, and the two accelerators by function. The
following are this implementation's own decisions:

* **Which operand is which.** The MAC figure's block diagram draws the X
  operands into the TB generators. The same figure's insets, and the text,
  put X on the RB side and Y on the TB side. The RTL follows the insets and
  the text. The description is also inconsistent about whether coefficients
  are RB or TB operands. The accelerators put coefficients on the RB side.
* **Bipolar conversion.** The text calls the step from signed operand to
  ones-count a two's complement. That matches its single example (110 → 010)
  but not the general case. The RTL inverts the sign bit, which gives the
  required x + 2^(N-1) for every operand.
* **Bipolar accumulator output.** Only `<<2` is described. The subtraction
  of 2^(N+1) that makes `mac_out` a signed sum is added here.
* **LFSR.** Only the name is given. Here: 8-bit Fibonacci LFSR,
  x^8+x^6+x^5+x^4+1, seed 1, low two bits as select, reloaded every epoch.
  Other LFSRs give other (equally valid) results. The bit-exact reference
  model in `tb/htc_model_pkg.sv` must then be changed to match.
* **FSM and handshakes.** Only an FSM block driving the counter and the
  accumulator reset is shown. The IDLE/RUN machine, `start`/`done`, back-to-back
  epochs and the accelerators' valid/ready ports are this design's own.
* **Combining two MACs.** Neither accelerator's description says how the two
  4-input MACs are joined. Here their binary results are added.
* **Conversion from a general stream to a temporal one.** The description
  mentions two ways: a shift register, and reusing the epoch counter. Only
  the counter form (`htc_gb2tb`) is built. Its rescaling formulas come from
  the two worked examples. Clamping a sum that does not fit in one epoch is
  this design's choice.
* **Coefficient storage.** The coefficients are described as loaded once and
  rarely changed. They are plain registers here (6 words for the FIR, 64 for
  the DCT).

Not covered: the published energy, area and latency figures come from
synthesis with a 32 nm standard-cell library. That cannot be reproduced from
RTL alone. The published accuracy results use photographs, which are not
included here. The testbenches use generated data instead.

## Files

| File | Contents |
|---|---|
| `rtl/htc_pkg.sv` | operand width `HTC_N` = 8, MAC width `HTC_L` = 4, LFSR tap table |
| `rtl/htc_up_counter.sv` | epoch counter |
| `rtl/htc_rb_gen.sv` | regulated-bitstream generator |
| `rtl/htc_tb_gen.sv` | temporal-bitstream generator |
| `rtl/htc_mult.sv` | AND / XNOR multiplier |
| `rtl/htc_lfsr.sv` | selector LFSR |
| `rtl/htc_scaled_adder.sv` | L:1 scaled-addition multiplexer |
| `rtl/htc_accumulator.sv` | incrementer, result register, shift (and bipolar offset) |
| `rtl/htc_gb2tb.sv` | general-to-temporal stream conversion for the next stage |
| `rtl/htc_mac_fsm.sv` | MAC control FSM |
| `rtl/htc_mac.sv` | 4-input HTC MAC |
| `rtl/htc_fir.sv` | 6-tap FIR filter |
| `rtl/htc_dct.sv` | 8-point DCT/IDCT engine |
| `rtl/htc_accel.sv` | top level |
| `tb/htc_model_pkg.sv` | bit-exact reference model and DCT-II matrix |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_htc_image_workloads.sv` | blur and DCT workloads on a generated image |
| `tb/tb_htc_mac_accuracy.sv` | MAC accuracy over 50,000 random vectors |

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and ends with
`$finish`. It also has a watchdog that reports a failure if the run hangs.
With Verilator 5, from the repository root:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_htc_accel -y rtl -y tb +libext+.sv \
  rtl/htc_pkg.sv tb/htc_model_pkg.sv tb/tb_htc_accel.sv
./obj_dir/Vtb_htc_accel
```

Replace `tb_htc_accel` with any other testbench name. Every testbench except
`tb_htc_mac_accuracy` runs in a few seconds or less. What they check:

* generators, gate, mux, LFSR, GB-to-TB conversion: exhaustively over
  operands and counts at N = 8, plus the N = 3 stream examples above; the
  LFSR's period;
* accumulator and FSM: counts, shift and offset, `done` timing, back-to-back
  epochs, clear;
* MAC: bit-exact results against the reference model (unipolar and bipolar),
  257-cycle latency, one result per 256 cycles when chained, the width of
  `tb_out`, and an accuracy bound;
* FIR and DCT: bit-exact outputs, output order and cadence, stalling of the
  input handshake, and accuracy against the exact filter or transform;
* `tb_htc_accel` (top, default parameters): both accelerators at once, a
  DCT followed by an IDCT after reloading the coefficient memory, and
  counters showing that every handshake stall and mode switch occurred.
* `tb_htc_image_workloads` (top, default parameters): the blur and DCT
  workloads on a generated image, bit-exact and with PSNR bounds.
* `tb_htc_mac_accuracy` (MAC, default parameters): 50,000 back-to-back
  random dot products, bit-exact, with RMSE, SDE and bias. It takes several
  seconds.

The reference model (`tb/htc_model_pkg.sv`) computes what the hardware should
produce, cycle by cycle, in plain integer code. It locates RB slots from the
trailing ones of the count in a different way from the RTL.

## Changing the design

* **Precision.** `N` (default `htc_pkg::HTC_N` = 8) sets the operand width
  and the epoch of 2^N cycles. The LFSR follows `N` through the tap table in
  `htc_pkg` (widths 3–16). The reference model knows taps for widths 3–10.
* **MAC width.** `htc_mac` takes any power-of-two `L` ≥ 2. The accumulator
  shift and the rescaling in `htc_gb2tb` become log2(L). The accelerators are
  written for L = 4.
* **Coding.** `BIPOLAR` on `htc_mac` (and on the generators, multiplier,
  accumulator and `htc_gb2tb`) selects signed coding with XNOR products.
