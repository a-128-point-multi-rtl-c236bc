# A 128-point, 4-path serial-commutator FFT

This is a streaming 128-point FFT that takes four complex samples per clock. It is made of
four serial-commutator (SC) pipelines placed side by side, which is why it is called a
multi-path SC (MSC) FFT. An SC pipeline computes a radix-2 butterfly on one serial stream
with one real adder and one real subtractor, not with two complex adders. It does this by
sending the real parts of the two operands through the butterfly in one cycle and the
imaginary parts in the next. The rotator after the butterfly works on one real part per
cycle in the same way. So each stage does the work of a full butterfly with half the
arithmetic, and the arithmetic is busy on every cycle.

The transform is split as 128 = 8 x 16. Stages 1-3 form a radix-2^3 section and stages 4-7 a
radix-2^4 section. With this split, only stage 3 needs general complex multipliers. Every
other rotation is a small constant: -j, W8 (a multiply by 0.707) or W16 (multiplies by
473/512, 362/512 and 196/512, done with shifts and adds). The rotations are also allocated
per path (table below). As a result, some paths in stages 4 and 5 need only a trivial
rotator.

The RTL is written in SystemVerilog-2017 and is synthesizable. The datapath uses 12-bit
words. With the stimulus the architecture was published with (random +-1 symbols), the
measured SQNR is 42.5 dB.

## Block diagram

```
          stage 1        stage 2        stage 3        stage 4         stage 5   stage 6     stage 7
path 1 -> PE_W8 - D7 -> PE_W4 - D3 -> PE_TW - D1 -> PE_W4  - D15 -> PE_W4 -+--\  BU2 --+--\  BU2 -> out 1
path 2 -> PE_W8 - D7 -> PE_W4 - D3 -> PE_TW - D1 -> PE_W16 - D15 -> PE_W8 -|-\ \ (1,3)  |-\ \ (1,3) -> out 2
path 3 -> PE_W8 - D7 -> PE_W4 - D3 -> PE_TW - D1 -> PE_W8  - D15 -> PE_W4 -+ | |  BU2   | | | BU2 -> out 3
path 4 -> PE_W8 - D7 -> PE_W4 - D3 -> PE_TW - D1 -> PE_W16 - D15 -> PE_W8 ---+-+ (2,4) -j-+-+ (2,4) -> out 4
```

* `PE_x` means a serial-commutator processing element whose rotator can apply the rotations
  of type x (files `pe_w4.sv`, `pe_w8.sv`, `pe_w16.sv`, `pe_tw.sv`).
* `Dk` is a bit-exchange circuit with k delay registers (`perm_swap.sv`).
* `BU2` is an ordinary parallel butterfly between two paths (`bu2.sv`).
* In stage 6, paths 1 and 3 feed one BU2 and paths 2 and 4 feed the other. The outputs go to
  rows 1, 2 (from the first BU2) and rows 3, 4 (from the second).
* Row 4 is multiplied by -j before stage 7.
* In stage 7, rows 1 and 3 feed one BU2 and rows 2 and 4 feed the other.
* `msc_ctrl.sv` generates every control signal from one counter.
* `msc_fft128.sv` is the top module and `msc_pkg.sv` holds the shared types.

## Index bookkeeping: which sample is where

This section is the key to the design. Write the input index as n = b6 b5 b4 b3 b2 b1 b0.
A decimation-in-frequency FFT butterflies over b6 in stage 1, b5 in stage 2, and so on down
to b0 in stage 7. An SC processing element can only butterfly two samples that arrive on
consecutive cycles of its own path. Therefore, at the input of stages 1-5, the bit being
processed must be bit 0 of the time index within the frame. Each path carries 32 samples per
frame, so the time index t = t4..t0 has five bits. Two index bits select the path:
path = 2*b1 + b0, numbering the paths 0-3.

| point                     | time bits t4 t3 t2 t1 t0 | path bits      | butterfly on |
|---------------------------|--------------------------|----------------|--------------|
| stage 1 input (FFT input) | b2 b5 b4 b3 b6           | 2*b1 + b0      | b6           |
| stage 2 input             | b2 b6 b4 b3 b5           | 2*b1 + b0      | b5           |
| stage 3 input             | b2 b6 b5 b3 b4           | 2*b1 + b0      | b4           |
| stage 4 input             | b2 b6 b5 b4 b3           | 2*b1 + b0      | b3           |
| stage 5 input             | b3 b6 b5 b4 b2           | 2*b1 + b0      | b2           |
| stage 6 (across paths)    | b3 b6 b5 b4 b2           | pairs 1-3, 2-4 | b1           |
| stage 7 (across paths)    | b3 b6 b5 b4 b2           | rows 1-3, 2-4  | b0           |

Between two stages, one time bit moves into position t0. The bit-exchange circuit after
stage s swaps t0 with tK, where K = 3, 2, 1, 4 for s = 1, 2, 3, 4. Such a swap needs
2^K - 1 delay registers, which gives the D7, D3, D1 and D15 of the diagram.

Inside the circuit, a delay line of L = 2^K - 1 samples sits between two multiplexers. Most
samples simply pass through the line and come out L cycles later. There are two exceptions:

* A sample with t0 = 0 and tK = 1 must move L places earlier. It goes straight to the
  output.
* In that same cycle, the sample leaving the line has t0 = 1 and tK = 0. It must move L
  places later, so it is fed back into the line for one more trip.

This works with frames arriving back to back. The swap period is at most 32 samples, so a
frame never mixes with its neighbours.

The butterfly bit keeps its meaning on the PE output: the sum comes out with t0 = 0 and the
difference with t0 = 1. After stage 7, the output of path p at output time t carries
frequency k, where

* (b3 b6 b5 b4 b2) = t and path = 2*b1 + b0, as at stage 5;
* b1 is now the output bit of the stage-6 butterfly, b0 that of stage 7, and so on;
* k = b0 b1 b2 b3 b4 b5 b6, i.e. the bits in reversed order: the usual bit-reversed
  output of a DIF FFT.

The testbench functions `in_index` and `out_freq` in `tb/tb_msc_fft128.sv` state both
mappings in executable form.

## Where the rotations go

Split the index as n = 16*n1 + n2, where n1 = b6 b5 b4 and n2 = b3 b2 b1 b0. The frequency
out of the first section is k1 = b4 b5 b6 (bit-reversed). Each stage rotates as follows:

| stage | rotated samples             | rotation                                | hardware                  |
|-------|-----------------------------|-----------------------------------------|---------------------------|
| 1     | difference (b6 = 1)         | W8^(2*b5 + b4)                          | PE_W8 on every path       |
| 2     | difference (b5 = 1)         | -j if b4 = 1                            | PE_W4 on every path       |
| 3     | every sample                | W128^(n2 * k1)                          | PE_TW on every path       |
| 4     | difference (b3 = 1)         | W16^(4*b2 + path)                       | see below                 |
| 5     | difference (b2 = 1)         | W8^path: 1, W8^1, -j, W8^3              | PE_W4, PE_W8, PE_W4, PE_W8 |
| 6     | row 4 (b1' = 1, b0 = 1)     | -j                                      | a wire swap and a negation |

In stage 4, path 1 needs only W16^0 and W16^4 = -j, so it uses a PE_W4. Path 3 needs W16^2
and W16^6, which are W8 rotations, so it uses a PE_W8. Paths 2 and 4 need the odd powers of
W16 and use PE_W16.

This allocation of rotations to paths is what keeps the rotators this small. Only stage 3
needs full multipliers. In stage 5, path 1 never rotates: it is a PE_W4 whose -j is never
enabled.

## The serial-commutator processing element

All four PE types share the same input and output commutators. The two samples of a pair
arrive on consecutive cycles. The commutator phase `s` is 0 for the first sample (x0) and 1
for the second (x1). Let c be the cycle on which x0 arrives.

| cycle | input | butterfly operands      | butterfly results    | PE output                     |
|-------|-------|-------------------------|----------------------|-------------------------------|
| c     | x0    |                         |                      |                               |
| c+1   | x1    | x0.re, x1.re            | sum.re, dif.re (= a) |                               |
| c+2   | (next)| x0.im, x1.im            | sum.im, dif.im (= b) | (sum.re, sum.im)              |
| c+3   | (next)|                         |                      | rotated (a + jb)              |

The input commutator needs two pieces of hardware:

* one register on the imaginary input;
* a pair of multiplexers with a register behind the upper one.

The output commutator needs a register on the difference branch and a register on the real
output. Its multiplexers are driven by the inverted phase `!s`. Every PE has a latency of 2
cycles.

The rotators differ in where they sit and in what they compute:

* **PE_W4** puts the -j rotator behind the output register. The rotator swaps the real and
  imaginary parts and negates one of them. It acts on the difference sample only, when the
  pair's `rot` bit is set.
* **PE_W8** rotates the difference stream one real part at a time, by W8^k for k = 0..3.
  The common factor 0.707 is applied at the rotator input as 362/512. That costs four
  adders: 256 + 64 + 32 + 8 + 2. After that, W8^1 and W8^3 reduce to additions.
  * The rotator has two registers. The first, r1, holds the previous part.
  * The second register is loaded from the negated first, so it holds minus the part
    before that.
  * On the real-output cycle, r1 = a and the input is b.
  * On the imaginary-output cycle, r1 = b and r2 = -a.
  * A single adder computes (+-r1) + (r2 or input). An output mux chooses r1, the sum, or
    the adder's second operand:

  | k | real-part cycle | imaginary-part cycle | output mux       |
  |---|-----------------|----------------------|------------------|
  | 0 | a               | b                    | r1               |
  | 1 | a + b           | b - a                | sum, +r1         |
  | 2 | b               | -a                   | second operand   |
  | 3 | b - a           | -b - a               | sum, -r1         |

  The 0.707 factor is already applied to a and b for k = 1 and 3.
* **PE_W16** rotates by W16^k for k = 0..7 with the same structure. The difference is that
  each adder operand first passes through a `w16_mul`.
  * A `w16_mul` multiplies by 473, 362 or 196 with three adders. It forms 5x = x + 4x once,
    then computes big - mid + small:
    * 512x - 40x + x = 473x
    * 512x - 160x + 10x = 362x
    * 256x - 64x + 4x = 196x
  * The first multiplier takes +r1 or -r1.
  * The second multiplier takes the current input on the real cycle and r2 = -a on the
    imaginary cycle.
  * With C = 473, S = 196 and H = 362, and after dividing the sum by 512:
    * W16^1 gives re = C*a + S*b and im = C*b - S*a.
    * W16^5 = -j W16^1 gives re = -S*a + C*b and im = -S*b - C*a.
    * The other odd powers and W16^2, W16^6 (which use H) follow the same pattern.
  * For k = 0 and k = 4, the rotator bypasses the multipliers.
  * In this FFT, stage 4 only ever requests W16^1, 3, 5 and 7, so the 362 setting is never
    used.
* **PE_TW** puts a general complex multiplier behind the output register: four real
  multipliers and two adders. It rotates every output sample, sum and difference alike, by a
  twiddle c - js. The twiddle is presented in the same cycle as the output sample it
  applies to. The coefficients have 12 bits with 10 fractional bits. They come from a
  33-entry quarter-wave table, round(1024*cos(2*pi*i/128)) for i = 0..32, using the symmetry
  W^(32q + r) = (-j)^q * W^r (function `twiddle` in `msc_pkg.sv`).

## Timing and control

The latencies add up to 38 cycles:

* each PE: 2 cycles;
* the bit-exchange circuits: 7, 3, 1 and 15 cycles;
* each BU2: 1 cycle, because its outputs are registered.

The first output of a frame therefore appears 38 enabled cycles after its first input.
Frames can follow each other without gaps. Throughput is 4 samples per clock, i.e. one
128-point transform every 32 cycles.

`msc_ctrl` holds a 5-bit counter of enabled cycles. This counter is the time index of the
samples at the FFT input. Every other control signal is a function of the counter minus the
latency in front of the point it controls. The unit produces:

* the commutator phase of each stage;
* the stage-1 W8 exponent;
* the stage-2 -j flag;
* the four stage-3 twiddles, one per path;
* bit b2 for the stage-4 rotators;
* the four bit-exchange selects;
* `out_valid` and `out_sop`.

The stage-5 and stage-6 rotations never change, so they are tied off in the top module.

Two concurrent assertions in `msc_ctrl` check the output framing. A frame start is only ever
flagged on a valid cycle, and the first valid output is the start of a frame.

## Interface of `msc_fft128`

| port        | dir | width       | meaning                                                        |
|-------------|-----|-------------|----------------------------------------------------------------|
| `clk`       | in  | 1           | clock                                                          |
| `rst_n`     | in  | 1           | asynchronous reset, active low; clears all registers           |
| `en`        | in  | 1           | clock enable for the whole pipeline (low: nothing moves, input ignored) |
| `din[0:3]`  | in  | 4 x {re, im} x 12 | the four input samples, in the order of the table above  |
| `dout[0:3]` | out | 4 x {re, im} x 12 | X[k]/128, in the bit-reversed order described above      |
| `out_valid` | out | 1           | dout holds a valid sample (en high and pipeline filled)        |
| `out_sop`   | out | 1           | first cycle (t = 0) of an output frame                         |

The first enabled cycle after reset is time 0 of the first input frame. After that, frames
are counted continuously; there is no per-frame start input.

## Numerics

Every butterfly halves its results and rounds half up. This applies to both halves of the SC
butterflies and to the BU2s, so the output is the DFT divided by 128.

This scaling keeps the 12-bit datapath from overflowing. A butterfly followed by halving
never increases the largest magnitude, and rotations preserve magnitude. So if the input
magnitude is at most sqrt(2) * 1023, no intermediate value goes beyond 1447, well inside
+-2047. The W8 and W16 rotators and the complex multiplier also round.

The end-to-end test uses 10,000 frames of random +-1 symbols, each part set to +-1023. The
result is an SQNR of 42.5 dB against the exact DFT/128, with a largest error of 2.8 LSB. The published
implementation reports 42.7 dB for the same stimulus. It does not say how it scales or
rounds. The gap of about 0.2 dB may come from the numerical choices listed below.

## What is taken from the published architecture and what is not

**Taken as published:**

* the stage and path arrangement;
* the PE type in every slot;
* the delays D7/D3/D1/D15 and the multiplexer input numbering of the bit-exchange circuits;
* the bit-index labels that fix the input and output order;
* the BU2 pairing and the -j between stages 6 and 7;
* the per-path rotation table;
* the commutator structure of the PEs and the placement of the -j rotator and the complex
  multiplier;
* the 0.707 pre-scaling of PE_W8;
* the complete W16_MUL network;
* the 12-bit word length.

**This design's own choices:**

* **Rotator wiring.** The W8 and W16 serial rotators use exactly the published parts:
  registers, a -1, multiplexers, one adder and the constant multipliers. The published
  drawings cannot be read completely, though. In this design, the second register is fed
  from the negated first register. That is the reading under which the single drawn adder
  produces every rotation.
* **Numerics.** The scaling by 1/2 per butterfly, the rounding and the 12-bit/10-fraction
  twiddle format are not given by the published work.
* **Control.** The control unit, the stage-3 twiddle table, the clock enable, the reset
  behaviour and `out_valid`/`out_sop` are not described there either.
* **BU2 output register.** Registering the BU2 outputs is a choice made here.

**Not covered:**

* the 90 nm implementation figures (area, power, 250 MHz timing);
* the gate count.

## Simulation

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.

| testbench        | what it checks                                                             |
|------------------|----------------------------------------------------------------------------|
| `tb_w16_mul`     | all 4096 inputs x 3 constants, exact                                       |
| `tb_pe_w4`/`w8`/`w16`/`tw` | 4000 random pairs, random rotations; sum exact, rotated sample within 2 LSB of a floating-point reference; 2-cycle latency |
| `tb_perm_swap`   | all four sizes (K = 3, 2, 1, 4) on a numbered stream: order and latency     |
| `tb_bu2`         | random operands with random enable gaps, exact                             |
| `tb_msc_ctrl`    | every control output against the bit-label derivation, with enable gaps    |
| `tb_msc_fft128`  | end to end, 10,000 frames (below)                                           |

`tb_msc_fft128` does the following:

* It feeds 10,000 back-to-back frames in the architecture's input order.
* It drops `en` at random from frame 4 on.
* It compares each output with a double-precision DFT/128 (tolerance 8 LSB).
* It checks the 38-cycle latency and `out_sop`.
* It prints the SQNR.
* It counts how often each mechanism occurred: stalls, bypass and recirculation in each
  bit-exchange circuit, W8 pre-scaling, the two W16_MUL constants used, and the -j of stage 2.
  A mechanism that never occurs counts as a failure.

To run one with Verilator 5, list the package first:

```
verilator --binary --timing -Irtl rtl/msc_pkg.sv rtl/w16_mul.sv rtl/pe_w4.sv rtl/pe_w8.sv \
  rtl/pe_w16.sv rtl/pe_tw.sv rtl/perm_swap.sv rtl/bu2.sv rtl/msc_ctrl.sv rtl/msc_fft128.sv \
  tb/tb_msc_fft128.sv --top-module tb_msc_fft128 -o sim
./obj_dir/sim
```

The full end-to-end run takes a couple of seconds.

## Changing it

* **Word length.** `DW` in `msc_pkg.sv` sets it everywhere.
* **Twiddle precision.** `TW_W` and `TW_FRAC` set the precision of the stage-3 twiddles. If
  you change `TW_FRAC`, regenerate the cosine table in `cos_q` at the new scale.
* **Transform size and parallelism.** These are built into the bit bookkeeping: the
  permutation sizes, the stage-4/5 PE choice and the controller offsets. Another size means
  rederiving the bit table above first. The comments in `msc_ctrl.sv` list each offset and
  bit position.
* **Pipelining.** The complex multiplier of PE_TW and the W16 rotator are combinational
  behind or in front of a register. For higher clock rates, a register can be added after
  the multiplier. In that case, add the extra cycle to the offsets in `msc_ctrl` and to its
  `LAT`.
