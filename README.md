# MSDF merged multiply-add convolution accelerator

This is synthesizable SystemVerilog for a convolution accelerator whose arithmetic is
*most-significant-digit-first* (MSDF). Activations enter one bit per cycle, most significant bit
first. Each result leaves one signed digit per cycle, also most significant first. The design
follows the accelerator described in "Energy-Efficient CNN Acceleration with MSDF Digit-Serial
Arithmetic on FPGA" (Usman, Sadegheih, Merhof), which targets the 3x3 convolutions of U-Net. It
is an independent implementation. Where the publication leaves a detail open, this code makes its
own choice, and the section "Where this RTL departs from the publication" lists these choices.

The main idea is the *merged multiply-add* (MMA) unit. A conventional MSDF inner product
cascades online multipliers into a tree of online adders, and every level adds its own start-up
delay. The MMA removes that cascade. Per cycle it ANDs one activation bit-plane with the parallel
weights and sums the products, together with a carried *residual*, in one ordinary
carry-propagate adder tree. It then picks the next output digit from the top of that sum. The whole
32-channel inner product therefore has one start-up delay of 2 cycles.

## Structure

```
msdf_conv_accel                 16 KPBs + controller
 ├─ conv_ctrl                   plane requests, iteration period, result framing
 └─ kpb  x16                    one 3x3x32 partial sum each
     ├─ mma  x9                 one 32-channel inner product each (one window position)
     │   ├─ mma_adder_tree      33-input carry-propagate tree (32 products + residual)
     │   └─ mma_ogf             output digit generation
     └─ mat                     4-level tree of msdf_adder (online signed-digit adders)
msdf_pkg                        digit type, encode/decode, p_out()
```

By default there are 16 x 9 x 32 = 4608 one-bit-by-8-bit multipliers working at once. All 16 KPBs
compute 16 different output pixels of the same output channel, so they share one set of
3x3x32 weights.

## Number formats

* Activations are unsigned 8-bit. Weights are signed 8-bit two's complement. This pairing is how
  an 8-bit post-training quantiser usually stores a CNN. The publication does not state the
  signedness.
* Every digit is a radix-2 signed digit in {-1, 0, +1}. It travels on two wires `{x+, x-}` in the
  inverted-negabit encoding, and its value is `x+ + x- - 1`:
  `11` = +1, `00` = -1, and `10` or `01` = 0. The encoder always produces `10` for zero, and the
  decoder accepts both forms (`msdf_pkg::sd_enc`, `sd_dec`).
* A stream of L digits z_1 ... z_L, first digit first, stands for the integer
  `sum_j z_j * 2^(L-j)`. An MMA result has L = 21 digits. A KPB result has L = 25.

## The MMA recurrence

This is the part that needs the most care. For one inner product
`S = sum_i a_i * w_i` (32 channels), let `P_b = sum_i a_i^(b) * w_i` be the partial product of
bit-plane b. It is what the AND array and the adder tree produce in one cycle. Then
`S = sum_b 2^b * P_b`. The planes arrive b = 7 first.

The unit works on fractions scaled by 2^-13. The value 13 is `PW = W_BITS + log2(T_N)`. Since
`|P_b| <= 32 * 128 = 2^12`, a scaled plane is at most 1/2 in magnitude. Call the scaled plane
`p_j`, where j = 1, 2, ... counts cycles. After the eighth cycle, `p_j = 0`. Each cycle computes

```
V_j = 2 * R_(j-1) + p_j            (adder tree: 32 products + residual shifted left, LSB 0)
z_j = +1 if V_j >= 1/2,  -1 if V_j < -1/2,  else 0      (OGF)
R_j = V_j - z_j
```

`R_0 = 0` at the first plane of each product. By induction `R_j` stays in [-1/2, 1/2), so
`V_j` stays within (-3/2, 3/2). Unrolling the recurrence gives

```
sum_{j=1..J} z_j 2^-j  +  R_J 2^-J  =  2^-21 * S
```

At J = 21 the left part times 2^21 is an integer, and so is S. Hence `R_21` is an integer with
magnitude below 1, which means it is 0. **After 21 digits the result is exact and the residual
is zero**, so the next product can start immediately. 21 equals the publication's output
precision `p_out = 2n + log2 T_N`.

In hardware, V is a 15-bit signed word in units of 2^-13. The OGF needs only its top three bits
`t = floor(V / 2^12)`, which lie in -3..2. It chooses z = +1 for t >= 1 and z = -1 for t <= -2.
The new residual keeps the low 12 bits of V unchanged and adds one sign bit equal to `t[0]`. So
the residual register is 13 bits wide, and the feedback path is a wire shift plus a 3-input
decision. The assertion `a_v_range` in `mma.sv` checks the bound on V in simulation.

Pipeline: register 1 holds the 32 gated products, the output of the AND array. Register 2 holds
the selected digit. A plane presented in cycle c therefore gives its digit in cycle c + 2, which
is the publication's initial delay of 2. The residual loop (adder tree, OGF, residual register)
is one cycle long.

## Online adder and the adder tree (MAT)

The nine MMA streams of a KPB are added by `mat`, a tree of `msdf_adder` units. Its levels hold
9 -> 5 -> 3 -> 2 -> 1 nodes, and an unpaired node is added to a zero stream. Each adder uses the
same kind of recurrence at a tiny width, in units of 1/4:
`V = 2R + x + y` (4 bits), z = +1 if V > 2, -1 if V < -2, R = V - 4z. Because the thresholds are
strict, the first digit is always 0. Dropping it means each adder
* adds one digit of length: L digits in, L + 1 digits out, exact;
* has an initial delay of 2 cycles;
* needs two zero digit positions after its input stream before the next stream may start.

A KPB's result is 21 + 4 = 25 digits and appears 2 + 4 x 2 = 10 cycles after the first plane.
The last level of the tree limits how often results can follow each other: one every
21 + 4 + 1 = **26 cycles** at best. The publication quotes 26 cycles "per output from a MMA".

## Controller, iterations and the port protocol

An *iteration* loads one 3x3x32 window into each KPB and yields 16 partial sums. `conv_ctrl`
starts one iteration every `ITER_CYCLES` = 28 cycles. 28 is the per-iteration count of the
publication's latency relation, `delta + p_out + log2 T_N = 2 + 21 + 5`. A layer then takes
`28 x ceil(convolutions / 16) x ceil(N / 32)` cycles, as that relation states. Iterations
overlap: planes of iteration i+1 are requested while the trees still drain iteration i.

Cycle by cycle, after `start` with `num_iters = n`:

```
cycle      0  1 ...  7  8 ... 27 | 28 ... 35 | ...
plane_idx  7  6 ...  0  -   -    |  7 ...  0 |        plane_valid high on 0..7, 28..35, ...
plane_first on cycles 0, 28, 56, ...; iter_idx = iteration of the requested plane

psum_valid high for 25 cycles from cycle 10, 38, 66, ... (psum_first / psum_last mark the ends)
done       one pulse with the last digit of iteration n-1; busy from start until then
```

`act_bits[p][j]` must carry bit `plane_idx` of the 32 activations of KPB p at window position j
in the same cycle as the request, so a memory must answer combinationally or be read one cycle
ahead. `weights[j][i]` must be stable while the 8 planes of an iteration are requested.
`start` is ignored while `busy` is high. Each `psum_digit[p]` frame is the 25-digit signed-digit
partial sum of KPB p. A single adder converts it to two's complement:
`value = 2*value + digit` over the frame.

## Throughput

At 100 MHz with the default sizes, an iteration performs 4608 multiply-accumulates in 28 cycles,
which is 32.9 GOPS, counting a multiply and an add as two operations. At the minimum period of 26
cycles it is 35.4 GOPS. The publication reports 52.95 GOPS and 53.25 ms for its U-Net run. Those
two figures imply about 2.8 GOP of work, which this datapath needs about 86 ms to do at
the 28-cycle period. The publication does not say how its figure was counted, so this RTL
keeps the period of the publication's own relation.

## Where this RTL departs from the publication

* **Adder-tree word size and OGF.** The publication forms a 14-bit sum, sends its top 7 bits
  through an OGF made of a chain of half and full adders, and keeps 7 bits as the residual. It
  does not give the selection rule. Here the sum is 15 bits, the OGF reads 3 bits and the
  residual is 13 bits. With this split, 21 digits provably reproduce the exact 21-bit inner
  product; the publication does not show how its 7/7 split achieves that.
* **Online adder.** The publication names MSDF adders but gives no algorithm. The residual adder
  above, with a delay of 2 and one digit of growth, is this design's choice.
* **Iteration period.** The latency relation gives 28 cycles, and the text also says 26. The RTL
  uses 28 (`ITER_CYCLES`); any value of 26 or more works, and elaboration fails below that.
* **Shared weights** across the 16 KPBs, since they compute one output channel
  (output-channel tile of 1).
* **Flush and restart.** After its 8 planes an MMA runs on zero planes until all 21 digits are
  out, and the first plane of a product clears the residual.
* **Reset** is active-low and asynchronous, and clears all state.

## Not included

The publication does not describe the memories that hold feature maps and weights, how data
reaches the KPBs, the accumulation of partial sums over several 32-channel tiles, bias or
requantisation. It also does not describe the Zynq processing system around the accelerator.
These parts are left out. Their signals are the top's ports.

## Simulating

Every testbench checks its results against values it computes itself. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
          rtl/msdf_pkg.sv tb/tb_msdf_conv_accel.sv --top-module tb_msdf_conv_accel
./obj_dir/Vtb_msdf_conv_accel
```

| testbench | what it covers |
|---|---|
| `tb_mma_ogf` | digit selection and residual for all legal top values |
| `tb_mma_adder_tree` | 33-operand sums, random and extreme |
| `tb_mma` | 60 inner products (extremes, random), back to back and with gaps; exact value, delay 2 |
| `tb_msdf_adder` | 300 stream pairs at minimum spacing; exact sum, delay 2 |
| `tb_mat` | 9-stream sums at 26-cycle spacing; exact, latency 8 |
| `tb_kpb` | 3x3x32 partial sums at 26-cycle spacing; exact, latency 10 |
| `tb_conv_ctrl` | plane order, 28-cycle period, 28 x n issue cycles, frames, done, busy |
| `tb_msdf_conv_accel` | full default size, 6 iterations, 96 partial sums exact; latency, period; counts overlap, residual restart, +1/-1 digits, ignored start |
| `tb_unet_layer` | a whole 3x3 layer (16x16 output, padding 1, 128 -> 4 channels) at default size: 256 iterations, tiles summed in the bench, every output pixel against a direct convolution, 7168 issue cycles = 28 x 64 x 4 |

The layer test shows the intended use: the host orders iterations so that the 16 KPBs of an
iteration share an output channel, and it adds the partial sums of the 32-channel tiles of a
pixel. The full-size tests build in one to two minutes and run in under a second. All parameters
(`KPBS`, `K`, `T_N`, `A_BITS`, `W_BITS`, `ITER_CYCLES`) can be changed at the top. The internal
widths follow from them.
