# A 16-stage pipelined CORDIC for cosine and sine

CORDIC computes trigonometric functions without a multiplier in the loop.
To rotate a vector by an angle theta, it rotates it in steps by the fixed angles
atan(2^-i), i = 0, 1, 2, ..., each step clockwise or counter-clockwise. A
step by atan(2^-i) needs only shifts and adds:

    x(i+1) = x(i) - sigma(i) * 2^-i * y(i)
    y(i+1) = y(i) + sigma(i) * 2^-i * x(i)
    z(i+1) = z(i) - sigma(i) * atan(2^-i)          sigma(i) = +1 or -1

Here z is the part of the angle still to be rotated. The step grows the vector
by sqrt(1 + 2^-2i). If that growth is not undone at every step, it builds up to
a fixed gain K = 1.6468 after 16 steps. This design removes it once, at the
end, with one multiplication by K^-1 = 0.60725. Start from the vector (1, 0)
and the angle theta, and the result is (cos theta, sin theta).

This RTL is a fully pipelined version of the circular, rotation-mode CORDIC
described in Y.-M. Kim, "Error Analysis of CORDIC Processor with FPGA
Implementation". It has 16 shift-add stages, one per iteration, followed by
one scaling multiplier. A new angle can enter every clock, and its cosine and
sine come out 17 clocks later. That paper studies where the error of such a
processor comes from. The design keeps the structure the analysis assumes:
16-bit Q1.15 numbers, 16 iterations, stored angle and scale constants, and one
final scaling.

## Number formats

Getting the formats right is the subtle part of the design.

| quantity | width | format | notes |
|---|---|---|---|
| angle `theta_d`, residual `z` | 16 | Q1.15, radians | LSB = 2^-15 rad; legal input range is +-0.9579 rad = +-31388 LSB |
| stored constants | 16 | Q1.15 | atan(2^-i) and K^-1 |
| datapath `x`, `y` | 17 | Q2.15 | one guard bit above the 16-bit word |
| `cos_theta`, `sine_theta` | 22 | Q2.20 | LSB = 2^-20 |

The source design states a Q1.15 system with 15 fractional bits and 16 bits
in all. Q1.15 cannot hold the start value 1.0, and it cannot hold the gain of
up to 1.6468 that builds up before the final scaling. The x/y words therefore
carry one more integer bit. They keep exactly the 15 fractional bits of the
analysis, so that extra bit changes no error term.

The 22-bit output width is the one the source design shows. The fraction width
of 20 bits comes from its one printed example: angle 0x8CBD, outputs
0x09F08B and 0x337641. As signed 22-bit Q2.20 numbers these are 0.62122 and
-0.78363, the cosine and sine of 0x8CBD = -0.90048 rad. For the same angle this
RTL gives 0x09F07B and 0x33765D. The two results differ by 16 and 28 output
LSB, and both are within 2^-15 of the exact values. The residual difference is
expected: rounding choices inside the stages are not published.

## The rotation stage (`cordic_stage`)

Stage i applies the three update equations above. It takes the direction from
the sign of the residual angle: z >= 0 rotates counter-clockwise (sigma = +1),
z < 0 rotates clockwise. The shifted terms `x >>> i` and `y >>> i` are
**rounded to nearest** (add 2^(i-1), then shift arithmetically), not
truncated. So each stage adds at most half an LSB of error per coordinate, and
that error has zero mean. This is the rounding model the error analysis
assumes. Truncation would add a bias that builds up over the 16 stages. The
stage reads atan(2^-i) from the constant table at the fixed address i, and
synthesis folds the lookup into a constant. Each stage ends in one register
of 51 bits: valid, x, y and z.

## Constants (`cordic_rom`)

A 17-word table of 16-bit Q1.15 words:

    word[i]  = round(atan(2^-i) * 2^15),              i = 0..15
    word[16] = round(2^15 / prod_{i=0..15} sqrt(1 + 2^-2i)) = 19898

All other addresses read 0. The 16 angles add up to 1.7433 rad, which is
well above the 0.9579 rad input limit, so every legal angle converges.
Rounding these 16 constants introduces an angle error of up to 16 x 2^-16 rad
between the angle the hardware actually rotates by and the residual z it
reports. The published error analysis does not model that error.

## Final scaling (`cordic_scale`)

x(N) and y(N) are each multiplied by the stored K^-1: 17 x 17 bits, with
30 fractional bits. The product is rounded to nearest into Q2.20 and
registered. Doing this once, rather than at every stage, costs one multiplier
pair and one clock. In return it adds only one quantisation error: the
"scaling error" of the analysis.

## Interface and timing (`cordic_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | asynchronous, active-low reset; clears every pipeline register |
| `theta_valid` | in | 1 | `theta_d` holds an angle this clock |
| `theta_d` | in | 16 | angle, Q1.15 rad, must be within +-0.9579 rad |
| `cos_theta` | out | 22 | cos(theta_d), Q2.20 |
| `sine_theta` | out | 22 | sin(theta_d), Q2.20 |
| `valid` | out | 1 | the outputs hold a result |
| `residual_angle` | out | 16 | z(16) of the vector leaving the last stage (one clock ahead of its result) |

An angle that is sampled with `theta_valid` at clock edge 0 is visible on
the outputs with `valid` at edge 17. The pipeline has no back-pressure: one
result leaves for every angle that entered, in order, and idle clocks pass
through as `valid = 0`. An angle outside +-0.9579 rad violates a concurrent
assertion (`a_theta_range`). The hardware does not clamp it.

## Where the error comes from

The analysis splits the output error into three independent parts:

1. **Angle approximation**: 16 finite steps leave a residual angle delta.
   That gives an error of 2 sin(|delta|/2), about |delta|, in the result.
   `residual_angle` makes delta visible.
2. **Scaling**: K^-1 and the final product are quantised. With b = 15, the
   uniform-error model gives a mean square error of 2^-2b / 12.
3. **Rounding**: every stage rounds. The error of stage i is carried through
   the later stages, and the model gives
   (4 eps^2 / 3) sum_j [1 - prod_{i<=j} sigma(i) 2^-i]^2 with eps = 2^-16.

The testbench `tb_cordic_error_sweep` measures the error on every 8th legal
angle (7848 angles) and prints it next to these model terms. It gave:

| quantity | value |
|---|---|
| measured mean square error E\|e\|^2 | 2.83e-9 |
| angle approximation term (from measured delta) | 9.3e-10 |
| scaling term 2^-30/12 | 7.8e-11 |
| rounding term (directions of an exact rotation) | 5.55e-9 |
| model total | 6.56e-9 |
| largest \|e\| | 1.33e-4 (about 4.4 LSB of Q1.15) |

The measured mean square error is about 2.3 times smaller than the model
total, so the model is pessimistic for this implementation. A likely
reason is the rounding term. It assumes that each rounding error takes the
values -eps, 0 and +eps with equal probability, which gives a variance of
2 eps^2 / 3. Rounding a shifted value to nearest leaves an error spread
roughly evenly over (-eps, +eps), with variance eps^2 / 3, and stage 0 shifts
by nothing and so does not round at all. The testbench fails
if any single error exceeds a worst-case bound of 2.9e-4. That bound adds four
parts: the largest residual angle, the sum of the constant-rounding errors,
sqrt(2) eps propagated through the remaining stages and scaled by 1/K, and the
output rounding.

## What follows the source design and what does not

Taken from the source design:
- circular rotation mode
- 16 iterations in 16 pipeline stages
- 15 fractional bits in a 16-bit two's-complement word
- start vector of length 1
- atan(2^-i) and K^-1 held as stored constants
- one scaling after the last iteration
- the +-0.9579 rad input range
- the port names `theta_d`, `cos_theta`, `sine_theta`, `valid`
- the 16/22-bit port widths

Choices of this design, where the source is silent:
- the guard bit in x/y
- round-to-nearest in the stages and in the scaler
- direction from the sign of z
- the Q2.20 reading of the output
- the combined 17-word constant table
- the register after the multiplier, hence a latency of 17
- `theta_valid`, `rst_n` and `residual_angle`

Not built:
- **Vectoring mode.** The source mentions it, but its implementation only
  computes cosine and sine.
- **The FPGA board and device.** The source reports 790 LUTs, 851
  flip-flops, 230.57 MHz and 0.176 W on a Zynq-7000. Generic synthesis of
  this RTL keeps 845 flip-flop bits. No timing or power figures were
  reproduced.

Two statements in the source disagree. Its eq. (1) calls the step angle
2^-i, while its eq. (3) and its implementation store atan(2^-i). This RTL
follows atan(2^-i).

## Files

| file | contents |
|---|---|
| `rtl/cordic_pkg.sv` | formats, widths, `cordic_vec_t` stage record |
| `rtl/cordic_rom.sv` | constant table |
| `rtl/cordic_stage.sv` | one micro-rotation stage (parameter `STAGE`) |
| `rtl/cordic_pipeline.sv` | chain of `N_STAGES` stages (default 16) |
| `rtl/cordic_scale.sv` | final K^-1 scaling |
| `rtl/cordic_top.sv` | complete processor |
| `tb/tb_cordic_rom.sv` | every table word against real-arithmetic values |
| `tb/tb_cordic_stage.sv` | stages 0, 1, 5 and 15, bit-exact |
| `tb/tb_cordic_pipeline.sv` | 16- and 8-stage chains, bit-exact, plus closeness to K cos, K sin |
| `tb/tb_cordic_scale.sv` | scaler, bit-exact |
| `tb/tb_cordic_top.sv` | end to end at full size (the checks are listed below) |
| `tb/tb_cordic_error_sweep.sv` | error measurement over the full input range |

`tb_cordic_top` checks:
- the printed example angle
- back-to-back and idle input clocks
- the range limits
- a reset in mid-burst, with the latency checked on every result

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl rtl/cordic_pkg.sv \
        rtl/cordic_rom.sv rtl/cordic_stage.sv rtl/cordic_pipeline.sv \
        rtl/cordic_scale.sv rtl/cordic_top.sv tb/tb_cordic_top.sv \
        --top-module tb_cordic_top -Mdir obj_top
    ./obj_top/Vtb_cordic_top

To run another testbench, replace the testbench file and the top module. The
package must come first. Each testbench runs in well under a second.

## Changing it

- **Fewer iterations.** `cordic_pipeline` takes `N_STAGES` from 1 to 16, which
  is useful for watching the angle-approximation error grow. `K^-1` in the
  table stays the 16-iteration value. The error this adds is below 2^-15 for
  `N_STAGES` of 8 or more.
- **Other word lengths.** The widths live in `cordic_pkg`. A different
  `FRAC_W` also needs the constant table regenerated from the two formulas
  above.
