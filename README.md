# iVisNav least-squares rate estimator in SystemVerilog

An interferometric vision-based navigation sensor (iVisNav) measures how fast
a vehicle moves relative to a landing surface. Six laser beacons on the
vehicle each project a beam, along a calibrated unit direction `r_i`, onto
the surface. A time-of-flight receiver turns the phase shift of each
reflected beam between two samples into a range rate along that beam. Six
range rates are enough to solve for all six relative rates: translational
velocity `v = (vx, vy, vz)` and angular velocity `w = (wx, wy, wz)`.

Each beam gives one linear equation. Stacked, the six equations read
`y = H x`. Here `x = [v; w]`, and row `i` of the 6x6 system matrix is

    H_i = [ r_i' ,  -r_i' [rho_i x] ]

where `rho_i` is where beam `i` lands on the surface, measured from the
surface's origin. A slow camera pipeline supplies `rho_i`. The best estimate
in the weighted least-squares sense is

    x = (H' R^-1 H)^-1  H' R^-1  y

where `R` is the 6x6 covariance of the measurement errors. This RTL is the
programmable-logic (PL) half of a processor-plus-FPGA system that evaluates
this formula over and over. A processor builds `H`, `R` and `y` and writes
them over an AXI4-Lite bus. It then reads back `x`. Everything between the
bus and the six result registers is in this RTL.

## The arithmetic: four units, one schedule

The formula needs four kinds of operation. Each has one hardware unit, and
the sequencer in `ivn_core` shares the units between the steps:

| unit | module | what it does | cycles (N = 6) |
|---|---|---|---|
| transpose | `ivn_transpose` | takes a matrix in as a row-major stream and sends it out column-major | 36 in, then 36 out |
| matrix multiply | `ivn_systolic_mm` (36 × `ivn_pe`) | 6x6 systolic array; computes `C = A B` | 18 |
| matrix inverse | `ivn_mat_inv` | LDU decomposition in IEEE single precision | 254 |
| matrix–vector | `ivn_mat_vec` | six multiply-accumulate units; computes `y = M v` | 8 |

One estimate runs through them in this order (cycle numbers counted from the
`go` pulse):

```
  1..37     read R from the input buffer
 38..291    invert R                        -> R^-1
 38..110    (in parallel) read H, stream it through the transpose -> H',
            and read y
292..310    multiply  P = H' R^-1
311..329    multiply  M = P H      and in parallel (311..319)  z = P y
330..583    invert M                        -> M^-1
584..592    mat-vec   x = M^-1 z;  done at 593
```

The core takes 593 cycles from `go` to `done`. The two inversions take 508 of
them. So the inverter sets the speed, and any attempt to make the design
faster should start there. The published implementation reported about
7.1 µs per estimate but gave no clock frequency. 593 cycles take 5.9 µs at
100 MHz; they would take 7.1 µs at about 84 MHz.

The final step of the formula is a matrix times a matrix times a vector. It
is done as two matrix–vector passes: first `z = (H'R^-1) y`, then
`x = M^-1 z`. This needs no 6x6 product of `M^-1` with `H'R^-1`. It also lets
the first pass run beside the second matrix multiplication, because both
need only `P`.

Each unit copies its operands into its own registers in the cycle it is
started. Its results stay on its output until it runs again. That is why the
core needs registers only for `H`, `H'`, `R` and `y`. `R^-1`, `P`, `M`,
`M^-1` and `z` are read straight from the output of the unit that made them,
on the cycle the next unit starts.

### The systolic multiplier

`ivn_systolic_mm` is a 6x6 grid of processing elements (PEs). Each PE holds
one element of the result (output-stationary). Row `i` of `A` enters the
left edge of grid row `i`, delayed by `i` cycles. Column `j` of `B` enters
the top of grid column `j`, delayed by `j` cycles. Every PE multiplies the
two values arriving at it and adds the product to its 64-bit accumulator. It
then passes the left value to the right and the top value downward, one
cycle later. Because of the delays, `A[i][k]` and `B[k][j]` reach `PE(i,j)`
in the same cycle, `i+j+k`. After `3N-2 = 16` cycles of input every
accumulator holds a complete dot product. The accumulators are then scaled
back to 32 bits.

### The LDU inverter

`ivn_mat_inv` is the most involved block. It converts its fixed-point input
to IEEE 754 single precision and then works in three stages:

1. **Decompose** `A = L D U` in place, by Doolittle elimination. For each
   pivot `k` and each row `i > k`, one cycle computes the multiplier
   `l_ik = a_ik / a_kk`. Then one cycle per column `j > k` computes
   `a_ij -= l_ik a_kj`. When this is done, `L` (unit diagonal) is below the
   diagonal and `D` is on it. Next, `N` cycles compute `D^-1 = 1/d_k`, and
   `N(N-1)/2` cycles scale each row of the upper triangle by `1/d_k` to give
   `U`, which also has a unit diagonal.
2. **Invert the factors.** `L^-1` comes from forward substitution, taken row
   by row from the top. `U^-1` comes from backward substitution, taken row by
   row from the bottom. Each off-diagonal element is a running sum with one
   multiply-subtract per cycle. `L^-1` and `U^-1` start out as identity
   matrices, so their unit diagonals cost nothing.
3. **Multiply** `A^-1 = U^-1 D^-1 L^-1`. Element `(i,j)` is the sum over
   `k >= max(i,j)` of `U^-1[i][k] · D^-1[k] · L^-1[k][j]`. The sum skips `k`
   below that bound because `U^-1` and `L^-1` are zero there. Each finished
   element is converted back to fixed point as it is written.

Every cycle performs exactly one float operation: a divide, a
multiply-subtract, or in stage 3 a double multiply-add. For `N = 6` the
stages take 1 + 70 + 6 + 15 + 35 + 35 + 91 + 1 = 254 cycles. In general the
count is
`2 + (N-1)N(2N-1)/6 + (N-1)N/2 + N + N(N-1)/2 + (N-1)N(N+1)/3 + N(N+1)(2N+1)/6`.
The inverter does not pivot. Both matrices it inverts, `R` and `H'R^-1H`, are
symmetric positive definite, so for well-posed inputs no pivot is zero. A
zero pivot gives an infinite result, which converts to a saturated fixed-point
value.

The float arithmetic (`ivn_fp_pkg`) is a reduced IEEE 754 subset: normal
numbers only (subnormals flush to zero), truncation instead of
round-to-nearest, and a signed infinity on overflow or division by zero. With
truncation, results come out a few units in the last place lower than
IEEE rounding would give. At the sizes used here that is far below the
fixed-point quantisation at the ports.

## Number formats and scaling

All data outside the inverter is 32-bit two's-complement fixed point. The
split between integer and fraction bits was not published. This design uses
Q16.16: a range of ±32768 with a resolution of 1.5·10⁻⁵. The split is set by
the `FRAC` parameter. A fixed-point product is formed at 64 bits and summed
at 64 bits. Only then is it shifted right by `FRAC`, rounding down
(arithmetic shift), and saturated to 32 bits.

Q16.16 quantisation dominates the error, so the processor has to scale the
inputs before it writes them. The scale of `R` decides how large
`M = H'R^-1H` and `M^-1` are, and they pull in opposite directions:

* If `R^-1` is small, `M` is small. Its smallest eigenvalues then come close
  to the 1.5·10⁻⁵ resolution, and `M` is stored too coarsely.
* If `R^-1` is large, `M^-1` is small. The resolution then limits `M^-1`,
  and through it `x`.

For the testbench geometry (below), with `R = s·R0` and `R0` a full
covariance whose diagonal runs from 0.8 to 1.3, the worst error of the hardware against a double-precision solution of the same
quantised inputs, over the 21 samples, was:

| `s` | `vz` error | `wz` error |
|---|---|---|
| 0.002 | 0.08 % | 0.53 % (near-zero channels fail the 2·10⁻³ tolerance) |
| 0.01 | 0.027 % | 0.055 % |
| 0.05 (used in the testbenches) | 0.024 % | 0.040 % |
| 1 | 0.61 % | 0.61 % |
| 20 | 8.9 % | 9.0 % |

The original work reported the same behaviour: errors below 1 % for a chosen
scaling, and larger relative errors in the channels whose true value is
near zero.

The factor `λ/(4π)`, which turns phase differences into range rates, is not
applied in the PL. The processor is expected to write `y` already in
range-rate units.

## Processor interface

### Register map (AXI4-Lite, 10-bit byte address, 32-bit data)

| address | access | contents |
|---|---|---|
| `0x000` CTRL | RW | bit 0 `start`, bit 1 `ready`, bit 2 `send` (byte strobes honoured) |
| `0x004` STATUS | RO | bits 1:0 state (0 IDLE, 1 SEND_DATA, 2 COMPUTE, 3 DONE), bit 2 `done` |
| `0x040`–`0x054` | RO | `x[0..5]` = vx, vy, vz, wx, wy, wz (Q16.16) |
| `0x200 + 4n` | WO | input word `n`: `H` row-major at n = 0..35, `R` row-major at 36..71, `y` at 72..77 |

Unmapped reads return 0. Every response is OKAY. The slave accepts a write
when address and data are both valid, and answers one cycle later. It holds
BVALID and RVALID until they are accepted; concurrent assertions check this.

### Operating states

`ivn_ctrl_fsm` has four states. These are its transitions:

| from | condition | to |
|---|---|---|
| IDLE | `start` and `ready` | SEND_DATA |
| IDLE | otherwise (`{start,ready}` = 00, 01, 10) | IDLE |
| SEND_DATA | `send` | COMPUTE (the core is started on this edge) |
| SEND_DATA | not `send` | SEND_DATA |
| COMPUTE | core `done` | DONE |
| COMPUTE | not `done` | COMPUTE |
| DONE | `done` and `start` | DONE |
| DONE | `done` low or `start` low | IDLE |

Writes to the data window reach the input buffer only in SEND_DATA. At other
times they are acknowledged and dropped, so a stray write cannot corrupt
data that is waiting to be processed. The core's `done` flag stays set from
the end of a computation until the next one starts.

A complete exchange, as the processor sees it:

1. write CTRL = 3 (ready, start): the state becomes SEND_DATA
2. write the 78 input words to `0x200…0x334`
3. write CTRL = 7 (adds send): the state becomes COMPUTE and the core starts
4. poll STATUS until the state is DONE (3)
5. read the six results
6. write CTRL = 0: the state returns to IDLE

## Module hierarchy

```
ivn_top                 AXI4-Lite port, top level
├── ivn_axi_regs        register file and data window
├── ivn_ctrl_fsm        IDLE / SEND_DATA / COMPUTE / DONE
├── ivn_data_buffer     128 x 32 simple dual-port RAM (78 words used)
└── ivn_core            least-squares sequencer
    ├── ivn_transpose
    ├── ivn_systolic_mm
    │   └── ivn_pe × 36
    ├── ivn_mat_inv     (uses ivn_fp_pkg)
    └── ivn_mat_vec
ivn_pkg                 sizes, Q16.16 helpers, state type, buffer layout
ivn_fp_pkg              single-precision subset and fixed<->float conversion
```

All modules take `N` (default 6), `W` (32) and `FRAC` (16) where they apply.
Every module in `rtl/` compiles as a top level on its own. The register
arrays in the core and the inverter are plain flip-flops. Only the input
buffer is written as a RAM that a synthesis tool can map to block memory.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>` and stops on a watchdog if it hangs.
Verilator 5 builds them with the library search paths:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/ivn_pkg.sv rtl/ivn_fp_pkg.sv tb/ivn_tb_pkg.sv tb/tb_ivn_top.sv \
    --top-module tb_ivn_top
./obj_dir/Vtb_ivn_top
```

To build another testbench, replace `tb_ivn_top` with its name. `ivn_tb_pkg`
is needed only by `tb_ivn_core` and `tb_ivn_top`.

| testbench | what it checks against |
|---|---|
| `tb_ivn_pkg` | 64-bit integer arithmetic for the exact product, the floor shift and the clamp at the 32-bit limits |
| `tb_ivn_fp_pkg` | double-precision multiply, add, subtract and divide of random floats, within the truncation error; fixed↔float round trips; infinity, flush-to-zero and cancellation cases |
| `tb_ivn_pe` | a testbench accumulator; one-cycle operand forwarding, clear |
| `tb_ivn_systolic_mm` | a testbench 64-bit product with the same scale-and-saturate rule, for identity, integer, random and saturating inputs; latency of 3N cycles |
| `tb_ivn_transpose` | the column-major order of random input matrices, gaps in the input stream, `in_ready`/`out_last` timing |
| `tb_ivn_mat_inv` | a double-precision Gauss-Jordan inverse of the same quantised input (4 LSB + 10⁻⁴ relative), for identity, diagonal and random positive-definite matrices; latency of 254 cycles |
| `tb_ivn_mat_vec` | a testbench dot product; latency of N+2 cycles |
| `tb_ivn_ctrl_fsm` | a reference model of the transition table, under 3000 cycles of random inputs plus a directed walk |
| `tb_ivn_data_buffer` | a testbench copy of the memory, including a read and a write to the same address in one cycle |
| `tb_ivn_axi_regs` | register read-back, byte strobes, STATUS, results, data-window gating, held responses under back-pressure |
| `tb_ivn_core` | the 21-sample workload below, solved in double precision; overlap of the units |
| `tb_ivn_top` | the same workload through the bus at the default size, plus every control mechanism (see below) |

**Workload.** It uses the six calibrated beacon directions of a bench-top
setup. `r_i ≈ (0.873, 0.498, 0.137)`, `(0.893, −0.508, 0.130)`, and so on;
the full list is in `tb/ivn_tb_pkg.sv`. The motion is `vz = 3 m/s` and
`wz = 0.8 rad/s` with all other rates zero, estimated every 0.5 s for 10 s
(21 estimates). The landing-point vectors `rho_i` were not published, so the
testbench makes its own. Each `rho_i` is the sideways part of `r_i`, rotated
30° about z and scaled by 0.5 to 1.5, with z = ±0.5. This gives a condition
number of about 40. The beams are nearly parallel in z, which makes `vz`
hard to separate from `wz`, and with the unrotated geometry `H` is close to
singular. The measurements carry a small deterministic perturbation of at
most 10⁻⁴, so the least-squares solution is not exact.

**Mechanisms counted in `tb_ivn_top`.** Each must happen at least once:

* IDLE holding with only `start` or only `ready` set
* SEND_DATA holding until `send`
* COMPUTE holding until the core is done
* DONE holding while `start` stays set, and leaving when it is cleared
* a write outside SEND_DATA being dropped (a run with no new data must
  reproduce the previous result)
* the transpose running beside the first inversion
* the second multiplication running beside the first matrix–vector pass
* a held bus response under back-pressure

The test also checks that COMPUTE takes no more than 710 cycles, which is the
published 7.1 µs at an assumed 100 MHz. It takes 593.

## What follows the published design, and what does not

These parts follow it:

* the split of work between processor and PL
* the four arithmetic units and the order of operations
* the systolic array of 36 multiply-accumulate PEs
* six MAC units for the matrix–vector product
* LDU inversion in single precision, with fixed↔float conversion at its
  ports
* 32-bit fixed point everywhere else
* a block-memory input buffer
* software-visible registers on AXI4
* the four states and their transition conditions

These parts are this design's own:

* the Q16.16 format, the rounding and the saturation
* the register map and the AXI4-Lite subset
* the buffer layout
* every handshake
* the schedule of the core, including overlapping the transpose with the
  first inversion and splitting the final product into two matrix–vector
  passes
* the one-operation-per-cycle inverter

The original inverter came from high-level synthesis and was pipelined for
throughput. This one is a compact sequencer that is easy to read, and it is
the slowest part. The original multiplier was described as area-optimised to
save DSP slices. This array uses one multiplier per PE.

The published design reports its LUT, flip-flop, block-RAM and DSP use on a
Zynq-7020. Those figures belong to the original implementation. This RTL has
not been placed on that device, so they say nothing about it. Expect it to
need more DSP slices than the original, because of the full 6×6 array.

One printed label disagrees with the formula. The flow diagram labels the
final step `[H'R^-1H] H'R^-1 y` and leaves out the inverse. This RTL follows
the normal equations and uses the inverse.

The DONE-state conditions are printed as `done=1/start=1` (stay) and
`done=0/start=0` (leave). They are read as "stay while both are high, leave
when either is low".

Not covered by any test: inputs that make a pivot zero or push an
intermediate past the Q16.16 range. Both give saturated, meaningless rates
and no error flag.
