# Mamba-X: a Vision Mamba accelerator in SystemVerilog

Vision Mamba swaps the attention layer of a vision transformer for a *selective state-space
model* (SSM). Per hidden channel and per state row m, the SSM runs a first-order linear
recurrence along the token sequence:

    state[l] = exp(Delta[l]*A[m]) * state[l-1] + Delta[l]*B[m][l]*u[l]
    y[l]     = ( sum_m state_m[l] * C[m][l] ) * Z[l]

On a GPU this scan runs step after step and is memory bound, so it dominates inference time
on large images. The accelerator here turns the scan into a parallel prefix computation.
Eight systolic scan arrays each handle a chunk of 16 tokens. A small support unit joins
the chunks, and joins successive 128-token segments for long sequences. Around the scan
sit a 64x64 GEMM engine for the linear projections, a vector unit, a piecewise-linear
special-function unit and one 384 KB on-chip buffer. DRAM is reached through a DMA engine.
All data are INT8. The exponential's scale factor is rounded to a power of two, so every
rescale is a shift.

This document describes that RTL: how the design is organised, the arithmetic, the
timing, how it was verified, and where it departs from the published design.

## 1. The scan as a prefix operation

Write the recurrence as `s[n] = P[n]*s[n-1] + Q[n]`, where `P = exp(Delta*A)` and
`Q = Delta*B*u`. Two steps compose into one step of the same form:

    (P1, Q1) o (P2, Q2) = (P1*P2, P2*Q1 + Q2)

The operator is associative, so a Kogge-Stone prefix tree gives all 16 states of a chunk
in log2(16) = 4 levels.

**Scan processing element** (`rtl/spe.sv`). One application of the operator is two
multipliers and an adder. P is INT8 with scale 2^-k, so each product is rescaled by a
rounding right shift of k bits:

    p_out = sat8 ( round( p_lo*p_hi >> k ) )
    q_out = satQ ( round( p_hi*q_lo >> k ) + q_hi )

The partial state Q is 24 bits wide, with 2 fractional bits below the INT8 grid. The input
Q is widened by `<< 2`. The extra bits keep the rounding error of the repeated rescales
small.

**Systolic scan array** (`rtl/ssa.sv`). The array has four rows, one per level of the tree.
In row r (distance d = 2^r), position i holds an SPE that combines i-d with i when i >= d.
Otherwise it holds a plain register. A register stage sits after every row. The state rows
m = 0..15 enter one per cycle, so the array sustains one 16-token row per cycle with a
latency of 4 cycles. Each output i is the state of token i, assuming the state before the
chunk is zero. It comes with the cumulative product `P[0]*...*P[i]` that the next stage
needs.

**Long input support unit** (`rtl/lisu.sv`). SSA j scans tokens 16j..16j+15 and is fed
one cycle after SSA j-1. LISU stage j is one more row of 16 SPEs. Given the final state c
of the chunk before, it corrects each partial state:

    state = round(prefixP * c >> k) + prefixQ

Stage j's last state becomes stage j+1's carry on the next cycle. This is why the arrays
are staggered by one cycle.

Long sequences are cut into segments of 128 tokens. For each state row, the final state of
a segment is stored in a 16-entry carry register file. The first stage of the next segment
reads it back (`first` selects zero instead for the first segment). So any sequence length
runs as a string of 128-token segments with no extra passes.

## 2. The selective-SSM pipeline

`rtl/ssm_pipe.sv` chains the units. For one hidden channel and one segment, the controller
issues the 16 state rows on 16 consecutive cycles:

| stage | unit | work | cycles |
|---|---|---|---|
| 1 | VPU (`vpu.sv`) | `x16 = sat16(Delta*A[m] >> sh0)` in Q8.8; `Q = sat8(Delta*B*u >> sh1)` | 1 |
| 2 | SFU (`sfu.sv`) | exp(x16) by table (16 segments) | 6 |
| 3 | quantise | `P = sat8(round(exp >> (8-k)))`: exp on the 2^-k grid | 0 |
| 4 | 8 SSAs | chunk prefix scans; SSA j delayed j cycles | 4 |
| 5 | PPU (`ppu.sv`) | LISU; deskew; MAC `acc[l] += state*C[m][l]` over m; `y = sat8(acc*Z >> sh2)` | 9 |

The segment result, a 128-lane INT8 vector, appears 20 cycles after its last row. The next
segment can start on the following cycle. The controller spends 18 cycles per segment, the
extra two being operand reads.

The PPU deskews the staggered SSA outputs with delay lines, so all 128 lanes of the MAC see
the same m together. C, Z and the requantisation shift travel through a matching delay.

**Number formats.** Activations and weights are INT8. The SFU works in Q8.8, with its slope
in Q4.12. The partial state uses 24 bits (Q.2). The PPU accumulator is 40 bits and the
GEMM accumulators 32 bits. Shifts are 6-bit signed fields: a positive value is a right
shift with round-half-up, a negative value a left shift. Every narrowing saturates.

## 3. Special function unit

Each function is piecewise linear. Breakpoints bp_0 < bp_1 < ... split the input range,
and segment i uses y = a_i*x + b_i. The exponential has 16 segments; SiLU and softplus
have 32.

Per lane, an address decoder binary-searches the breakpoints, one level per pipeline
register. The level with step s compares x with `bp[idx+s-1]`; for 16 entries that is bp7,
then bp3 or bp11, and so on. The 16-entry exponential enters the 32-entry search one level
down.

One coefficient table is shared by all 128 lanes through a read crossbar (a multiplexer per
lane). The compute unit evaluates `a*x >> 12 + b`. Latency is 6 cycles, at one vector per
cycle.

The table contents are fitted offline and written through a configuration port
(`cfg_sel`: 0 breakpoint, 1 slope, 2 intercept). The testbenches fit chords of the target
function over evenly spaced breakpoints. For exp they use [-8.5, 0], with slope 0 on the
two outer segments.

## 4. GEMM engine, buffer, DMA, controller

* **GEMM engine** (`gemm_engine.sv`, `gemm_pe.sv`): an output-stationary array of N x N PEs
  (N = 64).
  * Each cycle takes one column of A and one row of B. Row i and column j are skewed by
    i and j cycles.
  * PE (i,j) accumulates C[i][j]. A moves right and B moves down.
  * `busy` stays high for 2N-1 cycles after the last input.
  * The controller then reads one row per cycle, requantises it (`sat8(C >> sh0)`) and
    writes it to the buffer.
* **On-chip buffer** (`onchip_buffer.sv`): 3072 words of 1024 bits (128 INT8 lanes) = 384 KB.
  It has two read ports with a one-cycle read latency and one write port.
* **DMA** (`dma.sv`): copies len words between DRAM and the buffer in either direction.
  * The DRAM side has three channels: a valid/ready read-request channel, an in-order
    response channel, and a valid/ready write channel.
  * Requests are issued as fast as ready allows, so DRAM stalls only slow the transfer down.
  * Assertions check that a stalled request holds its address and data.
* **Controller** (`controller.sv`): executes one command at a time and pulses `done`.
  Command fields are in `cmd_t` (`mx_pkg.sv`).
  * `LOAD` / `STORE`: DMA transfers.
  * `GEMM`: A columns at addr0+k, B rows at addr1+k, K = len; output rows go to dst+i.
  * `VEC`: multiply, add or flip of word pairs.
  * `SFU`: one function over words; the input is scaled by sh0 into Q8.8 and the output by
    sh1 back to INT8.
  * `SSM`: one hidden channel over len segments.
    * Delta, u and Z are at addr0/1/2 + s.
    * B and C are at addr3/4 + 16s + m.
    * The A vector of the channel is at addr5, with byte m = A[m].
    * Segment s is written to dst+s.
  * While the DMA runs, it owns read port 0 and the write port.
* **Top** (`mamba_x.sv`): buffer, DMA, controller, GEMM engine and SSM pipeline.
  * Ports: the command port, the SFU configuration port and the three DRAM channels.
  * Parameters: `GN` (GEMM size, default 64) and `WORDS` (buffer size, default 3072).

## 5. What a workload needs

One selective-SSM channel of L tokens needs ceil(L/128) = S segments in the buffer:
* Delta, u, Z and y: 4S words
* B and C: 32S words
* A: one word

| workload (hidden size) | tokens | words | fits 3072 words? |
|---|---|---|---|
| 224x224 image, Tiny / Small / Base (192 / 384 / 768) | 197 | 73 | yes |
| 1024x1024 image, any model | 4097 | 1189 | yes |

Channels run one after another and reuse B and C. The linear projections run as 64x64
output tiles, with operands streamed from DRAM.

## 6. Departures from the published design

* **VPU scope.** The VPU has the element-wise operations the scan needs (Delta*A, Delta*B*u),
  plus MUL, ADD and FLIP. The published unit also runs LayerNorm and the causal Conv1D.
  Their datapaths and formats are not specified, so they are not built.
* **Own choices where the design description is silent:**
  * the word width and buffer port count
  * the 24-bit state and 40-bit PPU accumulator
  * Q8.8 / Q4.12 in the SFU
  * the rounding rule (half up) and saturation everywhere
  * the carry memory for multi-segment sequences
  * the controller and its command set
  * the DRAM handshake
  * pipeline registers after every SSA row and in the SFU search
* **Z.** The PPU multiplies by Z as given. If the model needs SiLU(Z), apply it first with an
  SFU command.
* **SFU tables.** The published tables come from profile-guided fitting and are not
  reproduced here. They are loaded at run time.

## 7. Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The references are in `tb/tb_ref_pkg.sv`
and are written independently of the RTL: doubles for the rounding shifts, a linear search
for the tables, and an explicit prefix tree plus a sequential recurrence for the scan.

| testbench | what it checks |
|---|---|
| `tb_spe` | random and corner operands over a range of shifts k |
| `tb_ssa` | prefix results against the tree; latency 4; one row per cycle |
| `tb_lisu` | three chained segments, staggered feed |
| `tb_ppu` | two segments of 16 rows; latency |
| `tb_sfu` | exp, SiLU and softplus tables: bit-exact and within chord accuracy; latency 6 |
| `tb_vpu` | all operations, saturation |
| `tb_gemm_engine` | several K, clear, drain time, readout (built at N = 16) |
| `tb_onchip_buffer` | random dual-port traffic |
| `tb_dma` | loads and stores under random DRAM stalls; transfer time without stalls |
| `tb_ssm_pipe` | full default pipeline over 3 segments (384 tokens), bit-exact against the reference chain and within 3 LSB of a floating-point sequential scan; 20-cycle latency; stand-alone VPU and SFU modes |
| `tb_mamba_x` | end to end: a command program (below) |

The `tb_mamba_x` program:
* loads the data
* runs a 2-segment SSM, a GEMM, two vector operations and an SFU pass
* stores all results and compares the stored DRAM words against references

It also counts the mechanisms it must see and fails if one never happens: DRAM read and
write stalls, the carry between segments, back-to-back SSM rows, the GEMM drain, and every
command type with switches between units.

Each testbench was also run against a deliberately broken copy of its module and reported
failures.

**Size limits in simulation.** The end-to-end and GEMM testbenches build the GEMM engine at
16x16. The default 64x64 array took about ten minutes just to build in verilator. Every
other unit in `tb_mamba_x` runs at its default size: 8 SSAs of 16, 16 state rows, a
3072-word buffer and 128 lanes. So no testbench runs the top with every parameter at its
default. The largest top simulated has GN = 16.

Build and run any testbench with plain verilator, for example:

    verilator --binary --timing --assert rtl/mx_pkg.sv $(ls rtl/*.sv | grep -v mx_pkg) \
        tb/tb_ref_pkg.sv tb/dram_model.sv tb/tb_mamba_x.sv --top-module tb_mamba_x -o sim
    ./obj_dir/sim

The package `mx_pkg.sv` must come first.
