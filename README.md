# A RISC-V core with streaming dot products and activation instructions for RNN inference

Neural networks for radio resource management are small: fully connected layers, a few LSTM
cells and the odd convolution, evaluated within milliseconds on a base station. Matrix-vector
products dominate them. Each weight is used exactly once per inference, so a
general-purpose core spends most of its time on loads, not arithmetic. This core is a small
in-order RV32 processor with two changes aimed at that bottleneck:

* **`pl.sdotsp.h`**, a 16-bit SIMD multiply-accumulate that *also loads the next weight*. It
  loads into one of two hidden special-purpose registers (SPRs) and post-increments the
  weight pointer. A matrix-vector inner loop then needs one instruction per two MACs plus
  one load per input pair. This replaces a load and a MAC per weight pair.
* **`pl.tanh` and `pl.sig`**, single-cycle activation functions on 16-bit fixed-point values.
  They evaluate a 32-segment piecewise-linear approximation.

Apart from these, the core runs the integer base ISA and the DSP-style extensions the
kernels need: 16-bit sum-of-dot-products, post-increment loads and stores, and zero-overhead
hardware loops. All data is Q3.12: a signed 16-bit value with 12 fractional bits, range
[-8, 8). Two values are packed per 32-bit word.

## Number format and the sum-of-dot-product

A fully connected layer computes `o = b + W x`. With Q3.12 operands, each product is Q6.24.
Products are accumulated in a 32-bit register and shifted right by 12 at the end to return
to Q3.12. The base instruction is

    pv.sdotsp.h rd, rs1, rs2     rd += rs1[31:16]*rs2[31:16] + rs1[15:0]*rs2[15:0]

It performs two MACs, with signed 16-bit halves and a 32-bit accumulator (wrap-around, no
saturation). `rnn_dotp_mult` computes it in one cycle, next to the RV32M multiplies and
`p.mac` (`rd += rs1*rs2`).

## Streaming weights: `pl.sdotsp.h.0` / `pl.sdotsp.h.1`

    pl.sdotsp.h.N rd, rs1, rs2
        rd    += SPR_N[31:16]*rs2[31:16] + SPR_N[15:0]*rs2[15:0]   (execute stage)
        SPR_N <= mem[rs1]                                         (when the load returns)
        rs1   += 4                                                (when the load returns)

Operand A of the multiplier comes from SPR *N*, not from a general-purpose register. The
same instruction issues a word load from the address in `rs1`, and the loaded word lands in
SPR *N*. In other words, each `pl.sdotsp.h` consumes a weight pair fetched by an *earlier*
`pl.sdotsp.h` with the same index, and fetches the pair for a later one.

Why two SPRs? The load returns one cycle after the instruction executes at the earliest. A
`pl.sdotsp.h.0` directly after another `.0` would have to wait for it. Alternating `.0` and
`.1` gives every load a full instruction of slack, so a stream of alternating instructions
runs at one per cycle. A pointer register per output row lets each instruction stream its
own weight row.

Hazard rules specific to this instruction:

* The MAC result is written to `rd` in the execute stage. The pointer increment and the SPR
  write happen at write-back, when the memory responds. Both write-backs use the second
  register-file write port, which also serves ordinary loads.
* A `pl.sdotsp.h.N` that reads SPR *N* while the load into SPR *N* is outstanding stalls.
  So does any instruction that reads or writes a register the outstanding load will write,
  including the pointer `rs1`.
* A missing grant on the data port stalls the instruction exactly as it stalls a `lw`.

Before the loop, two `pl.sdotsp.h` with a zero input operand (`rs2 = x0`) fill the two SPRs
without changing the accumulators.

## The inner loop: output-feature-map tiling

Each input value is loaded once and reused for a tile of *N* outputs, whose partial sums
stay in registers. With *N* = 4 and two inputs per word, the loop over the input words is:

    pl.sdotsp.h.0 x0, a0, x0          ; preload SPR0 from row 0
    pl.sdotsp.h.1 x0, a1, x0          ; preload SPR1 from row 1
    lp.setupi 0, 5, CIN/2             ; the next 5 instructions repeat CIN/2 times
      p.lw          t0, 4(x_ptr!)     ; two inputs; x_ptr += 4
      pl.sdotsp.h.0 s0, a2, t0        ; (one stall here: t0 is still loading)
      pl.sdotsp.h.1 s1, a3, t0
      pl.sdotsp.h.0 s2, a0, t0
      pl.sdotsp.h.1 s3, a1, t0

Registers a0..a3 point into weight rows 0..3. Each `pl.sdotsp.h` consumes the pair that the
`pl.sdotsp.h` two places before it loaded, and loads the pair for the one two places
after it. With a memory that grants at once and answers in the next cycle, one iteration takes 6 cycles for 8 MACs: 5 instructions plus the load-use
bubble. The same tile written with `p.lw` for the weights and `pv.sdotsp.h` takes 9 cycles.
The end-to-end testbench checks both numbers exactly.

Loading two input words per iteration hides the load-use bubble. The second load issues
while the first is returning, and the eight `pl.sdotsp.h` that follow use the two words in
turn. The pointer rotation is unchanged:

    lp.setupi 0, 10, CIN/4
      p.lw t0, 4(x_ptr!)
      p.lw t1, 4(x_ptr!)
      pl.sdotsp.h.0 s0, a2, t0 ; pl.sdotsp.h.1 s1, a3, t0 ; pl.sdotsp.h.0 s2, a0, t0 ; pl.sdotsp.h.1 s3, a1, t0
      pl.sdotsp.h.0 s0, a2, t1 ; pl.sdotsp.h.1 s1, a3, t1 ; pl.sdotsp.h.0 s2, a0, t1 ; pl.sdotsp.h.1 s3, a1, t1

This loop takes 10 cycles for 16 MACs, 1.6 MACs per cycle, and needs one more register.
For comparison, the original implementation reports 566 MMAC/s on its benchmark networks
with a 380 MHz clock. That is about 1.5 MACs per cycle, with all loop overheads included.

The register budget of this tile: 4 accumulators, 4 weight pointers, the input pointer and
the input word, 10 registers in all. Larger tiles are possible until the 31 registers run out.

## tanh and sigmoid by piecewise-linear interpolation

Both functions are odd-symmetric about their centre: `tanh(-x) = -tanh(x)` and
`sig(-x) = 1 - sig(x)`. Only |x| therefore needs a table. `rnn_act_unit` does:

1. `a = |x|`, 17 bits wide so that -8.0 is representable.
2. `id = a >> S`, with S = 9 for tanh (segments of 0.125 over [0, 4)) and S = 10 for
   sigmoid (segments of 0.25 over [0, 8)). Both functions use 32 segments.
3. If `id >= 32`, the input is in the flat tail. The result is 1.0, or -1.0 / 0.0 for
   negative tanh / sigmoid.
4. Otherwise `y = (m[id]*a + q[id]*2^12 + 2^15) >> 16`. Here `m` is an unsigned 0.16 slope
   and `q` a signed 2.16 offset.
5. For negative x, `tanh = -y` and `sig = 1 - y`.

Per segment [a, a+h), the tables hold the secant slope `m = (f(a+h) - f(a))/h`. The
offset `q` is the midpoint between the largest and smallest value of `f(x) - m x` on the
segment. This choice halves the worst-case error compared with passing through the
endpoints. The 4 × 32 constants are in `rnn_pkg`, together with this formula.

Accuracy, measured over all 65,536 Q3.12 inputs against the exact functions:

| function | segments | range    | max abs error |
|----------|----------|----------|---------------|
| tanh     | 32       | [-4, 4]  | 8.6e-4        |
| sigmoid  | 32       | [-8, 8]  | 4.9e-4        |

Both errors are below 4 LSB of Q3.12. The mean square error of tanh over [-4, 4] is
6.4e-8. Published figures for this segmentation are an MSE of 9.8e-7 and a maximum error
of 3.8e-4. These two cannot both hold, since that MSE is an RMS error of 9.9e-4.
The maximum error here is close to a hard floor. On a segment of width h where the
function bends with second derivative f'', no straight line comes closer than about
f''·h²/16. For tanh with h = 0.125 that floor is 7.5e-4, near x = 0.66. The remaining
1e-4 is the rounding of the result to Q3.12. A lower maximum error needs narrower segments
where tanh bends most, not a different fit.

Sigmoid uses its own, wider range. Over [-4, 4], the result at the range edge would jump
from 0.982 to 1.0, an error of 0.018.

## Pipeline

Three stages, in order, one instruction per cycle when nothing stalls:

| stage | module(s) | work |
|-------|-----------|------|
| IF    | `rnn_if_stage`, `rnn_hwloop` | fetch over the instruction port; 3-entry prefetch FIFO; loop-back for hardware loops |
| ID/EX | `rnn_decoder`, `rnn_regfile`, `rnn_alu`, `rnn_dotp_mult`, `rnn_act_unit`, `rnn_sdot_spr`, `rnn_lsu` | decode, register read, execute, branch resolution, loop setup, data request; results written at the end of the cycle |
| WB    | `rnn_lsu` | data response: load data to a register, or to an SPR plus pointer increment |

The register file has three read ports (`rs1`, `rs2` and `rd` as accumulator) and two write
ports: A for the execute result and B for load write-back. If both write the same register
in the same cycle, A wins, because it belongs to the younger instruction.

ID/EX holds its instruction (a stall) when:

| cause | typical case |
|-------|--------------|
| the data port has not granted the request | slow or busy memory; same for `lw` and `pl.sdotsp.h` |
| a source or destination register is the target of the outstanding load | load-use: one bubble with a single-cycle memory; no forwarding of load data |
| the SPR being read is the target of the outstanding load | two `pl.sdotsp.h.N` with the same N back-to-back |
| a memory instruction meets an access whose response has not arrived | only one data access is outstanding at a time |

Taken branches and jumps resolve in ID/EX and redirect fetch. The instructions already
fetched behind them are dropped. A taken branch therefore costs a refetch, at least two cycles. `ecall`,
`ebreak` or an illegal instruction stops the core after the outstanding access completes (`halted_o`, `illegal_o`).

## Hardware loops

Two nesting levels, each with start, end and count registers:

    lp.setupi L, n, count     ; count = 12-bit immediate
    lp.setup  L, n, rs1       ; count = rs1
                              ; body = the n instructions after the setup

The loop-back decision is taken in the fetch stage. If the address being fetched is the end
of loop L and its count is above 1, the next fetch goes to the loop start and the count
decrements. The body thus runs `count` times without any branch instruction or bubble.
Level 0 is checked first, so it must be the inner loop when two loops end on the same
instruction. The setup instruction itself restarts fetch at the loop start, which costs a refetch
once per loop.

Restriction: the last instruction of a loop body must not come within two instructions
after a taken branch or jump inside the body. The loop-back is decided when that
instruction is fetched, and a redirect discards it.

## Memory ports

The instruction and data ports are structs (`mem_req_t`: `req, addr, we, be, wdata`;
`mem_rsp_t`: `gnt, rvalid, rdata`) with the usual request/grant/valid protocol:

* `req` with its address and data stays stable until `gnt`.
* `rvalid` with `rdata` (for writes, rvalid only) arrives one or more cycles after `gnt`.
* Each port has at most one access outstanding. A new request may be granted in the cycle
  the previous response arrives.

Accesses must be naturally aligned; an assertion flags misaligned ones. Bytes and halfwords
are placed on byte lanes with byte enables, and loads are sign- or zero-extended. The
memories themselves are not part of this design.

## Instruction encodings

The extensions use the custom opcode space. All encodings below are specific to this design.

| instruction | opcode | funct3 | funct7 / fields |
|---|---|---|---|
| `p.lb/lh/lw/lbu/lhu rd, imm(rs1!)` | 0001011 | as the RV32I load | I-type; `rs1 += imm` after the access |
| `p.sb/sh/sw rs2, imm(rs1!)` | 0101011 | as the RV32I store | S-type; `rs1 += imm` |
| `p.mac rd, rs1, rs2` | 0110011 (OP) | 000 | 0100001 |
| `pv.sdotsp.h rd, rs1, rs2` | 1010111 | 000 | 1011100 |
| `pl.sdotsp.h.0 rd, rs1, rs2` | 1010111 | 000 | 1011101 |
| `pl.sdotsp.h.1 rd, rs1, rs2` | 1010111 | 000 | 1011111 (bit 1 selects the SPR) |
| `pl.tanh rd, rs1` | 1010111 | 000 | 0111100, rs2 = 0 |
| `pl.sig rd, rs1` | 1010111 | 000 | 0111101, rs2 = 0 |
| `lp.setupi L, n, count` | 1111011 | 101 | `[31:20]` count, `[19:15]` n, `[7]` L |
| `lp.setup L, n, rs1` | 1111011 | 100 | `[31:20]` n, `[19:15]` rs1, `[7]` L |

Also supported: all of RV32I (`fence` is a no-op) and the RV32M multiplies. Not supported,
and decoded as illegal: division, compressed instructions, floating point and CSR access.

## Source files

| file | contents |
|------|----------|
| `rtl/rnn_pkg.sv` | opcodes, enums, the decoded-control and memory-port structs, activation tables |
| `rtl/rnn_core.sv` | top level: pipeline control, hazards, operand and result multiplexers |
| `rtl/rnn_if_stage.sv` | fetch, prefetch FIFO, redirects |
| `rtl/rnn_hwloop.sv` | hardware-loop registers and loop-back decision |
| `rtl/rnn_decoder.sv` | instruction decoder |
| `rtl/rnn_regfile.sv` | 32 × 32 register file, 3 read / 2 write ports |
| `rtl/rnn_alu.sv` | integer ALU and branch comparison |
| `rtl/rnn_dotp_mult.sv` | multiplier: RV32M, `p.mac`, sum-of-dot-product |
| `rtl/rnn_sdot_spr.sv` | the two weight SPRs |
| `rtl/rnn_act_unit.sv` | tanh / sigmoid unit |
| `rtl/rnn_lsu.sv` | load-store unit |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_rnn_lstm.sv` | an LSTM layer running on the core over several time steps |
| `tb/tb_mem_model.sv` | behavioural memory with random grant delay and response latency |
| `tb/tb_rv_asm_pkg.sv` | instruction encoders used to assemble test programs |

Each file starts with a description of its interface and timing.

## Simulation

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself. A watchdog
fails it if it hangs. With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
      rtl/rnn_pkg.sv tb/tb_rv_asm_pkg.sv tb/tb_rnn_core.sv --top tb_rnn_core -o sim
    ./obj_dir/sim

`-y` lets Verilator find the other modules by file name. The packages come first on the
command line. A unit testbench needs only `rtl/rnn_pkg.sv` and `tb/tb_<module>.sv`, with
`--top tb_<module>`. `-Wno-fatal` keeps width-style warnings in the test code from
stopping the build.

`tb_rnn_core` assembles its program in SystemVerilog with `tb_rv_asm_pkg` and runs it twice.
The first run uses ideal memories; the second uses memories that withhold 30–40 % of grants
and add up to two cycles of latency. The program computes a 128-input, 64-output fully
connected layer three times: with `pl.sdotsp.h`, with `pl.sdotsp.h` and two input words per
iteration, and with `pv.sdotsp.h`. It then applies `pl.tanh`/`pl.sig` to every output. It finishes with a set of base-instruction checks. The
testbench compares every result with a reference computed in the testbench and checks the
per-iteration cycle counts. It also counts each pipeline event and fails if one never
occurs: grant stall, load-use stall, SPR stall, loop-back, taken branch, `pl.sdotsp.h`,
activation. With ideal memories the whole program takes 22,200 cycles for 20,915
instructions.

`tb_rnn_lstm` runs an LSTM layer with 32 inputs and 32 cells for four time steps; the sizes
are the testbench's own choice. The four gate pre-activations come from one 128 × 64
matrix-vector product over `[x_t; h_{t-1}]` plus bias, using the `pl.sdotsp.h` tile loop.
A 19-instruction hardware loop then applies `pl.sig`/`pl.tanh`, updates the cell state
`c_t = f∘c_{t-1} + i∘g` and writes `h_t = o∘tanh(c_t)` back into the input vector. Each
pre-activation is checked bit-exactly. The states are checked against real-valued
functions, with a worst observed error of about 7e-4. With ideal memories one step takes
7,807 cycles for 8,192 MACs.

The unit testbenches sweep the activation unit over all 2 × 65,536 inputs and the
multiplier and ALU over random and corner operands. They run the fetch stage and the LSU
against memories with random grants and latencies. The decoder's immediates are checked on
random instructions. The loop controller runs 200 random two-level nests with fetch
bubbles, and every address's fetch count is checked.

## How far this follows the published design, and where it departs

Taken from the published description: the behaviour of `pl.sdotsp.h.0/.1`, including the
two alternating SPRs, the SPR as multiplier operand A, the post-increment of the weight
pointer and the stall on a missing grant. Also taken from it: the single-cycle `pl.tanh`/
`pl.sig` with 32 segments and symmetry, tanh over [-4, 4], the Q3.12 format, the Xpulp-style
instructions the kernels use, and the tiled inner loop with its single load-use bubble.

This design's own choices:

* **Three pipeline stages** instead of the four of the core it is modelled on. There is no
  instruction compression, divider, floating-point unit, CSRs, interrupts or debug.
* **All instruction encodings.**
* **Sigmoid over [-8, 8]**, and the table-fitting method. The maximum tanh error is 8.6e-4
  here against about 3.8e-4 reported for the original tables.
* **Saturation at `id >= 32`.** The published pseudocode compares `id > M`, which would read
  one entry past a 32-entry table.
* **Hazard handling**: no load-data forwarding, one outstanding data access, and the
  write-port priority.
* **Hardware-loop details**: the loop-back is decided at fetch, with the branch restriction
  above; a setup costs a redirect.
* **Aligned memory accesses only.**

Area, clock frequency and energy figures are properties of a synthesised and
placed-and-routed implementation in a specific technology. This RTL has not been through
such a flow.
