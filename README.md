# A transport-triggered processor for programmable turbo decoding

Turbo decoding is usually built as fixed hardware. This design is a small programmable
processor for it instead. Changing the program changes the component-decoder algorithm
(max-log-MAP, linear-log-MAP, constant-log-MAP or log-MAP), the interleaver and the windowing.
A few special function units make the processor fast enough. The largest of them performs one
whole step of the turbo-code trellis per operation.

The processor follows the transport-triggered architecture (TTA) template. An instruction
does not name operations. It names *data transports*: one move per bus per cycle, from a
source port to a destination port. Writing a unit's *trigger* port starts that unit's
operation, and its result appears on the unit's output port a fixed number of cycles later.
The compiler, or here the programmer, schedules every transfer. So the datapath needs no
register-file bypass network and no hazard detection.

The RTL is SystemVerilog (IEEE 1800-2017). It is written for synthesis, and the memories are
plain arrays.

## The decoding problem in brief

An LTE turbo code has two 8-state recursive systematic convolutional encoders. The decoder
has two soft-in soft-out (SISO) component decoders that exchange extrinsic LLRs through the
QPP interleaver `f(x) = (f2*x^2 + f1*x) mod N` and its inverse. One pass through both is a
full iteration; one SISO pass is a half iteration. Each SISO pass runs a MAP recursion over
the trellis:

* forward: `alpha_k(s') = max*(alpha_{k-1}(s) + gamma(s->s'))` over the two branches into `s'`;
* backward: `beta_k(s) = max*(beta_{k+1}(s') + gamma(s->s'))` over the two branches out of `s`;
* output LLR: max* over all branches of `alpha + gamma + beta`, for bit 1 against bit 0.

`gamma(u,p) = u*(La + Ls) + p*Lp`, with `u, p` = +-1 for the information and parity bits.
`La` is the a priori LLR, `Ls` the systematic LLR and `Lp` the parity LLR. Only two branch
metrics differ in magnitude, `La+Ls+Lp` and `La+Ls-Lp`; the others are their negatives.

`max*(x,y) = max(x,y) + corr(|x-y|)` is the Jacobian logarithm. The four algorithms differ
only in `corr`:

| mode (opcode) | algorithm        | correction used here (3 fractional bits)                 |
|---------------|------------------|-----------------------------------------------------------|
| 1 (0)         | max-log-MAP      | 0                                                         |
| 2 (1)         | linear-log-MAP   | `0.25*(2.5-d)` for `d <= 2.5`, else 0 (uses a multiply)   |
| 3 (2)         | constant-log-MAP | `0.5` for `d <= 1.5`, else 0                              |
| 4 (3)         | log-MAP          | `ln(1+exp(-d))` from a 22-entry table, steps of 1/8       |

The correction constants are this design's own choice. The source only names the algorithms
and gives the constant-log-MAP form without values. They are localparams in `tta_pkg`.

Metrics are normalised every step by subtracting the metric of state 0 from all eight. State
0 then always holds 0 and is never stored. A forward pass over a 6144-bit block therefore
stores seven vectors of 6144 metrics. The backward pass needs no storage: each output LLR is
formed as soon as its beta column exists.

## The METRIC unit: one trellis step for both directions

`metric_fu` is the heart of the design. Its inputs are eight state metrics, `La`, `Ls` and
`Lp`. The opcode selects the mode. Its outputs are the eight next metrics.

The 8-state trellis splits into four butterflies. Butterfly `j` (states counted from 0) takes
predecessors `2j` and `2j+1` to successors `j` and `j+4`, and all four of its branches use
`+-g_j`:

    out[j]   = max*(m[2j] + g_j,  m[2j+1] - g_j)
    out[j+4] = max*(m[2j] - g_j,  m[2j+1] + g_j)

`g_j` is either `La+Ls+Lp` or `La+Ls-Lp`, with a sign set by the trellis. The hardware is a
two-adder branch-metric front end, one negation, eight adders and eight max* units. Which
`g_j` each butterfly uses is computed at elaboration from the encoder equations in
`tta_pkg::trellis_next` and `trellis_parity`. Those equations use feedback `1+D^2+D^3` and
parity `1+D+D^3`.

**The same unit runs the backward recursion.** Mirror a butterfly and the same branch metrics
connect the same state pairs in the other direction. So the program only re-orders the unit's
inputs and outputs:

| direction | port `2j`    | port `2j+1`    | `out[j]` is   | `out[j+4]` is    |
|-----------|--------------|----------------|---------------|------------------|
| forward   | alpha(2j)    | alpha(2j+1)    | alpha'(j)     | alpha'(j+4)      |
| backward  | beta(j)      | beta(j+4)      | beta'(2j)     | beta'(2j+1)      |

For example (states counted from 1): `alpha(3), alpha(4) -> alpha(2), alpha(6)` forward, and
`beta(2), beta(6) -> beta(3), beta(4)` backward. `tb_metric_fu` checks both directions
against a recursion that enumerates all 16 branches on its own.

## MAX7

`max7_fu` returns `max*(x0, max*(x1, ... max*(x5, x6)))` in the selected mode. The program
forms the sums `alpha + gamma + beta` for the branches of one trellis step and feeds them in.
The normalisation removes one of the eight candidates, so seven inputs are enough. In
max-log-MAP mode the result is the plain maximum.

## Processor organisation

| unit                     | count | module                      | ports (operand / trigger -> result)                      | latency |
|--------------------------|-------|-----------------------------|----------------------------------------------------------|---------|
| METRIC                   | 1     | `metric_fu`                 | 10 operands (m0..7, La, Ls) / Lp + mode -> 8 metrics     | 1/3/2/3 by mode |
| MAX7                     | 1     | `max7_fu`                   | 6 operands / x6 + mode -> 1                              | 1/3/2/3 by mode |
| ALU                      | `NUM_ALU`=1 | `alu_fu`              | in1 / in2 + op -> 1                                      | 1 |
| load/store unit          | `NUM_LSU`=3 | `lsu_fu` + `data_mem` | store data / address + LDW/STW -> loaded word            | load 3, store 1 |
| input STREAM             | `NUM_SIN`=8 | `stream_in_fu` + `sync_fifo` | - / READ or STATUS -> sample, fill level           | 1 |
| output STREAM            | `NUM_SOUT`=1 | `stream_out_fu` + `sync_fifo` | - / value + WRITE or STATUS -> free space        | 1 |
| register files           | `NUM_RF`=4 x 32 | `tta_rf`          | 1 write, 1 read port each                                | 0 |
| boolean register file    | 1 x 2 | `bool_rf`                   | 1 write, 1 read; all bits guard moves                    | 0 |
| global control unit      | 1     | `gcu` + `tta_imem`          | RA / target + JUMP or CALL                               | next cycle |
| buses                    | `NUM_BUSES`=30 | `tta_interconnect` | one guarded move per bus per cycle                   | - |

These counts follow the source: three LSUs, eight input and one output STREAM units, and the
30 buses of its processor figure. That figure shows a partial processor with a sparse,
hand-tuned socket pattern. This RTL connects every port to every bus instead, so any schedule
that fits the bus count is legal. One ALU and four register files are this design's choice.
The source adds units beyond the basic set but does not give their number.

### Instruction format

An instruction is `NUM_BUSES` move slots of 40 bits (`tta_pkg::move_t`). Slot `b` sits in bits
`[40*b +: 40]`:

| field       | bits | meaning                                                               |
|-------------|------|-----------------------------------------------------------------------|
| `guard_en`  | 1    | execute only if the guard holds                                       |
| `guard_inv` | 1    | guard on the inverted boolean                                          |
| `guard_idx` | 1    | which boolean register                                                 |
| `src_imm`   | 1    | source is the 20-bit field, sign-extended                              |
| `src`       | 20   | immediate, or a source port id in the low 12 bits                      |
| `dst`       | 12   | destination port id; 0 means an empty slot                             |
| `opc`       | 4    | operation code, used by trigger ports                                  |

The port ids are listed in `tta_pkg`, for example `SRC_METRIC+i`, `DST_METRIC+k`,
`DST_RF+64*file+reg`. A register file covers a range of ids, and the offset into that range
is the register number.

Program rules, checked by assertions: one write per destination per cycle, and one register
per register-file read port per cycle. A source may feed any number of buses. An operand
written in the same cycle as its trigger is used by that operation. A result stays on its
output port until the unit's next result replaces it. So a value may be read several cycles
after it appears, as long as the unit has not been triggered again.

### Timing

* The instruction at `pc` executes in the cycle the pc points at it. The instruction memory
  reads asynchronously.
* A `JUMP`/`CALL` move sets the next pc. There are no delay slots.
* A result of latency L, triggered in cycle t, is readable by moves in cycle t+L. METRIC and
  MAX7 take 1, 3, 2, 3 cycles in modes 1..4. Two results of one unit must not fall due in the
  same cycle; an assertion in `mode_delay` checks this.
* LSU: a load triggered in cycle t is readable in t+3. A store writes memory at the end of
  cycle t.

### Global lock

A STREAM read from an empty input FIFO, or a STREAM write to a full output FIFO, raises
`lock`. While `lock` is high the current instruction does nothing and is issued again in the
next cycle. Every register in the processor holds: the pc, the operand, result and pipeline
registers, the register files and memory writes. So FIFO back-pressure never upsets a static
schedule. The lock is this design's own mechanism; the source says nothing about empty or
full buffers.

### Using the top level

`tta_turbo_top`:

1. Hold `rst_n` low. Write the program with `imem_we`, `imem_addr` and `imem_wdata`, one
   instruction per cycle.
2. Release `rst_n`. Execution starts at address 0.
3. Push LLRs into the input FIFOs (`sin_push`, `sin_data`, `sin_full`). Pop results from
   the output FIFO (`sout_pop`, `sout_data` show-ahead, `sout_empty`).

A program usually ends in a self-jump. `pc` and `lock` are outputs for observation.

## What the source leaves open, and the choices made

* **The decoder software.** The source compiles a C turbo decoder onto this processor with
  the TTA co-design toolset. That program is not published, so it is not part of this RTL.
  This covers the sliding windows, both SISO passes, the extrinsic exchange and QPP interleave
  address generation (with a per-block-size `f1/f2` look-up table from 3GPP TS 36.212 kept in
  data memory). The processor has everything that program needs: a multiply for the QPP
  polynomial, three LSUs, the streams, METRIC, MAX7, guards and jumps. To show that, one
  testbench hand-assembles a complete turbo decoder without sliding windows (see
  Verification).
* **Cycle counts.** The source reports 39,226 cycles per full iteration of a 6144-bit block
  in max-log-MAP mode: 31.3 Mbit/s at 200 MHz, about 3.2 cycles per trellis stage. The other
  modes take up to 834,253 cycles. Those numbers measure the compiled program with its
  branches, not the hardware alone, so they cannot be checked here. The hand-written test
  decoder issues one ALU operation per instruction and needs about 221 cycles per bit per
  iteration, against about 6.4 for the source's compiled program.
* **Inconsistencies in the source.** Its backward-metric equation list repeats the
  `beta_1` line for states 5 to 8. It also gives `beta_4` a branch metric that disagrees with
  its butterfly drawing. This design follows the drawing and the 3GPP trellis, which agree
  with each other. The source's introduction calls `LcI1` the first parity LLR. Its
  branch-metric equations and the METRIC description, however, give the information-bit sign
  to two inputs and the parity sign to the third. The RTL follows the latter: a priori and
  systematic LLRs share the sign of `u`.
* **Widths and sizes.** These are all this design's own: 32-bit words, LLRs with 3
  fractional bits, 131,072-word data memory (enough for the seven 6144-word metric vectors
  and the LLR vectors), 1024-instruction program memory, 64-word FIFOs, 2 boolean registers,
  4 x 32 general registers.
* **Per-mode latencies** of METRIC and MAX7 (1/3/2/3) and the correction constants are also
  this design's choice. The source only says the latencies differ by mode.

## Verification

Each unit has a self-checking testbench in `tb/`. The reference models in `tb/tb_ref_pkg.sv`
are written independently of the RTL. The log-MAP correction is computed there with `$ln`
and `$exp`. The trellis is enumerated from the encoder equations, branch by branch.

| testbench               | what it checks                                                                  |
|-------------------------|---------------------------------------------------------------------------------|
| `tb_metric_fu`          | random forward and backward steps in all modes; exact latency; operand persistence; stall |
| `tb_max7_fu`            | random sets in all modes, near-ties; exact latency; back-to-back issue          |
| `tb_alu_fu`             | all operations against a model; one-cycle latency; stall                        |
| `tb_lsu_fu`             | one store per cycle; pipelined loads, exactly 3 cycles; stalled store           |
| `tb_data_mem`           | three random ports; read-before-write; write priority; read hold                |
| `tb_sync_fifo`          | queue model with fill/drain phases; flags and count                             |
| `tb_stream_in_fu`, `tb_stream_out_fu` | one sample per cycle; lock on empty / full; status                |
| `tb_tta_rf`, `tb_bool_rf`, `tb_gcu`, `tb_tta_interconnect` | register semantics, jumps/calls, guarded routing |
| `tb_tta_turbo_top`      | the whole processor at its default parameters, see below                        |
| `tb_turbo_iteration`    | complete turbo decoder iterations as a program, see below                      |

`tb_tta_turbo_top` contains a small assembler. It builds a program for the forward half of a
component decoder and runs it from the instruction memory. Each trellis step does three
STREAM reads, one METRIC operation in the selected mode, normalisation on the ALU, seven
stores to the seven metric vectors, seven STREAM writes, a counter, a compare into a boolean
register and a guarded jump. At the end, the last step's seven metrics are loaded back with
the three LSUs and reduced by MAX7. The testbench runs a 40-bit block in each of the four
modes, then a full 6144-bit block in max-log-MAP mode: about 132,000 cycles and 43,009
outputs. Every output is compared with the reference. The inputs arrive with random gaps, and
the output FIFO is drained late. The testbench counts locks on empty inputs, locks on a full
output, jumps taken and not taken, and each mode, and fails if any of them never happened.

`tb_turbo_iteration` uses the same kind of assembler to build a whole turbo decoder. Its
input loop reads the systematic LLRs `Ls` and the two parity streams `Lp1` and `Lp2` into
data memory. In the same loop it builds the QPP interleaver table
`pi(k) = (f1*k + f2*k^2) mod K` with the recursion `pi(k+1) = pi(k) + g(k)`,
`g(k+1) = g(k) + 2*f2`. Each sum is reduced mod `K` by a compare and a guarded subtract.
Each iteration then runs component decoder 1 in natural order and decoder 2 in interleaved
order. Each component decoder has two passes:

* **Forward pass.** It gathers `La`, `Ls` and `Lp` with the three LSUs (through `pi` for
  decoder 2) and keeps a copy for the backward pass. It does one METRIC step and stores the
  seven normalised forward metrics; index 0 holds the starting metrics.
* **Backward pass.** It runs from the end of the block, starting from equal metrics (no
  termination). It reloads the step's inputs and forward metrics, then forms `La+Ls+Lp` and
  `La+Ls-Lp` on the ALU. For each bit value it adds forward, branch and backward metrics over
  the eight branches. MAX7 reduces the first seven sums. A second MAX7 operation combines
  that result with the eighth sum, with the five spare inputs set to a very negative value.
  The LLR is the difference of the two results. The extrinsic value `LLR - La - Ls` is
  stored: decoder 1 stores it in natural order, and decoder 2 stores it de-interleaved,
  together with its LLR. A backward METRIC step gives the next backward metrics. They are
  normalised on the ALU and written straight back into METRIC's inputs in the backward order.

After each iteration, the de-interleaved LLRs go to the output stream in natural order. The
assembler rejects any instruction that writes one port twice, writes a register file twice
or reads two registers of one file. Every output is compared with a reference turbo decoder
built from the same fixed-point operations. The runs are two iterations of a 40-bit block
(`f1=3, f2=10`) in all four modes, then two iterations of a 6144-bit block (`f1=263, f2=480`)
in max-log-MAP mode, about 2.7 million cycles.

To simulate with Verilator, for example the end-to-end test:

    verilator --binary --timing --assert -Irtl -y rtl rtl/tta_pkg.sv tb/tb_ref_pkg.sv \
              tb/tb_tta_turbo_top.sv --top-module tb_tta_turbo_top
    ./obj_dir/Vtb_tta_turbo_top

Every testbench prints `TB_RESULT checks=N failures=M` at the end.

## Files

`rtl/tta_pkg.sv` holds the types, the port ids, the opcodes, the trellis and max*.
`rtl/mode_delay.sv` delivers a result after a per-mode latency; METRIC and MAX7 use it. Each
other file in `rtl/` holds one unit, named as in the table above. `rtl/tta_turbo_top.sv`
connects them.
