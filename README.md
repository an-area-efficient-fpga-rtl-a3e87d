# A time-multiplexed FPGA overlay built from DSP-slice functional units

A spatially configured overlay gives every operation of a compute kernel its own
functional unit (FU) and its own routed link. It accepts a new input set every
cycle, but it is large. This overlay runs the same feed-forward kernels, such as
image stencils or polynomial evaluation, on a much smaller array.

- **One FU per schedule stage.** The kernel's data-flow graph (DFG) is scheduled
  as soon as possible (ASAP). Every operation of one schedule stage runs on the
  same FU, one operation per cycle. A graph of depth D uses D FUs.
- **Fixed links.** Each FU feeds the next over a fixed, unprogrammable link, so
  the FUs form a linear pipeline.
- **Small memories.** An FU stores only the few instructions of its own stage. Its
  instruction memory and register file are 32-entry LUT RAMs.
- **One DSP slice per FU.** Each FU's ALU is a DSP48E1-style slice driven
  straight from the instruction bits, with no decoder.

The price is throughput. A new iteration can start only every *II* cycles (the
initiation interval), not every cycle. Several pipelines are therefore placed
side by side, and a graph deeper than one pipeline runs on two cascaded
pipelines.

This is SystemVerilog RTL of that architecture: the FU, the pipeline with its
FIFO channels, and the overlay with its context memory and per-pipeline data
memories. It is synthesizable, and verilator simulates it.

```
            host / DMA side (outside this RTL)
     ctx_* |            mem_*[p], run_*             | run_done[p]
           v                 v                      ^
   +---------------+  +-------------+       +-------------+
   | context_mem   |  |pipe_data_mem|  ...  |pipe_data_mem|   one single-port RAM
   | 512 x 40 BRAM |  |  + engine   |       |  + engine   |   + streamer per pipeline
   +-------+-------+  +--+-------^--+       +--+-------^--+
           | 40-bit      |       |             |       |
           | daisy chain v       |   cascade   v       |
           |      +----------------+ ------> +----------------+
           +----->| overlay_pipeline|        | overlay_pipeline|
                  |  fifo_channel   |        |  fifo_channel   |
                  |  tm_fu  (tag 1) |        |  tm_fu  (tag 9) |
                  |  tm_fu  (tag 2) |        |   ...           |
                  |   ...           |        |  tm_fu (tag 16) |
                  |  tm_fu  (tag 8) |------->|  fifo_channel   |
                  |  fifo_channel   | ctx    +----------------+
                  +----------------+
```

## 1. Mapping a kernel: stages, loads and the initiation interval

The 'gradient' stencil point shows how a kernel maps:
`b = (c-a0)^2 + (c-a1)^2 + (c-a2)^2 + (c-a3)^2`.

Its DFG has 5 inputs and 11 operations. An ASAP schedule gives 4 stages:

| stage / FU | loads (RF words) | instructions              | results sent on |
|------------|------------------|---------------------------|-----------------|
| FU 0       | 5 (a0,a1,c,a2,a3)| 4 x SUB                   | 4               |
| FU 1       | 4                | 4 x MUL (square)          | 4               |
| FU 2       | 4                | 2 x ADD                   | 2               |
| FU 3       | 2                | 1 x ADD                   | 1               |
| FU 4..7    | 1                | 1 x bypass                | 1               |

Every instruction produces exactly one word, and that word goes to the next FU's
register file, where it is stored in arrival order. So result k of stage s
becomes register Rk of stage s+1.

A value that a later stage still needs is carried forward with a *bypass*
instruction: an ordinary DSP instruction that passes its C operand through.
FUs beyond the graph depth also get a single bypass.
`tb/kernels_pkg.sv` holds this program as context words, together with a
12-stage kernel used to test cascading.

One iteration of an FU takes L load cycles and N issue cycles, followed by a
drain. The II of a pipeline is set by its slowest stage and by the hand-over
between stages (section 3). For gradient, this RTL sustains one result every
**14 cycles**, a figure measured in `tb_overlay_pipeline`. Stage 1 is the
bottleneck. The paper's idealised schedule gives 11 cycles. It assumes a 2-cycle
issue-to-next-FU latency, while this RTL's is 8 cycles; section 3 shows how
most of that difference is hidden.

## 2. The functional unit (`tm_fu`)

```
ctx_in(40) --[reg]--------------------------------------------------> ctx_out(40)
     | tag match (fu_ctrl)
     v
  IC/PC mux -[reg]-> IM 32x32 -[reg]-> src_a/src_b -[reg]-> RF 32x32 -[reg]-> input_map -> A,B
                                   \-> cfg(21) -[reg]-[reg]-----------------/   RF port B -> C
in_valid/in_data -[reg]-> RF write port (address = DC)             fu_alu: A1/B1, A2/B2, C regs,
                                                                   x/+/- , P reg, out reg -> out_data
issue --[8-stage delay]--> out_valid
```

- **Instruction memory (`instr_mem`).** Single port, 32 x 32 bits. It is written
  only while a context loads, at address IC (instruction counter). While the FU
  executes it is read at address PC (program counter). The two addresses are
  multiplexed onto one port.
- **Register file (`reg_file`).** Port A is read/write and port B is read-only.
  Port A writes incoming data at address DC (data counter) while the FU loads,
  and reads operand 1 while it executes. Port B reads operand 2.
- **Input mapping (`input_map`).** It turns the two 32-bit operands into the
  slice's 30-bit A and 18-bit B inputs. In the default form, operand 1 is
  sign-extended to 48 bits and split over A:B. That form is used for add,
  subtract and logic. In the multiply form, A = operand 1[24:0] and
  B = operand 2[17:0], because the DSP multiplier is 25 x 18 bits. One
  configuration bit selects zero-extension instead.
- **ALU (`fu_alu`).** The DSP slice with the registers the paper places around
  it:
  - a 32-bit register at the C input, for pipeline balancing;
  - the configuration register;
  - a 32-bit output register.

  The slice model covers the part of the DSP48E1 the FU uses:
  - X multiplexer: 0, M, P or A:B;
  - Y multiplexer: 0, all ones or C;
  - Z multiplexer: 0, P or C;
  - ALUMODE add, Z-minus and minus-Z, and the two-input logic functions;
  - INMODE selects of A1/A2 and B1/B2, and zeroing of A.

  The multiplier's M register is bypassed. The result is the low 32 bits of P.

### Instruction format

```
 31    30 ............................................ 10  9 .. 5   4 .. 0
 spare | inmode_zero | INMODE(5) | OPMODE(7) | ALUMODE(4) | rsvd | carryin | map_uns | map_mul | src_a | src_b
```

The 21-bit configuration field has the widths printed in the paper's FU
diagram: 1+1 into the input mapping, then 1, 1, 4, 7 and 5 into the DSP, plus a
1-bit INMODE multiplexer select. The meaning of each 1-bit field and the bit
order are this design's choice. `rsvd` is carried but has no function.
`overlay_pkg` defines the fields and four ready-made instructions:

| instruction | OPMODE {Z,Y,X}     | ALUMODE | carryin | result                        |
|-------------|--------------------|---------|---------|-------------------------------|
| `insn_add`  | C, 0, A:B          | 0000    | 0       | op1 + op2                     |
| `insn_sub`  | C, 0, A:B          | 0001    | 1       | op1 - op2 (= -Z + X + 1 - 1)  |
| `insn_mul`  | 0, M, M (map_mul)  | 0000    | 0       | low 32 bits of op1[24:0]*op2[17:0] |
| `insn_byp`  | C, 0, 0            | 0000    | 0       | op2 (bypass to the next stage)|

op1 is `RF[src_a]` and op2 is `RF[src_b]`, which also drives the C input.

### Load, execute, drain (`fu_ctrl`)

1. **Load.** Each cycle in which `in_valid` is high, the word is written at DC
   and DC increments. The first cycle with `in_valid` low after at least one
   word ends the load. This is why every producer sends one iteration's words
   back to back.
2. **Execute.** It starts when three conditions hold at once: the load has
   ended, the downstream stage accepts a batch (`ds_ready`), and none of this
   FU's earlier results are still in flight. PC then runs from 0 to IC-1 and
   issues one instruction per cycle.
3. **Drain.** The FU waits 3 cycles, until the last operand has been read from
   the register file. It then clears DC and goes back to loading. The same
   instructions run again for the next iteration.

IC is 5 bits wide. After 32 writes it wraps to 0, so the last index is always
IC-1 modulo 32. A full IM of 32 instructions therefore works.

### Timing

| cycle after issue | 0  | 1       | 2       | 3              | 4           | 5–6        | 7          | 8        |
|-------------------|----|---------|---------|----------------|-------------|------------|------------|----------|
| what happens      | PC | IM addr | IM data | RF addr + cfg  | RF data     | A1/B1, A2/B2 | P register | out_data |

An instruction issued in cycle c appears on `out_data` with `out_valid` in cycle
c+8. Results of one iteration leave as one unbroken burst.

### Back-pressure between stages

An FU gives two readiness outputs:

- **`ready`**: loading and empty. This is the back-pressure to the input FIFO,
  whose data arrives in the same cycle.
- **`ready_ahead`**: also high while the FU drains, and while it has at most 4
  instructions left to issue. An upstream FU's results arrive 8 cycles after it
  issues, so the upstream FU may start this early. By the time its data lands,
  this FU is back in its load phase. This overlap is what keeps the II at 14
  rather than about 21 cycles for gradient.

The last FU checks that its output FIFO has room for a 32-word burst. Because
every FU waits until its own earlier results have left before it issues again,
nothing is ever dropped. Assertions in `fu_ctrl` and `tm_fu` check two rules: no
data arrives outside a load phase, and the shared RF port is never used for a
write and an operand read in the same cycle.

## 3. Configuration: tags and the daisy chain

A context word is 40 bits: an 8-bit tag and a 32-bit instruction. Words are
shifted down a chain that passes through one register in every FU. An FU stores
a word whose tag equals its own at IM[IC], then increments IC. Tag 0 marks an
empty slot, so tags start at 1. In `overlay_top`, FU k of pipeline p has tag
p*8+k+1, and one chain passes through both pipelines.

`context_mem` holds up to 512 context words and sends n of them one per cycle.
Loading all 8 FUs of a pipeline with 32 instructions each therefore takes about
256 cycles plus the 8-cycle chain length. At 300 MHz that is the paper's
0.85 µs. The largest kernel context the paper reports, 82 words, takes 82 cycles.

A context switch is a reset of the overlay followed by a new context load. Reset
clears IC, DC, the control state and the FIFOs.

## 4. Pipeline and FIFO channels (`overlay_pipeline`, `fifo_channel`)

`fifo_channel` is a 64-entry distributed-RAM FIFO with two read modes:

- **Framed**, for the input. `frame_len` words are sent as one back-to-back
  burst, but only when FU 0 is ready and the whole frame is present. After a
  frame, `rd_valid` stays low for at least one cycle.
- **Streaming**, for the output. It uses ordinary valid/ready.

`frame_len` is a run-time input because the FIFO must know how many words make
up one iteration. The paper does not say how the input FIFO learns this.

## 5. The overlay (`overlay_top`, `pipe_data_mem`, `context_mem`)

Each pipeline has a single-port data RAM of 1024 x 32. While no run is active,
the host reads and writes it through the `mem_*` ports; these stand in for the
DMA of the processor system. A pulse on `run_start` starts a run on every
pipeline:

1. Each engine streams `run_n_in` words from address 0 into its pipeline.
2. It writes `run_n_out` results from `run_out_base` upward. Because the RAM has
   one port, a result write takes priority over an input read.
3. When all words are done, `run_done[p]` rises.

Two modes:

- **`cascade = 0`.** Every pipeline runs its own copy of the kernel on its own
  data. This is replication, to raise throughput.
- **`cascade = 1`.** Pipeline 0's output FIFO feeds pipeline 1's input FIFO, so
  a graph of up to 16 stages runs. Pipeline 0's RAM supplies the inputs and
  pipeline 1's RAM receives the results. Set `frame_len[1]` to the number of
  words FU 7 sends per iteration.

## 6. What follows the paper and what does not

**Taken from the paper:**
- 32-bit data;
- the 40-bit context word with its 8-bit tag;
- a daisy-chained instruction port;
- a 5-bit IC;
- a 32-entry single-port IM and a 32-entry RF with a shared read/write port;
- the DC/valid load protocol and the PC-driven execution with drain;
- a DSP48E1-based ALU with a C balancing register, an output register and a
  configuration register;
- the configuration widths 21 = 1+1+1+1+4+7+5+1;
- no instruction decoder;
- back-pressure from FU 0 to the input FIFO;
- input and output distributed-RAM FIFOs;
- 8 FUs per pipeline;
- replicated pipelines, cascading of two pipelines, one shared context BRAM and
  one single-port data BRAM per pipeline.

**This design's choices:**
- the meaning of the 1-bit configuration fields, and the input-mapping function;
- the pipeline register count, which gives an 8-cycle FU latency and an II of 14
  for gradient where the paper's schedule gives 11;
- the downstream-ready and early-ready handshake;
- tag 0 as the empty slot;
- a context switch done as reset and reload;
- the FIFO depth of 64 and the `frame_len` framing;
- 2 pipelines and the context and data RAM depths;
- the streaming engine;
- the cascade wiring.

**Not included:** the processor, the DRAM controller and external memory, the
AXI ports and DMA, and any vendor primitive. RAM32M and DSP48E1 are written as
plain RTL that a synthesis tool can map to those primitives. Nothing constrains
a synthesis tool to reach the paper's 300 MHz.

## 7. Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench              | what it establishes |
|------------------------|---------------------|
| `tb_instr_mem`, `tb_reg_file` | write and read-back of every entry, dual-port reads |
| `tb_input_map`         | A/B mapping in all four modes against a reference |
| `tb_fu_alu`            | 9 operation types, one per cycle, with a latency of exactly 4 cycles |
| `tb_fu_ctrl`           | tag filtering, IM write addresses, DC, waiting for downstream and in-flight results, issue count, drain and the two readies |
| `tb_tm_fu`             | one FU with 6 instructions over 6 iterations: values, burst shape, issue-to-output latency of 8, back-pressure, context forwarding |
| `tb_fifo_channel`      | both read modes, ordering, thresholds, frame gap, a partial frame held back |
| `tb_context_mem`       | word order and timing on the chain, tag 0 when idle |
| `tb_pipe_data_mem`     | streaming out and back under random back-pressure, result placement |
| `tb_overlay_pipeline`  | gradient on one 8-FU pipeline, 24 iterations, II = 14 |
| `tb_overlay_top`       | the default-size overlay: replicated gradient on 2 pipelines, then reset, a new context and a 12-stage kernel in cascade mode; it counts context loads, back-pressure, downstream waits, bypasses, cascade transfers and the context switch, and fails if any of them never happens |

The benchmark kernels the paper evaluates (chebyshev, sgfilter, mibench, qspline
and poly5 to poly8) are not simulated, because their graphs are not given. By
graph depth they all fit the default overlay: depths of 6 to 8 fit one
pipeline, and depths of 9 to 13 fit two cascaded pipelines.

## 8. Simulating

All RTL is in `rtl/` (one module or package per file). Testbenches and the test
kernels are in `tb/`. With verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_overlay_top \
    rtl/overlay_pkg.sv tb/kernels_pkg.sv tb/tb_overlay_top.sv
./obj_dir/Vtb_overlay_top
```

The other files are found through `-Irtl -Itb`. For any other testbench,
replace the name; `kernels_pkg.sv` is needed only by the pipeline and overlay
tests. To write a new kernel:

1. Schedule its DFG ASAP.
2. For each stage, list the instructions with their RF operand indices. The
   inputs of stage s+1 are the results of stage s, in issue order.
3. Add bypasses for values needed later.
4. Tag each instruction with its FU's tag and load the words through
   `context_mem`.
