# A soft CGRA overlay for offloading nested loops

A compute-heavy nested loop can be offloaded to an FPGA without building a new
circuit for each loop. Instead, a fixed, regular circuit is placed on the FPGA
fabric: a two-dimensional torus of small processing elements (PEs). Each PE
has its own ALU, data memory and instruction memory. This circuit is a *soft
coarse-grained reconfigurable array* (SCGRA) overlay. A compiler unrolls the
loop body into a data-flow graph (DFG) and schedules every operation of that
DFG onto a PE and a clock cycle. The result of that scheduling is one list of
*control words* per PE. The hardware then just replays those lists, one word
per cycle in every PE, in lock-step. It makes no decisions of its own. Moving
to another loop means new control words, not a new FPGA build. Resizing the
array, the memories or the buffers for one application means a new build from
the same parameterised template.

This repository holds synthesizable SystemVerilog for that accelerator: the
PE, the torus array, the input/output buffers and their address buffers, and
the controller. It also holds self-checking testbenches, four of which run
reduced versions of the loops the overlay was evaluated on: FIR, matrix
multiplication, Sobel edge detection and K-means. The overall structure
follows the published QuickDough overlay ("Automatic Nested Loop Acceleration
on FPGAs Using Soft CGRA Overlay", Liu, Ng and So). That publication names the
blocks and what they do, but not their encodings or timing. Everything marked
*own choice* below was decided here.

## 1. From a loop to groups and DFG executions

The loop is cut at two levels:

* **DFG.** The innermost `u` iterations (the unrolling factor) are turned into
  one DFG. One execution of the DFG takes `len` clock cycles, which is the
  length of the schedule in control words.
* **Group.** `g` iterations (the grouping factor, a multiple of `u`) form a
  group. The host copies a whole group's input data into the input buffer,
  the accelerator runs the DFG `n_dfg = g/u` times back to back, and the host
  copies the group's results out of the output buffer. Batching transfers this
  way spreads the fixed cost of each host transfer over many iterations. The
  price is larger buffers.

For each group the accelerator therefore computes for exactly
`n_dfg * len` cycles. The whole loop of `l` iterations takes
`(l/u) * len` compute cycles plus the host transfers of `l/g` groups. The
controller counts the compute cycles of the last group (`host_run_cycles`),
and every testbench checks that count.

Because the schedule is fixed, the order in which a DFG execution reads its
inputs and writes its outputs is known at compile time. That order is stored
in two *address buffers*:

* IAddrBuf lists the IBuf address of every input word, in the order the PEs
  consume them.
* OAddrBuf lists the OBuf address of every result, in the order the PEs
  produce them.

Each list has one entry per input (or output) per DFG execution. Over a group,
IAddrBuf therefore needs `n_dfg * inputs-per-DFG` entries, and OAddrBuf needs
the same for outputs.

## 2. The accelerator

```
            host clock (sys_clk)         |            array clock (clk)
                                         |
 host ──► IBuf ────────────────────────────► read ──┐
 host ──► IAddrBuf ────────────────────────► read ──┤ AccCtrl ── pe_start, len ──► all PEs
 host ──► OAddrBuf ────────────────────────► read ──┤  (prefetch FIFO) ── Load bus ─► all PEs
 host ◄── OBuf ◄──────────────────────────── write ◄┘  ◄── merged Store ── PEs
 host ──► control words ──────────────────► every PE's instruction memory
 host ──► start (toggle synchroniser) ─────► AccCtrl ; busy/done/err/cycles ◄── back
```

* **IBuf, OBuf** (`dc_ram`, 4096 x 32 by default). These hold one group's input
  and output words. They are simple dual-port RAMs: the host side is clocked
  by `sys_clk` and the array side by `clk`.
* **IAddrBuf, OAddrBuf** (`dc_ram`, 4096 x 12). These hold the address lists
  described in section 1.
* **AccCtrl** (`acc_ctrl`). The controller of the accelerator, described in
  section 4.
* **SCGRA** (`scgra_array`). The `ROWS x COLS` PE torus (4 x 4 by default),
  described in section 3.
* **Top** (`scgra_acc`). Wires the blocks above together and handles the host
  interface and the clock crossing (section 5).

The array has **one input and one output** toward the buffers. Every cycle,
at most one new input word is offered on a Load bus that all PEs see. Every
cycle, at most one PE stores a result. This limits kernels that move a lot of
data for little computation, such as matrix multiplication. It is a property
of the original overlay, kept here.

## 3. The processing element and its control word

This is the core of the design. Every PE (`pe.sv`) contains:

* `pe_addr_ctrl` (AddrCtrl). A counter that starts at 0 on the global
  `pe_start` and steps once per cycle through `len` words. A new start at the
  last word restarts it without a gap.
* An instruction memory (`dc_ram`, 1024 x 62 by default). The host writes it;
  the array reads it synchronously.
* `pe_dmem`. A 256 x 32 data memory with one write port and four asynchronous
  read ports. Ports 0 to 2 feed the ALU; port 3 feeds the outputs.
* `pe_alu`. A three-operand ALU with a result register `y`.
* An input mux. It picks the Load bus or one of the N/E/S/W neighbour inputs
  for the data-memory write port; a second mux picks between that and `y`.
* A bypass register, loaded from one neighbour input. It lets a value pass
  through the PE without using the data-memory write port.
* Registered outputs: N, E, S, W and Store.

### Control word (`scgra_pkg::pe_inst_t`, 62 bits, own choice)

Fields are listed from the most significant bit down:

| field | bits | meaning in the cycle the word executes |
|---|---|---|
| `op` | 4 | ALU: `y <= op(dmem[src0], dmem[src1], dmem[src2])`; `OP_NOP` keeps `y` |
| `src0..2` | 3 x 8 | ALU operand addresses a, b, c |
| `wen` | 1 | write the data memory |
| `wsel` | 1 | `WS_IN`: write the input selected by `in_sel`; `WS_ALU`: write `y` (the result of an earlier word) |
| `in_sel` | 3 | `IN_LOAD`, `IN_N`, `IN_E`, `IN_S`, `IN_W` |
| `dst` | 8 | write address |
| `byp_sel` | 2 | bypass register takes the N/E/S/W input |
| `src3` | 8 | read address for the outputs |
| `out_n/e/s/w` | 4 x 2 | each output register takes `OUT_DMEM` (`dmem[src3]`), `OUT_ALU` (`y`) or `OUT_BYP`, or `OUT_HOLD` keeps its value |
| `out_st` | 2 | the same choice for the store register |
| `st_en` | 1 | store this cycle |

ALU operations (own choice, chosen to cover the four evaluated kernels):

* arithmetic: `ADD`, `SUB`, `MUL`, `MADD` (a·b+c), `MSUB` (c−a·b), `ADD3`
* absolute values: `ABS`, `ABSDIFF`
* shifts and logic: `SHL`, `SHR` (arithmetic), `AND`
* comparisons: `MIN`, `MAX` (signed), `LT` (signed a<b → 1/0), `SEL` (a≠0 ? b : c)

All arithmetic is 32-bit and wraps.

### Timing rules a schedule must respect

These rules are what a compiler for this RTL has to know. The testbenches
check them cycle by cycle.

1. If `pe_start` is sampled at clock edge T, control word k executes in the
   cycle that follows edge T+1+k. This is two cycles after the start plus k.
2. The data memory reads asynchronously. A value written by word k can be read
   by word k+1, but not by word k itself.
3. `y` is valid from the word after the ALU word. Write it with a later word
   (`wen`, `WS_ALU`), or send it out directly (`OUT_ALU`). A computed value
   therefore needs two words before it is in the data memory. An
   accumulation `acc += a·b` costs two words per term: `MADD` into `y`, then
   write `y` to `acc`.
4. There is one write port. Each word can write either an input or `y`, not
   both.
5. Outputs are registered. A value put on E by word k appears at the east
   neighbour's W input while that neighbour executes its word k+1. Passing it
   on through that neighbour's bypass register reaches the next PE at word
   k+3, so each hop through a bypass costs two cycles.
6. The torus wraps around. The N input of row 0 comes from row ROWS−1, and the
   W input of column 0 comes from column COLS−1.
7. A word that takes the Load bus consumes the next input word. Several PEs
   may take the same word in the same cycle; it is consumed once. At most one
   PE may set `st_en` in a cycle.
8. Consecutive DFG executions overlap nothing. Word 0 of execution e+1 follows
   word `len-1` of execution e in the next cycle. Data-memory contents and `y`
   persist from one execution to the next.

## 4. The controller: feeding one word per cycle

The controller's states are `IDLE → PREFETCH → RUN → DRAIN → IDLE`.

* **Input stream.** IAddrBuf and IBuf both have a one-cycle read. An input
  word therefore reaches the controller two cycles after its IAddrBuf read is
  issued. The controller reads ahead into an 8-entry FIFO, and the head of
  the FIFO is the Load bus. A new read is issued whenever the FIFO plus the
  reads in flight leave room. This sustains one load per cycle for as long as
  the schedule needs.
* **PREFETCH.** The group does not start until the FIFO is full, or until all
  `n_ld` words of the group are queued.
* **RUN.** Lasts exactly `n_dfg * len` cycles. `pe_start` is pulsed every
  `len` cycles.
* **Output stream.** Each store is written to OBuf at the next OAddrBuf entry.
  The controller always has that entry read one store ahead, so a store every
  cycle is possible.
* **DRAIN.** Waits 4 cycles so that the last store lands in OBuf before
  `done` is raised.

Three error flags stay set until the next start:

* `err[0]`: a PE took the Load bus while the FIFO was empty. The schedule
  loads more words than `n_ld`, or faster than the FIFO can supply them.
* `err[1]`: the group did not store exactly `n_st` words.
* `err[2]`: two PEs stored in the same cycle.

`err[0]` and `err[2]` also trigger simulation warnings from assertions.

## 5. Host interface and the two clocks

The buffers and the controller sit on the boundary between a slower host side
and the faster array. The published overlay ran its array at 250 MHz on a
Zynq device. All host-facing ports of `scgra_acc` are in the `sys_clk`
domain.

A host runs one group as follows:

1. Write the control words (`imem_we`, `imem_pe`, `imem_waddr`,
   `imem_wdata`). This is done once per kernel.
2. Write the address lists (`iaddr_*`, `oaddr_*`). Usually this is also done
   once per kernel.
3. Write the group's inputs into IBuf (`ibuf_*`).
4. Set `cfg_n_dfg`, `cfg_len`, `cfg_n_ld` and `cfg_n_st`, and pulse
   `host_start` for one `sys_clk` cycle.
5. Wait for `host_done`. `host_busy` is high from the cycle after the start.
6. Check `host_err`, then read the results from OBuf (`obuf_re`,
   `obuf_raddr`; `obuf_rdata` is valid one cycle later).

The start crosses into the array clock as a toggle through a two-flop
synchroniser, and the toggle is echoed back so that `host_busy` covers the
crossing. Busy, done, error and cycle count return through two-flop
synchronisers. The `cfg_*` inputs and the memory contents are quasi-static:
they must not change while `host_busy` is high. The cycle count is a
multi-bit value: read it only after `host_done`.

In the published flow, control words and address lists are patched into the
FPGA bitstream. Here they are written through ports instead (own choice).

## 6. Parameters and where their values come from

| parameter | default | origin |
|---|---|---|
| `ROWS x COLS` | 4 x 4 | the size chosen for three of the four benchmarks (MM, FIR, Sobel) by the published tuning flow |
| `IMEM_DEPTH` | 1024 | the published instruction-memory depth of most tuned configurations (one uses 1.5k) |
| `BUF_DEPTH` (IBuf, OBuf, IAddrBuf, OAddrBuf) | 4096 | published IO buffer depth of the tuned FIR and Sobel configurations; address buffers sized the same (own choice) |
| `DATA_W` | 32 | own choice (the publication treats it as a free parameter) |
| `DMEM_DEPTH` | 256 | own choice |
| prefetch FIFO | 8 | own choice |

`DATA_W` and `DMEM_DEPTH` are constants in `scgra_pkg`, because the
control-word layout depends on them. The others are module parameters of
`scgra_acc`.

The published configurations vary in array size (3x2 to 5x5), instruction
memory depth (1k to 1.5k) and IO buffer depth (2k to 8k). At the defaults,
three of them fit as built: the baseline and tuned FIR, and the tuned Sobel.
The others need a 5-wide array, 8k buffers or a 1.5k instruction memory. Each
is a parameter change, but a schedule must then be compiled for that exact
array. A schedule that uses the wrap-around links of a 4x4 torus does not run
on a 5x5 one.

## 7. Verification

Every testbench is self-checking and ends by printing
`TB_RESULT checks=N failures=M`. Each has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_pe_alu` | all 16 operations against a separate reference, including overflow corners |
| `tb_pe_dmem` | 4 read ports, write/read ordering |
| `tb_dc_ram` | dual-clock write/read, read latency, hold when not enabled |
| `tb_pe_addr_ctrl` | pc sequence, stop, back-to-back restart, all lengths 1 to 16 |
| `tb_pe` | a 7-word schedule in one PE: loads, ALU, bypass, all outputs, stores, each at its exact cycle |
| `tb_scgra_array` | 3x3 torus: broadcast load, all four neighbour links, both wrap-around directions, store merging, store-conflict flag |
| `tb_acc_ctrl` | controller against a cycle-accurate stand-in for the array: prefetch before start, restart spacing, RUN = `n_dfg*len`, address-buffer ordering, all three error flags |
| `tb_scgra_acc` | whole accelerator at default size: `c[i] = a[i]·b[i]` over 4 groups through the host interface and clock crossing, with bypass and wrap-around paths |
| `tb_workload_mac` | FIR (8 taps, 256 outputs, 4 groups) and 8x8 matrix multiplication at default size |
| `tb_workload_se_km` | Sobel on an 18x18 image and K-means assignment of 64 points to 4 centroids at default size |

The workload testbenches build their schedules in SystemVerilog tasks. Each
schedule broadcasts every input to every PE, gives each PE one output, and
runs the PE's ALU operations as straight-line code. These are simple, valid
schedules, not the output of an optimising scheduler.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/scgra_pkg.sv tb/tb_scgra_acc.sv --top-module tb_scgra_acc
./obj_dir/Vtb_scgra_acc
```

The package is named first; `-y` lets Verilator find every other module by
its file name. All full-size testbenches finish in seconds.

## 8. Where this RTL departs from or adds to the published design

The following are taken from the published design:

* the block structure and the role of each block: IBuf, OBuf, IAddrBuf,
  OAddrBuf, AccCtrl, and the SCGRA of PEs with AddrCtrl, instruction memory,
  multi-port data memory, ALU, Load/Store, four neighbour ports and bypass;
* the 2-D torus;
* the single global start;
* the single IO path;
* the split into a slow host side and a fast array;
* group/DFG batching, and address lists ordered per DFG execution.

The following are own choices:

* the control-word format;
* the operation set;
* the widths and depths not given numerically;
* all pipeline timing;
* the number of data-memory ports;
* what each output mux can select;
* the prefetch FIFO and the controller FSM;
* the error flags;
* the clock-crossing scheme;
* writing control words and address lists through ports instead of bitstream
  patching.

Pipeline depth also differs from the published PE drawing. That drawing puts
a register on every PE input (Load and the four neighbour inputs) and on the
data-memory read paths in front of the ALU. Here the neighbour's output
register is the only register on a link, and the data-memory read, the ALU
and its result register fit in one cycle. The published design fixes its
pipeline depth but does not give it. With the deeper pipeline, every latency
in the timing rules of section 3 would grow by the added stages, and the
schedules would have to be compiled for that.

Not included:

* the host processor, main memory, bus and DMA. The top level exposes
  buffer ports where they would connect.
* the compile and tuning flow: the DFG scheduler and the design-space search
  that picks the array size, unrolling, grouping and buffer depths. That flow
  is software, not hardware.
