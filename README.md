# Zero-overhead loop control for a tightly coupled processor array

A tightly coupled processor array (TCPA) runs one multidimensional loop nest
on a grid of processing elements (PEs). Each PE holds several function units
(FUs), and every FU runs its own tiny microprogram. The microprograms must
branch whenever the current loop iteration needs a different instruction
sequence: at loop borders, in triangular domains, in prologue and epilogue
iterations. If the PEs worked out those branch conditions themselves, they
would spend much of their time on loop control. This design takes loop
control out of the PEs:

* A single **global controller (GC)** walks the iteration space and evaluates,
  for every iteration, a small set of binary **control signals**. Each signal
  is 1 exactly in the iterations that lie in a union of polyhedra (its "one
  domain").
* A **control network** carries the signals to all PEs. Each PE delays them by
  a configurable number of cycles, so that a PE sees the signals of an iteration
  exactly when the loop schedule has that PE execute the iteration.
* In every FU an **instruction sequencer** chooses between two branch targets
  using one of the delayed signals, in the same cycle and without a bubble. So
  loop control costs no cycles.

A compiler chooses the control conditions. It reduces the branch conditions of
all FU programs of all PEs to a few shared signals: 4 to 18 in the published
benchmarks, where hundreds of raw conditions exist. That compiler is not part
of this RTL. What is here is the hardware that the compiler configures.

The default configuration is a 4 x 4 array whose GC has 4 loop dimensions,
32 lower-bound, 32 upper-bound and 65 affine evaluators, 83 conjunctions and 18
control signals. Every PE has a timestamp-FIFO delay unit that supports
latencies up to 4096 cycles, and 6 FUs, each with a 256-word program.

## Block map

```
tcpa_control (top)
├── global_controller
│   ├── iteration_space_scanner
│   ├── lower_bound_evaluator   x N_LOW   (j_s >= c | j_s == c)
│   ├── upper_bound_evaluator   x N_UP    (j_s <= c | j_s == c)
│   ├── affine_bound_evaluator  x N_AFF   (a.j >= c | a.j == c)
│   ├── conjunction             x N_CONJ  (masked AND of evaluator outputs)
│   └── disjunction             x N_CS    (masked OR of conjunctions = one signal)
└── pe_control                  x ROWS*COLS
    ├── timestamp_fifo_delay | shift_register_delay   (not in PE (0,0))
    └── instruction_sequencer   x N_FU
tcpa_pkg: configuration-bus structs, instruction formats, enums
```

The FU datapaths, register files, the data interconnect between PEs, the I/O
buffers and their address generators, and the I/O controller are not part of
this RTL. The top-level ports `fu_instr`/`fu_valid` give each FU's issued
instruction (`op rd rs0 rs1`) to whatever datapath is attached.

## How a control signal is computed

### Scanning the iterations

The scanner works on a normalised intra-tile iteration space. The first
iteration is the zero vector, dimension 0 is the innermost, and dimension `d`
runs from 0 to `last[d]`. A new iteration is presented every II cycles, where
II is the initiation interval of the modulo schedule. Besides the vector itself,
the scanner gives two signals:

* `update` is high in the last cycle of an iteration, that is, the next clock
  edge loads the next iteration.
* `step` is the dimension that the next clock edge increments. It is the
  lowest dimension not yet at its bound, and all lower dimensions wrap to 0.

The scanner only walks a box. Triangular or otherwise non-rectangular domains
are handled by the control conditions, and the iterations the compiler adds for
the epilogue are simply part of the box.

### Literals

Every control condition is a disjunction of conjunctions of literals. The
literal kinds are constant equality, constant lower bound, constant upper
bound, affine equality and affine inequality. Three kinds of evaluator cover
them:

| evaluator | inside | literal |
|---|---|---|
| lower bound | multiplexer picks `j_sel`, comparator | `j_sel >= c` or `j_sel == c` |
| upper bound | multiplexer picks `j_sel`, comparator | `j_sel <= c` or `j_sel == c` |
| affine bound | stride table, accumulator, adder, comparator | `a.j >= c` or `a.j == c` |

The affine evaluator does not compute a dot product. Between two consecutive
iterations the vector changes in one of only DIMS ways, one per value of
`step`, so `a.j` changes by one of DIMS constants. The compiler stores those
constants in the evaluator's stride table, and the accumulator adds
`stride[step]` on every `update`. It starts from 0, because the first iteration
is the zero vector. For the scanner here the table is

```
stride[d] = a[d] - sum_{k<d} a[k] * last[k]
```

For example, with `a = (1, 1)` and `last = (4, 5)` the table is `(1, -3)`.
Stepping j0 adds 1; stepping j1 wraps j0 from 4 to 0 and adds 1 to j1, so it
adds `1 - 4 = -3`.

A `<=` affine literal is written as `>=` with the weights and the constant
negated.

### Conjunctions and disjunctions

Each conjunction ANDs the evaluator outputs chosen by its mask. The mask is
N_LOW + N_UP + N_AFF bits wide, numbered lower evaluators first, then upper,
then affine. An empty mask gives 1. Each disjunction ORs the conjunctions chosen
by its mask; an empty mask gives a constant 0. Each disjunction's output is one
control signal.

### GC timing

Evaluators, conjunctions and disjunctions each register their output, so `cs`
belongs to the iteration that the scanner showed **3 cycles earlier**.
`cs_valid` is the scanner's `running` delayed by the same 3 cycles. When the
compiler computes the PE delays, it must take this fixed offset into account.

## Delaying signals across the array

The same control signals serve every PE, but the loop schedule starts a given
iteration λ0 cycles later on a PE than on the PE above it, and λ1 cycles later
than on the PE to its left. The network follows that schedule:

```
GC ─► PE(0,0) ─[λ1]─► PE(0,1) ─[λ1]─► PE(0,2) ─[λ1]─► PE(0,3)
         │               │               │               │
        [λ0]            [λ0]            [λ0]            [λ0]
         ▼               ▼               ▼               ▼
       PE(1,0)         PE(1,1)          ...             ...
         │ ...
```

The bundle `{cs_valid, cs}` passes along the top row and then down every
column. Each PE except (0,0) delays it by its own latency register before using
it and passing it on. So PE (r,c) sees the GC's output `c*λ1 + r*λ0` cycles
late. `cs_valid` travels in the same bundle. It starts and stops the PE's
sequencers, so every PE starts its first iteration at the right moment without
any further handshake.

Two delay units are provided, chosen with the parameter `DELAY_KIND`:

* **`shift_register_delay`**: a MAX_LAT-stage shift register with a tap
  multiplexer. Its area grows linearly with MAX_LAT. It is the cheaper choice
  for short latencies; most of the published benchmarks need at most about 150
  cycles. Its stages have no reset and it keeps its history. After power-up,
  or after the latency has been raised, the network must idle for MAX_LAT
  cycles before a loop is started. Otherwise stale control bits can reach the
  output.
* **`timestamp_fifo_delay`** (the default): this unit stores only the
  changes. A free-running counter stamps the input. When the input vector
  changes, the pair (stamp, new value) is written into a FIFO. The head entry
  is released once the counter has moved on by exactly `latency`, and its value
  is then held on the output until the next release. Control signals change
  rarely compared with the cycle count, and the storage is a plain one-write,
  one-read synchronous memory (block RAM), so the cost hardly depends on the
  latency. The read address is always the next head position. A write to that
  same position in the same cycle is forwarded into the head register, so a
  latency of 1 works too. The default FIFO is as deep as the largest latency,
  so it cannot overflow. If a smaller `FIFO_DEPTH` is chosen, a sticky
  `overflow` flag reports that a change was lost.

Latency 0 bypasses either unit.

## The instruction sequencer

Every FU instruction has two parts, and both live at the same address:

* The **control part** `bt0 bt1 cs wait` is in a small memory that is read
  asynchronously, so that the next PC can be known in the same cycle.
* The **FU part** `op rd rs0 rs1` is in a synchronous memory (one BRAM18 word
  of 18 bits). It is read in the issue cycle and appears on `fu_instr` one
  cycle later, with `fu_valid` set.

An instruction occupies `1 + wait` cycles. It is issued in its first cycle, and
the wait counter then lets `wait` idle cycles pass. This replaces the nop
padding of program blocks that are shorter than II. In the last cycle the
sequencer looks at control signal number `cs`. If that signal is 1 the PC
becomes `bt0`, otherwise `bt1`. Inside a program block, and for blocks with a
single successor, `bt0 = bt1`. The selection is combinational, so with
`wait = 0` an instruction issues every cycle, branches included. While the
PE's delayed `cs_valid` is low, the PC is held at 0, where the first program
block begins.

What the compiler must guarantee, and the hardware does not check: every
program block lasts exactly II cycles (instructions plus waits). Then the
branch at the end of a block reads the control signal of the iteration that
block belongs to.

## Configuration

All configuration is written through two single-cycle write ports. Their
layout is defined in `tcpa_pkg`.

`gc_cfg` (`gc_cfg_t`: `we, target, index, sub, data[31:0]`):

| target | index | sub | data |
|---|---|---|---|
| `CFG_SCAN_BOUND` | – | dimension | last index |
| `CFG_SCAN_II` | – | – | II (0 is treated as 1) |
| `CFG_LOW`, `CFG_UP` | evaluator | – | `[15:0]` constant, `[23:16]` dimension, `[24]` 1 = equality |
| `CFG_AFF_CMP` | evaluator | – | `[15:0]` constant, `[24]` 1 = equality |
| `CFG_AFF_STRIDE` | evaluator | step | `[15:0]` stride |
| `CFG_CONJ_MASK`, `CFG_DISJ_MASK` | gate | word w | mask bits `[32w+31:32w]` |

`pe_cfg` (`pe_cfg_t`: `we, target, pe, fu, addr, data`), with `pe` equal to
`row*COLS + col`:

| target | data |
|---|---|
| `PCFG_LATENCY` | delay in cycles |
| `PCFG_CTRL_MEM` | `ctrl_instr_t` = `{bt0, bt1, cs, wait}`, 8 bits each |
| `PCFG_FU_MEM` | `fu_instr_t` = `{op[5:0], rd[3:0], rs0[3:0], rs1[3:0]}` |

Write the configuration, pulse `start`, and the GC scans once. `done` pulses in
the last cycle of the last iteration.

## Sizing against published benchmarks

The six PolyBench kernels reported for a 4 x 4 array (n = 20) need, per kernel,
at most: 3 loop dimensions, 24 lower, 20 upper and 34 affine evaluators,
18 control signals, a neighbour offset of 643 cycles, a 247-word program, and
up to 84 FU programs. The default sizes hold all of them except in one point.
LU needs **91 conjunctions**, while the GC sizes stated for the same 4 x 4
design give 83. The RTL keeps 83, so LU needs `N_CONJ >= 91`. The number of
FUs per PE is not given; 6 is chosen so that 84 FU programs fit into 16 PEs.

`tb_workloads` runs the full-size array with each kernel's loop depth, II, λ0
and λ1 (GEMM 1/11/27 up to LU 29/179/643). The kernels' actual control
conditions are not available, so it uses stand-in conditions of the same kinds:
a loop border, a corner, a triangular affine domain and a union of two boxes.
The intra-tile space is assumed to be 5 x 5 (x 20). A second array built
with shift-register delays (MAX_LAT 1024) runs alongside. During each loop it
must match the FIFO-based array on every output, cycle by cycle.

## Where this RTL makes its own choices

These points are not fixed by the published description of the scheme; each
is a choice of this implementation:

* The configuration buses, their encodings and all field widths: 16-bit
  indices, constants and strides; 8-bit branch targets, signal numbers and wait
  counts; an 18-bit FU word.
* The 3-cycle GC pipeline and the `cs_valid` signal that travels with the
  control signals and starts the sequencers.
* The scanner covers a bounding box, and it has the `start`/`running`/`done`
  control.
* The timestamp FIFO's release rule, counter width, depth (4096), latency-0
  bypass and overflow flag. The shift register's tap multiplexer.
* 6 FUs per PE and 256-word programs.
* The direction of the affine comparison (`a.j >= c`). Either direction
  expresses the same literals.
* The synchronous active-low reset, which clears control and configuration
  registers but not the memories or the shift-register stages.

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl rtl/tcpa_pkg.sv tb/tb_tcpa_control.sv \
          --top-module tb_tcpa_control -y rtl -y tb +libext+.sv
./obj_dir/Vtb_tcpa_control
```

| testbench | what it shows |
|---|---|
| `tb_iteration_space_scanner` | vector, update, step, done and P*II scan length for several boxes and IIs |
| `tb_lower/upper_bound_evaluator` | random literals against direct comparison |
| `tb_affine_bound_evaluator` | stride accumulation against the directly computed dot product |
| `tb_conjunction`, `tb_disjunction` | masked AND / OR with multi-word masks |
| `tb_global_controller` | four example conditions (including `j0 + j1 == 4`) over a 5 x 6 space, II = 3 and 1 |
| `tb_shift_register_delay`, `tb_timestamp_fifo_delay` | exact delay for latencies 0 to the maximum; FIFO overflow flag |
| `tb_instruction_sequencer` | random programs and signals against a reference; one issue per cycle without waits |
| `tb_pe_control` | both delay kinds, start by delayed `cs_valid`, two FUs |
| `tb_tcpa_control` | full-size array, GEMM offsets, reference model of all 96 FUs, two loop runs |
| `tb_workloads` | full-size array with the six kernels' schedules (LU runs 17k cycles); a shift-register-delay array is compared cycle by cycle |

All of these simulate at the default sizes in seconds. The top elaborates to
about 25k flip-flops and 2.8 Mbit of memory, most of it in the fifteen
4096-entry timestamp FIFOs.
