# TATAA: one array for int8 matrix products and bfloat16 non-linear functions

Transformer inference has two kinds of work. The linear layers (projections, attention
products, MLPs) are large matrix multiplications that quantize well to int8. The rest
(SoftMax, LayerNorm/RMSNorm, GELU/SiLU) is element-wise and needs floating point.
Accelerators usually build two engines for this: a systolic array for the int8 part and
a separate vector or special-function unit for the rest. One of the two sits idle most of
the time.

TATAA builds only one engine. Every processing element (PE) contains one integer
multiplier and one adder, the resources of one FPGA DSP slice. The same grid of PEs is
used in two ways, switched at run time:

* **int8 MatMul mode.** The PEs form one output-stationary systolic array. Each PE
  computes two int8 products per cycle with a single multiplier and accumulates them to
  int16.
* **bfloat16 mode.** Each column of four PEs becomes a four-stage floating-point
  pipeline. It computes `a*b`, `a+b`, or the inverse-square-root seed operation `fpapp`
  on 128 lanes at once. Non-linear functions are built from these three operations by
  the program.

Around this array sit register files, per-unit output buffers and a store path. The store
path quantizes and re-lays out results on their way to memory. A small in-order
controller fetches its program from external memory. It overlaps loads, array work and
stores whenever their resources do not collide.

This repository contains synthesizable SystemVerilog for the whole accelerator
(`tataa_top`: 8 cores), a self-checking testbench for every part, and an end-to-end test
at full size.

## Organization and sizes

| Level | Contents | Default |
|---|---|---|
| `tataa_top` | K independent cores, each with its own memory ports | K = 8 |
| `tataa_core` | N dual-mode processing units (DMPUs) plus register files, buffers, controller and memory units | N = 8 |
| `tataa_dmpu` | W columns × 4 rows of PEs (rows are pipeline stages S0..S3) | W = 16 |
| `tataa_pe` | 27×18 signed multiplier, 48-bit adder, registers L, R, A, P, bottom | — |

One core therefore has 4N × W = 32 × 16 PEs.

* In MatMul mode one MATMUL instruction produces a 32 × 32 int16 tile: 4N rows × 2W
  columns, two columns per PE.
* In bfloat16 mode it processes N × W = 128 lanes per cycle.
* Memory words are 16·W = 256 bits, the paper's channel width. There are two load
  channels per core, so 16 channels for the 8 cores.

The block diagram of one core:

```
            instr port          load port 0   load port 1             write port
                |                   |             |                      ^
          tataa_controller    tataa_load_unit x2 ─┴─> tataa_crossbar      |
                |                                      |   |   |          |
        issue ──┼─────────> tataa_exec_unit      RFX  DMRFY0 RFY1..N-1    |
                |                |  |            (RMX) (RMY/RV) (RV)       |
                |                |  └─ read addr ──┘     |      |          |
                |                |        skew X   skew Y|      |          |
                |                v          |      |     |      |          |
                |   DMPU0 <─ mode MUX <─────┼──────┘ ────┘      |          |
                |   DMPU1 <─ mode MUX <─ (DMPU0 bottom | own RFY)          |
                |    ...                                                   |
                |   DMPUn-1 ─> DMB n-1 ──┐  (every DMPU has its DMB)       |
                └──> tataa_store_unit ───┴─> tataa_quant_layout ───────────┘
```

## The dual-mode PE (`tataa_pe`)

### Two int8 products in one multiplier

The PE's A register holds two int8 values of Y, `hi` and `lo`, from the same row of Y
and two neighbouring output columns. X arrives in L. A pre-adder forms the 27-bit
operand `hi·2^18 + lo`. Multiplying it by the int8 `x` gives `hi·x·2^18 + lo·x`. So the
48-bit accumulator P collects the two dot products side by side:

* the low sum sits in bits 17:0;
* the high sum sits above, off by a borrow whenever the low sum is negative.

When a MATMUL's results are read out (`mm_drain`):

* the low result is `P[15:0]`;
* the high result is `(P[47:18] + P[17])[15:0]`. Adding `P[17]` corrects the borrow.

Both are int16, keeping the low 16 bits of the true sum.

This trick has a limit. The low field is 18 bits, so the low partial sum must stay inside
±2^17 for the high sum to come out right. A run of K products of int8 values can exceed
this (127·127 ≈ 2^14, so about 8 worst-case products). Int16 wrapping limits the sum
itself in the same way. So exactness depends on the data's magnitudes. That is a property
of int16 accumulation, which this design takes from the paper; it is not a flaw of the
packing. The PE testbench checks both the exact range and the wrap-around.

### The four-stage floating-point column

In bfloat16 mode the four PEs of a column are stages S0 (top) to S3 (bottom). A record
(`tataa_pkg::lane_t`) flows down the column, one stage per cycle. It carries:

* a valid bit and the operation;
* two 18-bit operand/mantissa fields `ma` and `mb`;
* a 10-bit exponent working field `ex`, plus `ey`;
* overflow/underflow flags.

Each stage uses its own PE's adder and multiplier:

| Stage | fmul / fpapp | fadd |
|---|---|---|
| S0 | fpapp only: `t = 0x5F37 − (x >> 1)` on the adder (integer view of the bfloat16 bits), `t` becomes both operands | pass |
| S1 | mantissas to two's complement, hidden 1 restored; adder forms `e0+e1` | same; adder forms `e0−e1` |
| S2 | clamp `e0+e1` to [127, 382] and keep the flags; adder subtracts the bias 127 | multiplier aligns the smaller-exponent mantissa by `2^(G−|e0−e1|)`; adder forms the larger exponent |
| S3 | multiplier multiplies the mantissas | adder adds the aligned mantissas |
| S3 (bottom logic) | back to sign/magnitude, leading-one search, normalise, hide the 1, clamp exponent to 0..255 | same |

A result leaves S3 four cycles after entering S0, with the bfloat16 in `ma[15:0]`.

**fpapp.** `fpapp(x)` is `t·t` with `t = 0x5F37 − (x >> 1)`. `t` is the classic
fast inverse-square-root seed in bfloat16 form, so `t·t ≈ 1/x`. A program refines these
seeds with ordinary fmul/fadd steps (Newton iterations) into 1/x or 1/√x. That is how
division in SoftMax and normalisation in LayerNorm are built.

**Numerical choices of this implementation.** None of these are given by the paper.

* Results are truncated, not rounded.
* Inputs with exponent 0 are read as zero.
* Results below the normal range become signed zero.
* Results above the normal range become signed infinity.
* Inf/NaN inputs are not treated specially.
* For fadd, the smaller operand is aligned with G = 8 guard bits. An operand more than 8
  binades smaller is dropped.

The reference model in `tb/tataa_tb_pkg.sv` implements exactly these rules, so the PE is
tested bit-exactly.

## The array in MatMul mode (`tataa_core`, `tataa_skew`, `tataa_mode_mux`)

The mode MUX in front of each DMPU chooses that DMPU's top input:

* in MatMul mode, the bottom of the DMPU above, which chains all N DMPUs into one
  4N-row array;
* in bfloat16 mode, the operand pair read from the DMPU's own RFY.

**Data flow in MatMul mode.**

* **X** (4N × K int8) comes from RMX. Word k of RMX is column k of X, one byte per array
  row.
* **Y** (K × 2W int8) comes from RMY. Word k is row k of Y, two bytes per PE column.
* Each cycle one word of each is read. `tataa_skew` then delays them:
  * X row r by r cycles;
  * Y column c by 2c cycles. X takes two cycles per horizontal hop (L then R), and Y one
    cycle per vertical hop. The skews make matching operands meet in every PE.
* After K words, the exec unit waits `FLUSH = 4N + 2W + 4` cycles so that the last
  operands have reached the far corner.
* The accumulate bit of MATMUL keeps P instead of clearing it. That is how a reduction
  longer than the buffer depth (512) is split into passes.

**Readout** (STORE.M):

* `mm_drain` copies every PE's two int16 results into its bottom register.
* For 4N cycles the rows then shift down and out of the last DMPU, row 4N−1 first, into
  the last DMB.
* The store unit pops them, with their row index, into the quantization unit.
* The accumulators are not disturbed by the readout. A following MATMUL can keep
  accumulating or clear them.

## bfloat16 vectors across the DMPUs (`tataa_exec_unit`, `tataa_rfy`)

A 128-lane vector is spread over the DMPUs. Lane `d·W + c` lives in the RFY of DMPU d,
column slot c. Each RFY has two banks:

* bank a holds the RVX registers;
* bank b holds the RVY registers.

Each RFY also has two read ports, so both operands of an instruction are read in one
cycle.

DMRFY0 (in front of DMPU 0) is deeper (512 words). It doubles as RMY0 (bank a) and
RMY1 (bank b) for MatMul. So vector registers used together with MatMul data should sit
above the MatMul operand words; the examples use registers ≥ 16.

**Vector instruction timing.** A vector instruction (MUL.V, ADD.V, APP.V) runs as
follows:

* **Cycle t:** issue. Both source registers are addressed in every RFY.
* **Cycle t+1:** operands enter S0. A CONFIG constant (RVC0..3) can replace either
  source.
* **Cycle t+5:** the result is written back to a register and/or pushed into all N DMBs.

One vector instruction can issue per cycle. A read of a register whose result is still
in the pipeline (five destinations are tracked) is a hazard. The controller holds the
instruction until the hazard clears. The array is in bfloat16 mode only while vector
records are in flight, and returns to MatMul mode by itself.

**STORE.V** pops one word from every DMB, which together form one 128-lane vector. A DMB
holds 64 words; a program must store vector results before more than 64 pile up.
Nothing in hardware stops an overflow. The buffer's assertion flags it in simulation.

Each STORE.V writes the vector as N words of bfloat16, or N/2 words of int8 quantized with the scale.

## Controller and instruction set (`tataa_controller`)

The controller fetches 64-bit instructions through its own port into a 4-entry queue,
with up to 4 reads in flight. Instructions issue in order, but each runs in its own
unit:

* loads go to one of two load units;
* MATMUL and vector ops go to the exec unit;
* stores go to the store unit.

**Dependencies** are tracked by resource masks. The resources are RMX0, RMX1, RFY bank
a, RFY bank b, the array and the DMBs. Each running unit keeps the mask of what its
instruction touches. A new instruction waits while any bit it needs is held. This
permits:

* LOAD.M into RMX1/RMY1 while MATMUL runs on RMX0/RMY0 (double buffering);
* two LOAD.V into different banks at once;
* STORE.V of earlier results while the next loads run.

Vector instructions need both RFY banks, so a LOAD.V does not overlap vector arithmetic.

The encoding is this design's own (the paper names only the instruction types):

| [63:60] | Instruction | Fields |
|---|---|---|
| 0 | CONFIG | [59:56] target: 0 scale, 1..4 RVC0..3; [15:0] bfloat16 value |
| 1 | LOAD.M | [59:58] 0 RMX0, 1 RMX1, 2 RMY0, 3 RMY1; [47:32] words; [31:0] address |
| 2 | LOAD.V | [59] bank (RVX/RVY); [55:48] register; [31:0] address (N words) |
| 3 | MATMUL | [59] RMX sel; [58] RMY sel; [57] accumulate; [47:32] K |
| 4/5/6 | MUL.V / ADD.V / APP.V | [59:58] dest bank (0 none, 1 RVX, 2 RVY); [57] push to DMBs; [55:48] dest reg; [47:46],[45:38] src0 sel/index; [37:36],[35:28] src1 sel/index (0 RVX, 1 RVY, 2 RVC) |
| 7 | STORE.M | [59] 0 int8 / 1 bfloat16; [58] transpose; [47:32] stride; [31:0] address |
| 8 | STORE.V | [59] 0 bfloat16 / 1 int8; [47:32] vectors; [31:0] address |
| 15 | HALT | waits until all units are idle, then raises `done` |

`tataa_tb_pkg` has encoder functions (`i_load_m`, `i_matmul`, `i_vec`, …) for writing
programs.

## Store path: quantization and layout (`tataa_quant_layout`)

Results reach memory only through this unit. It applies one of four conversions, using
the bfloat16 scale set by CONFIG:

* **int16 → int8:** `floor(v·scale)`, saturated. Used for the next layer's MatMul input.
* **int16 → bfloat16:** `v·scale`. Used for inputs to non-linear functions.
* **bfloat16 → int8:** quantizing the output of a non-linear function.
* **bfloat16 → bfloat16:** unchanged.

**Layout.** Word k of result row i goes to `address + i·stride + k`. Choosing the stride
gives row-major tiles inside a larger matrix, head splitting and similar layouts without
any extra hardware. The only real data movement is an optional **transpose** of an int8
MatMul tile, needed for producing Kᵀ. The tile is collected and written column by
column, so column j goes to `address + j·stride`. It requires 4N = 2W, which holds at the
defaults.

## Memory interface

Each core has four ports:

* an instruction read port (64-bit data);
* two read ports (256-bit data);
* one write port.

All are simple `valid/ready` request channels. Read responses return in request order
with any latency, and any number may be outstanding. This stands in for the AXI
channels of the FPGA board: a thin adapter per port would connect them. The load units
issue one request per word, back to back, so latency is hidden as long as the memory
accepts requests.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares against a model
computed independently in `tb/tataa_tb_pkg.sv`: bfloat16 arithmetic through `real`,
integer dot products, and quantization formulas. Each prints
`TB_RESULT checks=<n> failures=<m>`.

| Testbench | What it exercises |
|---|---|
| `tb_tataa_pe` | both MatMul results incl. borrow and wrap, fmul/fadd/fpapp bit-exact, 4-stage latency |
| `tb_tataa_dmpu`, `tb_tataa_mode_mux` | 4-row slice as MatMul array and as 16 FPU columns; mode selection |
| `tb_tataa_rfx`, `tb_tataa_rfy`, `tb_tataa_dmb` | register files and FIFO against models, incl. simultaneous push/pop |
| `tb_tataa_quant_layout` | all four conversions, stride addressing, transpose |
| `tb_tataa_crossbar` | routing of both load ports and the write-back |
| `tb_tataa_controller` | issue rules, overlaps, hazard stalls, against a scripted unit model |
| `tb_tataa_core` | small core (N=2, W=4): programs with MATMUL, accumulate, vector ops, stores; checks memory contents and the 4-cycle vector latency |
| `tb_tataa_top` | two small cores running different programs; counts 17 mechanisms (parallel issue, both load ports busy, vector ops overlapped in the columns, hazard stall, constant operand, mode switches, transpose, all quantization modes, MATMUL accumulation, …) and fails on any that never occur |
| `tb_tataa_softmax_div` | the division step of SoftMax as a program: `fpapp` seed of 1/s, one Newton step with constants −1 and 2, p = e·(1/s) stored as bfloat16 and int8; bit-exact against the chained reference and within 4 % of e/s; dependent instructions hit the hazard stall |
| `tb_tataa_top_full` | the default top (8 cores, 4096 PEs): every core loads a 32×K tile pair, runs MATMUL, STORE.M, two LOAD.V, MUL.V and STORE.V; all outputs are checked |

`tb/tb_tataa_mem.sv` is a behavioural memory with random request stalls and a fixed
response latency.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_tataa_core \
    rtl/tataa_pkg.sv $(ls rtl/*.sv | grep -v _pkg) tb/tataa_tb_pkg.sv tb/tb_tataa_mem.sv tb/tb_tataa_core.sv
./obj_dir/Vtb_tataa_core
```

The full-size test takes several minutes, mostly for compilation. With `-Wall`, lint
leaves one warning: the DMBs' unused `full`/`count` outputs are deliberately left
unconnected in the core, as its header explains.

## Where this design departs from or goes beyond the paper

* **Own choices, not given by the paper:**
  * the instruction encoding, CONFIG and HALT;
  * the register-file depths (512 for X/Y MatMul buffers, 32 vector registers, DMB depth 64);
  * the word layouts;
  * the skew and flush timing.
* **Numerics (own):** the bfloat16 numerical details listed above (truncation, no
  subnormals, G = 8) and floor rounding in int8 quantization.
* **Memory protocol:** a valid/ready protocol instead of AXI, plus a dedicated write port
  and instruction port.
* **One op at a time:** the array runs either a MATMUL or vector operations at a time. Vector
  instructions from a stream overlap each other, and loads and stores overlap both.
* **LOAD.V and vector ops** do not overlap, because vector instructions reserve both RFY banks.
* **Accumulation limits:** accumulation is int16 with wrap-around, and the packed low sum
  must stay within ±2^17. Long reductions with large values will wrap. The paper
  accumulates in int16 too, and does not discuss overflow.
* **Register roles in the PE:** the paper's dataflow text gives L to horizontal and R to
  vertical passing. Here L and R are two successive horizontal registers, and Y moves
  vertically through A and the bottom register. This gives X its two-cycle hop, which
  matches the two-column spacing of Y.
* **Output tile:** the paper calls the array and the output tile "W by 4N". The combined
  MAC gives every PE two outputs, so one MATMUL here yields 4N × 2W results (32 × 32).
  The paper also presents the combined MAC as a throughput doubling.
* **The scale is a reciprocal:** the quantization formula in the paper divides by a scale
  factor S. The unit here multiplies by a bfloat16 value, so a program loads 1/S (or
  S_x·S_y/S_z for a MatMul output) with CONFIG.
* **Not built:** the off-chip memory (HBM) and its AXI interconnect, and the FPGA-specific
  DSP primitive. The PE uses a plain `*` and `+` with the same widths, which synthesis
  maps to a DSP slice. The compiler that turns models into programs is also not part of
  this design. The testbenches write their programs by hand with the encoder functions.
* **Clock rate:** the clock frequency (225 MHz on the paper's board) is a property of
  the FPGA implementation and is not modelled.

## Workload fit

At the defaults, one MATMUL covers a 32 × 32 output tile with a reduction of up to 512.
A longer reduction uses several passes with the accumulate bit set.

| Model | Largest reduction | Passes |
|---|---|---|
| DeiT-S / DeiT-B | MLP 1536 / 3072 | 3 / 6 |
| BERT-base | 3072 | 6 |
| GPT-2 medium | 4096 | 8 |
| OPT-1.3B | 8192 | 16 |

Non-linear functions work on 128-lane pieces:

* a 4096-wide Llama or ChatGLM2 row is 32 pieces, one per vector register;
* longer rows are streamed from memory.

All fit structurally. Numerical exactness of long int16 reductions depends on the value
ranges, as described for the PE.
