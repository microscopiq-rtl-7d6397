# MicroScopiQ accelerator in SystemVerilog

MicroScopiQ stores most weights of a foundational model as very narrow
integers (MX-INT-2 or MX-INT-4 with one shared 8-bit scale per 128 weights).
It keeps the few outliers at higher precision as MX-FP numbers that share a
scale per micro-block (uB) of 8 weights. It makes room for each outlier by
pruning the least important inlier in the same uB. The outlier's mantissa is
split into an Upper and a Lower half, each as wide as an inlier. The Upper
half stays in the outlier's own slot and the Lower half goes into the pruned
slot. The weight matrix keeps a fixed, dense layout, so a plain
weight-stationary PE array can multiply every slot. A small network,
**ReCoN**, then moves the Lower half's product back next to the Upper half's
product. There it merges the two, with the FP hidden bit, into the outlier's
partial sum. ReCoN is shared by all PE rows.

This repository holds a synthesizable model of that accelerator:

- a 64 x 64 multi-precision PE array (one 4-bit or two 2-bit weights per PE);
- one pipelined ReCoN butterfly, shared by all rows through an arbiter;
- the generator that turns the per-uB permutation lists into switch settings;
- post-processing that rescales and requantizes the outputs to MX-INT-8/4;
- the on-chip buffers (weights, instructions/metadata, iActs, oActs) and a
  controller that runs one operation;
- self-checking testbenches for every block and for the whole chip.

## Data format handled by the hardware

| item | width | notes |
|---|---|---|
| iAct | 8-bit INT | one per PE row per token |
| inlier weight | 2 or 4 bits, two's complement | MODE selects 2-bit (two per PE) or 4-bit |
| outlier half | 2 or 4 bits, sign-magnitude `{s, m}` | the sign is duplicated in both halves |
| uB | 8 weight positions | |
| uB identifier | 1 bit | uB holds outliers |
| permutation list | 4 entries x `{Upper_loc[2:0], Lower_loc[2:0]}` = 24 bits | an entry with Upper == Lower is unused |
| MXScale | 8 bits | `O_l1` (7 b) + `uX` (1 b) for 2-bit, 5 b + 3 b for 4-bit |
| partial sum | 32 bits | two 16-bit lanes in 2-bit MODE |

An outlier whose halves are `{s, mu}` and `{s, ml}` (bb-bit halves, bb-1
magnitude bits) contributes

    S*iAct*mu >>> (bb-1)  +  S*iAct*ml >>> 2(bb-1)  +  S*iAct,     S = -1 if s else +1

which is the merge from the paper's example: iAct 32, Upper 01b, Lower 00b
and iAcc 8 give 8 + 16 + 0 + 32 = 56.

## Blocks

### PE (`mp_pe`)
Each PE holds a 4-bit weight register and four 4b x 2b multipliers. The 8-bit
iAct is split into a signed upper nibble and an unsigned lower nibble. The
weight slot is split into two 2-bit halves. In 2-bit MODE each weight half
gives a 16-bit product. Each product goes to its own lane adder and is added
to the matching 16-bit lane of iAcc. In 4-bit MODE the four partial products
are combined with shifts 6/4/2/0. The two lane adders are then chained by a
carry mux into one 32-bit adder. When a position's Outlier_Present bit is set,
the PE does not add. It outputs the product `Res` with the untouched iAcc and
the half's sign bit, and ReCoN finishes the work.

### PE row (`pe_row`)
Sixty-four PEs share one iAct and sit behind one output register with a
valid/ready handshake. A row accepts a new token whenever its output is
empty or being taken.

### ReCoN switch (`recon_switch`)
This is a combinational 2-in/2-out switch with four settings:
- PASS: the word goes straight on.
- SWAP: a Lower half leaves its column, and the pruned column keeps only its iAcc.
- FWD: a half that crossed at an earlier stage crosses again.
- MERGE: combines the Upper word with the arriving Lower word.

MERGE puts back the magnitude from the two's-complement product, applies the
sign and shifts the halves by 1 and 2 (3 and 6 in 4-bit MODE). It then adds
iAcc and the hidden bit ±iAct.

### ReCoN network (`recon`)
This is a butterfly of NST = log2(NP)+1 stages of NP switches. The switch in
column c at stage k takes its crossing input from column c xor 2^(k-1). NP =
128 positions: two per PE column, so that both 2-bit weights of a PE have
their own position. A 4-bit weight of column c uses position 2c. Every stage
is registered, so a row enters each cycle and leaves NST = 8 cycles later.
The row's tag, MODE, iAct and switch settings travel down the pipeline with
the data.

### Configuration generator (`recon_cfg_gen`)
This block routes each permutation entry inside its uB. It fixes the address
bits that differ between Lower_loc and Upper_loc, starting from the least
significant bit:
- SWAP at the first differing bit;
- FWD at each later differing bit;
- MERGE in the Upper column one stage after the last differing bit.

This reproduces the paper's route (SWAP column 0, FWD column 1, MERGE column
3). It also outputs the Outlier_Present bits and the Upper positions. A
butterfly is blocking, and a list cannot be routed in two cases:
- the two locations differ in non-adjacent bits (e.g. 0 and 5);
- two routes need the same switch.

Such a list raises `conflict`, which the core reports as `st_conflict`. The
offline quantizer must choose pruning positions that route. One case is not
detected: a MERGE placed in a column whose own Lower half has not yet left.

### Arbiter (`recon_arbiter`)
Round-robin, one grant per cycle. A row is only eligible when its
destination queue has room for the result. `contend` flags cycles in which
more than one row asked.

### PE array with ReCoN (`msq_core`, `msq_fifo`)
Rows are valid/ready stages. A row without outliers hands its partial sums
straight to the next row. A row with outliers requests ReCoN. When granted,
the row's permutation lists are turned into switch settings in that same
cycle. The row's words go through the butterfly and land in a small queue in
front of the next row (or the array output). The queue depth is NST+1. A
credit count (queue contents plus words still inside ReCoN) makes sure ReCoN
never has to stall. Each row counts its tokens and reads its own iAct bank
with that count. Statistics outputs pulse on ReCoN issue, contention, a held
request and a list conflict.

### Post-processing (`post_proc`)
This block computes, with signed exponents:
- the output scale: `oact_sf = O_l1 + uX - I_sf + iAct_sf`;
- the shift value: `O_l1 + uX - 2*I_sf`.

Outputs of inlier-only columns are shifted by the shift value so that they
share the outlier scale. All outputs are then shifted right by `oact_sf`. A
negative value becomes a left shift, and shifts are clamped at 31. The
results saturate to MX-INT-8 or MX-INT-4. A column counts as an outlier
column when any row has an Upper half in it.

### Buffers (`iact_buffer`, `msq_ram`)
| buffer | organisation | default size |
|---|---|---|
| iAct | 64 banks (one per row) x 2048 bytes, asynchronous read per bank | 128 kB |
| weight | 8192 words x 256 bits (64 columns x 4 bits) | 256 kB |
| instruction (IB) | 1024 words x 400 bits: 16 uB identifiers + 16 x 24-bit lists | 50 kB |
| oAct | 2048 words x 128 bytes | 256 kB |

`msq_ram` is a plain one-write, one-read memory with a one-cycle read.

### Controller (`msq_controller`)
The controller runs one operation through these states:
1. IDLE waits for `start`.
2. LOAD reads the ROWS weight words and IB words from `w_base` / `ib_base`.
   Each row is loaded one cycle later.
3. SCALE reads the scale word that follows the row words in the IB:
   bits [7:0] MXScale, [15:8] I_sf, [23:16] iAct_sf.
4. RUN streams `n_tok` tokens and writes each post-processed word to the
   oAct buffer at its token index.
5. DONE pulses `done` for one cycle.

### Top (`msq_top`)
The top connects the buffers, controller, array and post-processing. Its
ports are plain signals:
- an operation port: `start`, `mode`, `q4`, `n_tok`, bases, `busy`, `done`;
- L2-side write ports for the weight, IB and iAct buffers;
- a read port for the oAct buffer;
- the statistics pulses;
- `row_has_outl`.

The top partial sum entering row 0 is 0, so one operation computes a
dot product over one 64-deep tile.

## What differs from the paper

- **No skew, no sync buffer.** Every row receives its iAct in one cycle for
  all columns, so a row's outputs reach ReCoN already aligned. The paper's
  per-column delay lines are not built.
- **ReCoN width.** The network has 2 x 64 = 128 positions so that packed 2-bit
  weights are separate positions. The paper sizes ReCoN by the array width.
- **Swap split.** The second swap of the paper's example is the FWD setting.
  The configuration uses 3 bits with 4 codes, and the code values are this
  design's own.
- **4-bit partial products.** The shifts 6/4/2/0 follow from splitting the
  8-bit iAct into nibbles as in the PE figure. The printed equation shows
  other shift amounts.
- **Outlier sign.** Halves are sign-magnitude, and the sign bit travels with
  the packet. The paper does not say how the sign is handled.
- **Landing queues and credits** between ReCoN and the next row are this
  design's way of letting one pipelined ReCoN serve all rows without stalls.
- **No accumulation across tiles.** The array has no partial-sum input at
  the top, and post-processing quantizes each 64-deep tile directly. A layer
  with more than 64 inputs per output needs its tiles summed before
  requantization. That is not supported here, so full LLM layers do not run
  on this chip alone.
- **Not built:**
  - the L2 SRAM, the OCP-SRAM interface and HBM2;
  - the non-linear functions of post-processing;
  - multiple ReCoN units.
- **Size.** At the default 64 x 64 size, logic synthesis of the complete chip
  takes longer than ten minutes.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and finishes. For
example, with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Itb \
        rtl/msq_pkg.sv tb/msq_ref_pkg.sv tb/tb_msq_core.sv --top-module tb_msq_core
    ./obj_dir/Vtb_msq_core

Testbenches:

| testbench | what it covers |
|---|---|
| `tb_mp_pe` | both MODEs, outlier bypass, carry chain |
| `tb_pe_row` | row handshake under back-pressure |
| `tb_recon_switch` | the paper's merge example and random merges |
| `tb_recon` | paper's route, latency NST, back-to-back rows |
| `tb_recon_cfg_gen` | paper's route settings, conflicts, random lists through a real ReCoN |
| `tb_recon_arbiter` | round robin, fairness |
| `tb_msq_fifo` | landing queue order, full and empty |
| `tb_msq_core` | 4 x 8 array against the reference; issues, contention, holds, stalls |
| `tb_post_proc` | scale and shift arithmetic, saturation |
| `tb_iact_buffer`, `tb_msq_ram` | buffers |
| `tb_msq_controller` | operation sequence |
| `tb_msq_top` | 8 x 8 chip, 8 operations over both MODEs and output precisions |
| `tb_msq_top_full` | the default 64 x 64 chip with no parameter changes |

Building `tb_msq_top_full` with Verilator takes about a quarter of an hour,
because the 4096 PEs are expanded into C++. The simulation itself takes
seconds.

The last two share `tb/msq_top_tb_body.svh`. It fills the buffers and runs
operations. It then compares every output byte with a reference built from
the quantization arithmetic (`tb/msq_ref_pkg.sv`). The test fails if any of
these never occurred: outlier merges, ReCoN contention, held requests, MODE
switches, outlier-column outputs, shifted inlier outputs, saturation, or
4-bit outputs.
