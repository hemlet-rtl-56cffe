# Hemlet: a heterogeneous compute-in-memory chiplet system for Vision Transformers

A Vision Transformer spends most of its work in two kinds of matrix products.
The *static* ones multiply activations by trained weights. These are the
Q/K/V projections, the output projection and the two FFN layers. The *dynamic*
ones multiply two run-time operands, Q·Kᵀ and P·V inside attention.

Hemlet gives each kind its own chiplet type and joins the chiplets with a
network-on-package (NoP):

* **ACIM chiplets.** Analog RRAM crossbars. They hold all trained weights in
  place, are written once before inference and never again.
* **DCIM chiplets.** SRAM digital compute-in-memory. The arrays are rewritten
  for every block of Q and V, so they carry the attention products.
* **IDP chiplet** (intermediate data process). The global activation buffer,
  a SIMD unit for operators whose inputs come from several chiplets, and in
  this RTL the point where the host attaches.

The second idea is **group-level parallelism (GLP)**, a way of placing weights
in the analog arrays. It removes the throughput limit set by ADCs that are
shared between columns.

This repository is synthesizable SystemVerilog for this system, one file per
module. Every block has a self-checking testbench, and an end-to-end testbench
takes the whole package through one Transformer-block dataflow.

## The ADC bottleneck and group-level parallelism

An ACIM subarray is 128 × 128 RRAM cells of 2 bits. An ADC is much wider than
a crossbar column, so the columns are grouped:

* Each **group** of 8 adjacent columns shares one 8:1 multiplexer and one 9-bit
  ADC.
* A 128-column subarray therefore has 16 ADCs.
* In each conversion cycle, only one column per group is digitised.

Conventional (layer-wise) mapping places one layer's weight columns side by
side. Every group then holds 8 columns of the *same* layer, and a layer needs
all 8 multiplexer positions. Its result takes 8 times as long as the ADCs could
deliver.

GLP interleaves instead. It takes up to 8 layers of identical shape whose
inputs arrive at different times, a *LayerSet*, and builds an augmented matrix
in which column `j` of the `i`-th layer becomes column `c = j·8 + i`. Each group
now holds the same column index of 8 different layers. When one layer runs,
only its own multiplexer position is needed, and all 16 ADCs of every subarray
work in parallel.

The RTL expresses this as follows:

* `glp_mapper` computes the physical place of any weight column:
  `tile = c / 128`, `group = (c mod 128) / 8`, `mux position = c mod 8`. It does
  this for both mappings.
* An `acim_pe` job converts a range of multiplexer positions.
  * A **layer-wise job** uses 8 positions and takes 64 conversion cycles.
  * A **GLP job** uses 1 position and takes 8 cycles.
  * Either way the job produces the 16 outputs of each position it converts.
* The ACIM chiplet counts both kinds of job. The end-to-end test runs one of
  each on the same chiplet and checks both results.

Choosing the LayerSets themselves is offline software and is not part of the
RTL. The paper packs FFN layers first, then the attention projections, across
blocks.

## Analog arithmetic in an ACIM processing engine (PE)

An `acim_subarray` applies one bit-plane of the 128 INT8 inputs per cycle:

* The selected column of every group gives `Σ bit × cell`, at most 128 × 3 = 384.
  A 9-bit ADC represents this exactly.
* A shift-add unit accumulates the conversions with weight 2^b.
* Bit 7 has weight −2^7, because the inputs are two's-complement.
* So 8 cycles give one exact 128-row dot product per group.
* The crossbar and ADC are modelled as this ideal, noise-free function.

A signed INT8 weight `w` does not fit in one 2-bit cell. This design stores it
as follows:

* Each weight is stored as `u = w + 128` (0..255), split into four 2-bit slices.
* A PE has 60 subarrays. Subarray `s` holds slice `s mod 4` of row tile `s div 4`.
* So a PE covers 15 row tiles (1920 inputs) × 128 weight columns.

The adder tree forms

    y = Σ_s 4^(s mod 4) · acc_s  −  128 · Σ_i x_i

The second term removes the offset. It is computed once per job, from the
input buffer, in the cycle before conversion starts.

The result of each position is written to the output buffer one cycle after
its last bit, while the next position's first bit converts.

**Timing.** `done` rises 8·`mux_cnt` + 2 cycles after the cycle in which `start`
is sampled.

### ACIM chiplet

An `acim_chiplet` holds 32 PEs (the A32D16 configuration), a 64 KB buffer and
a command FSM. The FSM does three things for each `OP_VMM` command:

* It copies the input lines from the chiplet buffer into the chosen PE's own
  input buffer.
* It starts the PE.
* It takes the next command at once.

Because each PE works from its own input buffer, the next input block can
arrive in the chiplet buffer while PEs compute. This is the communication /
computation overlap the paper relies on, and `n_overlap` counts it.

The result sender processes finished PEs one at a time:

* It requantises every output to INT8 with an arithmetic shift and saturation.
* It packs 16 outputs per multiplexer position into 64-byte lines. Byte
  `16k + g` is group `g` of the `k`-th converted position.
* It sends the lines to the requested chiplet, then an `FT_DONE` notice.

## Attention on the DCIM chiplet: blocked softmax

**DCIM arrays.** A `dcim_subarray` is a 64 × 64-bit SRAM array holding 64 × 8
INT8 weights. It computes a bit-serial dot product with an AND per weight bit,
a column adder tree and shift-and-accumulate, in 8 cycles.

Each array can be written by rows, or by weight columns so that a matrix is
stored transposed. A `dcim_pe` joins 4 arrays that share one 64-element input
and gives 32 outputs. `done` comes 9 cycles after `start`.

**Memory budget.** The DCIM chiplet has a 512 KB buffer, large enough for the
Q, K and V of all heads it serves. This way the ACIM chiplets can send them
there directly. The problem is the score matrix: one block of B_L query rows
against the full sequence would need B_L × L entries.

**Blocking.** The sequence is walked in blocks of B_L = 32 keys instead (this
value is our choice):

1. For a block of 32 queries, the Q rows are written as the 32 weight columns
   of one PE.
2. For each key block:
   1. The V block (32 rows × 64) is written as rows into two PEs, 32 columns
      each.
   2. Each K row is applied as input to the Q PE. This gives one column of the
      32 × 32 score tile.
   3. For each query row:
      * **Local softmax** (`softmax_blk` stage 1): `p_j = 2^-((m_b − s_j)/2^(sh+4))`
        relative to the block maximum `m_b`, with row sum `l_b`. Padded keys
        beyond L are masked.
      * **P″·V**: the p row (INT8, Q0.7) is the input of the two V PEs. This
        gives the block output S′ (64 values).
      * **Global merge** (stage 2): with `m = max(m_acc, m_b)`,
        `a = 2^-(m−m_acc)` and `b = 2^-(m−m_b)`:
        `O ← a·O + b·S′` and `l ← a·l + b·l_b`.
3. After the last key block, every row is divided by `l` (one reciprocal
   `2^20 / l` and a multiply). The result is sent as an INT8 row to the
   requested chiplet.

**Number formats** (our choice):

* `2^-x` uses a shift for the integer part of `x` and `1 − f/2` for the 4-bit
  fraction `f`.
* `sh` folds the `1/√d` scale and `log2 e` into one shift.

The testbench compares this with a real-valued softmax attention. The two agree
to a few LSBs.

**One head at a time.** The controller uses three of the chiplet's 16 PEs and
runs one head at a time. The paper runs heads on the PEs in parallel, so this
chiplet is marked partial.

## IDP chiplet and the SIMD unit

The IDP chiplet has four SRAM banks of 256 KB (bank count and size are our
choice). A single controller serves two commands:

* **`OP_SIMD`** streams lines through `simd_unit` and writes the results back.
  The unit has five operators:
  * saturating add (residual / accumulation);
  * ReLU;
  * GELU, as `x · sigmoid(1.702x)` with a clipped-linear sigmoid, on Q3.4
    inputs;
  * LayerNorm, with integer mean, variance, square root and one reciprocal per
    vector, output in Q3.4;
  * softmax, base 2.

  Streaming operators give one line per cycle. LayerNorm and softmax collect
  the vector first, up to 16 lines (1024 elements).
* **`OP_SEND`** sends buffer lines to another chiplet, for example hidden states
  to the ACIM chiplets.

SIMD result writes take priority over arriving flits. A flit that collides with
one waits, and `n_bank_stall` counts these waits.

## Network-on-package

The NoP connects the chiplets.

**Flits.** A flit has a 64-byte payload, one chiplet-buffer line. Its header
carries destination and source coordinates, a type and a 16-bit line address.
The flit types are:

| type | effect at the destination |
|---|---|
| `FT_WRITE` | payload written to buffer line `laddr` |
| `FT_CMD` | payload holds a `cmd_t` for the chiplet's controller |
| `FT_WPROG` | programs one row of one ACIM subarray: 128 two-bit cells in bits 255:0, row in 262:256, subarray in 269:264, PE in 277:272 |
| `FT_DONE` | completion notice, `laddr` = command tag |

**Routers.** Every chiplet has a 5-port router: local, N (y+1), E (x+1),
S (y−1), W (x−1). It uses XY routing, two-entry input FIFOs and round-robin
output arbitration.

**Links.** Every mesh link is a pair of `nop_txrx` transceivers. A transceiver
carries a flit as `64 / LINK_BYTES` phits, with the header on side wires
alongside the first phit. At the default `LINK_BYTES = 64` a link moves one flit
per cycle, which is 32 GB/s at 500 MHz.

**Top.** `hemlet_top` places the chiplets on a 3 × 3 mesh:

    y=2   ACIM  ACIM  ACIM
    y=1   DCIM  IDP   DCIM
    y=0   ACIM  ACIM  ACIM

The host, and the DRAM behind it, are outside the design:

* Host flits enter the mesh through the IDP router's local port (`host_in_*`).
* Two kinds of flit arriving at the IDP leave on `host_out_*`:
  * `FT_DONE` notices;
  * `FT_WRITE`s to lines ≥ 0x8000.

A command's `FT_DONE` returns to the command's sender. For host commands, the
sender is the IDP's coordinates.

## What is the paper's and what is this design's

**Taken from the paper:**

* three chiplet types, each with a router, TX/RX, FSM, SIMD unit and buffer;
* 128 × 128 two-bit RRAM subarrays;
* groups of 8 columns sharing an 8:1 multiplexer and a 9-bit ADC;
* 60 subarrays per ACIM PE and 32 PEs per ACIM chiplet, with a 64 KB buffer;
* 4 DCIM subarrays of 64 × 64 per DCIM PE and 16 PEs per DCIM chiplet, with a
  512 KB buffer;
* INT8 data, a 500 MHz clock and 32 GB/s links on a mesh;
* the GLP interleaving;
* Q and V blocks written into DCIM arrays as weights;
* local softmax with a global normalisation;
* the 3 × 3 layout drawn in the paper's system figure.

**Our own choices:**

* bit-serial inputs and offset-coded weight slices;
* all control, command and flit formats;
* the block size B_L = 32;
* all fixed-point formats and approximations;
* IDP bank sizes;
* the host attachment.

**Departures and omissions:**

* Results leave an ACIM chiplet straight from the PE output buffers,
  requantised in the result path.
* The ACIM and DCIM chiplets have no SIMD unit of their own. All non-VMM
  operators run on the IDP, or in the DCIM softmax block.
* A layer wider than one PE (more than 1920 inputs) would need partial sums
  from several PEs. These are not accumulated on chip.
* The DCIM controller runs one head at a time.
* The number of ACIM chiplets is fixed at the six drawn. The paper instead adds
  ACIM chiplets until the whole model fits. The table below shows what that
  means for the three evaluated models.

## Capacity against the evaluated models

The model sizes (embedding width, heads, blocks, sequence length 197) are the
paper's. The FFN width 4d and the 12·d² weights per block are standard ViT
facts.

In this RTL, a din × dout matrix occupies ⌈din/1920⌉ · ⌈dout/128⌉ PEs.

| model | weights (encoder) | PEs needed | ACIM chiplets needed | built |
|---|---|---|---|---|
| ViT-S/16 (d=384, 6 heads, 12 blocks) | 21.2 M | 324 | 10.1 | 6 |
| ViT-B/16 (d=768, 12 heads, 12 blocks) | 84.9 M | 720 | 22.5 | 6 |
| ViT-L/16 (d=1024, 16 heads, 24 blocks) | 302 M | 2112 | 66 | 6 |

* **ACIM.** Six chiplets hold 192 PEs, or 47.2 M INT8 weights. None of the
  three models fits weight-stationary in the six-chiplet package. The hardware
  would hold them with more ACIM chiplets on a larger mesh.
* **DCIM.** Q, K and V of all heads fit in the two DCIM buffers. ViT-L needs
  605 KB against 1 MB.
* **IDP.** The largest activation, 197 × 4096 bytes for ViT-L, fits in the
  1 MB IDP.

## Verification and simulation

Each testbench:

* drives its block through its ports;
* compares the outputs with a model written independently in the testbench;
* checks the cycle counts where a latency is defined;
* ends with a `TB_RESULT checks=… failures=…` line;
* has a watchdog.

Each test also has a deliberately broken copy of its module that it must catch.

| testbench | what it covers |
|---|---|
| `tb_acim_subarray` | exact column sums, MUX selection, signed bit weighting, programming |
| `tb_acim_pe` | full INT8 dot products against a model, GLP and layer-wise jobs, latency 8·mux_cnt + 3 from the start edge |
| `tb_glp_mapper` | augmented-column placement for both mappings, every ADC busy under GLP |
| `tb_dcim_subarray`, `tb_dcim_pe` | row and column writes, signed bit-serial VMM, latency |
| `tb_softmax_blk` | bit-exact local softmax, merge and normalisation across 3 blocks, within tolerance of real softmax attention |
| `tb_simd_unit` | all operators against integer models and real-valued references, LayerNorm/softmax latency |
| `tb_chiplet_buffer`, `tb_nop_router`, `tb_nop_txrx` | storage; routing, back-pressure and fairness; serialisation at 16-byte links |
| `tb_acim_chiplet` | weight programming by flits, a layer-wise and a GLP VMM, result packing, overlap, `FT_DONE` |
| `tb_dcim_chiplet` | attention for L = 40 (masked, two blocks, merges) and L = 32, bit-exact and against real attention |
| `tb_idp_chiplet` | banks, `OP_SEND`, add / LayerNorm / GELU, bank stall, host window and host injection |
| `tb_hemlet_top` | the whole package end to end (below) |

**End-to-end test.** `tb_hemlet_top` uses reduced sizes:

* 2 PEs of 8 subarrays per ACIM chiplet;
* 4 PEs per DCIM chiplet;
* small buffers;
* 32-byte links, so every flit crosses each link as two phits.

Driving only the host port, it performs these steps:

1. Programs the weights of one ACIM chiplet.
2. Stages inputs in the IDP.
3. Runs a layer-wise VMM while the next input block arrives, then a GLP VMM.
4. Collects both results in the IDP.
5. Applies residual add, LayerNorm and GELU there, while other writes stall
   on the bank port.
6. Runs one attention head of 40 tokens on a DCIM chiplet.
7. Reads everything back through the host window and checks it against models.

It counts every mechanism and fails if any never occurred: GLP job,
layer-wise job, overlap, QK and PV operations, blocked-softmax merges, SIMD
commands, bank stalls and multi-phit transfers.

**Full-size simulation.** The package at its default size was not simulated.
It holds 11,520 analog subarrays of 16 K cells each. The largest configuration
simulated is the end-to-end one above. Building it with Verilator takes about
six minutes.

**Running a test:**

    verilator --binary --timing --assert -y rtl +libext+.sv -Irtl \
      rtl/hemlet_pkg.sv tb/tb_acim_pe.sv --top-module tb_acim_pe -o sim
    ./obj_dir/sim +verilator+rand+reset+2

Replace the testbench name for the others. Simulation uses two states, and
every register that is read is reset or written first.

**Warnings that stand:**

* `adc_code` of each subarray is left open in `acim_pe`. It is an observation
  port.
* The router and transceiver assertions sample `rst_n` synchronously.

## Files

* `rtl/hemlet_pkg.sv`: the sizes, flit and command types, and `sat8`.
* ACIM: `rtl/acim_subarray.sv`, `rtl/acim_pe.sv`, `rtl/glp_mapper.sv`,
  `rtl/acim_chiplet.sv`.
* DCIM: `rtl/dcim_subarray.sv`, `rtl/dcim_pe.sv`, `rtl/softmax_blk.sv`,
  `rtl/dcim_chiplet.sv`.
* IDP: `rtl/simd_unit.sv`, `rtl/chiplet_buffer.sv` (also used in the other
  chiplets), `rtl/idp_chiplet.sv`.
* NoP: `rtl/nop_router.sv`, `rtl/nop_txrx.sv`.
* Top: `rtl/hemlet_top.sv`.
* `tb/tb_<module>.sv`: one testbench per module.
