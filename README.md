# A unified neural-rendering accelerator in SystemVerilog

Neural rendering pipelines differ a lot from each other: mesh rasterisation,
small MLPs, low-rank decomposed feature planes, multiresolution hash grids and
3D Gaussian splatting. Looked at closely, though, they break down into just
five recurring *micro-operators*:

| micro-operator          | what it does                                   | example pipeline |
|-------------------------|------------------------------------------------|------------------|
| geometric processing    | rasterise triangles, keep the nearest per pixel | mesh-based      |
| combined grid indexing  | look up and interpolate a 3-D (hash or dense) grid | hash grid     |
| decomposed grid indexing| look up 2-D planes, then combine the planes    | low-rank grid    |
| sorting                 | order keys (e.g. depths) with their ids        | Gaussians        |
| GEMM                    | matrix-vector products of small MLP layers     | MLP-based        |

Each of them has two parts. An *indexing* part works out where data sits and
fetches it; a *reduction* part combines what was fetched. This design uses one
array of reconfigurable processing elements (PEs) for every micro-operator.
Each PE does the indexing out of its own scratch pads. Two configurable
networks between the PEs do the reduction: an input network and a reduction
network. Configuration registers in every PE pick the micro-operator. Nothing
in the datapath is specific to one pipeline.

The RTL is synthesisable SystemVerilog-2017. Every block has its own
self-checking testbench. There is also an end-to-end testbench that runs all
five micro-operators through the host register interface.

## Top level (`ur_top`)

```
 host bus ──> host_if ──> dma_engine <──> external memory port (ext_*)
                 │            │
                 │     ┌──────┼───────────────┬──────────────┐
                 │  global buffer       private buffer   input buffer
                 │   (256 KB)              (128 KB)         (64 KB)
                 │                            │  (DMA)         │
                 v                            v                v
             array_ctrl ───────────────> pe_array 16x16 <── points / GEMM inputs
                                    │ line results   │ column outputs
                                    v                │
                             line_aggregator         │
                                    v                v
                               output_collector ──> output buffer (16K x 32 bit)
```

* **Memories.** Every memory holds 16-bit words, except the output buffer,
  which holds 32-bit entries of two BF16 features. Its default is 16K entries
  (64 KB), built from two 16-bit banks. All of them are `sram_sp`: a
  single-port array with a one-cycle read latency.
* **Parameters of `ur_top`.** `GLB_WORDS` = 131072, `IBUF_WORDS` = 32768,
  `PBUF_WORDS` = 65536, `OBUF_ENTRY` = 16384 and `NR` = 16. `NR` sets the
  number of PE lines and can be lowered to make simulation faster. The
  number of columns is fixed at 16, because grid tables are interleaved over
  the 16 PEs of a line (see below).
* **External memory.** It is reached through a simple request/grant word
  port. An access is accepted when `ext_gnt` is high with `ext_req`. Read
  data comes back later with `ext_rvalid`.

### Host registers (`host_if`)

All registers are 16 bits wide, on an 8-bit address. Reads are
combinational.

| addr      | name | meaning |
|-----------|------|---------|
| 0x00      | CMD | write bit0 to start a DMA move, bit1 to start a micro-operator |
| 0x01      | STATUS | bit0 DMA busy, bit1 array busy, bit2 output overflow seen, bit3 point overrun seen |
| 0x02–0x08 | DMA | source space, source address lo/hi, destination space, destination address lo/hi, length |
| 0x10–0x19 | run | UOP, IBUF_BASE, COUNT, PERIOD, ROW_MASK, COL_MASK, OBUF_BASE, GROUP, AGG_OP, GEMM_LAST_ROW |
| 0x20/0x21 | PE masks | rows and columns reached by a PE configuration write |
| 0x28–0x2F | PE config | configuration register 0..7 of every selected PE (one write reaches all of them) |
| 0x30–0x35 | statistics | run cycles, output entries written, output overflows, GEMM stall cycles |

`irq_done` is high for one cycle, on the first clock edge after a run or a
DMA move finishes.

DMA address spaces (`ur_pkg::dma_space_e`):

| space | memory |
|-------|--------|
| 0 | external memory |
| 1 | global buffer |
| 2 | input buffer |
| 3 | private buffer |
| 4 | output buffer, addressed in 16-bit halves |
| 5 | PE scratch pads |

A PE scratch-pad address is `{row[19:16], col[15:12], cell[11:9], word[8:0]}`.
Cells 0–3 are the four FF cells and cell 4 is the PS cell. Between on-chip
memories the DMA moves one word every 3 cycles.

A typical run goes like this:

1. DMA the tables, weights or triangles into the PE scratch pads.
2. DMA the points or input vectors into the input buffer.
3. Broadcast the PE configuration.
4. Write the run registers and set CMD bit1.
5. Wait for `irq_done`.
6. DMA the results out of the output buffer or the PS scratch pads.

## The processing element (`pe`)

Each PE contains:

* **FF scratch pad** (`ff_scratchpad`). Four 512x16 cells. It also has a load
  port, which DMA uses to preload and read out, and which has priority over
  the controller.
* **PS scratch pad** (`ps_scratchpad`). One 512x16 cell that acts as the PE's
  output memory. In front of it sits a 4-entry register buffer, a FIFO of
  (address, data) writes. The buffer drains into the cell whenever the load
  port leaves the cell free. When the buffer is full, the controller stalls.
* **ALU** (`pe_alu`). Four INT16 MACs and four BF16 MACs. They are wired into
  one of several layouts:
  * vector: products, plus two cross products for edge functions
  * grid: index function, corner weight, and two feature MACs
  * comparator
  * adder tree: an accumulator plus four products
* **Controller** (`pe_controller`). One state machine for geometry, sorting
  and GEMM, plus a separate pipelined path for grid points.
* **Routers.** `input_data_router` handles the input network and
  `reduction_data_router` handles the reduction network.

Configuration registers (`ur_pkg::pe_cfg_t`):

| reg | meaning |
|-----|---------|
| r0 | [2:0] micro-operator, [3] hash index, [4] 3-D grid, [6:5] and [8:7] plane axes, [9] ReLU |
| r1 | triangles, sort elements, or GEMM outputs M |
| r2 | grid resolution N, or GEMM inputs K |
| r3 | geometry region x0, or log2 of the grid table size (at most 14) |
| r4 | region y0, or GEMM batch size |
| r5 | region width |
| r6 | region height |

BF16 arithmetic everywhere truncates toward zero and flushes subnormals to
zero. There is no NaN handling.

## How each micro-operator is mapped

### Geometric processing
Each PE owns a rectangle of at most 128 pixels. It holds up to 170 triangles
in its FF scratch pad, three 4-word rows per triangle:

* row 3t: xA, yA, xB, yB
* row 3t+1: xC, yC, zA, zB
* row 3t+2: zC, id

Coordinates are signed, in pixel units. Depths are unsigned.

For every pixel, a counter walks through all the triangles. The vector ALU
forms the three edge functions:

* e0 for edge AB, which is the weight of C
* e1 for edge BC, which is the weight of A
* e2 for edge CA, which is the weight of B

Comparing depths would need a division by the triangle area. The min-depth
hold avoids it: it compares the candidates' depths as exact cross-multiplied
fractions.

For each pixel, four words go to PS address 4·pixel+k:

* the id of the nearest triangle, or 0xFFFF if no triangle covers the pixel
* |wA|, |wB| and |wC| as BF16, not normalised (they sum to twice the area)

Cost: 6 cycles per triangle per pixel, plus about 6 per pixel.

### Grid indexing (combined and decomposed)
A point has three Q0.16 coordinates in [0,1). It enters each PE line from the
west and moves one PE east per cycle.

In each PE, and for each of the 2^D corners (D = 3, or 2 for a plane):

1. The ALU computes the index. This is either a hash,
   `x ^ y·P1 ^ z·P2` using the low 16 bits of the usual spatial-hash primes,
   or linear, `x + W(y + Wz)` with W = N+1.
2. The index is cut to r3 bits.
3. The entry lives in the PE whose column is `idx[3:0]`, at bank pair
   `idx[13]` and word `idx[12:4]`. A table of 2^14 entries with two BF16
   features each therefore fills exactly one line's FF scratch pads. That PE
   adds weight × features, where the weight is the product over axes of the
   fraction or one minus the fraction. Every other PE adds zero.

The reduction network is a chain running west to east, one BF16 add and one
register per hop. It stays in step with the travelling point, so the line's
interpolated result leaves the east edge after NC+2^D+2 cycles.

Points can be issued every `PERIOD` cycles, as long as PERIOD ≥ 2^D+2.
Closer points are counted as *overrun*.

Decomposed grids go further. `line_aggregator` combines GROUP adjacent lines
into one result, either by multiplying them (tri-plane) or by adding them.
`output_collector` then writes the group results, lowest group first, one
32-bit entry per cycle. If a new set arrives while the previous one is still
being written, the new set is dropped and counted as *overflow*. For combined
grids every line is its own level, so GROUP is forced to 1.

### Sorting
Each PE sorts up to 512 16-bit keys. The keys sit in cell 0 and their ids in
cell 1. The sort is a bottom-up merge sort. Each pass reads from one pair of
cells and writes to the other, and the ALU acts as the comparator. The result
is stable and ascending, and ends in cells 0/1. The cost is at most 3 cycles
per element per pass, about 2.7 on average. PEs sort independently. Merging
the sorted runs of different PEs is left to the host.

### GEMM
The weights stay in place in the PEs (weight stationary). The PE in row r
holds MLP layer r, and each column is an independent MLP.

* Weight layout: W[m][k] is at cell k mod 4, address m·K/4 + k/4. K is a
  multiple of 4 and at most 64, and M·K ≤ 2048.
* Compute: the PE buffers the K inputs of a vector. Each output then takes
  K/4+3 cycles on the adder tree.
* Output: ReLU is optional. Each output goes both to the PS scratch pad and
  to the PE below, through a valid/ready link.
* The last layer: `GEMM_LAST_ROW` chooses which row's outputs leave the
  array. The collector serves the columns round-robin.
* Stalls: a full downstream PE holds the output. Those cycles are counted.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. It
also has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/ur_pkg.sv tb/tb_util_pkg.sv $(ls rtl/*.sv | grep -v ur_pkg) \
  tb/tb_pe.sv --top-module tb_pe -Mdir obj_pe -o sim
./obj_pe/sim
```

Replace `tb_pe` with any testbench in `tb/`:

* One testbench per block.
* `tb_ur_top`: the whole flow on an 8-line array with smaller buffers. It
  builds in about a minute and a half.
* `tb_ur_top_full`: the same flow at the default size. It builds in about
  five minutes.

Both top-level testbenches run sorting, geometry, a hash grid, a tri-plane
grid, a two-layer GEMM, and the overflow and overrun cases. They check the
results against reference models written in the testbench, and print how many
times each mechanism was exercised. The external memory is a behavioural
model inside the testbench.

## Where this design departs from the paper or goes beyond it

Not built:

* **Special function units.** The paper lists four special function units
  per PE but does not say what they compute, so none are built.
* **Power and clock gating.** Not modelled.
* **Host SoC and DRAM.** These are outside the design.

Built, but limited:

* **Gaussian splatting.** Only the sorting step is supported. Rasterisation
  covers triangles only.
* **Vertical reduction.** In the paper the PEs pass the reduction down the
  array. Here it is done by one aggregator at the array edge, with the same
  function.

This design's own choices, not given in the paper:

* the register map, the word widths and the DMA
* every table and record layout described above
* BF16 rounding
* the truncated hash primes
* the interleaving of grid tables over a line
* the depth of the PS register buffer
* the drop-and-count rule for output overflow

Not measured:

* **Timing.** All cycle counts above are those of this RTL. Clock frequency,
  area and energy are not measured.
