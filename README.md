# DANMP: near-memory multi-scale deformable attention on a DDR5 DIMM

Multi-scale deformable attention (MSDAttn), the core of detectors such as
Deformable DETR, DN-DETR and DINO, barely computes. For every query, every
attention head samples a handful of points on each level of a multi-scale
feature map. Each sample is a bilinear interpolation of four neighbouring
pixel vectors. The samples are then summed with learned attention weights.
The pixels touched are scattered across the feature map and rarely reused, so
on a CPU or GPU the operation is limited by random DRAM accesses, not by
arithmetic.

DANMP moves this work into the DRAM module. Small processing elements sit at
three levels of a DDR5 DIMM:

* **Bank level:** a PE next to a bank reads pixels from that bank at the
  bank's internal bandwidth and performs the interpolation and weighted sum.
* **Bank-group level:** a PE handles the banks of its group that have no PE
  of their own, and adds up the partial sums of the group.
* **Rank level:** a unit in the DIMM's buffer chip distributes instructions
  and adds up the partial sums of the bank-groups into the query's output.

Not every bank gets a PE. Only half of the banks carry one. The host places
frequently sampled ("hot") regions of the feature map in PE banks. It places
the rest ("cold") in the banks without a PE, and the bank-group PE serves
those. The host CPU keeps the fully connected layers and the software that
finds the hot regions and orders the queries. The DIMM executes a stream of
compact 83-bit instructions.

This repository holds synthesizable SystemVerilog for one such DIMM. It covers
the PE datapaths, instruction queues and decoders, per-bank DRAM command
generation and the three reduction levels. It also holds self-checking
testbenches for every block and an end-to-end test of a complete query.

## Hierarchy

```
danmp_dimm                         one DIMM (2 ranks)
├── rank_nmp          x2           buffer chip: 5-entry queue, decoder, rank accumulator, output buffer
│   └── (forwards to)
└── bg_nmp            x2 x 8       one per bank-group
    ├── sync_fifo                  4-entry instruction queue
    ├── bank_nmp      x2           banks 0 and 2 (PE banks)
    │   ├── sync_fifo              2-entry instruction buffer
    │   ├── sampling_pe            Index CU + BI CU + MAC + partial sums
    │   │   ├── icu
    │   │   ├── bicu  (fp32_mul x4, fp32_add x3)
    │   │   └── mac_unit (fp32_mul, fp32_add)
    │   └── bank_cmd_decoder       request queue, ACT/RD/PRE generator
    ├── sampling_pe                the group's own PE for the cold banks
    ├── bank_cmd_decoder x2        banks 1 and 3 (no PE)
    └── fp32_add / fp32_mul        group reduction
```

`danmp_pkg` holds the instruction struct, the opcode and selector enums, the
DRAM command struct and the FP32 arithmetic functions that all units share.

Sizes follow the evaluated system. A DIMM has 2 ranks × 8 bank-groups × 4
banks. The system has 4 channels with one DIMM each; they are four copies of
this top behind four host channels.

## The instruction

Each instruction is 83 bits wide (`nmp_inst_t`, MSB first):

| field     | bits | meaning                                                         |
|-----------|------|-----------------------------------------------------------------|
| reserved  | 2    | pads the fields to 83 bits; ignored                             |
| Mode_Se   | 1    | 0 = DRAM mode, 1 = NMP mode                                     |
| NMP_Se    | 2    | executing level: 0 = rank, 1 = bank-group, 2 = bank              |
| Op_Code   | 4    | 0 Nop, 1 Index, 2 Interp, 3 WSum, 4 Sum, 5 Mean, 6 Clr, 7 Read   |
| DDR_cmd   | 3    | carried but not used (see departures)                           |
| Daddr     | 32   | `{RA[31], BG[30:28], BA[27:26], ROW[25:10], COL[9:0]}`          |
| vsize     | 3    | vector length in 256-bit bursts, minus one (1..8 bursts)        |
| W_value   | 32   | FP32 scalar: attention weight for WSum, scale for Mean          |
| PsumTag   | 4    | accumulation stream (16 tags)                                   |

The named fields add up to 81 bits, not 83, so two reserved bits pad them to
the stated width. The numeric encodings of Op_Code and NMP_Se are this
design's own.

A bank address is a burst number, `ROW << 5 | COL[4:0]`. Each burst is 256
bits, or eight FP32 lanes. A row therefore holds 32 bursts.

DRAM-mode instructions never enter the NMP logic. The top hands them out
unchanged on `dram_mode_valid/dram_mode_inst`, towards the ordinary DDR data
path. That path is outside this RTL.

## How a sample is computed: the sampling PE

The hardest part of the design is the sampling PE (`sampling_pe`). It turns
one sampling point into a weighted, interpolated feature vector in a partial
sum. There are 24 of these PEs per rank: 16 in the PE banks and one in each
bank-group for the cold banks. A sampling point takes two instructions.

**Index.** Daddr points at a 256-bit *sampling record* in the same bank as
the pixels. The PE reads it into its I-Register. The record's lanes are:

| lane | content                                                            |
|------|--------------------------------------------------------------------|
| 0, 1 | reference point px, py (signed, 8 fractional bits, pixel units)     |
| 2, 3 | offset dx, dy (same format)                                        |
| 4, 5 | width w and height h of the feature-map tile in pixels             |
| 6    | base: burst address of pixel 0 of the tile                         |

The host writes the record. The host computes the offsets with the FC layers
anyway.

**The Index CU (`icu`).** This is combinational logic. It forms x = px + dx
and y = py + dy, and splits each into an integer part and an 8-bit fraction
fx, fy. It then yields the four neighbour indices `y·w + x` (top-left,
top-right, bottom-left, bottom-right). A neighbour outside the tile is
flagged invalid and its index is clamped into the tile, so that the read
stays legal.

**Interp / WSum.** For each burst b of the vector (vsize + 1 bursts), the PE
reads the four neighbours at `base + index·(vsize+1) + b` and then:

* The **BI CU (`bicu`)** forms the four weights from the fractions. They are
  (1−fx)(1−fy), fx(1−fy), (1−fx)fy and fx·fy, and an invalid neighbour gets
  weight 0. The products are exact in 16-bit integers before conversion to
  FP32. Four lane-parallel FP32 multipliers and an adder tree then give the
  interpolated burst. Latency: 1 + 4 + 3 + 3 = 11 cycles.
* The **MAC unit** takes the BI CU result. Interp stores it into
  `psum[tag][b]`. WSum adds `W_value × result` to `psum[tag][b]`. Latency: 4
  (multiplier) + 3 (adder) = 7 cycles.

The partial-sum file (O-Register) holds 16 tags × 8 bursts × 8 lanes of FP32.
It resets to zero. **Clr** zeroes one tag.

The PE works on one burst at a time: four reads, then BI CU, then MAC. At
tRCD = 40, tCL = 40 and tCCD = 12 cycles, the DRAM reads dominate; the
arithmetic is only 18 cycles. Overlapping bursts would shorten this. That
optimization is left out.

The reads go through the bank's **command decoder** (`bank_cmd_decoder`).
This block has a 4-entry request queue and splits addresses into row and
column. It keeps the bank open-page and emits PRE, ACT and RD while honouring
tRCD, tRP, tRAS, tRC and tCCD_L (40/40/76/116/12 cycles). At most one command
leaves per cycle. Read data returns tCL after RD and goes straight back to the
PE.

## Hot and cold banks: the bank-group

In every bank-group, banks 0 and 2 carry a `bank_nmp` (instruction buffer,
sampling PE, command decoder). Banks 1 and 3 have only a command decoder. The
BG-NMP's decoder routes the head of its 4-entry queue as follows:

| NMP_Se | target bank | opcode                    | executed by                      |
|--------|-------------|---------------------------|----------------------------------|
| Bank   | 0 or 2      | any                       | that bank's PE                   |
| Bank   | 1 or 3      | Index/Interp/WSum/Clr     | the bank-group PE (redirect)     |
| BG     | any         | Index/Interp/WSum/Clr     | the bank-group PE                |
| BG     | any         | Sum/Mean                  | bank-group reduction             |

The bank-group PE reads bank 1 or 3 through that bank's command decoder, so
cold pixels are read once and never copied across banks. A full queue stalls
the Rank-NMP, which stalls the host through `inst_ready`.

**BG Sum/Mean** waits until its three PEs are idle. Then, for each burst, it
adds its own partial sum and those of banks 0 and 2 for the tag, using 3-cycle
FP32 adders on all eight lanes. Mean multiplies the sum by W_value. The result
is written to the bank-group output buffer (BG Psum, 16 tags × 8 bursts),
which the rank reads.

## Rank level

`rank_nmp` has a 5-entry instruction queue. It forwards bank-group and bank
instructions to the bank-group named by Daddr's BG field. It executes
rank-level instructions itself:

* **Sum / Mean:** wait until all eight bank-groups are idle. For each burst,
  add the eight BG partial sums to the rank register of the tag. Mean then
  scales the register by W_value. Because the rank register accumulates,
  successive feature-map levels can be summed at the rank.
* **Read:** push the tag's bursts into an 8-entry output buffer, as
  `{rank, tag, burst, data}`. Reading the heads' tags in order concatenates
  the heads.
* **Clr:** zero the tag.

The top sends each NMP instruction to the rank named by Daddr's RA bit. It
merges the two output buffers round-robin onto `out_valid/out_ready/out`.

## A query, as the host issues it

For one query, with one PsumTag per head:

1. Clr the tag in every PE and at the rank.
2. For each sampling point: Index (at its record), then WSum with its
   attention weight. NMP_Se is Bank and BA names the bank that holds the
   point's pixels; for a cold bank, the bank-group takes over.
3. BG Sum for the tag in every bank-group that received points.
4. Rank Sum, or Mean with the scale the model uses.
5. Read of every head's tag.

Synchronisation is implicit. A reduction waits until the level below is idle.
The host therefore needs no barriers, only program order.

## Arithmetic

* FP32 throughout, with round-to-nearest-even.
* Subnormal inputs and results are flushed to zero.
* Infinities follow IEEE rules. Overflow gives ±infinity. Every NaN result
  is the canonical quiet NaN.
* Adder latency 3 cycles, multiplier latency 4 cycles, as the paper states.
  Each unit is a combinational operator followed by a pipeline of that depth.
* Coordinates are fixed point with 8 fractional bits. The bilinear weights
  are therefore exact multiples of 2^-16.

## Where this RTL departs from the paper

* **Interpolation formula.** The paper prints a bilinear formula whose weight
  signs cannot be right. This design uses standard bilinear interpolation with
  weights (1−fx)(1−fy), fx(1−fy), (1−fx)fy, fx·fy.
* **Instruction width.** The named fields total 81 bits against the stated
  83. Two reserved bits pad the instruction.
* **DDR_cmd is ignored.** The paper lets the host or the rank pre-compute the
  ACT/RD/PRE flags. Here each bank's command decoder derives them from its
  open-row state, which is equivalent under an open-page policy and needs no
  host knowledge of row state.
* **Sampling coordinates.** The paper does not say how a PE learns where to
  sample. Here the host writes a sampling record and Index reads it from the
  bank. The record layout and the fixed-point format are this design's.
* **Clock domains.** DRAM timing parameters are counted in cycles of the
  single NMP clock. The paper's values are in DRAM clock cycles, so the
  result is pessimistic.
* **Buffers.** The rank output buffer depth (8), the bank-group queue (4), the
  bank instruction buffer (2) and the command queue (4) are not given by the
  paper. Only the rank queue depth (5) is.
* **Host side not built.** The host memory-controller extension (NMP packet
  queue and scheduler) and the clustering-and-packing software are not RTL
  here. The same goes for the DDR PHY and the DRAM arrays. The DRAM banks are
  ports of the top, and the testbenches drive them with a behavioural bank
  model.
* **Serial schedules.** Bursts of one sample and the additions of a reduction
  are done one after another. This is simple and correct, but slower than the
  fully pipelined datapath the figures suggest.

## Sizes against the evaluated workloads

The paper evaluates three detectors: DE-DETR with 100 queries, DN-DETR with
300 and DINO with 900. It runs them on four datasets: VOC, COCO, KITTI and
DOTA. These model shapes are the usual published ones, not given by the
paper: d_model 256, 8 heads of 32 channels, 4 levels, 4 points per level.

* **Vectors and tags.** A head's vector is 4 bursts, within the 8-burst vsize
  limit. The 8 heads use 8 of the 16 tags.
* **Feature maps.** The largest feature map is COCO at 800×1333, about 22k
  pixels over all four levels, or about 23 MB. A bank reaches 64 MB
  (16-bit row, 32 bursts per row), and a DIMM has 64 banks.
* **Query count.** Queries run one after another and reuse the tags, so the
  number of queries does not limit the design.

All twelve combinations fit.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares against a
model written independently in the testbench, using real numbers for the FP32
paths. Each ends by printing `TB_RESULT checks=N failures=M`.

| testbench             | what it checks                                                                 |
|-----------------------|--------------------------------------------------------------------------------|
| tb_fp32_add/mul       | random and corner operands against a real-number RNE model; 3/4-cycle latency  |
| tb_sync_fifo          | random push/pop against a queue model; full/empty and count                    |
| tb_icu                | fractions, neighbour validity and clamped indices over random points           |
| tb_bicu               | interpolation against real arithmetic; 11-cycle latency                        |
| tb_mac_unit           | accumulate / overwrite; 7-cycle latency                                        |
| tb_bank_cmd_decoder   | command order and every timing constraint against a bank model                 |
| tb_sampling_pe        | Index + Interp/WSum against a real-number bilinear model                      |
| tb_bank_nmp           | same through the instruction buffer and command decoder                        |
| tb_bg_nmp             | hot banks, redirected cold banks, BG Sum and Mean, queue stalls                |
| tb_rank_nmp           | forwarding order, wait-for-idle, rank Sum/Mean/Clr/Read with random back-pressure |
| tb_danmp_dimm         | a full query on both ranks: records, Index/WSum per point, reductions, Read    |

`tb/dram_bank_model.sv` is a behavioural DDR bank. It checks the protocol
(RD only to an open row, tRCD and tRP), returns data tCL = 40 cycles after RD,
and fills its memory with a closed-form pattern that the models recompute.
`tb/tb_fp_pkg.sv` holds the shared reference functions.

The end-to-end test counts each mechanism and fails if one never occurs:

* host stalls;
* the DRAM-mode hand-off;
* cold-bank redirects;
* row misses (PRE);
* results from each rank;
* both ranks competing for the output;
* rank Mean.

It runs the top with 2 bank-groups per rank (2 × 2 × 4 banks, 16 banks with 8
PEs) to keep compile time short.

The full 2 × 8 × 4 configuration has also been built and run through the same
program. It returned every result burst from both ranks, with no DRAM
protocol error. However, its Verilator C++ build takes about 20 minutes, so
it is not part of the regular test set, and its result values have not been
compared at that size. The largest configuration simulated with all checks
passing is 2 × 2 × 4.

To simulate with plain Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert \
  tb/tb_fp_pkg.sv rtl/danmp_pkg.sv rtl/fp32_add.sv rtl/fp32_mul.sv rtl/sync_fifo.sv \
  rtl/icu.sv rtl/bicu.sv rtl/mac_unit.sv rtl/bank_cmd_decoder.sv rtl/sampling_pe.sv \
  rtl/bank_nmp.sv rtl/bg_nmp.sv rtl/rank_nmp.sv rtl/danmp_dimm.sv \
  tb/dram_bank_model.sv tb/tb_danmp_dimm.sv --top tb_danmp_dimm -Mdir obj
./obj/Vtb_danmp_dimm
```

Other testbenches need only the files of their block and below. Every module
has defaults for all parameters and elaborates on its own as a top.
