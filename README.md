# MARS: read mapping of raw nanopore signals inside an SSD, in SystemVerilog

Nanopore sequencers output raw electrical current, not bases. Raw-signal genome
analysis maps those signals straight onto a reference genome. Its databases
(the genome index plus the raw reads) are tens of gigabytes, so on a host most
of the time goes into moving data off the storage device. MARS does the
mapping inside the SSD that holds the data. It adds four kinds of compute units
to parts the SSD already has:

* Arithmetic Units and Querying Units sit in the SSD's own DRAM, next to its
  subarrays.
* Sorters and Mergers sit in the SSD controller, one pair per flash channel.
* A control FSM in the controller runs the whole pipeline without the host.

This repository holds synthesizable RTL for those units and for the control
FSM, wired into one top module (`mars_top`). The flash, the FTL processors, the
NVMe front end and the DRAM periphery are existing SSD parts. They stay outside
and appear as plain ports.

## The pipeline and where each step runs

| step | work | unit |
|------|------|------|
| load | database pages: flash to DRAM, round robin over 8 channels | control FSM with its L2P mapper |
| 1a, 1b | quantization, then signal-to-event conversion, in 16-bit fixed point | Arithmetic Units |
| 2c, 2d | hash values of event groups; frequency filter | Arithmetic Units |
| 2e | hash-table lookup of every hash value | Querying Units |
| 2f | seed-and-vote filter: drop windows with too few votes | Arithmetic Units |
| 3g | bucketize the anchors, one bucket per genome region | Arithmetic Units |
| 3h | sort every bucket | 8 sort lanes (Sorter + Merger) |
| 3i | dynamic-programming chaining on the sorted anchors | Arithmetic Units |
| write | results: DRAM to flash, out of place | control FSM |

A step starts as soon as the previous one ends, and then all units of its kind
start together. The data is spread evenly over the DRAM, so every unit works
on its own rows and no unit waits for another.

The Arithmetic Units are programmable, so steps 1, 2c/2d, 2f, 3g and 3i are
programs in their instruction buffers, not fixed hardware. The thresholds of the
filters are immediates in those programs. The MARS paper uses
(thresh_freq, thresh_voting, voting_window) = (2000, 5, 256) for small genomes
and (20000, 2, 256) for large ones.

## Modes, commands and the control FSM (`mars_control_unit`)

The SSD has two modes:

* **Conventional mode**: an ordinary SSD.
* **Accelerator mode**: the SSD only runs the mapping.

Two NVMe commands drive the mode changes. They arrive at the top as a decoded
`cmd` port:

* `MARS_Init` carries a configuration record (`mars_cfg_t`, below), which is
  latched. The FSM leaves conventional mode and asks the FTL firmware to flush
  the conventional-mode metadata (`flush_req`, held until `flush_done`).
* The FSM then runs LOAD, EVENT, HASH, QUERY, VOTE, BUCKET, SORT and CHAIN.
  `step_evt` pulses at every step change.
* The FSM waits in RESULT until the host sends `MARS_Write`.
* WRITE copies the result rows to flash. DONE pulses `ftl_update`, so that
  both FTLs learn the new pages, and returns to conventional mode.

Each compute step has three phases:

1. A one-cycle launch: `au_start`, `qu_start` or `lane_start`.
2. One settle cycle.
3. A wait until the OR of the units' busy flags is low.

For Arithmetic-Unit steps, the launch also broadcasts that step's program entry
point from the configuration record.

**Accelerator-mode L2P (`mars_l2p`).** Genome data is written once and read
sequentially, so the accelerator-mode FTL keeps a much smaller mapping than
the normal one:

* the starting LPA,
* the page offset of the first physical page,
* the number of pages,
* a list of physical block addresses (PBAs).

Page *i* of a database is on channel *i mod 8*, in list block
*(start_page + i div 8) div 256*, at page *(start_page + i div 8) mod 256*.
The mapper issues one request per cycle when the flash side is ready.
Results are written the same way, using PBAs that the firmware chose for them.
The writes are out of place.

**Page placement.** A flash page is one DRAM row here (2048 bytes):

* Database page *k* goes to subarray 0 of pair *k mod 256*, row
  *load_row + k div 256*.
* Result page *k* comes from pair *k mod 256*, row *res_row + k div 256*.

**Configuration record.** `mars_cfg_t` in `mars_pkg` holds:

* where the database is in flash, and its size;
* the first DRAM row to load;
* the five program entry points;
* the Querying Units' key row, result row, table rows and table base index;
* the bucket source and destination rows, and the eight bucket lengths;
* where the results go, in flash and in DRAM.

## SSD-internal DRAM and the compute placed in it (`mars_pim_pair`)

The DRAM is built from **subarray pairs**. Each pair holds:

* two subarrays (`mars_subarray`, 256 rows of 2048 bytes);
* one Querying Unit per subarray;
* one Arithmetic Unit for the pair, at the edge of the two subarrays.

At the default size there are 256 pairs: 512 subarrays, 256 Arithmetic Units
and 512 Querying Units.

The subarray is a behavioural model. A row request returns the whole row one
cycle later, and a write stores a whole row. Real activation, precharge and
refresh timing is not modelled.

Every subarray has a single row port, granted in this order:

1. the external port (subarray 0 only),
2. that subarray's Querying Unit,
3. the Arithmetic Unit.

The FSM runs one step at a time, so only one requester is active at once. An
assertion checks this. The external port of pair *p* is used by the FSM during
LOAD and WRITE, and by sort lane *p* during SORT.

Note on sizes: the paper's DRAM is 4 GB in 16 banks, but 512 subarrays of
256 × 2048-byte rows are only 256 MB. This design reads the 512 as the
computation-enhanced subarrays and models only those. The rest of the DRAM,
which holds buffers and further partitions of the index, is not modelled.

## Arithmetic Unit (`mars_arith_unit`)

The Arithmetic Unit is a small FULCRUM-style near-DRAM processor with 16-bit
words. It has five parts:

* **ALU.** One operation per cycle: ADD, SUB, MUL, AND, OR, XOR, SHL,
  SHRA, MIN, MAX, CMPLT and CMPEQ. MIN, MAX and CMPLT are signed.
  MUL is `(a × reg[rb]) >>> imm[3:0]`, a 16×16 fixed-point product rescaled
  by a shift.
* **Registers.** r0 to r7; r0 always reads 0.
* **Instruction buffer.** 64 pre-decoded instructions (`au_instr_t`), written
  through `ib_we`/`ib_addr`/`ib_data`. All units of the top are written
  together.
* **Column-selection latches.** Three row-wide latch rows, each with a
  column pointer.
  * `ACT` copies a subarray row into a latch row.
  * `RDCOL`/`WRCOL` read or write the word under the pointer, and may advance
    the pointer.
  * `SETCOL` sets the pointer.
  * `WB` writes a latch row back to a subarray row.
  * For ACT and WB, the row address is `reg[ra] + imm` and the `sub` field
    picks the subarray.
* **Control unit.** It picks the next instruction.

How programs branch: an instruction has no program counter increment. Instead
it names both possible successors, `next_t` and `next_f`. The flag is
*result ≠ 0*, and it selects between them. This is the paper's idea of
pre-decoding every branch outcome into the instruction buffer. A compare
followed by its two successors is a branch, and a decrement whose successors
are "loop head" and "exit" is a counted loop. `WRCOL` follows the same rule
(its result is the stored value), so give it the same `next_t` and `next_f`.
`NOP`, `SETCOL`, `ACT` and `WB` always go to `next_t`.

Timing: one cycle per instruction. ACT takes two cycles: the row request,
then the latch. `done` pulses one cycle after HALT.

Example: in `tb/tb_mars_arith_unit.sv`, the quantization loop over a
16-word row takes 9 + 7 × 16 clock edges.

## Querying Unit (`mars_query_unit`)

The Querying Unit is a pLUTo-style lookup done *by* the DRAM: rows are
activated one after another, and a per-column compare decides what each sense
amplifier copies.

Table layout: subarray row *first_row + i* holds the table entry for index
*key_base + i*, repeated in every 16-bit slot, so that each column can copy
its own. A query works on a whole key row, which is 1024 keys at full size.

1. **Key loading.** The key row is read into the source buffer.
2. **Row sweeping and matching.** Rows *first_row … first_row + n_rows − 1*
   are activated, one per cycle. For each activated row, slot *s* raises its
   matchline when key *s* equals the row's table index.
3. **Selective copy.** Matched slots take the activated row's word into the
   output buffer, as the gated sense amplifiers would.
4. **Result assembly.** The output buffer is written to `dst_row`. Keys that
   matched no row hold all ones (MISS).

`done` comes *n_rows + 5* clock edges after `start` is sampled.

`key_base` lets a table larger than one subarray's 256 rows be split over
subarrays, or loaded and swept in parts. This is how MARS handles an index
larger than DRAM: the host splits it into regions that are loaded and queried
one after another.

## Sorting anchors: the sort lane (`mars_sort_lane`, `mars_sorter`, `mars_merger`)

Chaining needs each bucket of anchors sorted. An anchor is 32 bits: a 16-bit
reference position over a 16-bit read position. Sorting a 32-bit anchor sorts
by reference position first. There is one lane per flash channel, eight in
all. Lane *b* sorts the bucket in pair *b*, reading rows `bkt_src_row…` (512
anchors per row) and writing the sorted bucket to rows `bkt_dst_row…`. Slots
after the last anchor of the last row get the all-ones padding value.

* **Sorter.** A bitonic network for 128 elements, folded onto 64
  compare-and-swap units. Each cycle applies one of its 28 stages. A bucket is
  cut into runs of 128, and a short run is padded with all ones. While one run
  sorts, the previous one drains and the next one fills, so input and output
  are one element per cycle. After the last element of a run is in, the run
  needs 28 sort cycles and one transfer cycle before it starts to drain.
* **Merger.** It collects up to `MAX_RUNS` (8) sorted runs in local buffers
  and merges them in one pass, sending the smallest run head each cycle.
* **Bypass.** A bucket of a single run skips the merger's buffers. `bypass`
  pulses once per anchor sent this way.
* **Overflow.** If a bucket has more than `MAX_RUNS` runs, the buffered runs
  are merged and emitted as one sorted segment, and `overflow` pulses. The
  following runs then form the next segment.

The paper intends such segments to be buffered in DRAM and merged again. That
second pass is not built, so a bucket over 1024 anchors comes out as several
sorted segments of 1024. A row port shared by reads and writes gives the
write priority, which is where the lane's input stalls come from.

## What follows the paper, and what is this design's

From the paper:

* the five unit types and their counts (256 AU, 512 QU, 8 sorters, 8 mergers,
  1 control unit);
* the placement of the units, and the step order;
* the two modes, the metadata flush, `MARS_Init` and `MARS_Write`;
* the compact L2P with round-robin channel reads;
* the Arithmetic Unit's parts and its branch-by-pre-decoded-successor
  control;
* the Querying Unit's four steps;
* a sorter of up to 128 elements feeding a merger;
* 16-bit fixed-point words;
* the DRAM geometry (256 rows of 2048 bytes, 512 subarrays).

This design's own choices:

* the instruction format and the op list;
* r0 = 0, three latch rows, eight registers and a 64-entry buffer;
* the row-port arbitration;
* the configuration record and the page placement;
* the table layout and the MISS value;
* the folded sorter;
* 32-bit anchors;
* the merger's run buffers with min-of-heads selection, where the paper names
  a bitonic merger;
* 256 pages per flash block and a 64-entry PBA list;
* a flash page equal to one DRAM row.

What is missing:

* the DRAM spill and second merge pass for buckets longer than
  `MAX_RUNS × 128`;
* any DRAM or flash timing model;
* the overlap of loading with computation that the paper uses to hide
  index-partition loading;
* the FTL firmware itself.

Two statements in the paper conflict:

* **Merger buffering.** One passage calls the merger "one-pass, no
  intermediate buffering". Another has local registers, with spills to DRAM
  when they run out. This RTL follows the second.
* **Vote threshold.** One passage keeps windows with votes *above* the
  threshold. Another excludes windows *below* it. The example programs keep
  windows with votes ≥ the threshold, which matches the paper's figure for
  threshold 5.

## Capacity against the evaluated datasets

At default parameters:

* One `MARS_Init` run reaches 64 PBA-list entries × 256 pages × 2048 bytes =
  32 MB of flash.
* The modelled DRAM holds 256 MB.

The paper's datasets are 11 GB (SARS-CoV-2), 27 GB (E. coli), 39 GB (yeast),
74 GB (green algae) and 39 GB (human). Each one has to be processed as many
runs, issued by the host: at least 352, 864, 1248, 2368 and 1248 runs. The
human index is 52 GB, which the paper splits into 2.6 GB regions, and one such
region is still ten times the modelled DRAM. The RTL runs the mechanism on one
partition at a time. The partitioning and the sequencing of runs belong to the
host or the firmware, and are not in this RTL.

## Files

`rtl/`:

* `mars_pkg.sv`: sizes, the AU instruction format and opcodes, the commands,
  the FSM states, the flash address and the configuration record.
* `mars_subarray.sv`: the DRAM subarray model.
* `mars_arith_unit.sv`, `mars_query_unit.sv`, `mars_pim_pair.sv`: the compute
  in DRAM.
* `mars_sorter.sv`, `mars_merger.sv`, `mars_sort_lane.sv`: the sort lanes.
* `mars_l2p.sv`, `mars_control_unit.sv`: the control side.
* `mars_top.sv`: everything together.

`tb/` has one self-checking testbench per module, `tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. It checks cycle counts
where the design fixes them.

* `tb_mars_top` runs the whole pipeline with real Arithmetic Unit programs at
  a reduced size: 8 pairs, 64 rows of 512 bits, 2 merger buffers. It compares
  every intermediate DRAM row with a reference model. It also requires each
  mechanism to occur: both mode switches, the flush, flash read and write
  stalls, sorter stalls, query hits and misses, merger bypass and overflow.
* `tb_mars_top_full` runs one complete, shorter operation on the design at its
  full default size. The build takes about 2 minutes and the run under half a
  minute.

To simulate, for example:

    verilator --binary --timing --assert -Wno-fatal rtl/mars_pkg.sv rtl/*.sv \
        tb/tb_mars_top.sv --top-module tb_mars_top -o sim
    ./obj_dir/sim +verilator+rand+reset+2

Uninitialised state starts random in this flow. Everything the design reads
is reset or written first.
