# HashMem: hash-bucket search next to the DRAM row buffer

A hashmap lookup on a large table spends most of its time in DRAM. Finding the
bucket is cheap. Walking it costs the time: every key-value pair of the bucket
crosses the memory bus to reach the CPU, and only one of them is wanted.
HashMem stores each hash bucket in a single DRAM row and searches it where the
row is opened. A processing element (PE) at the edge of each subarray compares
the probed key with the pairs in the subarray's row buffer. Only the matching
value travels back to the host. A rank-level unit (RLU) on the DIMM sits
between the memory controller and these PEs. It takes probe commands, opens
rows within DRAM timing, starts the PEs and returns one cache line per probe.

This RTL implements the digital part: the comparison unit, the output
register, both PE variants, the PE array of a bank, the RLU and a top that
joins them for one rank. The DRAM cell arrays are not in it. The host side is
not in it either: the memory controller changes, the PHY command encoding and
the software library. The top takes row buffers in through ports and sends row
commands out through ports. Testbenches drive it with a behavioural DRAM model.

## Data layout: slots, pages and rows

* **Slot.** A 64-bit word holding a 32-bit key in bits [63:32] and its 32-bit
  value in bits [31:0]. A 2 KB row (1024 columns of 16 bits) holds 256 slots,
  numbered from bit 0 upwards.
* **Page.** A run of slots inside a row, given to the hardware as
  `start_slot..end_slot`. Several pages may share a row. A PE looks only at the
  slots of the page it is asked to probe, even when other pages of the same
  row hold the key.
* **Bucket.** One or more pages. When a bucket outgrows its page, the host
  allocates an overflow page and links it to the bucket. A lookup then sends
  one probe command per page. Combining the results is the host's job.
* **Deleted pairs** are overwritten with a tombstone key that is never
  probed. The hardware needs no special case for them: a tombstone simply
  never matches.
* **Missing keys** read back as value 0 (NULL) with the found flag clear.

The hardware does not pack free slots. An unused slot must hold a key that is
never probed: zero in the testbenches.

## One probe, cycle by cycle, and how probes overlap

The RLU keeps one sequencer per bank and uses a closed-page policy. A
sequencer runs each probe through these steps:

| step  | RLU output                           | wait                                |
|-------|--------------------------------------|-------------------------------------|
| ACT   | `dram_act`, bank, subarray, row      | until the row-command bus is free, `T_RRD` has passed since the last ACT, and fewer than four ACTs fall in the last `T_FAW` cycles |
| tRCD  | -                                    | `T_RCD` cycles until the row buffer holds the row |
| START | `pe_start`, bank, key, slot range    | until the PE start bus is free      |
| SCAN  | -                                    | until the bank's PE pulses `done`; the result goes into its reorder-buffer slot |
| tRAS  | -                                    | until `T_RAS` cycles have passed since ACT |
| PRE   | `dram_pre`                           | until the row-command bus is free   |
| tRP   | -                                    | `T_RP` cycles before this bank may be opened again |

Commands leave the queue in order. The command at the head goes to its
bank's sequencer once that sequencer is idle and a reorder-buffer slot is
free. So probes to different banks overlap. A probe to a busy bank holds up
every command behind it, even commands for idle banks. Two buses are shared
by all sequencers: the row-command bus (one ACT or PRE per cycle) and the PE
start bus. On each, the lowest-numbered bank that asks wins. The reorder
buffer hands results to the memory controller in command order. If the
controller stops taking results, the buffer fills, dispatch stops, and then
the command queue fills and `cmd_ready` drops.

The PE samples `pe_start` at least `T_RCD` cycles after the DRAM samples the
ACT. It is exactly `T_RCD` unless another bank holds the start bus. The PE's
`done` is high `n + 1` cycles after it samples `start`. Here `n` is the scan
time:

* **Area-optimised PE:** `n` is the number of slots compared. That is the hit
  position minus `start_slot` plus 1, or the whole page on a miss.
* **Performance-optimised PE:** `n` is the number of groups of `CMP_UNITS`
  slots visited. At the default size this is 1.

For a lone probe, `rsp_valid` rises `T_RCD + n + 2` cycles after the ACT.

## The two processing elements

Both variants have the same three parts: comparison units, a control unit
(a two-state FSM, IDLE and SCAN), and an output register. Both also have the
same start/done handshake: `start` is sampled in IDLE, and `done` pulses for
one cycle when the output register holds the result. The register keeps the
result until the next probe clears it.

**Area-optimised (`hm_pe_area`)** is element-serial and bit-parallel. A single
comparison unit reads one whole slot per cycle, from `start_slot` upwards. It
stops at the first hit or at `end_slot`. One PE serves `SA_PER_PE` adjacent
subarrays, and the probed subarray's row buffer is selected by `sa_sel`. At
the defaults, 64 PEs serve the 128 subarrays of a bank, so two subarrays share
each PE.

**Performance-optimised (`hm_pe_perf`)** is element-parallel and works like a
CAM on the open row. `CMP_UNITS` comparison units sit under one subarray's row
buffer. At the default of 256, one per slot, the whole row is compared in a
single cycle. With fewer units the FSM steps through the row in groups of
`CMP_UNITS` slots, one group per cycle. It starts at the group that holds
`start_slot`. Slots outside the page are masked. If the key occurs more than
once in the page, the lowest-numbered slot wins. Every subarray has its own
PE.

`hm_bank` holds a bank's PEs and routes `start` to the PE that serves the
addressed subarray. It remembers which PE that was and returns that PE's
`done`, `found` and `value`. `hashmem_top` broadcasts the key and the slot
range to all banks. It starts only the addressed bank and gives the RLU that
bank's result.

## Interfaces of `hashmem_top`

* `cmd_valid` / `cmd_ready` / `cmd`: the probe command, a `hm_pkg::pim_cmd_t`.
  Its fields are the key (32 bits), bank (3), subarray (7), row (9),
  `start_slot` (8) and `end_slot` (8). It is a valid/ready handshake.
* `rsp_valid` / `rsp_ready` / `rsp_line`: a 512-bit cache line, in command
  order. The value is
  in bits [31:0], the found flag in bit 32, and zeros above.
* `dram_act`, `dram_pre`, `dram_bank`, `dram_subarray`, `dram_row`: row
  commands to the DRAM arrays. Each is a one-cycle pulse.
* `rowbuf[BANKS][SUBARRAYS]`: every subarray's row buffer. It must show the
  opened row from `T_RCD` cycles after the ACT until the PRE.
* `pe_busy[BANKS]`: high while a PE of that bank is scanning.

Reset (`rst_n`) is asynchronous and active low. Assertions check these rules:
no start to a busy PE, no FIFO overflow or underflow, a stable `rsp_line`
while it waits for ready, and bank and subarray numbers within range.

## Parameters

| parameter   | default | origin |
|-------------|---------|--------|
| `BANKS`     | 8       | the evaluated DDR4 device |
| `SUBARRAYS` | 128     | the evaluated DDR4 device |
| rows per subarray | 512 (9-bit row field) | the evaluated DDR4 device |
| `ROW_BITS`  | 16384   | own choice: 1024 columns x 16 bits, the 2 KB page of a DDR4 x16 part, within the 512 to 2048 columns of 4 to 16 bits that the design allows |
| `AREA_PES`  | 64      | 64 PEs per bank in the area-optimised variant |
| `PE_MODE`   | `PE_AREA` | own choice; both variants are built |
| `CMP_UNITS` | 256     | own choice: one unit per slot |
| `T_RCD`, `T_RAS`, `T_RP` | 22, 52, 22 | own choice: DDR4-3200 22-22-22, in memory-clock cycles |
| `T_RRD`, `T_FAW` | 11, 48 | own choice: DDR4-3200 tRRD_L and tFAW for a 2 KB page |
| `CMD_DEPTH`, `RSP_DEPTH` | 8, 8 | own choice |

Key and value widths (32 bits each) and the line width (512 bits) are
constants in `hm_pkg`.

## Where this RTL departs from, or fills in, the HashMem proposal

* **Layout for the performance-optimised variant.** The proposal describes it
  in two ways. One is bit-serial over a transposed layout, with one bit of
  thousands of keys per row and `b` steps for a `b`-bit key. The other is a
  row of comparison units under the row buffer, with key-value pairs stored
  along the row, that searches in one or a few cycles. This RTL builds the
  second.
* **How PEs are shared in the area-optimised variant.** The proposal speaks
  of one PE per subarray but sizes its area for 64 PEs per 128 subarrays.
  This RTL follows the 64. Adjacent pairs share a PE.
* **One logical device per rank.** A real rank spreads each 64-bit word over
  several x16 chips. This RTL treats the subarray row as one unit that holds
  whole slots, as the proposal does when it treats a subarray as a set of
  mats activated together.
* **Concurrency is per bank, not per subarray.** The RLU overlaps probes to
  different banks. It does not open rows in several subarrays of one bank at
  the same time, because commodity DDR4 cannot do that. Beyond the
  overlapping banks, the parallelism comes from searching a whole row per
  probe.
* **Chosen here, not given by the proposal:** the command and response
  formats, queue depths, timing values (including tRRD and tFAW), in-order
  dispatch and results, fixed bus priority, row width, stopping at the first
  match, the lowest-index tie-break, and clearing the output register at
  start. The encoding of PIM commands on the DDR pins is not given, so the
  RLU takes an already decoded command.

## Capacity against the evaluated workloads

* **Main microbenchmark.** It has 100 million 8-byte pairs (800 MB) and 10
  million random probes. At the defaults the device has 8 x 128 x 512 rows of
  256 slots, which is 134 million slots (1 GiB). The pairs fit as long as
  pages are on average at least 75% full.
* **Dictionary test.** A hashmap of 350,000 dictionary words has chains of
  roughly 55 to 125 entries. Every chain fits in one 256-slot row and is
  found in a single probe, once the words are encoded as 32-bit keys.

## Simulating

All testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog. Build any of them
with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_hashmem_top \
    -y rtl -y tb +libext+.sv -Irtl rtl/hm_pkg.sv tb/tb_hashmem_top.sv
./obj_dir/Vtb_hashmem_top
```

| testbench | what it checks |
|-----------|----------------|
| `tb_hm_cmp_unit`, `tb_hm_out_reg` | the comparison unit and the output register against reference models |
| `tb_hm_pe_area`, `tb_hm_pe_perf`  | hits, misses, page-range masking and duplicate keys; latency per probe. The performance PE is tested with one unit per slot and with 8 units per group |
| `tb_hm_bank`    | both variants of a bank, with probes routed to random subarrays |
| `tb_hm_rlu`     | the RLU, using behavioural PEs in four banks: tRCD, tRAS, tRP, tRRD and tFAW; ACT and PE fields; in-order zero-padded results. It also requires overlapping probes, an ACT held back by tFAW, a full command queue and a full reorder buffer |
| `tb_hashmem_top` | end to end at a reduced size, on both variants (see below) |
| `tb_hashmem_full` | the top at its default size: six probes through the 2 KB rows, checking values and latencies, then a burst of four probes to four banks that must overlap and return in order |

`tb_hashmem_top` uses `hm_top_harness`, which does what the host library
would do:

* hashes keys into buckets;
* allocates overflow pages when a bucket's page is full;
* places two pages in each row;
* tombstones deleted keys;
* writes the pages into the DRAM model (`hm_dram_model`) and probes every
  page of each key's bucket.

The DRAM model shows random data in a row buffer until `T_RCD` has passed,
and it counts timing violations (tRCD, tRAS, tRP, tRRD, tFAW, and an ACT to
an open bank). The harness checks every result line and
every latency. It also fails if any of these never happens: a hit, a miss, a
hit in an overflow page, a key found only in the neighbouring page of the
same row, a tombstone probe, command-queue backpressure, a full result buffer, or
two banks open at the same time.

The full-size top takes about ten seconds to build with Verilator and a
moment to run. Full synthesis of the default-size top is slow because of the
1024 row-buffer inputs, each 16384 bits wide. The smaller modules synthesise
in seconds.

## Files

* `rtl/hm_pkg.sv`: sizes, the command/response types, timing defaults
* `rtl/hm_cmp_unit.sv`, `rtl/hm_out_reg.sv`: the PE building blocks
* `rtl/hm_pe_area.sv`, `rtl/hm_pe_perf.sv`: the two PE variants
* `rtl/hm_bank.sv`: the PEs of one bank
* `rtl/hm_fifo.sv`: the FIFO used for the RLU's command queue
* `rtl/hm_rlu.sv`: the rank-level unit
* `rtl/hashmem_top.sv`: the RLU and all banks
* `tb/`: the testbenches, `hm_top_harness.sv` and the behavioural `hm_dram_model.sv`
