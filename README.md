# PUSHtap channel RTL: one memory controller and one rank of bank-level PIM units

A hybrid transactional/analytical (HTAP) database wants rows for transactions
and columns for analytics. On a DIMM with processing-in-memory (PIM) units, the
memory itself has two natural access directions. The CPU's cache line is
interleaved across the chips of a rank: one 64-byte line is one 8-byte word from
each of the 8 devices. A PIM unit sitting next to a bank reads that bank's words
one after another. If a table is laid out so that a row runs *across* devices
and a column runs *down* a bank, the CPU reads rows at full width and every
PIM unit scans a column in its own bank. One copy of the data serves both
engines, and analytics always see fresh data.

This RTL covers the hardware that makes the CPU and the PIM units share the
banks at fine grain. That is two additions to the memory controller of an
UPMEM-style PIM DIMM, plus the rank-side logic they drive:

* a **scheduler** that recognises control requests hidden in ordinary memory
  traffic. It lends the banks to the PIM units only while they are moving data.
* a **polling module** that waits for all PIM units on the CPU's behalf and
  answers with one read.

The data layout, the MVCC snapshots and the choice of what to run where are host
software. The RTL assumes them and does not implement them (see *What the host
does*).

## Block map

```
 CPU port ──► access_queue ──► scheduler ──normal──► dram_interface ◄──► 64 DRAM bank ports
 (req/resp)                     │  │   ▲                  ▲                (banks outside)
                                │  │   └ refresh_ctrl     │ per-bank DMA
                                │  └─launch─► pim_interface ──start/op/params──► pim_unit ×64
                                └─poll──► polling_module ◄─status─┘               (each with wram)
                                              │
                     resp ◄───────────────────┘ (finish message)
```

`pushtap_top` is one channel with one rank: 8 devices × 8 banks = 64 PIM units,
each with a 64 kB WRAM. The banks are not modelled in `rtl/`. Each one is a
64-bit word port on the top (`bk_*`), and `tb/dram_bank_model.sv` stands in for
them in simulation.

## Control requests hidden in memory traffic

The CPU controls all PIM units of the rank with one cache-line access. Two line
addresses in the unused upper half of the address space are reserved
(`LAUNCH_ADDR`, `POLL_ADDR`, parameters of the top and of the scheduler):

* **Launch**: a 64-byte write to `LAUNCH_ADDR`. Byte 0 is the operation type and
  bytes 1..63 are its parameters. The scheduler broadcasts them to every PIM unit
  through the PIM interface.
* **Poll**: a read of `POLL_ADDR`. The polling module reads the finish flags of
  all units every `POLL_INTERVAL` cycles. Once every unit is done it answers the
  read: word 0 = 1, word 1 = the number of status reads it took.

### Launch-request layout

Fields are packed in this order from byte 1, little-endian. Widths are in
bytes. DRAM addresses and lengths count 64-bit words of one bank. WRAM offsets
count bytes and must be 8-byte aligned. Each unit computes its own address as
`base + stride × unit_index`.

| type | op | phase / banks | parameters |
|---|---|---|---|
| 1 | LS | load / PIM | result_addr 3, result_len 2, result_offset 2, result_stride 2, op0_addr 3, op0_len 2, op0_offset 2, op0_stride 2 |
| 2 | Defragment | load / PIM | meta_addr 3, data_addr 3, data_stride 2, delta_addr 3, delta_stride 2 |
| 3 | Filter | compute / CPU | bitmap_offset 2, data_offset 2, result_offset 2, data_width 1, condition 8 |
| 4 | Group | compute / CPU | bitmap_offset 2, data_offset 2, dict_offset 2, result_offset 2, data_width 1 |
| 5 | Aggregation | compute / CPU | bitmap_offset 2, data_offset 2, index_offset 2, result_offset 2, data_width 1 |
| 6 | Hash | compute / CPU | bitmap_offset 2, data_offset 2, result_offset 2, hash_function 4, data_width 1 |
| 7 | Join | compute / CPU | hash1_offset 2, hash2_offset 2, result_offset 2, data_width 1 |

The field names and widths and the phase of each operation come from the
design. The numeric type codes, the byte order and the units are choices made
here. `pushtap_pkg` decodes the fields and `tb/pushtap_tb_pkg.sv` builds them.

## Two-phase execution and bank ownership

This is the core of the design and the part worth reading `scheduler.sv` for.
An OLAP operator runs as alternating phases:

1. **Load phase** (`LS` or `Defragment`). The PIM units need their banks. The
   scheduler takes the launch off the queue and starts handing the banks over.
   This takes `HANDOVER_CYCLES` (0.2 µs, which is 480 cycles at the 2.4 GHz
   controller clock). Only then does it broadcast the launch. Until every unit
   is finished, normal CPU accesses wait at the head of the queue (`ev_stall`).
   After the last unit finishes the banks come back. That also takes
   `HANDOVER_CYCLES`, and normal traffic resumes `HANDOVER_CYCLES + 2` cycles
   after the last unit drops busy. An `LS` first writes the previous results
   from WRAM back to DRAM, then loads the next chunk of the column into WRAM.
2. **Compute phase** (`Filter`, `Group`, `Aggregation`, `Hash`, `Join`). The
   units work only in WRAM. The launch is broadcast at once and the CPU keeps
   the banks: transactions go on while the units compute.

The CPU is therefore blocked only while data actually moves, and the length of
that block is set by the chunk size (at most half the WRAM, 32 kB). This is the
difference from a conventional PIM flow, where the banks are locked for the
whole offloaded task.

The scheduler rules:

* Requests are served strictly in order. A blocked head blocks what is behind it.
* A poll is served in any ownership state, because it does not touch the banks.
* A launch waits while the previous operation still runs.
* Refresh (`refresh_ctrl`, tREFI 3.9 µs, tRFC 121.9 ns) goes ahead of the head
  request while the CPU owns the banks. It is deferred while the PIM side owns
  them.

## The two access dimensions

`dram_interface` implements the two access directions. Line address `a` maps to
`bank = a[2:0]` and `word = a[26:3]`. Byte lanes `8d..8d+7` of the line go to
device `d`. PIM unit `u = d·8 + b` owns bank `b` of device `d`. So the same
stored word is byte lane `d` of a CPU line and, at the same time, one word of
unit `u`'s column. `bank_to_pim` decides whether the CPU or the 64 units drive
the bank ports. Line bit 27 is never a DRAM address: it marks the reserved
region.

## PIM unit operations

In the paper the PIM unit is a general-purpose programmable core, with
instruction memory, that interprets the launch fields in software. `pim_unit.sv`
replaces it with a small fixed-function sequencer per operation. It does one
WRAM or bank access at a time, with one read outstanding. This shows the
interface working end to end. It is not a model of the core's speed.

* **LS**: store `result_len` words, then load `op0_len` words. The load length is
  remembered: it sets the element count (`len·8/data_width`) of the compute
  operations that follow.
* **Filter**: result bit k = visible(k) AND `lo ≤ x_k ≤ hi`, where
  `lo = condition[31:0]` and `hi = condition[63:32]`. Visibility is bit k of the
  snapshot bitmap, which the host keeps in the bank and loads with an LS.
  Elements are 1, 2, 4 or 8 bytes, packed little-endian.
* **Aggregation**: `result[index[k]] += x_k` for visible k. Indices are 2-byte
  entries and sums are 64-bit. Sums accumulate onto what is already in WRAM, so
  several load/compute rounds add up one column.
* **Hash**: result word k = `{visible, 31'b0, low 32 bits of x_k·hash_function}`.
* **Defragment**: copies the newest version of each updated row from the delta
  region back over its origin row in the data region. The host first writes the
  metadata into every bank:
  * word 0 = `{row_words[23:16], count[15:0]}`;
  * then two words per delta row e, in commit order: the transaction
    timestamp, then the pointer to the previous version. The pointer is
    `{region[63], row[23:0]}`, with region 0 = data and 1 = delta.

  The unit follows each pointer to the origin row, keeps that origin in the
  upper half of WRAM (up to WRAM_BYTES/16 entries), and copies delta row e over
  it. Entries are processed in commit order, so the last copy is the newest
  version. For example, with T1: d→a, T2: e→c, T3: f→d, T5: g→f, row a ends up
  holding g and row c holds e.
* **Group** turns a column into group indices for a later Aggregation
  (`SUM(a) GROUP BY b`). The dictionary at `dict_offset` is word 0 = number of
  entries, then one 64-bit value per entry. Each visible element gets the
  position of its value in the dictionary. A value that is not there yet is
  appended, and the new count is written back at the end. So one dictionary
  can be carried across several load/compute rounds. Indices are 2-byte
  entries, the format Aggregation reads. Invisible rows get `16'hFFFF`.
* **Join** works on two buckets that the host has filled with hash values.
  Each bucket is word 0 = number of entries, then one word per entry whose low
  `data_width` bytes are the key. Every entry of bucket 1 is compared with every
  entry of bucket 2. The result is word 0 = number of matches, then one word
  `{16'b0, i, 16'b0, k}` per matching pair, in loop order. The host reserves
  enough room for the result.

The dictionary, bucket and result layouts of Group and Join are choices made
here; the operations themselves and their launch fields are the design's.

## What the host does

These parts of the design are software and are outside the RTL:

* **Compact aligned format.** Columns are packed into *parts* whose width per
  device is set by the widest key column. Narrower key columns go to later parts
  unless they are at least `th` × that width. Non-scanned columns are split into
  bytes to fill the gaps.
* **Block-circulant placement.** The column-to-device assignment rotates by one
  every 1024 rows, so every unit gets a share of every column. In the launch this
  appears only as the `stride × unit` offset.
* **Snapshot bitmaps.** These are updated from the MVCC metadata before each
  query.
* **Choosing between CPU and PIM defragmentation.** PIM defragmentation is
  preferred when the row width exceeds `(bw_PIM + bw_CPU) / (2p (bw_PIM − bw_CPU)) · m`.
* **Data re-layout and `clflush`** at transaction commit.

## Parameters (defaults = evaluated configuration)

| parameter | default | meaning |
|---|---|---|
| NUM_DEV × NUM_BANK | 8 × 8 | devices per rank × banks per device = PIM units |
| WRAM_BYTES | 65536 | WRAM per unit |
| HANDOVER_CYCLES | 480 | bank hand-over, 0.2 µs at 2.4 GHz |
| TREFI_CYCLES / TRFC_CYCLES | 9360 / 293 | DDR5 refresh timing at 2.4 GHz |
| QUEUE_DEPTH | 8 | access queue entries (own choice) |
| POLL_INTERVAL | 16 | cycles between status reads (own choice) |
| LAUNCH_ADDR / POLL_ADDR | 28'h8000000 / 28'h8000001 | reserved line addresses (own choice) |

One clock drives everything. The design runs the controller at 2.4 GHz and the
PIM units at 500 MHz; the clock-domain crossing is not modelled.

## Where this departs from the design or goes beyond it

* The PIM unit is fixed-function, not a programmable core. There is no IRAM.
  Group uses a linear dictionary search and Join a nested loop, the simplest
  forms of each. The WRAM sweep to 128/256 kB would need wider
  offset fields than the 2-byte ones in the launch request.
* One channel and one rank are built. The evaluated system has 4 channels ×
  4 PIM ranks.
* The DDR PHY and DRAM timing (tRCD, tCL and so on) are not modelled. Banks
  answer after a fixed latency.
* Load-phase length is not calibrated. The design's own estimate is about
  300 µs to load a 32 kB chunk per unit. Here a unit moves one 64-bit word per
  bank access, so the load phase lasts as long as the bank latency makes it.
* In `SUM(a) GROUP BY b` the Group indices are produced in the banks holding
  column `b`. The host moves them to the banks holding column `a` before the
  Aggregation launch. That move is ordinary CPU traffic (LS store, CPU
  copy, LS load), and the end-to-end test keeps both columns in the same unit.
* All encodings listed above as choices: type codes, byte order, units, condition
  format, metadata layout, dictionary and bucket layouts, element count rule, reserved addresses, in-order
  scheduling, refresh deferral during the load phase, and a hand-back cost equal
  to the hand-over cost.

## Simulating

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/pushtap_pkg.sv tb/pushtap_tb_pkg.sv tb/tb_pushtap_top.sv --top-module tb_pushtap_top
./obj_dir/Vtb_pushtap_top
```

| testbench | what it runs |
|---|---|
| tb_pim_unit | LS loads/stores with strides; Filter, Aggregation, Hash, Group and Join against a reference; Defragment on the a..g example and on random version chains |
| tb_scheduler | normal access, compute launch without hand-over, LS hand-over timing, stalled access, poll during the load phase, refresh |
| tb_polling_module, tb_pim_interface | poll interval, the all-finished condition, broadcast and finish flags |
| tb_dram_interface | interleaved CPU view against per-unit view, ownership steering, refresh |
| tb_access_queue, tb_refresh_ctrl, tb_wram | the building blocks |
| tb_pushtap_top | whole channel at 2×2 units: column layout through CPU writes, LS/Filter/LS-store query with polls and OLTP traffic in the compute phase, Defragment, SUM … GROUP BY through Group and Aggregation, and a Join of two buckets; counts hand-overs, stalls, compute-phase accesses, waiting polls and refreshes |
| tb_pushtap_full | the filter query, Defragment and SUM … GROUP BY at the default size (64 units, 64 kB WRAM, 480-cycle hand-over) |
