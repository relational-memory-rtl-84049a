# Relational Memory Engine (RME) in SystemVerilog

Databases keep tables as rows because inserts and updates are cheap that way.
But analytical queries usually touch only a few columns. Scanning rows then
drags whole 64-byte cache lines through the memory hierarchy, though only a
few bytes of each are used. The Relational Memory Engine fixes this in
hardware. It sits between the CPU and main memory and serves an *ephemeral
window*: an address range that holds no data of its own. When software reads
the window, the engine returns the selected columns of a row-store table,
packed densely, as if a column-store copy existed. It builds that view on the
fly by gathering the column bytes from the row-store table in DRAM.

This repository holds synthesizable RTL of the engine in its fastest form:
one fetch unit with up to 16 reads outstanding to DRAM, plus a packer that
writes only whole cache lines. It also holds testbenches for every block and
for the whole engine. The target is an FPGA next to an ARM processor system.
The default sizes (2 MB buffer, 16-byte bus, 64-byte lines, 100 MHz class
logic) match such a platform.

## The view the engine produces

Software describes the table through a small register file:

| Offset        | Register | Meaning |
|---------------|----------|---------|
| 0x00          | R        | row size in bytes |
| 0x04          | N        | number of rows |
| 0x08          | SW       | software reset: write any non-zero value |
| 0x0c          | Q        | number of projected columns (1..11) |
| 0x10 + 2j     | C_j      | width of projected column j in bytes (16-bit, at most 64) |
| 0x26 + 2j     | O_j      | offset of column j, counted from the start of column j-1 (from the row start for j = 0) |
| 0x3c          | F        | frame: the table starts at byte address F x 4096 |

Let S = C_0 + ... + C_{Q-1} be the size of a projected row. The view is a
byte array. Row i of the projection starts at byte i·S, and its columns
follow one another with no gaps. Window line L (64 bytes) holds view bytes
64L to 64L+63. A CPU loop over the window therefore reads exactly the useful
bytes, one full cache line at a time.

## How a read is served

The engine keeps the projection in a 2 MB **Data SPM** (32,768 lines of 64
bytes). Each line has an entry in a **Metadata SPM**:

* P: the epoch in which the line was filled.
* K: how many bytes of the line have arrived so far.
* ID: the AXI ID of a CPU read waiting for the line, with a pending flag.

A line is *complete* exactly when its P equals the engine's current epoch.

A CPU read goes through these steps:

1. The **Trapper** accepts the AXI read on the CPU port. It keeps the line
   number, the first beat, the burst length and the ID.
2. The **Monitor Bypass** reads the metadata entry. It also reads the data
   line at the same time, speculatively.
3. **Hit** (P equals the current epoch): the line goes straight back to the
   Trapper. The Trapper sends the requested 16-byte beats to the CPU, with
   RLAST on the last one.
4. **Miss**: the read's ID is stored in the metadata entry and the read
   waits. The first miss after a software reset also starts the Requestor.
5. Data arrives from the fetch side as write requests. Each one is merged
   into the Data SPM line and adds its byte count to K. When K reaches 64,
   the line is complete: P takes the current epoch and K returns to 0. If a
   read was waiting, it is answered at once with the merged line. This line
   is built in the same cycle, so no second SPM read is needed.

The Monitor Bypass handles one operation every two cycles. In the first
cycle it reads the SPMs; in the second it decides and writes. Writes from
the fetch side win over CPU reads, so the fill never stalls behind a waiting
CPU. A hit is answered about 6 cycles after the address handshake on the CPU
port; the testbenches require 10 cycles or fewer.

### Epochs and the software reset

Writing SW does not touch the buffer. It only advances the epoch, and every
line becomes incomplete at once, because no P equals the new epoch. This
makes switching tables or frames cheap. The epoch is 8 bits wide and runs
from 1 to 255.

One rule is this design's own. After power-up, and whenever the epoch wraps
from 255 back to 1, the Monitor Bypass clears every metadata entry to epoch 0.
It clears one entry per cycle, so this takes 32,768 cycles at full size.
Without the clear, a line filled 255 resets earlier could look complete.
While clearing, the engine accepts no reads (`engine_ready` is low).

### Ordering rules

AXI requires that reads with the same ID complete in order. A metadata entry
also has room for only one waiting ID. The engine enforces both with two
rules:

* A read whose ID already has a waiting read is put back at the head of the
  request queue and retried later.
* A read of a line that already has a waiter is retried the same way.

Reads with different IDs can complete in any order. A retried read is taken
again as soon as the blocking read has been answered. The end-to-end test
counts these retries.

## How the buffer is filled

### Requestor: descriptors from the table geometry

For row i and projected column j, the Requestor computes one descriptor. B
is the bus width, 16 bytes.

* P = R·i + O_0 + ... + O_j is the column's byte offset in the table.
* R_addr = base + ⌊P/B⌋·B is the bus-aligned DRAM address.
* R_burst = ⌈(P mod B + C_j)/B⌉ is the number of beats, from 1 to 5.
* W_addr = i·S + C_0 + ... + C_{j-1} is where the bytes go in the view.
* E_s = P mod B is the number of leading bytes to drop in the first beat.
* E_e = (P + C_j) mod B is where the useful data ends in the last beat; 0
  means the whole beat.

The original formulation writes W_addr with (i−1) and with a column sum that
runs to Q. Taken literally, that does not agree with rows counted from 0
(as in P) or with columns 0..Q−1. This RTL uses the dense form above.

The Requestor walks rows in order, and columns in order within a row, one
descriptor per cycle. It does not multiply: it keeps running sums of R,
O_j, S and C_j. A **frame** is as many whole rows as fit in the Data SPM,
that is ⌊2 MB / S⌋ rows, or N if that is fewer. The Requestor stops at the
end of the frame. To project a larger table, software reads a frame, then
points F and N at the next part of the table and writes SW. The engine was
evaluated this way on tables of up to 2 GB.

### Fetch Unit: reader, extractor, packer, writer

* **Reader**: issues one AXI INCR read per descriptor, with the burst
  length and size 16 bytes. Up to 16 reads may be in flight. That is the
  memory-level parallelism this version adds. All reads use one ID, so data
  returns in order, and a FIFO of descriptor tags says which bytes of each
  beat to keep. E_s applies to the first beat and E_e to the last.
* **Column Extractor**: this combinational block shifts the kept bytes of a
  beat down to byte 0 and reports how many there are (1 to 16).
* **Packer**: an 80-byte accumulator appends extracted bytes. It releases
  them only as whole 64-byte lines, so the Data SPM is written once per line.
  Descriptors come out in W_addr order, so the packer only keeps a running
  byte position and never needs W_addr itself. The last partial line of a
  frame is padded with zeros and written as a full line. This is this
  design's own choice, so the line can complete and be served.
* **Writer**: turns a packed line and its position into a Data SPM write
  {line, 64 byte enables, 512-bit data}. Writes pass through the Monitor
  Bypass, which updates K and releases waiting reads.

A software reset also flushes the Fetch Unit. Reads already in flight are
drained and their data dropped, so nothing from an abandoned frame reaches
the new epoch.

## Module map

| Module | Role |
|---|---|
| `rme_pkg` | constants (bus, line, SPM sizes, widths) and shared structs |
| `rme_top` | the engine: configuration port, CPU read port, DRAM read port, status |
| `rme_config_port` | AXI4-Lite register file of the table geometry; SW pulse |
| `rme_trapper` | CPU-side AXI read secondary; request queue; beat serializer |
| `rme_monitor_bypass` | hit/miss, stall, merge, release, epoch, start of the Requestor |
| `rme_meta_spm`, `rme_data_spm` | the two buffers (synchronous-read RAMs) |
| `rme_requestor` | descriptor generator |
| `rme_fetch_unit` | reader, extractor, packer and writer in a chain |
| `rme_reader`, `rme_column_extractor`, `rme_packer`, `rme_writer` | the fetch stages |
| `rme_fifo` | small first-word-fall-through FIFO used by the Trapper and Reader |

All valid/ready interfaces follow AXI rules. Data is held stable while valid
is high and ready is low, and assertions in the modules check this. There is
a single clock and an active-low asynchronous reset.

## Where this RTL goes beyond or departs from the published design

* W_addr uses the dense form given above, not the printed one.
* The table base is read as F × 4096, treating F as a page frame number.
* The clearing of all metadata after reset and on epoch wrap is this
  design's own rule. So are the 8-bit epoch and the one-waiter-per-line and
  one-waiter-per-ID retry rules.
* The last partial line is zero-padded.
* Frames are capped at whole rows that fit in the buffer.
* Only read channels exist. The window is read-only, and CPU reads may be
  1–4 beats inside one line.
* The address width (40 bits), the AXI ID width (6 bits) and the internal
  queue depths are assumptions.
* The processor system, DRAM controller, interconnect and clock crossing are
  not part of the RTL. The testbenches use a behavioural CPU
  (`tb/rme_tb_cpu.sv`) and a behavioural DRAM (`tb/rme_dram_model.sv`, fixed
  latency, in-order bursts, random gaps). Table contents are a fixed
  function of the byte address (`tb/rme_tb_pkg.sv`), so expected data is
  recomputed rather than stored.

## Verification

Each block has a self-checking testbench, `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops itself through a watchdog if it
hangs. Every testbench has also been run against a deliberately broken copy
of its block and reported failures.

* `tb_rme_top` runs the engine with a 256-line buffer over five table
  geometries:
  * the example row projected to three columns;
  * a column straddling bus words;
  * a 64-byte column;
  * eleven random columns;
  * a table larger than the buffer.

  Each table is read cold and then hot, with random IDs, partial and wrapping
  bursts, and several reads in flight. It also checks DRAM read and beat
  counts against the descriptor formulas. It then wraps the epoch with 255
  resets. It counts hits, misses, releases, retries, multi-beat bursts, the
  peak of 16 DRAM reads in flight, padded lines, capacity stops and the
  epoch wrap, and fails if any never occurred.
* `tb_rme_top_full` uses every default size. It projects a 32 MB table of
  524,288 64-byte rows onto its first 4-byte column. That fills the 2 MB
  buffer exactly. It scans all 32,768 lines and checks every beat, the
  524,288 DRAM reads and the 16-deep parallelism. It takes about two
  seconds of wall-clock time to simulate after a short compile.

* `tb_rme_q1_frames` runs a four-column query over the same 32 MB table at
  full size. The 8 MB projection is four times the buffer, so the test
  reads it as four frames, with a software reset before each one. It checks
  every beat, the DRAM read count per frame, the epoch step, and a sum over
  the first column.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/rme_pkg.sv tb/rme_tb_pkg.sv tb/tb_rme_top.sv --top-module tb_rme_top
./obj_dir/Vtb_rme_top
```

Replace `tb_rme_top` with any other testbench name. Unit testbenches that
use neither the DRAM model nor the CPU model do not need
`tb/rme_tb_pkg.sv`, but listing it does no harm.

## Changing sizes

* `rme_top.SPM_DEPTH` sets the buffer size in lines. The Requestor's frame
  capacity follows it.
* `MAX_OUT` sets the number of DRAM reads in flight.
* `REQ_DEPTH` sets the Trapper's request queue depth.
* Bus and line widths, the column limit and the field widths are in
  `rme_pkg`. Changing the bus or line size also changes the descriptor
  arithmetic and the beat counters, which derive from these constants.
