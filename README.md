# FLY-DRAM: a memory controller with per-region DRAM timings

DRAM vendors set one set of timings for a whole chip: the activation latency
(tRCD), the precharge latency (tRP) and the restoration latency (tRAS). These
values must cover the slowest cell on the chip. Process variation makes most
cells faster than that, and the slow cells are not scattered at random. They
cluster in a few bands of cache-line columns or of rows. So most of a DIMM
could run with much shorter timings if the controller knew where the slow
places were.

Flexible-Latency DRAM (FLY-DRAM) is a memory controller that has that
knowledge. It splits each DIMM into regions. For each region it keeps a
profile saying whether the region can use reduced tRCD, tRP and tRAS. It then
issues every request's DRAM commands with the timings of that request's
region. The DRAM chips do not change. The only new hardware is:

1. a boot-time loader that copies the profile out of the DIMM's SPD ROM
   (Serial Presence Detect, the small configuration ROM on every DIMM);
2. a small on-chip SRAM that holds the profile;
3. a lookup of each request's region; and
4. bank timing checks that use per-request timings instead of constants.

This repository gives synthesizable SystemVerilog for that controller. The
configuration is the evaluated one: two DDR3-1333 channels, each with one
single-rank DIMM of 8 banks, with 16K rows of 128 64-byte cache lines per bank.
It also gives self-checking testbenches. These include a DRAM model that
corrupts data whenever a region's true latency is violated.

## The timings

The controller clock is the DDR3-1333 command clock, 667 MHz (tCK = 1.5 ns).
All times are rounded up to whole cycles.

| operation    | parameter | standard (DDR3-1333H) | reduced (fast region)      |
|--------------|-----------|-----------------------|----------------------------|
| activation   | tRCD      | 13.125 ns = 9 cycles  | 7.5 ns = 5 cycles (-42.8 %) |
| precharge    | tRP       | 13.125 ns = 9 cycles  | 7.5 ns = 5 cycles (-42.8 %) |
| restoration  | tRAS      | 36 ns = 24 cycles     | 27 ns = 18 cycles (-25 %)   |
| read latency | tCL       | 13.125 ns = 9 cycles  | not varied                 |

FLY-DRAM does not touch the other spacings. The controller uses standard
DDR3-1333 values for them:

- column to column: 4 cycles;
- read to write: 8 cycles;
- write to read: 16 cycles;
- read to precharge: 5 cycles;
- write to precharge: 21 cycles (tCWL 7 + 4 burst cycles + tWR 10).

All these values are in `rtl/fly_pkg.sv`.

## Regions and the profile entry

`addr_mapper` decodes a 31-bit physical byte address. From least to most
significant bit:

- 6-bit byte offset;
- channel bit;
- 7-bit column (cache line within the row);
- 3-bit bank;
- 14-bit row.

The column sits below the bank so that consecutive cache lines stay in one
open row.

A region is 512 adjacent rows by 8 adjacent cache lines of one bank. So a
channel has 8 × 32 × 16 = 4096 regions, numbered `{bank, row/512, column/8}`.
This size is a choice made here, not a published number. It is set by
`ROWS_PER_REGION` and `LINES_PER_REGION`, or by `ROWS_PER_R` and
`LINES_PER_R` on the top. Other shapes work as well: whole banks
(16384 × 128), single rows (1 × 128) or single cache lines. It is fine enough to capture both
cluster shapes seen in measured chips: a narrow band of columns spanning
thousands of rows (activation errors), and a band a few hundred rows high
spanning all columns (precharge errors).

A profile entry (`lat_entry_t`) has three bits: `{ras_fast, rp_fast,
rcd_fast}`. A set bit means the region is reliable at the reduced value of
that timing. The table therefore holds 4096 × 3 bits = 12 Kbit per channel.

**Rule for profile writers.** tRP and tRAS act on a whole row. The controller
reads them from the entry of the cache line that causes the ACTIVATE. So a
profile must give every region of a row group the same `rp_fast` and
`ras_fast` bits. Only `rcd_fast` may differ between column groups.

## Where each reduced timing is applied

This is the part that differs most from a conventional controller. A
conventional bank timer compares its counters with constants. Here each bank
(`bank_timer`) keeps saturating counters of the cycles since its last
ACTIVATE, PRECHARGE, READ and WRITE. The scheduler compares them with the
timings of the request it is trying to serve:

- **tRCD is checked per column command, against the accessed line.** A
  shortened activation only corrupts the first cache line read from the newly
  opened row. By the time later reads come, the row buffer has fully sensed
  the row. So every READ or WRITE needs at least its own line's tRCD since the
  ACTIVATE. A fast line can be read 5 cycles after the ACTIVATE. A slow line
  waits 9 cycles, even when another request opened the row. For row hits this
  costs nothing, since the counter has long passed 9.
- **tRP is checked against the row about to be opened.** A short precharge
  does not harm the row being closed. It harms the sensing of the next row
  opened in that bank. So the ACTIVATE waits for the tRP of its own request's
  region.
- **tRAS is latched when the row is opened.** Restoration concerns the whole
  open row. The ACTIVATE stores its region's tRAS in the bank, and the
  PRECHARGE that closes the row waits for that stored value.

With `fly_enable` low, `timing_select` gives every request the standard
values, so the same hardware works as a conventional controller. The
testbenches use this mode as the baseline.

## Request flow and cycle timing (`channel_controller`)

Each channel's controller serves requests in arrival order with an open-row
policy: a row stays open until a request for another row in that bank needs
the bank.

| cycle                                 | what happens                                                               |
|---------------------------------------|----------------------------------------------------------------------------|
| 0                                     | `req_valid && req_ready`; address decoded; profile table read issued        |
| 1                                     | profile entry returns; request and entry written to the 32-entry queue     |
| 2 and later                           | head of the queue picks at most one command per cycle (below)              |
| +1                                    | the command appears on `cmd`/`cmd_bank`/`cmd_row`/`cmd_col` (registered)   |
| READ on the command port + tCL + burst | the PHY returns the line; `resp_valid`/`resp_id`/`resp_data` in the same cycle |

The head request's command is chosen as follows:

- **Its row is open in its bank:** issue READ or WRITE once tRCD and the bus
  spacing allow. This retires the request.
- **Another row is open in that bank:** issue PRECHARGE once tRAS, tRTP and
  write recovery allow.
- **The bank is closed:** issue ACTIVATE once tRP allows.

Because the command port is registered, every command leaves one cycle after
the decision. The spacing between commands is therefore exactly what the
timers enforce. On an idle channel, a write to a closed bank in a fast region
shows ACTIVATE at cycle 3 and WRITE at cycle 8.

Other behaviour of the channel controller:

- `req_ready` stays low until the profile has been loaded (`init_done`).
- `req_ready` also stays low while the queue, counting a request still in the
  lookup stage, is full.
- READ tags wait in an 8-entry FIFO. A READ stalls while that FIFO is full.
- Writes get no response.
- Responses cannot be back-pressured.

## Loading the profile (`spd_loader`)

After reset, each channel's loader reads NENTRY bytes from its SPD ROM,
starting at byte 256. In a standard DDR3 SPD, bytes 0 to 255 hold the usual
contents. Byte 256 + k holds region k's entry in its low three bits.

The loader uses a simple request/valid port with one read in flight. It issues
the next read in the same cycle that data returns, so a one-cycle ROM delivers
one entry per cycle. Loading 4096 entries takes about 4100 cycles, about
6 µs. A real SPD sits on a slow serial bus and would need a bridge to this
port.

`init_done` on the top rises when every channel has finished. Until then no
request is accepted, so no request can ever use a profile entry that has not
been loaded.

## Top level (`fly_dram_top`)

The top holds one loader, one profile table and one channel controller per
channel. A single request port is steered by the address's channel bit, and
`req_ready` is that channel's ready. A request must stay unchanged while
`req_valid` is high and `req_ready` is low; an assertion checks this.

Everything else is separate per channel:

- SPD ports;
- DRAM command ports (`dram_cmd`, `dram_bank`, `dram_row`, `dram_col`,
  `dram_wdata`);
- read-data inputs;
- response outputs;
- event pulses (`chan_events_t`: activations, with reduced tRCD and with
  reduced tRP, precharges, reads, writes, row hits).

The DDR3 PHY, the DIMMs and their SPD ROMs sit outside.

Default size after coarse synthesis of the whole top: about 1,500 word-level
cells, 3,000 flip-flop bits and 60 Kbit of memory. Of that memory, the two
profile tables are 24 Kbit. The rest is the two 32-entry request queues, which
hold full 64-byte write lines.

## What this design adds or leaves out

Decided here (no published figure or rule behind it):

- the region size;
- the entry format (three fast/slow bits rather than stored latencies);
- the SPD byte layout and the parallel SPD port;
- the address layout;
- in-order scheduling with a 32-entry queue;
- the 8-bit request tags;
- the `fly_enable` switch;
- the registered command port.

Not implemented:

- **Refresh.** No REFRESH commands are issued. A real DDR3 controller must
  add them.
- **tRRD and tFAW.** These are not checked. With in-order service, ACTIVATEs
  are at least 5 cycles apart, which meets both at DDR3-1333. A reordering
  scheduler would have to add these checks.
- **Power-down and mode-register setup.**
- **ECC and a latency-aware OS page allocator.** These were discussed
  alongside FLY-DRAM as possible extensions. They are not part of the
  controller.

## Verification

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
Each has a watchdog.

| testbench                  | what it shows |
|----------------------------|---------------|
| `tb_addr_mapper`           | 2,000 addresses decoded; checked against integer division and modulo |
| `tb_timing_select`         | all 16 input combinations give 9/9/24 or 5/5/18 |
| `tb_latency_profile_table` | all 4096 entries written and read back; one-cycle read latency, output held, read-during-write |
| `tb_spd_loader`            | loading from 1- and 3-cycle ROMs: right bytes in order, each once, load time NENTRY × latency |
| `tb_bank_timer`            | 6,000 cycles of random legal commands with random per-request timings; all five outputs checked every cycle against a reference |
| `tb_channel_controller`    | exact gaps measured on the command port (ACTIVATE→WRITE of 5 and 9, PRECHARGE→ACTIVATE of 5 and 9, read latency, baseline mode); then 600 random requests checked against a scoreboard |
| `tb_fly_dram_top`          | full default size, both channels: boot load, 96 writes and 96 shuffled reads, once with FLY-DRAM and once without; data, tags, zero DRAM errors, FLY-DRAM faster, every mechanism seen |
| `tb_fly_profiles`          | the same 400-request stream under five DIMM profiles (below) |
| `tb_fly_row_regions`       | the top built with one region per row (131,072 entries per channel): load time, data, zero DRAM errors, faster than the baseline (2499 vs 3592 cycles) |

The DRAM model (`tb/ddr3_channel_model.sv`) knows each region's true
latencies from `tb/tb_profile_pkg.sv`. It counts every command that comes too
early, and returns reads affected by such a command with a flipped bit. The
SPD model (`tb/spd_rom_model.sv`) gives the controller the same profile. A
controller that applied a reduced timing where it must not would therefore
fail on data, not just on a counter.

Result of `tb_fly_profiles`: cycles to finish 400 requests (234 reads). These
come from one synthetic request stream and are not system-level performance
numbers.

| profile                     | cycles | speed-up |
|-----------------------------|--------|----------|
| baseline (standard timings) | 3592   | 1.00     |
| half the regions slow       | 3004   | 1.20     |
| clustered slow regions      | 2704   | 1.33     |
| 1 % of regions slow         | 2491   | 1.44     |
| all regions fast            | 2491   | 1.44     |

The point it makes holds whatever the stream: a DIMM whose slow cells are few
and clustered gets almost all of the benefit of running every cell fast.

## Simulating

Each testbench is a top module with no ports. With Verilator 5, run this from
the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fly_dram_top \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/fly_pkg.sv tb/tb_profile_pkg.sv \
  tb/tb_fly_dram_top.sv -o sim && ./obj_dir/sim
```

Replace `tb_fly_dram_top` with any testbench name from the table above. Every
testbench finishes in under a second.

To change the design:

- **Sizes:** change the `fly_dram_top` parameters. Channels, banks, rows,
  lines per row, region shape, queue depth, tag width and SPD offset can all
  be set. All sizes must be powers of two.
- **Timings:** change the `timing_select` parameters, or the constants in
  `fly_pkg`.
