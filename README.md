# TDRAM: a DRAM cache device that checks its own tags

A DRAM cache placed in front of a large main memory has to find out, for
every access, whether the line it holds is the one asked for. With ordinary
DRAM the tag lives next to the data (or in the ECC bits), so every access,
even a write, first reads a line across the bus just to learn hit or miss,
and a miss to a clean line wastes the whole transfer.

TDRAM (Tag-enhanced DRAM) moves the check into the device. Each bank gets a
small, fast array of tag mats holding the tag, valid and dirty bits of
every cache line. One command activates the tag mats and the data mats
together; the device compares the tags on the die, reports the outcome on
a separate narrow *hit-miss (HM) bus*, and uses the outcome to decide
whether the data columns are accessed at all. Dirty lines pushed out by
write misses are parked in a *flush buffer* on the base die and are sent
to the controller later, in DQ slots that would otherwise be empty.

This repository gives synthesizable SystemVerilog for the device side of
that scheme: the whole 32-channel device down to the tag mats and data
banks, with the tag check, column gating, HM reporting, flush buffer and
DQ scheduling, plus self-checking testbenches and a behavioural cache
controller that drives them.

## Organisation

| level | what it is | module |
|---|---|---|
| device | 32 independent channels, nothing shared but clock and reset | `tdram_top` |
| channel | 8-bit CA bus in, 32-bit DQ bus both ways, 4-bit HM bus out; 8 logical banks, one flush buffer | `tdram_channel` |
| logical bank | a bank in an even bank group (with tag mats) paired with the same bank in the odd neighbour group; each holds 32 B of a 64 B line | `bank_pair` |
| arrays | data bank (32 columns of 32 B per row), tag mat (one 24-bit entry per line) | `data_bank`, `tag_mat` |
| tag path | SECDED encode / decode of the tag entry, comparator | `tag_ecc_encoder`, `tag_ecc_decoder`, `tag_compare` |
| base die | command decoder, HM driver, flush buffer, DQ read driver | `ca_decoder`, `hm_bus_tx`, `flush_buffer`, `dq_tx` |

Shared types and every timing constant are in `tdram_pkg`.

The cache is direct-mapped. A line is addressed by (channel, logical bank,
row, column); the tag stored with it is 14 bits wide, which for a 64 GiB
device covers a 1 PB physical address space.

### Clock and beats

The core clock is 2 GHz and the pins run at 8 Gbps, so each pin carries
four bits per clock. The RTL therefore moves one *beat* per clock that
already contains those four unit intervals for every pin:

| bus | pins | beat width |
|---|---|---|
| CA | 8 | 32 bits |
| DQ | 32 | 128 bits (a 64 B line is 4 beats = tBURST) |
| HM | 4 | 16 bits |

Serialisation onto the pins, strobes and the bidirectional DQ pad are a
PHY's job and are not part of this RTL; DQ appears as `dq_i` (write data)
and `dq_o`/`dq_oe_o` (read and flush data).

## Commands

Every command is one 64-bit packet sent as two CA beats, upper half first.
A beat whose opcode is not NOP starts a packet; the command is decoded in
the clock of the second beat, and **cycle 0** of its timing is the clock
after that.

```
bit  63:61  60     59:57  56:40  39:35  34:21  20:16  15:0
     op     dirty  bank   row    col    tag    count  reserved
```

| op | command | effect |
|---|---|---|
| 1 | ActRd | activate, tag check, read the line if needed, auto-precharge |
| 2 | ActWr | activate, tag check, write the line (the dirty bit comes from the packet), auto-precharge |
| 3 | PROBE | tag check only, result on HM, no data and no state change |
| 4 | FLRD  | explicit read of up to `count` flush-buffer lines as one group |
| 5 | REF   | refresh: banks blocked for T_RFC clocks, flush buffer unloaded meanwhile |

Opcodes 6 and 7 are dropped and raise `bad_cmd_o`.

## What one access does

The tag check has four outcomes. What the device does with the data banks
depends on the outcome and on the command:

| outcome | ActRd | ActWr |
|---|---|---|
| hit | line returned on DQ | line overwritten |
| miss, clean | no column access, DQ slot free (used for flush data) | line overwritten |
| miss, dirty | old (dirty) line returned on DQ, tag marked clean | old line read out into the flush buffer, then overwritten |
| miss, invalid | as a clean miss | line written |

The controller learns the outcome and the stored tag from the HM packet,
so on a dirty miss it knows which address the returned or buffered line
belongs to. On a read miss it fetches the line from main memory and fills
it with a clean ActWr. A tag entry that fails its ECC with two bad bits is
treated as invalid and flagged in the HM packet.

## Timeline of a command inside a bank pair

This is the core of the design. All numbers are clocks of 0.5 ns counted
from cycle 0; they come from the device timing table (tRCD 12 ns, tRRD 2,
tCL 18, tCWL 7, tRAS 28, tRP 14, tRL_core 2; tag mats: tRCD_TAG 7.5,
tHM_int 2.5, tHM 7.5, tRTW_TAG 1, tWR_TAG 1, tRC_TAG 12).

Tag side (ActRd, ActWr, PROBE), busy for tRC_TAG = 24 clocks:

| clock | step |
|---|---|
| 0 | tag mats activated, in parallel with the even data bank |
| 15 | tag entry read (tRCD_TAG) |
| 16 | ECC check and compare; result leaves the bank pair |
| 17 | tag entry rewritten (tRTW_TAG after the read) for ActWr and for a dirty ActRd miss |
| 20 | result reaches the column decoders of both data banks (tRCD_TAG + tHM_int) |
| 30, 31 | the two HM beats on the pins (tRCD_TAG + tHM) |

Data side (ActRd, ActWr), busy for tRRD + tRAS + tRP = 88 clocks:

| clock | step |
|---|---|
| 0 / 4 | even / odd bank activated (the odd half is staggered by tRRD) |
| 14..17 | write data taken from DQ (tCWL) |
| 24 / 28 | even / odd column read, only if the gate is open |
| 28 / 32 | even / odd column write (one tCCD_L after the read) |
| 32 | old dirty line handed to the flush buffer (odd read + tRL_core) |
| 56 / 60 | even / odd auto-precharge |
| 64..67 | read data on DQ (tRRD + tRCD + tCL), or flush data in a free slot |

Because the tag result is known at clock 20 and the first column access
is at 24, the tag check costs nothing on the data path. The tag mats free
up after 24 clocks while the data banks stay busy to 88, so a PROBE to the
same bank can run while the data side of a previous command is still
working.

The bank pair does not schedule: the controller must respect both busy
times per bank, keep DQ bursts apart and issue nothing during a refresh.
Assertions flag each of these violations.

## HM packet

A 32-bit packet in two HM beats, upper half first; the bus is zero when
idle and a packet is recognised by its start bit.

```
bit 31     30:29  28:27   26       25       24:22  21:8        7:0
    start  kind   result  fb_data  ecc_err  bank   stored tag  reserved
```

`kind` is read / write / probe, `result` is hit / miss-clean / miss-dirty /
miss-invalid (encodings in `tdram_pkg`). The tag field holds the tag that
was stored in the line, which is what the controller needs to write a
dirty line back. `fb_data` says that the DQ slot of this read miss will
carry a flush-buffer line.

## Flush buffer

The flush buffer is a 16-entry FIFO shared by the eight banks of a
channel. Lines enter only from dirty write misses (clock 32 above) and
leave only through DQ slots known to be free. There are three such
occasions:

1. **A read that misses on a clean or invalid line.** Its DQ slot at
   64..67 is unused. When the result is produced (clock 16) the channel
   reserves one buffered line for that slot, if one is available, and sets
   `fb_data` in the HM packet.
2. **Refresh.** The banks are idle for T_RFC, so every available line is
   reserved at the REF command and sent back to back from clock 36 (tCL
   after cycle 0).
3. **Explicit flush read (FLRD).** The controller asks for up to `count`
   lines when the buffer gets full; they come as one group from clock 36.

Reservations are counted separately from occupancy (`avail = count -
reserved`), so a line is never promised twice, and a group reservation in
the same clock as a single one gets only what is left. Lines leave in FIFO
order, so the controller, which saw every dirty miss on HM, knows which
address each flush line belongs to. A push into a full buffer drops the
line and sets the sticky `fb_overflow_o`; the controller avoids this by
issuing FLRD in time.

## Tag entry

Each entry is 24 bits (3 bytes per 64 B line): 14-bit tag, valid, dirty,
six check bits of an extended Hamming code (single-error correct,
double-error detect) and two spare bits. After reset the tag mats are
swept to zero, one entry per clock (ROWS x 32 clocks); an all-zero entry is
a correct code word for an invalid line. `ready_o` rises when the sweep is
done and commands must wait for it.

## Sizes and parameters

| parameter | default | full device | note |
|---|---|---|---|
| `CHANNELS` (top) | 32 | 32 | |
| `ROWS` (rows per logical bank) | 2048 | 131072 | default gives a 1 GiB device; 131072 gives 64 GiB |
| `T_RFC` | 700 clocks (350 ns) | not specified | |
| `FB_DEPTH` (package) | 16 | 16 | |
| timing constants (package) | as in the tables above | | |

The row count is scaled down because the full 64 GiB of storage, written
as arrays, is far beyond what synthesis and simulation tools can
elaborate; the logic is identical at any row count. At the default size the
whole device (32 channels, 2048 rows) is simulated end to end by
`tb_tdram_top_full`, which needs about 1.1 GB of memory and a few minutes,
mostly for compilation.

## Where this design chooses for itself

The published description fixes the architecture, the commands, the
timing table, the 14-bit tag, the 3-byte entry, the HM bus contents, the
column gating and the flush-buffer size and unloading rules. The following
are this design's own choices:

- the CA packet layout, opcode numbers and the `count` field of FLRD;
- the HM packet layout, its length of two beats and the `fb_data` flag;
- the SECDED code in the tag entry and the treatment of an uncorrectable
  entry as invalid;
- the reset sweep of the tag mats;
- the cycle of every internal step not named by a timing value (tag write
  at 17, column write one tCCD_L after the read, push at 32), and the read
  data as one 64 B burst at clock 64, even half first;
- marking a line clean after an ActRd returned it as a dirty miss;
- the FIFO order and the reservation scheme of the flush buffer, one flush
  line per free read slot, and flush groups starting tCL after the command;
- T_RFC and 4 banks per bank group (8 logical banks per channel).

Not modelled: the PHY and pins, TSVs, HBM3's data ECC and redundancy, the
analog array circuits, other HBM3 commands and mode registers, and tFAW.
Some values of the timing table have no effect in this design and
are not used: tRCD_WR (every write waits for the tag result at
clock 20, later than tRCD_WR), tRTP_TAG and tRRD_TAG (each bank pair has
its own tag mats, and the tag mats of one pair are used once per command).
The cache controller is not part of the device; the behavioural one in
`tb/` implements the scheduling the device expects (oldest ready request
first, probes to the youngest unprobed read in idle CA slots, refresh,
flush reads when the buffer fills) but is a test model, not a design.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=M`. The leaf tests compare against
independent models (a bit-level SECDED model, a reference FIFO, a cycle
counter for every latency). `tb_bank_pair` checks the whole internal
timeline of a logical bank, clock by clock, including probes overlapping
a busy data side.

`tdram_host_model` is a behavioural cache controller with a mirror of the
device state. It issues ActRd, ActWr, PROBE, FLRD and REF under the
device's timing rules and predicts every HM and DQ beat of the channel,
and it also keeps a memory image so that every read hit must return the
latest value written to that address. `tb_tdram_channel` (one channel) and
`tb_tdram_top` (two channels, different traffic) run it for about 28 000
clocks and count each mechanism: every hit/miss class for reads and
writes, probes, reads retired by a probe, flush lines sent in read slots,
at refresh and by FLRD, and commands overlapping in different banks; one
that never happened is a failure. `tb_tdram_top_full` runs the default
32-channel device.

`tb_tdram_cache_mix` runs one channel under traffic shaped like a cache in
front of a much larger working set: about 70 % reads, 30 % write-backs,
eight tags competing for every line and a refresh every 3.9 us. In that
run the 16-entry flush buffer peaked at 9 lines and drained entirely
through clean-miss read slots (240 lines) and refreshes (29 lines); no
explicit flush read was needed. The test fails if the buffer overflows or
if most lines needed explicit reads.

To run one test with Verilator (5.x):

```
verilator --binary --timing --assert --top-module tb_tdram_top \
    rtl/tdram_pkg.sv $(ls rtl/*.sv | grep -v tdram_pkg) \
    tb/tdram_host_model.sv tb/tb_tdram_top.sv
./obj_dir/Vtb_tdram_top
```

The package file has to come first; testbenches that use the controller
model need `tb/tdram_host_model.sv` as well.
