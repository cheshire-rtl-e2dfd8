# Cheshire memory subsystem: LLC/scratchpad and RPC DRAM interface

A small 64-bit RISC-V host SoC needs off-chip DRAM because embedded Linux needs
8–16 MB, which does not fit on chip. The DRAM has to be reached over very few
pins. RPC DRAM uses 22 switching signals: commands, addresses and data all
share one 16-bit double-data-rate bus (DB), and strobes sample it as in DDR3.
This design is the memory path of such a host. It has three parts:

- a last-level cache (LLC) whose ways can be turned into on-chip scratchpad
  (SPM) at runtime, one by one;
- an AXI4 frontend that turns AXI bursts into whole 32-byte DRAM words;
- a controller with an all-digital PHY that drives the DRAM pins.

The main difficulty is a mismatch between the two sides. AXI lets any beat of
a transfer stall. An RPC DRAM burst cannot stall once it has started. The
frontend settles this with buffering: a write reaches the DRAM only when all
its data is on chip, and a read is started only when there is room for all
its data. The controller behind the frontend is therefore free to run every
transfer at full bus speed.

The defaults are those of the 65 nm demonstrator: 64-bit AXI data, 48-bit
addresses, 128 KiB LLC/SPM, 8 KiB read and 8 KiB write buffers, a 16-bit DB
at 200 MHz, and a 32 MiB device.

```
 AXI4 (64 bit) ──► cheshire_llc ──► rpc_axi_frontend ══NSRRP══► rpc_ctrl ──► RPC DRAM pins
 Regbus ────────►   (LLC / SPM)      serializer                  regs, manager
 Regbus ───────────────────────────► dw converter 64→256         command FSM
                                     write / read buffers        timing FSM
                                     2 KiB splitter, masks       PHY (+ delay lines)
```

`cheshire_top` contains `cheshire_llc` and `rpc_dram_if`. `rpc_dram_if`
contains `rpc_axi_frontend` and `rpc_ctrl`. The rest of the SoC is not part
of this RTL: the CVA6 core, AXI crossbar, register-bus demultiplexer, DMA and
peripherals. Its connections appear as top-level ports: one AXI subordinate
port and two 32-bit register-bus ports (LLC and DRAM controller).

## Address map and the LLC/scratchpad

| Window | Base | Size | Served by |
|---|---|---|---|
| SPM | `0x1000_0000` | 128 KiB (way *w* at `+w·16 KiB`) | ways whose SPM bit is set |
| DRAM | `0x8000_0000` | 32 MiB | cached in the remaining ways |

**Cache organisation.**
- 8 ways × 512 sets × 32-byte lines. One line is exactly one RPC DRAM word.
- Write-back and write-allocate.
- Victims are chosen round-robin among the ways still in cache mode.
- The cache and the SPM share one data array. A way switched to SPM is
  removed from the cache and appears in the SPM window.
- An access to the SPM window of a way that is not in SPM mode gets an AXI
  `SLVERR`. So does any address outside both windows.

**Registers** (register bus, word offsets):
- 0: SPM-enable mask, read/write. Bit *w* set means way *w* is scratchpad.
- 1: switch pending, read-only. Reads 1 while a switch is still running.

**Switching a way to SPM.** Setting a bit starts a background flush of that
way: every dirty line is written back to DRAM, then all its lines are
invalidated. Normal traffic waits until the flush is done; software polls
register 1. Clearing a bit returns the way to the cache. It comes back
empty, and the scratchpad contents are dropped. If all eight ways are SPM,
DRAM is still reachable: each AXI beat is passed through uncached as a
single-beat DRAM access, with its byte strobes.

**Timing.**
- The LLC handles one AXI transaction at a time. A waiting write always goes
  before a waiting read.
- It works beat by beat. A hit or SPM beat costs one cycle.
- A miss costs a victim write-back, if the line is dirty, and then a refill.
  Each is one 4-beat INCR burst on the DRAM side.
- The write response, or the last R beat, follows the last beat.

This is the simplest organisation that still shows the feature of interest,
a runtime per-way cache/SPM split. It trades throughput for clarity; see
[Departures](#departures-from-the-published-design).

## The frontend–controller boundary (NSRRP)

The frontend and controller talk over a non-stallable request–response
protocol (NSRRP) that is one 256-bit word wide:

- **Request** (valid/ready): read or write flag, 20-bit word address, length
  (words − 1, at most 64 words, all within one 2 KiB row), and two 32-bit
  byte masks for the first and last word (1 = do not write).
- **Write data**: the controller pulses `wpop` once per word and takes
  `wdata` in the same cycle. The frontend must always have the word ready.
- **Read data**: the controller pulses `rvalid` once per word with `rdata`.
  There is no ready signal. The frontend must always have room.

All of the AXI-side complexity exists to keep those two promises.

## AXI frontend (`rpc_axi_frontend`)

**Serializer** (`rpc_axi_serializer`). The controller works strictly in order,
so AW and AR are merged into one stream. Transactions of all IDs are served
first come, first served. When both channels are waiting, the one waiting
longer goes first. When both arrived in the same cycle, the channel not
served last time wins. QoS is ignored.

**Width conversion** (`rpc_dw_converter`).
- Each 64-bit W beat is placed in a 256-bit word at the lane given by
  address bits [4:3], and its strobes are merged in.
- A word is emitted when the beat that completes it arrives.
- Words are grouped into *runs*: consecutive words that will become one DRAM
  write. RPC DRAM can mask only the first and last word of a write, so a
  word with partial strobes that is not the first of its run closes the run
  before it.
- On the read side, a 4-deep queue of accepted AR bursts drives the
  unpacking of words into R beats.
- Narrow beats (`size` < 3) work on both sides.

**Write buffer** (`rpc_write_buffer`, 256 words = 8 KiB). Words are stored
with their address and strobes. A run's descriptor (start, count, first/last
strobes) is released only once the run's last word is inside. This is the
rule that makes a launched write never wait for data. The B response is
*posted*: it is returned once the burst's last run has been handed on, not
when the DRAM has written it. Later accesses are still ordered behind it,
because everything is in order.

**Read buffer** (`rpc_read_buffer`, 256 words). This is a fall-through FIFO.
Before a read of *N* words is sent to the controller, the frontend checks
that *N* words are free and reserves them. So a word pushed by the DRAM
always has room. Data is visible on R the cycle after it arrives. It is held
only while R stalls.

**Splitter** (`rpc_splitter`). A transfer is cut into pieces at every 2 KiB
row boundary, one piece per cycle. Inner cut edges get full masks.

**Mask unit** (`rpc_mask_unit`). Converts the first and last strobes into
RPC masks by inverting them. A one-word write gets the AND of both strobes
in both masks.

Only INCR bursts are supported. The DRAM byte address is AXI address bits
[24:0].

## Controller (`rpc_ctrl`)

### Registers (`rpc_regs`)

A 32-bit register-bus subordinate. It answers in the cycle of the request.
The index is `addr[5:2]`. Reset values are in 200 MHz cycles. They are
plausible DDR3-class numbers, not datasheet values.

| idx | name | reset | meaning |
|---|---|---|---|
| 0 | t_rcd | 3 | ACT → RD/WR |
| 1 | t_rp | 3 | PRE → next command |
| 2 | t_ras | 8 | ACT → PRE |
| 3 | t_wr | 3 | end of write data → PRE |
| 4 | t_rfc | 28 | REF → next command |
| 5 | t_refi | 1560 | refresh interval (7.8 µs) |
| 6 | t_zqi | 25 600 000 | short-ZQ interval (128 ms) |
| 7 | t_zqcs | 16 | ZQ duration |
| 8 | t_init | 40 000 | power-up wait (200 µs) |
| 9 | rl | 6 | READ → first data cycle |
| 10 | wl | 3 | WRITE → first mask cycle |
| 11 | mode | 0 | mode-register value written at init |
| 12 | tx_tap | 25 | transmit strobe delay-line tap |
| 13 | rx_tap | 25 | receive strobe delay-line tap |
| 14 | status | – | bit 0 = initialization done (read-only) |

Other indices answer with an error.

### Manager (`rpc_manager`)

After reset it waits `t_init` cycles. It then requests one mode-register
write and one long ZQ calibration, and raises `init_done`. Datapath requests
are held off until then. After that, two free-running counters request a
refresh every `t_refi` cycles and a short ZQ every `t_zqi` cycles. Each
request is held until the command FSM takes it. Refresh comes first.

### Command FSM (`rpc_cmd_fsm`)

The controller uses a closed-page policy: every NSRRP request becomes
`ACT bank,row` → `RD/WR col,len` → `PRE bank`. Management requests become
REF, ZQ (short or long) or MRS. They win over waiting datapath requests, but
only between sequences, when every bank is closed.

### Timing FSM (`rpc_timing_fsm`)

This block enforces the minimum gaps between commands. It also drives the
pins cycle by cycle, through the PHY's output registers.

Every command occupies one cycle on DB with CS# low. The command packet is a
32-bit subword with this layout:

```
[31:28] op   1 ACT  2 RD  3 WR  4 PRE  5 REF  6 ZQ  7 MRS
[27:26] bank
ACT    [25:14] row
RD/WR  [25:20] column (word in row)  [19:14] words-1
MRS/ZQ [15:0]  mode value / long-short flag
```

The minimum gaps are:
- ACT→RD/WR: `t_rcd`
- ACT→PRE: `t_ras`
- PRE: `t_rp`
- REF: `t_rfc`
- ZQ: `t_zqcs`
- MRS: 4 cycles
- after a WRITE: the whole data burst plus `t_wr`
- after a READ: `rl` + 8·words

A **write** issued in cycle 0 uses the bus like this:

| cycle | DB | DQS |
|---|---|---|
| 0 | WR packet, CS# low | – |
| wl−1 | – | preamble (driven low) |
| wl | first-word mask (32 bits) | toggling |
| wl+1 | last-word mask | toggling |
| wl+2 … wl+1+8n | 8 data subwords per word | toggling |
| next | – | postamble |

At the start of each word the FSM pops that word from the frontend and loads
it into the PHY serializer.

After a **read**, the device drives DB and DQS from cycle `rl`. A word takes
8 cycles of 32 bits, on both edges of DQS, and the controller leaves the bus
undriven meanwhile.

Placing the masks between the write command and the data follows the
published design. The exact cycle plan is this design's own.

### PHY (`rpc_phy`, `rpc_delay_line`)

**Transmit.**
- The per-cycle 32-bit payload is registered: a command or mask from the
  timing FSM, or a subword of the word being serialized.
- A multiplexer driven by the clock itself sends bits [15:0] while CLK is
  high and bits [31:16] while it is low. This turns single data rate into
  double data rate.
- DQS/DQS# come from a copy of the clock delayed by a quarter period in a
  delay line (`tx_tap`), gated by the timing FSM. So their edges fall in the
  middle of each DB half-cycle.
- CLK/CLK# are the controller clock and its inverse.

**Receive.**
- The device's DQS is edge-aligned with the data. A second delay line
  (`rx_tap`) moves it into the data eye.
- Its rising edge captures the low 16 bits and its falling edge the high 16
  bits. The falling edge also writes the 32-bit subword into an 8-entry
  asynchronous FIFO with Gray-coded pointers and two-flop synchronizers.
  This FIFO is the clock-domain crossing.
- On the controller clock, eight subwords are packed into one 256-bit word,
  which is delivered with a one-cycle `rvalid`.

`rpc_delay_line` is a **behavioural model**: a transport delay of
`tap × TapDelay` time units, 50 per tap. In silicon it is a chain of
library delay cells with a tap multiplexer, and it must be characterized
per process.

## Measured behaviour

`tb_rpc_burst_sweep` runs `rpc_dram_if` against the device model. It issues
16 back-to-back transfers per size, in the way a DMA engine would, and
reports utilization: useful bytes / (4 bytes × cycles). The peak is 800 MB/s
at 200 MHz.

| size | 8 B | 32 B | 128 B | 512 B | 2 KiB | 8 KiB |
|---|---|---|---|---|---|---|
| write | 0.087 | 0.324 | 0.666 | 0.832 | 0.901 | 0.921 |
| read | 0.093 | 0.370 | 0.701 | 0.873 | 0.935 | 0.935 |

Reads level off at 0.935 (748 MB/s) from 2 KiB up. This matches the
published 750 MB/s peak and the plateau from 2 KiB. The small-transfer
overhead comes from ACT, `t_rcd`, latency, masks, the postamble and PRE
around every transfer.

## Departures from the published design

- **Command encoding and the serial command pin.** The RPC DRAM standard's
  packet formats and its serial command pin (STB) were not available. All
  commands go on DB with the home-grown layout above, and STB is held high.
  So this controller does not talk to a real RPC DRAM device. It does talk to
  the behavioural device model in `tb/rpc_dram_model.sv`, which uses the same
  encoding. Commands cannot overlap data the way the real pin allows.
- **Device timings** (table above), the 4 banks × 4096 rows × 64 words
  geometry and the init sequence are plausible values, not the device's
  datasheet values.
- **LLC.** The published LLC is a configurable cache. Here, the 8-way
  organisation, the line size, the register map and the address windows are
  this design's own. It serves one transaction at a time, beat by beat,
  with no hit-under-miss. Back-to-back traffic through it is far slower than
  through the frontend directly.
- **Read/write balance.** The published measurements show reads about 1.3×
  better than writes. Here the ratio is 1.04. Writes are posted, and the
  next burst fills the write buffer while the previous one is on the bus,
  so writes lose less than in the measured chip.
- **Buffers** are register arrays (synthesis may map them to memories). The
  published area breakdown says the buffers dominate; no area figure was
  checked here.
- **No read-strobe gating.** The receive side assumes DQS is quiet outside
  read bursts. A real board needs a gate window against line ringing.
- **Delay lines** are behavioural, as noted above.
- Only the memory path is built. The CVA6 core, crossbar, DMA, debug module,
  interrupt controllers, peripherals, boot ROM, die-to-die link and FLL are
  not. The CPU workloads of the evaluation (WFI, NOP, matrix multiply) and
  the power figures can therefore not be reproduced.

## Simulating

Every file in `rtl/` holds one module or package. Compile the two packages
first. Example for the whole subsystem:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/rpc_pkg.sv rtl/cheshire_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
  tb/rpc_dram_model.sv tb/tb_cheshire_top.sv --top-module tb_cheshire_top
./obj_dir/Vtb_cheshire_top
```

Replace the last testbench file and the `--top-module` name for any other
testbench. `tb/rpc_dram_model.sv` is needed only by the testbenches that talk
to the pins (`tb_rpc_ctrl`, `tb_rpc_dram_if`, `tb_rpc_burst_sweep`,
`tb_cheshire_top`), but it does no harm elsewhere.

The clock period in the testbenches is 5000 time units: read them as
picoseconds for 200 MHz. Each testbench checks itself, has a watchdog, and
ends with `TB_RESULT checks=N failures=M`.

Reset is asynchronous and active low. The testbenches start with a real
falling edge on `rst_ni`. The PHY's receive-side write pointer is clocked by
the delayed DQS, which does not toggle during reset, so in simulation only
that edge resets it. If your own bench holds reset low from time 0 with no
edge, the receive FIFO can start misaligned. Test with random initial
values (`+verilator+rand+reset+2`) to catch this.

| testbench | what it checks |
|---|---|
| `tb_cheshire_top` | Default parameters. Miss/hit, dirty eviction, switching ways to SPM with flush, SPM and out-of-window errors, all-SPM bypass with partial strobes, return to cache, R stalls. Refresh and ZQ happen during traffic. Every mechanism must occur at least once; all data is compared with a byte-level reference. |
| `tb_cheshire_llc` | The LLC against a behavioural AXI memory with random delays. |
| `tb_rpc_dram_if`, `tb_rpc_ctrl`, `tb_rpc_axi_frontend` | Aligned, unaligned, narrow, masked and row-crossing transfers. One word takes 8 DB cycles. A 2 KiB read keeps DB ≥ 85 % busy. |
| `tb_rpc_burst_sweep` | The utilization table above. |
| `tb_rpc_timing_fsm`, `tb_rpc_cmd_fsm`, `tb_rpc_manager` | Command spacing, the write cycle plan, command order, init gating, refresh and ZQ intervals. |
| `tb_rpc_phy`, `tb_rpc_delay_line` | DDR halves, subword order, the 90° strobe, receive through the CDC, tap delays. |
| buffer, splitter, mask, serializer, converter, register testbenches | Each block on its own, against a reference model. |

`tb_cheshire_top` simulates about 90 000 cycles with the full 40 000-cycle
power-up wait. It finishes in well under a minute.

To change sizes, override the top's parameters `SpmBytes`, `WriteBufWords`
and `ReadBufWords`. The LLC's `NumWays`, `LineBytes`, `SpmBase`, `DramBase`
and `DramBytes` are also parameters. `LineBytes` sets the refill and
write-back burst length (`LineBytes/8` beats). Only the default 32 B lines
(one RPC word) are tested.
