# HyperCroc RTL: a RISC-V microcontroller with a DMA path to HyperBus memory

Small open microcontrollers usually have only a few tens of kilobytes of
on-chip SRAM and no way to reach a large external memory. A domain-specific
accelerator needs one, because its datasets do not fit on chip.
HyperCroc adds two blocks to a minimal single-core RISC-V SoC:

- a **HyperBus controller**, a low-pin-count DDR interface to HyperRAM
  (pseudo-static DRAM) and HyperFlash devices;
- a **DMA engine (iDMA)** that moves data in bursts between that memory, the
  on-chip SRAM banks and a plug-in "user domain" where an accelerator sits.

The CPU sets up a copy and then does other work while the data flows. The
target is one 32-bit word per SoC cycle at 100 MHz. That rate is possible
because a HyperBus PHY at 200 MHz moves 16 bits per clock (8 bits on each
edge), and two PHYs side by side move a whole word per PHY clock.

This repository holds synthesizable SystemVerilog for the SoC's own
infrastructure:

- the crossbar and SRAM banks;
- the peripherals;
- the iDMA and the HyperBus controller;
- a behavioural model of the HyperBus PHY macro.

Each block has a self-checking testbench, and one end-to-end testbench runs
the whole SoC at its default size. Three parts are not included: the CPU core,
the JTAG/debug module and the accelerator. Their bus ports, interrupts and
boot controls are ports of the top module `croc_soc`.

## Structure

```
                 core instr   core data   debug   iDMA rd  iDMA wr   user mgr
                     |            |         |        |        |         |
              +------------------------------------------------------------+
              |        main 32-bit OBI crossbar (single cycle, 6 x 6)      |
              +------------------------------------------------------------+
                 |            |        |        |        |          |
             periph demux  bank 0   bank 1   bank 2   bank 3    user sbr
                 |         (8 KiB each)
   debug, boot ROM, CLINT, SoC regs, UART, GPIO, timer, iDMA cfg, HyperBus cfg

   iDMA rd ---burst OBI---+
                          +--> HyperBus controller --CDC--> PHY 0 (4 x CS#) --> HyperRAM
   iDMA wr ---burst OBI---+        (SoC clock)   (PHY clock) PHY 1 (4 x CS#) --> HyperRAM
```

**The bus.** Everything uses one OBI-style request/response pair, defined in
`croc_pkg`:

| Struct | Fields |
|---|---|
| `obi_req_t` | `req`, `addr`, `we`, `be`, `wdata`, `blen` |
| `obi_rsp_t` | `gnt`, `rvalid`, `rdata`, `err` |

Three rules hold on every port:

- A request is accepted in the cycle where `req && gnt`.
- Every subordinate answers exactly one cycle after the grant. The crossbar
  and the demux rely on this, and an assertion in the crossbar checks it. This
  is how the interconnect stays single-cycle and needs no response queues.
- `blen` is a sideband that only the burst ports use. It carries the number of
  beats of the current burst minus one, and it is repeated on every beat.

**The crossbar.**

- It decodes each manager's address with a rule table.
- Each subordinate has its own round-robin arbiter, so different managers can
  reach different banks in the same cycle.
- An internal error subordinate answers unmapped addresses with `err`.

**HyperBus access.** The HyperBus controller is not a crossbar subordinate.
Only the iDMA reaches external memory. A core access to the HyperBus window
gets an error response.

## Address map

| Base | Size | Block |
|---|---|---|
| `0x0000_0000` | 256 KiB | debug module window (port `dbg_sbr_*`) |
| `0x0200_0000` | 64 B | boot ROM |
| `0x0204_0000` | 64 KiB | CLINT |
| `0x0300_0000` | 4 KiB | SoC registers |
| `0x0300_2000` | 4 KiB | UART |
| `0x0300_5000` | 4 KiB | GPIO |
| `0x0300_A000` | 4 KiB | timer |
| `0x0300_B000` | 4 KiB | iDMA configuration |
| `0x0300_C000` | 4 KiB | HyperBus configuration |
| `0x1000_0000` | 4 x 8 KiB | SRAM banks 0..3, contiguous (bank = address bits [14:13]) |
| `0x2000_0000` | 1.5 GiB | user domain (port `user_sbr_*`) |
| `0x8000_0000` | 512 MiB | HyperBus memory, reachable by the iDMA only |

Addresses in the peripheral window that match no rule get an error from the
demux. Addresses outside all windows get an error from the crossbar.

## The external-memory path

This is the part of the design with the most timing and ordering rules.

### Bursts on OBI

HyperBus has a large fixed cost for each transaction:

- three clocks of command/address;
- an initial latency of 2 x 6 clocks before the data;
- a gap with chip select high.

Single-word accesses would therefore waste most of the bus. The iDMA instead
cuts each transfer into bursts of up to 16 words and marks every beat with
`blen`. The controller treats the first beat of a burst as the start of one
linear HyperBus transaction that covers all the beats. The beats of a burst
are contiguous in address and are issued back to back. An idle cycle inside a
burst only delays the burst; it does not split it.

### iDMA (`idma.sv`)

The iDMA has a read side and a write side that run at the same time. They meet
in a 48-word buffer. Each side has two manager ports:

- one into the crossbar, for SRAM and the user domain;
- one straight into the HyperBus controller.

For each transfer, each side picks its port from the address: the HyperBus
window uses the direct port, anything else uses the crossbar. So the iDMA
supports every copy direction: SRAM to HyperBus, HyperBus to SRAM, SRAM to
SRAM, and to or from the user domain.

- **Read side.** It starts a burst only when the buffer has room for the whole
  burst, counting reads that are still in flight. A read burst from HyperBus
  can therefore never stall on a full buffer.
- **Write side.** It starts a burst only when the buffer already holds all of
  that burst's data. A HyperBus write burst therefore never runs dry in the
  middle.
- **Back-to-back bursts.** Both sides start their next burst in the same cycle
  as the last beat of the previous one. The start conditions are computed
  from the counts as they will be after this cycle's grant.

With these rules, once the buffer has filled, an SRAM-to-SRAM copy of 512
words takes 532 cycles. That is 512 cycles of data plus the pipeline fill.

The configuration registers (word offsets from `0x0300_B000`):

| Offset | Name | Access | Meaning |
|---|---|---|---|
| `0x00` | SRC | rw | source byte address, word aligned |
| `0x04` | DST | rw | destination byte address, word aligned |
| `0x08` | LEN | rw | length in bytes, a multiple of 4 |
| `0x0C` | CTRL | wo | bit 0 starts the transfer (ignored while busy) |
| `0x10` | STATUS | ro / w1c | [0] busy, [1] bus error seen, [2] done pending. Writing 1 to bit 2 clears done and error. |
| `0x14` | DONE | ro | number of completed transfers |

The interrupt (fast line 3 of the core) follows STATUS[2].

### HyperBus controller (`hyperbus.sv`)

The controller runs in two clock domains:

- its OBI ports run on the SoC clock `clk_i`;
- the transaction engine and the PHYs run on `phy_clk_i` (200 MHz in the
  default configuration).

Three dual-clock FIFOs (`cdc_fifo.sv`, Gray-coded pointers with two-flop
synchronisers) connect the two domains:

| FIFO | Direction | Depth |
|---|---|---|
| command | SoC → PHY | 4 |
| write data | SoC → PHY | 32 words |
| read data | PHY → SoC | 32 words |

The PHY domain's reset is `rst_ni`, synchronised to `phy_clk_i`.

**SoC side, read port.**

- The first beat of a burst is granted only when both of these hold:
  - the command FIFO has a free entry;
  - the read-data FIFO has room for the whole burst, counting words already
    promised to earlier bursts.
- The read command is queued in that same cycle.
- The rest of the beats are granted one per cycle.
- Data returns in order, at most one word per cycle.
- Because the room was reserved up front, the PHY side can receive a burst at
  full speed without any flow control towards the memory. HyperBus reads
  cannot be paused.

**SoC side, write port.**

- Each beat is granted while the write-data FIFO has room.
- The write command is queued together with the last beat, so the PHY side
  starts a write only when all of its data is on its side.
- Writes are posted: each beat is acknowledged one cycle after its grant,
  before it reaches the device.
- If both ports queue a command in the same cycle, the write goes first. A
  read whose first beat is granted after a write's last beat therefore sees
  that write's data.

**PHY side.** A state machine runs one command at a time:

1. **CA**: three clocks of the 48-bit command/address word, 16 bits per clock.
   It holds the read/write bit, the memory space, the linear-burst flag and
   the half-word address.
2. **LAT**: only for writes. 2 x LATENCY clocks of fixed initial latency.
   LATENCY is a register with reset value 6. The phase is skipped for chip
   selects marked in WRNOLAT. HyperFlash devices need this, because they
   take write data right after the command/address word.
3. **WR**: 16 bits per PHY per clock. RWDS masks the bytes whose byte enable
   is clear.
4. **RD**: the controller counts the half-words that the PHYs report. The
   device paces the data with RWDS.
5. **GAP**: one clock with CK stopped and chip select still low, so that CS#
   rises after the last CK edge.
6. **IDLE**: at least one clock with every chip select high.

**Address decoding.** The controller takes the byte offset into the HyperBus
window and divides it by the number of PHYs:

- the bits above `DevAddrBits` (26, so 64 MiB per device) select one of the
  four chip selects;
- the bits below give the device's half-word address.

So each PHY holds 4 x 64 MiB = 256 MiB, and the default two-PHY
configuration fills the 512 MiB window.

**Two PHYs.**

- Each 32-bit word is split: PHY 0 holds bits [15:0] and PHY 1 bits [31:16],
  at the same half-word address.
- Both PHYs run the same command in lockstep, so a word moves on every PHY
  clock. With 200 MHz PHYs, that is 800 MB/s on the wire.
- On reads, the controller takes both halves when PHY 0 reports a
  half-word. Both devices receive the same command on the same clock edge,
  so their read data arrives in lockstep. Devices with different latency
  behaviour would need realignment, which is not built.
- With `NumPhys = 1` a word takes two PHY clocks, low half-word first.

Configuration registers (offsets from `0x0300_C000`):

| Offset | Name | Access | Meaning |
|---|---|---|---|
| `0x00` | LATENCY | rw | [3:0] initial latency in clocks. Change it only while idle. |
| `0x04` | INFO | ro | [3:0] number of PHYs, [7:4] chip selects per PHY |
| `0x08` | WRNOLAT | rw | one bit per chip select: writes have no initial latency (HyperFlash). Reset 0. |

Reads need no such setting. The controller simply waits for the half-words
that the device strobes with RWDS, so HyperRAM and HyperFlash read the same
way.

**Measured speed** (SoC clock 100 MHz, PHY clock 200 MHz, two PHYs,
16-word bursts):

| Copy | Words | Cycles | Rate |
|---|---|---|---|
| HyperBus → SRAM | 512 | 590 | 0.87 words/cycle |
| SRAM → HyperBus | 512 | 541 | — |
| SRAM → SRAM | 512 | 532 | — |

A 16-word read burst occupies the bus for about 33 PHY clocks:

| Phase | PHY clocks |
|---|---|
| idle | 1 |
| command/address | 3 |
| latency | 12 |
| data | 16 |
| gap | 1 |

That is 16.5 SoC cycles. Two PHYs fill the read FIFO twice as fast as the SoC
port empties it, so most of this overhead is hidden. The rest of the gap to
one word per cycle is pipeline fill at the start and the cycles needed to
cross clock domains.

**Bandwidth limit.** The controller's SoC-side ports move at most one word per
SoC cycle. At 100 MHz that is 400 MB/s per direction, not the 800 MB/s that
two PHYs can carry. Reaching 800 MB/s would need a wider SoC-side port or a
faster SoC clock.

### HyperBus PHY (`hyperbus_phy.sv`, behavioural model)

On silicon the PHY is a hard macro. Here it is a behavioural model with the
same division of work. The controller side is synchronous to `phy_clk_i`:

| Signal | Meaning |
|---|---|
| `cs_i` | chip select |
| `ck_en_i` | run CK |
| `dq_oe_i`, `tx_data_i[15:0]` | drive DQ with a half-word |
| `rwds_oe_i`, `tx_rwds_i[1:0]` | drive RWDS (the write mask) |
| `rx_valid_o`, `rx_data_o[15:0]` | one received half-word |

Inside the model:

- CK is the gated PHY clock, with CK# as its inverse.
- Outputs are retimed on the falling edge, so that DQ is centred on CK
  edges.
- Transmit bytes are multiplexed: high byte while the clock is high, low
  byte while it is low.
- Receive data is captured a quarter period (1.25 ns) after each RWDS edge,
  and the two bytes are paired into a half-word.
- The received half-word is passed to the PHY clock domain through a flag
  and registered on the next PHY clock edge, together with `rx_valid_o`.

The model uses delays and blocking assignments in its capture path, so it is
for simulation only. A real design puts the foundry macro in its place.

## Peripherals

Every peripheral answers one cycle after its grant. Each register is one
32-bit word.

**Boot ROM.** Four instructions:

1. `lui t0, 0x3000`
2. `lw t1, 0(t0)` reads BOOTADDR from the SoC registers.
3. `jalr x0, 0(t1)` jumps there.
4. `j .` (a safety loop).

**CLINT.** RISC-V layout:

| Offset | Register |
|---|---|
| `0x0` | msip |
| `0x4000` / `0x4004` | mtimecmp (low / high) |
| `0xBFF8` / `0xBFFC` | mtime (low / high) |

- `mtime` advances on each `rtc_tick_i`.
- `mtimecmp` resets to all ones.
- The timer interrupt is `mtime >= mtimecmp`.

**SoC registers.**

| Offset | Register | Meaning |
|---|---|---|
| `0x00` | BOOTADDR | reset value `0x1000_0000` |
| `0x04` | FETCHEN | core fetch enable |
| `0x08` | CORESTATUS | free word for software |
| `0x0C` | BOOTMODE | the boot-mode pins, read-only |
| `0x10` | INFO | [7:0] SRAM banks, [15:8] KiB per bank, [19:16] PHYs, [23:20] chip selects |

**UART.** 8N1, no FIFO.

| Offset | Register | Meaning |
|---|---|---|
| `0x0` | DATA | write sends a byte; read takes the received byte |
| `0x4` | STATUS | [0] transmitter busy, [1] byte received, [2] overrun |
| `0x8` | DIV | clocks per bit, reset 868 (115200 baud at 100 MHz) |

The interrupt is "byte received".

**GPIO.** 32 pins.

| Offset | Register |
|---|---|
| `0x00` | DIR |
| `0x04` | OUT |
| `0x08` | IN (through a two-flop synchroniser) |
| `0x0C` | SET |
| `0x10` | CLEAR |
| `0x14` | IRQEN |
| `0x18` | IRQPEND (w1c) |

A rising edge on an enabled pin sets its pending bit.

**Timer.** A 32-bit counter.

| Offset | Register | Meaning |
|---|---|---|
| `0x00` | COUNT | the counter |
| `0x04` | CMP | compare value |
| `0x08` | CTRL | [0] enable, [1] clear on match |
| `0x0C` | PRESC | prescaler |
| `0x10` | STATUS | [0] match pending, w1c |

**Interrupts to the core.**

- The CLINT drives the timer and software interrupts.
- `core_irq_fast_o` carries the rest:

| Line | Source |
|---|---|
| [0] | UART |
| [1] | GPIO |
| [2] | timer |
| [3] | iDMA done |
| [11:4] | user-domain interrupts `user_irqs_i` |

## Parameters of the top

| Parameter | Default | Meaning |
|---|---|---|
| `NumBanks` | 4 | SRAM banks |
| `BankWords` | 2048 | words per bank (8 KiB) |
| `NumPhys` | 2 | HyperBus PHYs (1 or 2) |
| `NumCs` | 4 | chip selects per PHY |
| `NumGpio` | 32 | GPIO pins |
| `NumUserIrqs` | 8 | user-domain interrupt lines |
| `UartDiv` | 868 | reset bit period of the UART |

Inside the blocks:

- iDMA: `BurstWords` = 16, `FifoDepth` = 48.
- HyperBus controller: `DevAddrBits` = 26, `FifoDepth` = 32,
  `LatencyReset` = 6.

## Verification

Each block has a testbench `tb/tb_<block>.sv`. Each one:

- computes its expected values independently of the block;
- ends with a line `TB_RESULT checks=N failures=M`;
- has a watchdog.

Where a rate matters, the testbench checks the cycle count:

- `tb_idma`: a 512-word SRAM copy finishes within 512 + 24 cycles.
- `tb_hyperbus`: a stream of 16-word read bursts sustains at least 0.8 words
  per SoC cycle.
- `tb_hyperbus_single`: the same tests on the single-PHY configuration. It
  checks the two-half-word layout of each word and requires at least 0.55
  words per cycle. The measured rate is 0.63 words per cycle, about 250 MB/s
  at 100 MHz.
- `tb_hyperbus_flash`: one PHY at 166.7 MHz with HyperFlash-style devices
  that take writes without latency. That clock is the flash's 333 MB/s bus
  rate, and its ratio to the SoC clock is not an integer. The measured rate
  is 0.52 words per cycle, and the test requires at least 0.45.
- `tb_croc_soc`: HyperBus to SRAM at least 0.75 words per cycle, and SRAM to
  SRAM within 542 cycles.

Shared testbench models:

| Model | What it is |
|---|---|
| `tb_obi_mem` | OBI memory with random grant stalls |
| `tb_burst_mem` | burst-port memory that checks the burst rules: one address and `blen` per burst, contiguous beats |
| `tb_hyperram` | HyperRAM device model: command/address decode, fixed latency, RWDS-strobed DDR data, write masking. Optionally a HyperFlash-like mode with writes that have no latency. |

`tb_croc_soc` runs the whole SoC at its default parameters. It plays the core,
the debug module and the user domain, and puts a HyperRAM model on chip
select 0 of each PHY. It covers:

- boot from the ROM;
- copies from SRAM to HyperBus, HyperBus to SRAM and SRAM to SRAM, with and
  without the core competing for the crossbar;
- copies into the user domain, and reads of SRAM by the user-domain manager;
- a block moved from HyperBus memory into the user domain and back, the
  path an accelerator uses to bring a dataset in and write results out;
- every peripheral and every interrupt;
- error responses.

It counts each mechanism and fails if any never occurred:

- crossbar contention;
- error responses;
- HyperBus read and write bursts on both PHYs;
- each interrupt.

### Simulating with Verilator

The code needs Verilator 5 with `--timing`. `croc_pkg.sv` must come first.
Each testbench needs the RTL it instantiates plus the models it uses. For the
whole SoC:

```
verilator --binary --timing --timescale 1ns/1ps --assert -Irtl -Itb \
  rtl/croc_pkg.sv $(ls rtl/*.sv | grep -v croc_pkg) \
  tb/tb_obi_mem.sv tb/tb_hyperram.sv tb/tb_croc_soc.sv \
  --top-module tb_croc_soc -Mdir build -o sim
./build/sim
```

For a single block, replace the testbench and the models:

| Testbench | Also needs |
|---|---|
| `tb_idma` | `tb_obi_mem.sv`, `tb_burst_mem.sv` |
| `tb_hyperbus`, `tb_hyperbus_single`, `tb_hyperbus_flash`, `tb_hyperbus_phy` | `tb_hyperram.sv` |
| `tb_obi_xbar`, `tb_obi_demux` | `tb_obi_mem.sv` |

The testbenches drive the SoC clock with a 10 ns period and the PHY clock with
5 ns. The PHY model's capture delay is given in ns (`realtime`), so keep the
1 ns time unit.

### Remaining lint warnings

| Warning | Where | Why it stays |
|---|---|---|
| blocking assignments in sequential logic | PHY model's capture path | The model is timing-accurate on purpose and not for synthesis. |
| a reset used both asynchronously and in an assertion's `disable iff` | several modules | Harmless. |
| unused inputs | `blen` bits in single-beat subordinates, and a few status inputs | The port structs are shared by every port. |

## Where this design departs from the paper, and its limits

- **Missing parts.** The CPU core, the JTAG/debug module and the
  accelerator are not included. Their interfaces are ports.
- **iDMA.** The original is a configurable multi-dimensional DMA. This one is
  a one-dimensional, word-aligned engine: one transfer at a time, no
  descriptors, and lengths and addresses in whole words.
- **HyperBus controller.** The original is a silicon-proven design. This
  controller is its own, simpler implementation:
  - fixed double initial latency, with no use of RWDS as a latency
    indicator on reads;
  - HyperFlash is supported only as far as the bus goes: reads, and writes
    without latency. Program and erase command sequences are left to
    software, as single-word writes.
  - no register-space accesses to the devices, and no read timeout;
  - posted writes.
- **Bandwidth.** Two PHYs give 800 MB/s on the HyperBus side. The SoC-side
  ports take one word per SoC cycle, so at 100 MHz a single copy runs at up
  to 400 MB/s.
- **Capacity.** The paper's description is not consistent here:
  - it gives 256 MiB of PSDRAM per PHY, and two PHYs of 256 MiB in its
    summary table;
  - it also mentions up to 2 GiB per PHY (with HyperFlash devices), and
    2 GiB for the dual-PHY setup.

  This design follows the table: 64 MiB per device, four devices per PHY,
  512 MiB in total. Supporting 2 GiB per PHY would mean raising `DevAddrBits`
  to 29 and widening the HyperBus window.
- **Design choices.** The paper does not specify these, so they are this
  design's own:
  - the address map;
  - all register maps;
  - the peripherals' behaviour;
  - the burst length and buffer sizes;
  - the arbitration policy;
  - the word split across the two PHYs.
