# Digital subsystem of an LPDDR4X PHY with software-driven DFI access

An LPDDR4X PHY normally sits passively behind a DRAM memory controller that
talks to it through the DFI (DDR PHY Interface). Calibration, training,
margin sweeps and in-field monitoring then all depend on that controller.
This design puts a small RISC-V subsystem *inside* the PHY. Its centerpiece
is a **DFI Bridge**: software writes a list of 64-bit DFI commands and the
matching write data into local memories. DMA engines stream the commands into
a FIFO and the data into a 256 x 512-bit Data Buffer. A Bridge Control Unit
then replays the commands on the DFI at full rate, with cycle-exact spacing,
and keeps the data of reads and writes in the Data Buffer. A **DFI MUX** in
front of the PHY decides who drives the PHY: the external memory controller
or the bridge.

The RTL here covers the whole digital side of that arrangement:

- the 32-bit AXI4-Lite Memory Interconnect with a 64 kB SRAM and a DMA;
- the DFI Bridge: a 64-bit Bridge Interconnect, two DMAs, two 16 kB SRAMs,
  the Command FIFO, the Bridge Control Unit and the Data Buffer;
- a Bus Bridge to a simple peripheral bus serving a UART, an SPI master and
  the configuration/status registers;
- a JTAG TAP;
- the DFI MUX.

The RISC-V core (an RV32IMC processor) is not included. Its AXI4-Lite master
port is a port of the top module. The analog slices (data and CA drivers,
PLLs, bandgap, off-chip-driver calibration) are also outside the RTL.

```
        memory controller DFI            external AXI4-Lite       JTAG   UART  SPI
                 |                               |                  |      |     |
             +---v----+    +---------------------v------------------v--+   |     |
   PHY <---->| DFI MUX|<---| DFI Bridge <--- Memory Interconnect <--- core AXI port
   slices    +--------+    |   (64-bit)        |        |      |          |
                           |                  SRAM     DMA   Bus Bridge --> Peripheral bus
                           +-------------------------------------------------+  UART SPI CSR
```

Everything runs on one clock, the DFI clock. The DFI clock is half the DRAM
command clock, so at the 2133 MHz PHY maximum it is 1066 MHz. Each DFI cycle
carries two phases of CA signals.

## The DFI command word

Software describes DFI traffic as a sequence of 64-bit words. Each word
carries two CA commands, timing, and a Data Buffer slot index.
Defined in `phy_pkg::dfi_cmd_t`:

| bits    | field | meaning |
|---------|-------|---------|
| 63:62   | op    | `00`/`11` CA only, `01` WRITE, `10` READ |
| 61:60   | chan  | chip-select enable, channel 1 / channel 0 |
| 59:52   | idx   | Data Buffer slot used by a WRITE or READ |
| 51:36   | delay | DFI cycles from this command to the next one (min. 2) |
| 35:32   | —     | reserved |
| 31:24   | lat   | DFI cycles from the second CA command to the first data beat |
| 23:12   | ca_b  | second CA command: tick 1 in [23:18], tick 0 in [17:12] |
| 11:0    | ca_a  | first CA command: tick 1 in [11:6], tick 0 in [5:0] |

An LPDDR4 command is two ticks of the 6-bit CA bus, with CS high on the
first tick. One "CA command" here fills one DFI cycle: tick 0 goes on phase
0 with CS, and tick 1 goes on phase 1. The two CA commands of a word
therefore cover two DFI cycles, which is exactly one complete LPDDR4 command
pair. Examples are ACTIVATE-1 + ACTIVATE-2 and WRITE-1 + CAS-2. Both x16
channels see the same CA bits; `chan` chooses which of them get CS.

## Timing of the Bridge Control Unit

Suppose the unit pops a command from the FIFO in cycle P.

```
cycle        P     P+1      P+2      ...  P+2+lat  +1     +2     +3
CA / CS            ca_a/CS  ca_b/CS
WRITE data                                 q0      q1     q2     q3     (wrdata_en high)
READ                                       rddata_en high for 4 cycles
next pop at  P + max(delay, 2)
```

**A write** sends the four 128-bit quarters of its slot, quarter 0 first. The
unit reads the buffer one cycle ahead so the data is ready. **A read**
raises `rddata_en` for the same four cycles. The next four
`rddata_valid` beats are written, in order, into the slot named by the
oldest outstanding read. This works for any PHY read latency.

A 512-bit slot is one BL16 burst on both x16 channels, since 2 channels x 16
bits x 16 beats = 512 bits. At 128 bits per DFI cycle it takes 4 DFI cycles.
With `delay = 4` the unit can therefore run reads or writes back to back with
no gap on the data bus. With `delay = 2` the CA bus is busy every cycle.

Data transfers are queued separately from the CA stream. Up to `QDEPTH` (4)
writes and 4 reads may be pending, so the CA bus can run ahead of the data by
up to the data latency. A transfer whose due cycle arrives while the previous
burst is still on the bus starts as soon as the bus is free. It also sets the
sticky `late` status bit, so software can tell that its schedule was not
honoured. The unit stops popping while a transfer queue is full, and it pops
nothing while `bcu_en` is low.

The write mask is always driven 0 (all bytes written). The buffer has no
per-byte mask storage.

## Feeding the bridge: DMAs, Command FIFO and throughput

The Bridge Interconnect is a 64-bit AXI4-Lite crossbar. It has three
masters: DMA 0, DMA 1 and the port from the Memory Interconnect. It has four
slaves: SRAM 0, SRAM 1, the Command FIFO and the Data Buffer window. Each
slave has its own round-robin arbiter, so a DMA that fills the FIFO and one
that fills the buffer work in parallel.

A DMA copies `len` bus words from `src` to `dst`; each address either
increments or stays fixed. Reads and writes are decoupled through a 2-word
buffer, so a bridge DMA moves one 64-bit word roughly every 4 cycles. One
command per 4 DFI cycles is exactly what back-to-back BL16 bursts need. The
DMAs can therefore keep the CA side of a burst stream fed from SRAM.

Data is different. A burst needs 512 bits per 4 DFI cycles, while a 64-bit
AXI4-Lite path delivers about 64 bits per 4 cycles. Write data must therefore
be in the Data Buffer **before** the commands that use it are released. Read
data can be drained after the sequence has finished. The 256 slots hold
16 kB, enough for a whole training pattern or read-back. A typical flow:

1. With `bcu_en` low, load data patterns into the Data Buffer (by DMA from
   an SRAM, or directly from the core).
2. Start a DMA from SRAM to the Command FIFO address with `dst_inc = 0`.
3. Set `dfi_sel` and `bcu_en`. The unit issues commands while the DMA keeps
   refilling the FIFO; a full FIFO holds off the DMA's writes.
4. Poll `STATUS` until the unit is idle and the FIFO is empty, then read the
   captured slots.

The Command FIFO (16 entries) accepts a full 64-bit write as one push. A
32-bit master pushes a command in two writes:

- the low word (strobes `0x0F`) is staged;
- the high word (strobes `0xF0`) pushes `{high, staged}`.

A read of the FIFO returns its fill level.

## DFI MUX

The MUX has two sources, the memory controller's DFI and the bridge's DFI,
and one output to the PHY slices. A new select value written to `CTRL.dfi_sel`
takes effect only in a cycle where the source that currently drives the PHY
shows no CS, no `wrdata_en` and no `rddata_en`. A switch therefore never cuts
a command or a write burst in half. The `dfi_sel in force` status bit shows
when the switch has happened. Read data (`rddata_valid`) goes only to the
source that is selected.

**Caveat:** read data that the old source requested but that has not yet
returned from the PHY goes to the new source. Wait for outstanding reads to
complete before switching.

## Address maps

Memory Interconnect (32-bit). Its masters are the core, DMA 0, the external
AXI4-Lite port and JTAG.

| address | slave |
|---------|-------|
| `0x0000_0000` | 64 kB SRAM |
| `0x1000_0000` | DFI Bridge: +`0x0000` SRAM 0 (16 kB), +`0x4000` SRAM 1 (16 kB), +`0x8000` Command FIFO, +`0x1_0000` Data Buffer (16 kB; slot = addr[13:6], 64-bit lane = addr[5:3]) |
| `0x2000_0000` | UART; `0x2000_1000` SPI; `0x2000_2000` configuration registers |

An unmapped address gets a DECERR response. The 32-bit port into the bridge
copies write data to both halves of the 64-bit bus and steers strobes and
read data by address bit 2.

Configuration and status registers (offsets from `0x2000_2000`):

| offset | register |
|--------|----------|
| `0x000` | ID (`0x4C50_3458`) |
| `0x004` | CTRL: bit 0 `dfi_sel` (1 = bridge drives the PHY), bit 1 `bcu_en` |
| `0x008` | STATUS: bit 0 busy, bit 1 late, bit 2 `dfi_sel` in force, [15:8] FIFO level |
| `0x00C` | number of commands issued |
| `0x040 + 0x20*k` | DMA k (0 = Memory Interconnect, 1 and 2 = bridge): +0 SRC, +4 DST, +8 LEN, +C CTRL (bit 0 start pulse, 1 src_inc, 2 dst_inc), +10 STATUS (busy, done, error) |
| `0x100 + 4*i` | PHY control word i (8 words) |
| `0x180 + 4*i` | PHY status word i (read only) |

The UART is 8N1 with a 16-bit divider (clocks per bit). Its registers are:

- TXDATA `0x0`;
- RXDATA `0x4` (bit 8 = valid);
- STATUS `0x8` (txbusy, rxvalid, overrun, framing error);
- DIV `0xC`.

The SPI master is mode 0, 8 bits, MSB first. Its registers are:

- DATA `0x0` (a write starts a transfer; a read returns the last byte received);
- STATUS `0x4`;
- DIV `0x8` (half period in clocks);
- CS `0xC` (active low; one chip select at the top).

The UART's two pins and the SPI's four pins make six sensor pads.

The Bus Bridge turns AXI4-Lite into a peripheral bus. On that bus a request
is held until `ready`, and reads and writes never overlap. When both kinds
are waiting, the bridge alternates between them.

## JTAG

The JTAG port is a standard 16-state TAP with a 5-bit IR. Its instructions:

| IR | register | use |
|----|----------|-----|
| `0x01` | 32-bit IDCODE | IDCODE `0x1A5D_D001`, selected after reset |
| `0x10` | 66-bit BUSACC `{op, addr, data}` | Update-DR with op `01` writes one 32-bit word on the Memory Interconnect; op `10` reads one. Capture-DR returns `{busy, error, addr, data}`. |
| `0x11` | CORECTL `{halt, reset}` | drives the core's halt and reset lines |
| others | BYPASS | |

TCK is sampled by the system clock, so the system clock must be at least
four times the TCK rate.

## Where this follows the source design and where it does not

These points come from the published design:

- the block set and how the blocks are connected;
- the bus widths: 32-bit Memory Interconnect, 64-bit Bridge Interconnect;
- the memory sizes: 64 kB, 2 x 16 kB, and 256 x 512-bit for the Data Buffer;
- the 64-bit command holding two CA commands, timing and a buffer index;
- the 1:2 clock ratio;
- the six sensor pads;
- an IEEE 1149.1 TAP;
- a DFI MUX in front of the PHY.

These are choices of this implementation:

- every field position and encoding;
- all address and register maps;
- the meaning of the "timing" in a command (`delay` and `lat`);
- the mapping of a slot to one BL16 burst on both channels;
- the FIFO depth;
- arbitration;
- DMA programming through the register block instead of a slave port;
- the JTAG bus-access scheme in place of a full RISC-V debug module;
- the peripheral bus protocol;
- UART and SPI details;
- the DFI MUX switching rule.

The published text names three masters of the Memory Interconnect: the core,
the DMA and the external slave port. Its block diagram also shows JTAG on that
interconnect. This implementation follows the diagram, so JTAG is a fourth
master.

The DFI carried here is a subset of DFI 4.0: CS, address, write data
enable/data/mask, and read data enable/valid/data. There are no DFI
control-update, low-power or training handshakes.

The PHY slices' configuration (delay trims, drive strength and the like)
is not specified. It appears as eight generic 32-bit control words and eight
status words.

Memories are plain arrays with one cycle of read latency. In silicon they
would be compiled SRAM macros.

## Simulating

Each module has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.
`tb_phy_digital_top` runs the whole design at its default sizes:

- it loads commands and patterns over the external AXI port;
- it runs DMA-fed command streams through the bridge to a DFI responder
  model in the testbench;
- it checks the CA commands, the write data and the captured read data;
- it exercises the MUX switch, FIFO back-pressure, a late transfer, JTAG
  bus access, the UART, the SPI and the registers.

With verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb rtl/phy_pkg.sv tb/tb_phy_digital_top.sv \
          -y rtl --top-module tb_phy_digital_top -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

Replace the top module name to run another testbench. `tb/*.svh` contains the
shared AXI4-Lite and peripheral-bus driver tasks. The testbenches set
a timescale and the RTL does not, hence `--timescale`. This command prints no
warnings. Linting the RTL with `verilator --lint-only -Wall` reports only two kinds:

- unused signal bits and parameters;
- `SYNCASYNCNET`, because the asynchronous reset also appears in the
  `disable iff` clauses of the assertions.
