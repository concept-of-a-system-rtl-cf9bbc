# A memristor computing SoC: RTL for the digital system

Memristor crossbars can compute where the data is stored: a vector of voltages applied to the
rows of a crossbar of programmed conductances produces, on every column, a current that is a
weighted sum of the inputs. Computing-in-memory (CiM), content-addressable memory (CaM) and
spiking neural networks (SNN) all build on this. Each of these has been shown on its own; the
chip this RTL describes puts seven such computing arrays (CAs) next to a conventional 32-bit
RISC-V on one die, so that they can work together and be compared with plain CMOS, and gives
the outside world a way to watch every word they exchange.

The architecture is that of Grewing et al., "Concept of a System-on-Chip Research Platform
Benchmarking Interaction of Memristor-based Bio-inspired Computing Paradigms". That
publication fixes the block set, the floorplan, the bus width, the memory sizes, the clock
rates and the pin list. It says very little about how the blocks work inside. Everything this
RTL needed beyond that, such as protocols, packet formats, register maps and state machines,
is this design's own choice. Each choice is marked as such below and in the opening comment of
every file.

## The chip at a glance

```
                    LVDS out (16 data + 2 addr + valid, DDR)   CBTXREA in
                                  ^                                |
      TTL in (8 data, addr, val) -+-> chip bridge (node 8) <-------+
                          CBRXREA <-+        |  ^ monitor copy of every transfer
                                             v  |
   RISC-V port (node 0) <------> 32-bit network on chip, one flit per cycle
   (core not in this RTL)             |   |   |   |   |   |   |
   2 x 64 kB SRAM                    CA1 CA2 CA3 CA4 CA5 CA6 CA7
   AXI stream port --> RISC-V        CiM CiM CiM CaM CaM SNN SNN
                                     each: controller + 32 kB SRAM + crossbar/DAC/ADC
   JTAG --> two configuration banks <-- interrupt input pin (selects bank)
            interrupt output pin <-- ready / overflow / misroute events
            memory self-test start / results
```

| Part | Module | From the architecture | Own choice |
|---|---|---|---|
| Network on chip | `noc` | 32 bit, joins RISC-V and 7 CAs, 1 GHz | single-transfer switch, node ids, flit sideband, packet lock, round robin |
| Computing array | `computing_array` | 7 CAs (3 CiM, 2 CaM, 2 SNN); crossbar, mixed-signal periphery, local controller, local memory | one common shell for all kinds |
| CA local controller | `ca_ctrl` | exists, runs the CA independently | command set and sequencing |
| CA local memory | `sram_sp` | 32 kB per CA | 8192 x 32 bit, 1-cycle read, byte enables |
| Crossbar + DAC/ADC | `ca_crossbar` (behavioural) | analog part at 100 MHz | 32 x 32, 4-bit levels, 4-bit DAC, 8-bit ADC |
| RISC-V memory | `riscv_sram` | 2 x 64 kB | top address bit selects the bank |
| Chip bridge out | `cb_tx` | CBTXDAT 15:0, CBTXADD 1:0, CBTXVAL, CBTXREA, 2 Gbit/s per line; at-speed NoC readout; chip-to-chip | DDR split, address meaning, monitor/link modes, FIFO |
| Chip bridge in | `cb_rx` | CBRXDAT 7:0, CBRXADD, CBRXVAL, CBRXREA, 100 Mbit/s; direct access to the CAs | four-phase handshake, byte and address packing |
| AXI stream port | `axi_stream_if` | 15 pins, 100 MHz, to the RISC-V | pin assignment, oversampling, word packing |
| JTAG | `jtag_tap` | 5 pins, 10 MHz, programs the registers | instruction set, 40-bit CFG register |
| Configuration | `cfg_regs` | two banks, the interrupt input selects one | 8 registers per bank, map, status words |
| Interrupt output | `irq_ctrl` | signals ready states and soft errors such as overflows | event set, enable, write-one-to-clear |
| Memory self-test | `mbist` | memory built-in self-tests are included | March C-, start and result registers |
| Top | `soc_top` | | |

Not in the RTL: the RISC-V core, which is a standard core taken from elsewhere. Its NoC port, its
memory port and the words from the AXI port are ports of `soc_top`. Also not in the RTL: the
clock buffers behind the four clock pins, the LVDS, TTL and 3.3 V pad cells, the analog test
multiplexers (TESTAC, TESTDC), the electroforming and SET/RESET supplies, and the scan chain
that SCAN_EN enables. The scan chain is inserted by the test flow.

## Why the network moves one word per cycle

The chip bridge is meant to let a lab setup record the network's traffic at full speed. Its
output has 16 LVDS data lines at 2 Gbit/s each, which is 32 Gbit/s. That is exactly one
32-bit word per cycle of the 1 GHz network clock. A network that could move several words in
one cycle, such as a full crossbar switch, would produce more traffic than the pins can carry.
`noc` is therefore a switch that moves at most one flit per clock:

* Every node has a valid/ready input and a valid/ready output. A flit carries 32 data bits and a
  sideband of `dest` (4 bits), `src` (4 bits) and `last` (`soc_pkg::flit_t`).
* Each cycle, a round-robin arbiter picks one input whose head flit may move. A flit may move
  when the output register of its destination is free or is being emptied in this cycle. It
  must also not be blocked by another source that holds that destination in the middle of a
  packet.
* The granted flit goes into its destination's output register. One cycle after it is
  accepted, it is valid at the receiver.
* A destination is locked to one source from the first flit of a packet until the flit with
  `last` set. This means packets never interleave at a receiver (wormhole style).
* Every transfer is copied, one cycle later, to `mon_valid/mon_flit`, which the chip bridge
  reads.
* A flit addressed to a node number that does not exist (9 to 15) is taken and dropped, and
  `route_err` pulses.

Node numbers: 0 RISC-V, 1-3 CiM, 4-5 CaM, 6-7 SNN, 8 chip bridge. The floorplan places the arrays
in the order CiM, CiM, CaM, CaM, CiM, SNN, SNN; the numbering here groups them by kind instead.

## Computing arrays

A CA appears on the network as one node. Inside it, `ca_ctrl` carries out commands. It keeps its
operands in the CA's own 32 kB memory, so one command from the RISC-V starts a whole evaluation
that needs no further help from outside.

The first flit of a packet to a CA is a command: `[31:28]` opcode, `[27:15]` field A, `[14:2]`
field B (word addresses into the 8192-word memory, or a count). Use `soc_pkg::ca_cmd(op, a, b)`
to build one.

| Opcode | Fields | Effect | Reply to the sender |
|---|---|---|---|
| `OP_WRITE` (1) | A = start address | the following flits of the packet are stored at A, A+1, ... | none |
| `OP_READ` (2) | A = start, B = count | | B words, one packet, `last` on the final word |
| `OP_PROG` (3) | A = image address | 32 rows x 4 words are read from A and written into the crossbar, row by row | one `OP_DONE` flit |
| `OP_RUN` (4) | A = input, B = result | 4 input words are read from A, the crossbar evaluates, 8 result words are written from B | one `OP_DONE` flit |

Data layouts (column or row 0 always in the lowest bits):

* Conductance image: for row r, words A+4r ... A+4r+3. Each word holds eight 4-bit levels
  (columns 8k to 8k+7 in word k).
* Input vector: four words of eight 4-bit DAC codes (rows 8k to 8k+7 in word k).
* Result vector: eight words of four 8-bit ADC codes (columns 4k to 4k+3 in word k).

The crossbar model computes `code[c] = min(255, (sum over r of vin[r] * g[r][c]) >> 5)`. One
evaluation takes 10 digital cycles, because the analog periphery runs at 100 MHz against the
1 GHz controller. A RUN therefore takes about 8 cycles to fetch the input, 10 cycles to
convert, 8 to store the results and 1 to reply. A PROG takes 2 cycles per word (256 cycles).
A READ sends one word every two cycles.

An access at or past address 8192 is suppressed, pulses `mem_ovf` (a "memory overflow" soft
error for the interrupt pin) and sets bit 0 of the `OP_DONE` reply. When its enable bit
(`CTRL[8+i]`) is low, a CA accepts nothing: it is switched off. Flits sent to it wait in the
network.

A typical job from the RISC-V: WRITE the image, WRITE the input vector, PROG, wait for DONE,
RUN, wait for DONE, READ 8 words.

The three kinds of array (CiM, CaM, SNN) share this shell. The `KIND` parameter records which
kind an instance is, but the model only implements the column-sum evaluation common to all of
them. Match-line sensing for CaM and neuron circuits for SNN are not described in enough detail
to build and are not modelled. The SET/RESET pulse sequences that program a real memristor
are not modelled either: PROG writes the conductance levels directly.

## Chip bridge

### Output (`cb_tx`)

The output sends one 32-bit word per clock cycle as two 16-bit halves, one on each clock edge.
`tx_dat_rise` holds bits 15:0 and `tx_dat_fall` holds bits 31:16. The two address lines carry
4 bits per word in the same way (`tx_add_rise` = bits 1:0, `tx_add_fall` = bits 3:2).
`CBTXVAL` is high for the whole cycle. The double-data-rate output cell that merges the two
halves onto one LVDS line belongs to the pad, so the RTL top exposes both halves.

Bit 0 of the active bank's `CTRL` register selects the mode:

* **Monitor** (`CTRL[0]=0`): every network transfer enters a 16-word FIFO, with its
  destination node as the address. While `CBTXREA` is high, one word leaves per cycle, so the
  output keeps up with the network indefinitely. If the receiver holds `CBTXREA` low for long
  enough that the FIFO fills, new words are dropped. Each lost word pulses `overflow`, which
  counts in status word 34 and raises the `CBOVF` interrupt event. The network itself never
  waits for the monitor.
* **Link** (`CTRL[0]=1`): only flits addressed to node 8 leave the chip. The address carries
  the source node in bits 2:0 and the flit's `last` flag in bit 3. Only nodes 0 to 7 can send
  to the bridge, so three source bits are enough, and `last` lets the far side rebuild the
  packets. When the FIFO is full the network is held off, so nothing is lost. This is the
  chip-to-chip mode.

`CBTXREA` passes a two-flop synchronizer. A receiver should lower it while it still has room
for at least three more words.

### Input (`cb_rx`)

The input lines have no clock, so each byte is transferred by a four-phase handshake that the
core clock samples:

1. The sender sets `CBRXDAT` and `CBRXADD`, then raises `CBRXVAL`.
2. The bridge takes the byte and raises `CBRXREA`.
3. The sender lowers `CBRXVAL`.
4. The bridge lowers `CBRXREA`.

Four bytes, least significant first, make one 32-bit flit. The single address line carries one
bit per byte:

* byte 1: the flit's `last` flag;
* bytes 2 to 4: destination bits 0, 1 and 2.

Any node from 0 to 7 can therefore be reached. The flit's source is the bridge (node 8). The
bridge does not acknowledge the next byte while a finished flit is waiting for the network.

Together these give direct access to a CA from outside. In link mode, a READ entered over the
TTL lines is answered to node 8, so the reply leaves over the LVDS lines. The end-to-end test
does exactly this.

### Two chips

The output runs at 32 bits per nanosecond and the input at one byte per handshake, so two
chips are not wired pin to pin. Some board logic sits between them, typically an FPGA. It
takes each LVDS word, chooses the destination node on the other chip, and replays the word
as four TTL bytes, passing the `last` flag on. `tb_link_relay` models that glue. In
`tb_chip_link`, chip A's RISC-V port runs a whole job on chip B's CA 1: it sends every
packet to its own node 8, and B's replies come back through a second relay to A's node 0.
The slow TTL side keeps the relay full, so the test also shows CBTXREA flow control and
back-pressure on A's network. The relay's queue never grows more than three words past the
point where it lowers CBTXREA.

## Configuration, the bank switch and interrupts

JTAG (`jtag_tap`) is a standard IEEE 1149.1 TAP with a 4-bit instruction register:

* `0001` IDCODE (`32'h1000_0A4B`), selected after reset;
* `0010` CFG;
* any other code selects BYPASS.

The CFG data register is 40 bits long. From the TDO end it holds
`{wr, bank, addr[5:0], data[31:0]}`. Update-DR with `wr=1` writes `data` into register `addr`
of `bank`. With `wr=0` it only selects the register to read. The next Capture-DR loads that
register into `data`, so a read takes two scans. The core clock oversamples TCK, TMS, TDI and
TRST, so the core clock must be at least 6 times TCK.

Each of the two banks (`cfg_regs`) has 8 registers:

| Address | Name | Bits |
|---|---|---|
| 0 | CTRL | [0] bridge mode (0 monitor, 1 link), [1] memory self-test start (rising edge), [14:8] CA enables. Reset `0x7F00` |
| 1 | IRQEN | interrupt enable per event |
| 2 | IRQCL | writing ones clears interrupt status bits |
| 3-7 | | free |

The following read-only status words are read through the same CFG register, from either bank:

| Address | Content |
|---|---|
| 32 | interrupt status: [0] CA ready, [1] bridge overflow, [2] CA memory overflow, [3] misrouted flit |
| 33 | active bank |
| 34 | number of words lost by the bridge monitor |
| 35 | number of misrouted flits |
| 36 | memory self-test: [6:0] CA done, [14:8] CA fail, [16] RISC-V memory done, [17] RISC-V memory fail |

The **interrupt input pin** selects which bank drives the chip, two core cycles after it
changes. A setup can prepare two complete configurations over slow JTAG, for example monitor
mode with all CAs on and link mode with some CAs off, and then switch between them instantly.

The **interrupt output pin** (`irq_ctrl`) is high while any enabled status bit is set. Status
bits are sticky and cleared through IRQCL.

## AXI stream port

The 15 pins are ACLK, TVALID, TREADY (output), TLAST, TID[2:0] and TDATA[7:0]: an inbound 8-bit
stream with its own clock of up to 100 MHz. The core oversamples it, with all pins
synchronized and the rising edges of ACLK detected in the core domain. A byte counts as
transferred if TVALID and TREADY were both high at that edge. TREADY changes only just after a
detected edge, so the sender and the chip always agree on which bytes moved. Bytes are packed
first-byte-low into words for the RISC-V (`cpu_axi_*`), with a byte mask, the last flag and
the TID of the word's first byte. A word is complete after four bytes or at TLAST. The core
clock must be at least 6 times ACLK.

## Memory self-test

Every SRAM has an `mbist` engine: one in each CA and one per RISC-V bank, nine in all. The
engine runs March C-:

`up(w0); up(r0,w1); up(r1,w0); down(r0,w1); down(r1,w0); up(r0)`

It uses all-zero and all-one words and takes 11 cycles per word. That is 90,112 cycles for a
CA memory and 180,224 cycles for a RISC-V bank. A rising `CTRL[1]` starts all of them. While a
test runs, it owns its memory and the CA accepts no commands. The test overwrites the memory
contents. Results appear in status word 36.

## Clocking and reset

The RTL has one clock, `clk`. It stands for the buffered clock from the four clock pins, which
on the chip can be skewed against each other. The architecture runs the CAs, the network and
the bridge at up to 1 GHz, and the RISC-V and its SRAM at up to 500 MHz. Here the RISC-V memory
runs on the same clock as everything else. Splitting it into its own domain would need a
clock-domain crossing at the RISC-V's NoC port. JTAG, the AXI port and the bridge input are
slow interfaces that the core clock oversamples, so they need no second clock domain. The pin
list has no reset pin. `rst_n` (active low, asynchronous assertion) is taken to come from the
clock and analog section.

## How far to trust it, and where it departs from the architecture

* **Taken from the architecture:** the block set, the seven CAs and their kinds, the 32-bit
  network, the 32 kB per CA and 2 x 64 kB SRAM sizes, the pin names and widths of the chip
  bridge, the AXI, JTAG and interrupt ports, the line rates, the 100 MHz analog rate, the two
  configuration banks selected by the interrupt input, the output interrupt for ready states
  and overflows, and the presence of memory self-tests.
* **Own choices:** everything inside the blocks, including:
  * the single-transfer network and its packet lock;
  * the CA command set;
  * the crossbar size and code widths;
  * the DDR word split and the meaning of the address lines;
  * the monitor and link modes;
  * the four-phase input handshake;
  * the AXI pin assignment;
  * the JTAG instructions;
  * the register map;
  * March C-.
* **Conflicts in the source:** the text speaks of 22 LVDS pairs in one place and of 20
  transmitters and 1 receiver (42 pins) in another. The pin table lists 16 + 2 + 1 output pairs and 1
  input pair, 20 pairs in all. This RTL follows the pin table. The text also calls the scan
  test a "scan chain" in one place and a "boundary scan" in another. Neither is RTL here.
* **Not built:** the RISC-V core, kind-specific CaM and SNN periphery, memristor programming
  pulses, pads, clock buffers, analog test access and scan insertion. The interrupt input's
  "other immediate control features" are also not built: it only selects the bank.
* **Verification:** every module has a self-checking testbench that compares against values
  computed independently in the testbench (`tb_pkg` holds the crossbar reference). Each
  testbench has been shown to fail on a deliberately broken copy of its module. The whole chip
  is exercised end to end at full size by `tb_soc_top`. The design has not been through
  synthesis timing at 1 GHz, and the crossbar model is behavioural.

## Files

`rtl/` holds one module or package per file:

* `soc_pkg.sv`: shared types (`flit_t`, opcodes, register map);
* `sync2.sv`, `sync_fifo.sv`: synchronizer and FIFO helpers;
* the blocks in the table above.

`tb/` holds `tb_<module>.sv` for every module, `tb_pkg.sv` with the reference functions, and
`tb_chip_link.sv` with `tb_link_relay.sv` for the two-chip test.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb \
    rtl/soc_pkg.sv tb/tb_pkg.sv \
    tb/tb_soc_top.sv --top-module tb_soc_top -Mdir obj_soc
./obj_soc/Vtb_soc_top
```

Replace `soc_top` with any module name to run its own testbench. Every testbench ends with a
line `TB_RESULT checks=N failures=M`.

`tb_soc_top` runs the chip at its default sizes:

* JTAG identification and configuration;
* a full program/run/read job on all seven CAs in monitor mode, with every network transfer
  checked on the LVDS outputs;
* the interrupt rising and being cleared;
* a bridge FIFO overflow;
* a misrouted flit;
* the bank switch into link mode, with back-pressure;
* a CA read entered over the TTL input and answered over LVDS;
* a CA switched off and on;
* AXI bytes arriving as words;
* RISC-V memory accesses;
* the self-test of all nine memories.

It counts each of these mechanisms and fails if one never happened. It finishes in well under
a second.

`tb_chip_link` (with its helper `tb_link_relay`) runs two full-size chips joined through their
bridges, as described above. Build it the same way.

To change the design, edit the parameters of `soc_top`:

* `CA_DEPTH`: words per CA memory;
* `CPU_BANK_WORDS`;
* `CB_DEPTH`: bridge FIFO;
* `CONV_CYCLES`: crossbar conversion time in core cycles.

Change the register map and opcodes in `soc_pkg`. The crossbar geometry is set in
`computing_array`. The command field widths limit a CA memory to 8192 words.
