# Cluster Counting Module: isolated-cluster trigger for a CsI calorimeter

A calorimeter trigger often needs to know *how many separate particles* hit the
detector, not just how much energy was deposited. Energy deposits from one
particle spread over neighbouring trigger cells, forming a cluster, so counting
fired cells overcounts. The Cluster Counting Module (CCM) solves this with a
purely local rule: every trigger cell looks only at four of its neighbours and
decides on its own whether it is the one "representative" cell of its cluster.
The number of representative cells on a board, the *isolated cluster number*
(ICN), is formed by an adder tree with no clock in the path, so the count is
available a few tens of nanoseconds after the hits arrive.

The module is a 9U VME board. It carries a reprogrammable FPGA holding the
trigger logic, a CPLD acting as a VME A24/D32 slave, and a FIFO memory in
which the board records the input and output pattern of each triggered event.
This repository contains RTL for all the digital logic of the board: the
counting logic, the pattern recorder, the VME slave with its control/status
register, interrupter, FIFO controller and FPGA-configuration controller,
clock selection, and a board top that ties them together.

## 1. The isolation rule

Around each trigger cell 0, four neighbours are examined (row 0 is at the top
of the map, column index grows to the right):

```
          col   col+1
row-1    [1]
row      [0]    [2]
row+1    [3]    [4]
```

Cell 0 is counted when

```
isolated = c0 & ~(c1 | c2) & ~(c3 & c4)
```

In words: a cluster is represented by its upper-most cell in its right-most
column. A hit directly above (1) or to the right (2) means cell 0 is not the
upper-right corner of its cluster. A hit both below (3) and below-right (4)
means the cluster continues into the next column by way of the cell below, so
the representative lies further right. A single hit below-right (4) with
nothing below (3) is *not* enough to veto: such a diagonal neighbour is
treated as a separate cluster.

The rule is exact for compact clusters (single cells, pairs, 2x2 blocks,
L-shapes that lean the right way), but it is a local approximation and can
over-count clusters of unusual shape. In particular, two cells touching only
diagonally are counted as two clusters. A cluster with a notch that opens
upward, such as a U shape, can be counted once for each arm. The test
bench `icn_counter_tb` compares the rule against an exact 8-neighbour
flood-fill count and reports how often they differ on random maps with 5%
occupancy; they differ in roughly a third of such maps.
The bench `icn_workload_tb` runs event-like maps. Each has 1 to 8 compact
showers of one to about five cells, placed at random on one board, and the
bench reports how often the rule and the exact count agree.

* **One shower.** An event with a single shower is always counted exactly.
* **Several showers.** Over all events about 80% are counted exactly. Every
  over-count comes from separate showers that happen to touch at a corner
  or merge.
* **Never under.** The rule never under-counts. Each cluster has exactly one
  upper-most cell in its right-most column, and that cell always passes.

With up to 8 showers on 132 cells, this is a much denser load than a
board usually sees. The original simulation studies used full detector
simulation and found the rule within 1% of the exact count. The bench's
shower model is only a rough stand-in and does not reproduce those studies.

Cells outside the board's map are treated as empty, so a cluster spanning two
boards is seen in part by each board. The sum saturates at 15 (4 output bits).

`icn_cell.sv` is the rule for one cell; `icn_counter.sv` instantiates it for
every cell of a `ROWS x COLS` map (12 x 11 = 132 by default, cell index
`row*COLS + col`) and sums the decisions.

## 2. The trigger FPGA (`fpga_trigger.sv`)

* **Inputs.** The 132 inputs arrive through ECL-to-TTL receivers that invert
  them (a rising ECL edge is a falling TTL edge), so the FPGA inverts them
  back: `hit = ~trig_n`.
* **Outputs.** The ICN drives output bits [3:0]; the remaining 12 used outputs
  are driven low. All 16 outputs are forced low while the trigger output is
  stopped from the control register (`trig_en = 0`).
* **Timing.** Inputs to outputs is combinational. The real board measured about
  50 ns through receiver, FPGA and driver; in RTL the path has zero delay.
* **Summing mode.** A full system uses five section boards and a sixth board
  that adds their counts. With parameter `LOGIC = ccm_pkg::LOGIC_SUM` the FPGA
  holds that summing logic instead (`icn_sum.sv`): section k's ICN is read
  from inputs [4k+3:4k], and the 7-bit total (up to 75) drives outputs [6:0].

## 3. The pattern register

To let the readout check the trigger offline, the board stores what it saw
and what it sent for every event accepted by the master trigger (MTG).

Because the master-trigger decision comes later than the hits, the 132 inputs
and 16 outputs first go through a delay line (`delay_line.sv`): a
`STAGES`-deep shift register clocked by the 8 MHz delay pulse. The default of
6 stages gives 750 ns, the closest to the ~800 ns the board needs. When the
synchronised MTG edge arrives (two flops plus an edge detector, so 2–3 board
clocks after MTG), `pattern_register.sv` latches the delayed pattern into one
168-bit record and streams it to the FIFO as seven 24-bit words, lowest first:

| record bits | contents |
|-------------|----------|
| [131:0]     | input hits (active high, cell index as above) |
| [147:132]   | trigger outputs as driven |
| [155:148]   | reserved, 0 |
| [165:156]   | FIFO word address of the record's first word (count of words written since FIFO reset, modulo 1024) |
| [167:166]   | unused, 0 |

Word w of the record is bits `[24w+23:24w]`. The FIFO (three 1024 x 8
asynchronous FIFO chips side by side) therefore holds 146 whole records.
Recording is enabled by the REC_EN control bit. While a record is still being
written, a further MTG is not recorded; it raises the `MTG_LOST` status flag.
When the FIFO is full, writing waits (the record is held, not truncated).

## 4. VME interface (CPLD)

`cpld_vme.sv` is the VME slave. It is built from:

* `vme_addr_decoder.sv`: compares A[23:16] with the 8-bit base-address DIP switch and
  accepts address modifiers 0x39/0x3D (A24 non-privileged/supervisory data).
* `vme_control.sv`: the cycle handshake.
* `vme_csr.sv`: the control and status register.
* `vme_interrupter.sv`: the interrupter.
* `config_ctrl.sv`: the FPGA configuration controller.
* `fifo_ctrl.sv`: the FIFO controller.

The whole CPLD runs on the board clock. AS* and DS* are synchronised with two flops,
so the cycle timing is in board clocks.

### Register map (byte offsets in the 64 KiB window)

| offset | access | register |
|--------|--------|----------|
| 0x00 | R/W | CSR |
| 0x04 | R   | FIFO read: D[23:0] = next word; D[31] = 1 if the FIFO was empty (then D[23:0] = 0) |
| 0x08 | W   | configuration byte D[7:0] for the FPGA (peripheral mode) |
| 0x0C | R/W | interrupt: vector D[7:0], level D[10:8] (0 = off) |

Only D32 transfers (LWORD* low, both data strobes, A1 = 0) are answered
with DTACK*. Any other transfer in the window, or an unused offset, gets BERR*.

### CSR

| bit | write (control)                          | read (status) |
|-----|------------------------------------------|---------------|
| 0   | TRIG_STOP: stop trigger output (wins over bit 1) | TRIG_ON |
| 1   | TRIG_START: start trigger output         | CFG_DONE (FPGA DONE) |
| 2   | CFG_PROM: reconfigure FPGA from PROM     | CFG_BUSY |
| 3   | CFG_VME: reconfigure FPGA from VME       | FIFO_EMPTY |
| 4   | FIFO_RST: reset FIFO                     | FIFO_FULL |
| 5   | REC_EN (level)                           | REC_EN |
| 6   | IRQ_EN (level)                           | IRQ_EN |
| 7   | MTG_CLR: clear bits 7 and 10 of status   | MTG_SEEN (sticky) |
| 8   | MOD_RST: module reset (wins over all)    | CFG_VME (last source) |
| 9   | –                                        | IRQ_PEND |
| 10  | –                                        | MTG_LOST (sticky) |

Bits 0–4, 7 and 8 are one-shot commands. MOD_RST is the online module
reset. It returns the CSR to its reset state and ignores the other bits of
that write. It also resets the FIFO, drops any pending interrupt, and resets
the FPGA's trigger logic (delay line, MTG synchroniser, pattern register).
It does not touch the VME cycle that carries it, the interrupt register or
the FPGA's configuration. Bits 5 and 6 are written on every CSR
write, so write them along with each command. After reset the trigger output
is stopped and recording and interrupts are off.

### Cycle timing

* **Write, and CSR read.** DTACK* is asserted 4 board clocks after DS* goes
  low; two of these clocks are the strobe synchroniser.
* **FIFO read.** DTACK* waits until the word has been fetched from the
  FIFO chips, 2 clocks after the request (3 if a FIFO write was in progress).
* **Release.** DTACK*/BERR* is released once both data strobes are high.
* **Rule.** DTACK* and BERR* are never asserted together; this is checked by an assertion.

### Interrupts

When recording and IRQ_EN are on, the completion of each record raises a
request on the IRQ level programmed at 0x0C. The board answers an IACK cycle
for its level, when IACKIN* reaches it, with the 8-bit vector, and the request
is then released. IACKIN* is passed on as IACKOUT* when the board has nothing
pending at that level.

### FPGA configuration

* **From the PROM.** CFG_PROM pulls PROGRAM* low for 4 clocks and sets the mode
  pins to master serial (000). It enables the PROM, and the FPGA loads itself.
* **From VME.** CFG_VME does the same with mode peripheral asynchronous (101). Each
  byte written to 0x08 is then handed to the FPGA with a one-clock WS* strobe
  as soon as the FPGA reports RDY.
* **Busy and done.** CFG_BUSY lasts until the FPGA raises DONE.

## 5. Clock and reset

`clock_select.sv` makes the 8 MHz board clock MCLK:

* from the VME system clock (16 MHz) divided by two when `clk_sel = 0`;
* from an external clock input (e.g. a NIM clock) when `clk_sel = 1`.

`clk_sel` is meant to be static (a jumper). The FPGA and CPLD logic run on
MCLK. The front-panel reset (`reset_n`) is asserted asynchronously and
released in step with MCLK by a two-flop synchroniser.

## 6. Board top (`ccm_board.sv`)

The top wires together:

* the FPGA logic;
* the CPLD slave;
* the clock selection.

Parts that are bought rather than designed are reached through the top's ports:

* the ECL receivers and drivers (`trig_n`, `occn`);
* the NIM-to-TTL converters (`mtg`, `ext_clk`);
* the FIFO chips (`fifo_*`);
* the configuration PROM and the FPGA's configuration pins;
* the VME bus, with data split into `vme_data_in/out/oe`.

`mtg_led` follows MTG for the front-panel LED. Parameters: `ROWS`, `COLS`,
`STAGES`, `DELAY_DIV` (delay pulse = one in DELAY_DIV board clocks),
`PROG_CLOCKS`, `LOGIC`. Shared constants and register bit positions are in
`ccm_pkg.sv`.

## 7. Where this RTL departs from, or adds to, the original board

These points were taken from the board's original description:

* the isolation rule and which neighbours it uses;
* 132 inputs and 16 outputs on a board built for 144 and 24;
* the 4-bit ICN;
* asynchronous counting;
* the inverted inputs;
* the ~800 ns delay with an 8 MHz delay pulse;
* the FIFO of three 1024 x 8 chips;
* the record contents (inputs, outputs, 8 reserved bits, 10 address bits, 2 unused bits);
* the CPLD's division into address decoder, interrupter, control logic,
  configuration control, CSR and FIFO control;
* the functions of the control and status bits;
* configuration from a serial PROM or over VME;
* the MTG LED and the base-address switch;
* the system of five section boards plus one board that sums their counts.

The following are this design's own choices:

* **Map shape.** The 12 x 11 shape of the 132-cell map, and cells beyond the board edge treated as empty.
* **Record size.** The original text quotes a 146-bit record but lists parts adding up to 168
  bits. The listed parts are used (exactly 7 FIFO words). Bit order, the meaning of the
  10 address bits and the word order are also this design's.
* **Delay.** The delay is 6 x 125 ns = 750 ns.
* **Unused outputs.** The 12 outputs beyond the ICN are driven low.
* **Saturation.** The ICN saturates at 15.
* **VME slave.** The register map, CSR bit positions, all VME cycle timing, BERR* use, accepted
  address modifiers, and which address bits the switch compares are this design's.
* **Interrupts.** The interrupt source (end of record), level/vector register and
  release on acknowledge are this design's.
* **Configuration.** The configuration byte protocol and PROGRAM* pulse width are this design's.
  The mode-pin codes follow the FPGA family's usual values.
* **Module reset.** The original board can be reset online from the
  control software. How that works is not described; the CSR command
  above, and what it resets, is this design's.
* **FIFO and configuration data paths.** On the original board the FIFO
  outputs appear to drive the VME data lines directly, and VME
  configuration data to go straight to the FPGA, with the CPLD only
  making the strobes. Here both pass through the CPLD, which latches the
  FIFO word (so it can flag an empty read) and the configuration byte.
* **Lost triggers and full FIFO.** Triggers that arrive during a record are not stored but flagged;
  a full FIFO stalls recording.
* **Summing board.** The summing board's input/output pin assignment is this design's.

## 8. Test benches and simulation

Every RTL module has a self-checking test bench `tb/<module>_tb.sv` that
ends by printing `TB_RESULT checks=N failures=M`. `tb/idt7202_model.sv`
(a behavioural 1024-word FIFO with empty/full flags) and
`tb/vme_master_bfm.sv` (VME master tasks: `write32`, `read32`, `read16`,
`iack`) support the larger benches.

`ccm_board_tb` runs the whole board at its default parameters. It checks:

* the ICN outputs on many hit maps (with the trigger output started and stopped);
* saturation;
* pattern records read back over VME, including the delayed-pattern timing;
* a lost trigger, FIFO full and empty reads;
* interrupts with acknowledge, BERR*;
* FIFO reset, module reset, configuration from PROM and from VME;
* the external clock.

It counts each of these and fails if any never happened.

`ccm_system_tb` builds the deployed system: five section boards and one
summing board (`LOGIC = LOGIC_SUM`), all at default size, on one shared
VME bus with base addresses 0x20–0x25. Each section's ICN outputs are
wired, inverted as the ECL link inverts them, to the summing board's
inputs [4k+3:4k]. The bench checks the following:

* every section count and the total, for 200 events of random hit maps,
  some dense enough to saturate a section;
* after each of 20 master triggers, the pattern record read back from
  all six boards.

To simulate a block with Verilator 5 (here the whole board), from the repository root:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal \
    --top-module ccm_board_tb rtl/ccm_pkg.sv \
    $(ls rtl/*.sv | grep -v ccm_pkg) \
    tb/idt7202_model.sv tb/vme_master_bfm.sv tb/ccm_board_tb.sv
./obj_dir/Vccm_board_tb
```

The package must come first. Building takes about a minute; the run takes a few seconds.
Block benches need only their module, its sub-modules and the package.
Instead of listing files, `-y rtl -y tb +libext+.sv` with the package and
the bench lets Verilator find the modules by name. The
benches use `$urandom` with fixed seeds and only two-state logic, so every
flop that is read is reset.
