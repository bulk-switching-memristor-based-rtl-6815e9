# A four-tile RRAM compute-in-memory SoC in SystemVerilog

Training a neural network spends most of its arithmetic in vector-matrix
multiplications (VMMs). A resistive-memory (RRAM) crossbar performs a VMM in
place: each weight is stored as the conductance of one cell, input values are
applied as voltages on the rows, and each column current is the dot product of
the input vector with that column's conductances. The chip modelled here pairs
such crossbars with a small digital system. The crossbars handle the forward
VMMs at low precision. A host (or a processor) keeps full-precision weights,
accumulates the gradient updates, and reprograms a cell only when the
accumulated change of its weight crosses a threshold. Updates are therefore
sparse: most cells are never written in a given batch.

This repository contains synthesizable RTL for the digital part of that chip
and behavioural models for its two analog parts (the crossbar and the
current-to-code converter), joined into one top level `cim_soc`. It provides:

* four CIM tiles, each with a 64 x 64 one-transistor-one-resistor array;
* 64 bit-serial input DACs per tile;
* 8 shared TIA/ADC channels per tile;
* a write-and-verify programming sequencer per tile;
* a memory-mapped register file per tile;
* around the tiles, an AXI4-Lite interconnect with 32 KB instruction and
  512 KB data SRAM, a DMA engine, a configuration block, and an APB bridge to
  a UART, GPIO and an SPI master.

The processor core, PLL and word-line voltage DAC are not part of the RTL.
The top level exposes their connections as ports (see "What is outside the
RTL").

## 1. How a tile computes a dot product

### Bit-serial inputs

Each of the 64 rows takes an 8-bit unsigned input `x_i`. The row's DAC does
not produce an analog level. It sends the input as eight pulses of one fixed
read voltage, one pulse per cycle, least significant bit first. Pulse `n`
(n = 0..7) is present when bit `n` of `x_i` is 1. Because every pulse has the
same amplitude, any non-linearity in the cell's current-voltage curve cancels
out: a cell sees only "read voltage" or "nothing".

### Column currents

In the array model, a driven cell at row `i`, column `j`, with conductance
level `L_ij` (0..127) conducts `G_OFF + L_ij` current units. `G_OFF = 14`, so
the on/off ratio is about 10. In cycle `n`, column `j` therefore carries

    I_j[n] = sum over rows i with bit n of x_i set of (14 + L_ij)

### The halving accumulator

Each ADC channel holds a running value. Every sample cycle it adds the new
current and halves the sum:

    acc <= (acc + I[n] * 256) / 2

After eight samples (n = 0..7) the value is

    acc = sum_n I[n] * 2^n = sum_i x_i * (14 + L_ij)

This is the exact integer dot product. The MSB pulse gets weight 1/2 and the
LSB pulse weight 1/256, relative to the `* 256` scale. The model keeps 8
fraction bits, so nothing is lost. A single conversion step then turns the
accumulated value into an 8-bit code:

    code = min(255, floor(acc / (2560 >> gain)))

`gain` (0..3) is a per-tile TIA gain setting. The full scale of 2560 current
units at gain 0 is this design's choice. The `sat` flag marks a clipped code.

### Sharing eight ADCs among 64 columns

One TIA/ADC serves a group of eight adjacent bit lines. Group `g` owns columns
`8g .. 8g+7`. A full-array MAC therefore runs in eight phases. In phase `p`,
TIA `g` is connected to column `8g + p`. Each phase is 8 sample cycles plus 1
conversion cycle:

    MAC: 8 phases x 9 cycles = 72 cycles; the last result is written 73 cycles after the command is accepted

At 100 MHz that is 0.73 us per tile operation. The inputs are re-sent for every
phase, because the DAC shift registers reload after each conversion.

### Signed weights

Weights can be negative, but conductances cannot. Each weight is therefore
stored as a pair of cells on adjacent columns: positive on the even column,
negative on the odd one. The tile provides the 32 differences directly:

    DIFF[k] = OUT[2k] - OUT[2k+1]   (signed 32-bit)

### Signal path in RTL

    in_buf --> dl_dac_array --> dl_switch_matrix --> rram_crossbar
           --> bl_switch_matrix --> 8 x tia_adc --> out buffer (tile_regs)

`timing_ctrl` sequences this path: DAC load and shift, the ADC
sample/convert/clear strobes, the phase counter, and result writes.

## 2. Programming cells

### Single pulses

SET raises a cell's conductance and RESET lowers it. Each pulse is applied to
one cell, addressed by row (drive line) and column (word line). It carries a
4-bit amplitude code `amp`, standing for 1.5 V + 0.1 V x `amp`, and lasts
`PULSE_CYCLES` = 4 clock cycles. In the array model a pulse moves the level by

    step = 1 + amp/2 + (((7 r + 13 c) >> 2) & 1)

saturating at 0 and 127. The last term is a fixed per-cell offset that stands
in for device-to-device variation. The cells start as fabricated in a high
state: level `127 - ((37 r + 11 c) mod 32)`.

Stored levels are not reset by the chip's reset. They model non-volatile
memory, and they survive switching a tile off and on.

### Write-and-verify

Programming a weight to a target is a closed loop run by `write_verify`. Its
inputs are a cell address, an acceptance window `[lo, hi]` of READ codes, and
a trial limit (`WV_TRIALS`, reset value 2). The unit alternates pulses with
single-cell READs:

1. Read the cell. If the code is in the window, stop with `ok`. If it is
   above the window, go to the reset phase. If it is below, go to the set
   phase.
2. **Set phase:** SET pulses, each followed by a read. The amplitude starts
   at 0 and rises by one code per pulse, up to 15. Once the code is above the
   window, switch to the reset phase with the amplitude back at 0.
3. **Reset phase:** RESET pulses with a rising amplitude while the code is
   above the window. If a reset overshoots below the window, that is an
   *over-reset*. It starts a new trial from the set phase, or ends in `fail`
   when the trial limit is used up.
4. Each phase is capped at 32 pulses. Reaching the cap ends in `fail`.

Landing in the window at any read ends the sequence with `ok`. The tile counts
over-resets and pulses, and reports the trials used.

### READ

A READ drives one row with an all-ones input for 8 cycles and converts the
selected column's current. It takes 10 cycles and returns

    code = floor(255 x (14 + L) / (2560 >> gain))

## 3. Register maps

### Tile registers

Each tile is an AXI4-Lite slave with a 4 KB window. All registers are 32-bit.
These accesses answer SLVERR:

* an address not in the table;
* a write to a read-only register, or a read of CMD or WV;
* a write to IN, CMD or WV while the tile is busy, so a running operation's
  inputs cannot change and a second command is refused.

| Offset | Name | Access | Contents |
|---|---|---|---|
| 0x000-0x03C | IN | RW | 64 input bytes, byte `i` is row `i` (little-endian within words) |
| 0x040-0x07C | OUT | RO | 64 ADC codes from the last MAC, byte `j` is column `j` |
| 0x080-0x0FC | DIFF | RO | 32 signed differences `OUT[2k] - OUT[2k+1]` |
| 0x100 | CMD | W | [2:0] op (0 MAC, 1 READ, 2 SET, 3 RESET), [13:8] row, [21:16] column, [27:24] amplitude |
| 0x104 | CFG | RW | [1:0] TIA gain, [25:16] word-line DAC code (output pin) |
| 0x108 | WV | W | starts write-and-verify: [5:0] row, [13:8] column, [23:16] lo, [31:24] hi |
| 0x10C | WV_TRIALS | RW | [2:0] trial limit, reset 2 |
| 0x110 | STATUS | RO | [0] busy, [1] write-verify busy, [2] ok, [3] fail, [6:4] trials used, [15:8] last READ code, [16] a code clipped in the last MAC, [31:24] over-reset count |
| 0x114 | COUNT | RO | [15:0] MACs done, [31:16] pulses applied |

### SoC address map

The interconnect (`axil_xbar`) serves two masters: the processor port and the
DMA engine. It carries one transaction at a time, with round-robin arbitration
held until the response completes. `bus_conflict` pulses when both masters
were waiting. Unmapped addresses answer DECERR. So does a tile that is
switched off through TILE_EN: the tile is held in reset, so without this it
would stall the bus.

| Base | Size | Slave |
|---|---|---|
| 0x0000_0000 | 32 KB | instruction SRAM |
| 0x1000_0000 | 512 KB | data SRAM |
| 0x2000_0000 | 4 KB | configuration: 0x0 PLL_CFG (to the `pll_cfg` pins, reset 1), 0x4 TILE_EN (reset all ones), 0x8 ID = 0x4349_4D34 |
| 0x2000_1000 | 4 KB | DMA: 0x0 SRC, 0x4 DST, 0x8 LEN (words), 0xC CTRL (bit 0 start), 0x10 STATUS {error, done, busy}, 0x14 COUNT |
| 0x3000_0000 | 4 KB | UART (8N1): 0x0 DATA, 0x4 STATUS {overrun, rx valid, tx busy}, 0x8 DIV (cycles per bit, reset 868 = 115200 baud at 100 MHz) |
| 0x3000_1000 | 4 KB | GPIO (16 pins): 0x0 OUT, 0x4 OE, 0x8 IN (two-flop synchronised) |
| 0x3000_2000 | 4 KB | SPI master (mode 0, MSB first): 0x0 DATA, 0x4 STATUS {busy}, 0x8 DIV (half period, reset 4), 0xC CS |
| 0x4000_0000 + t x 0x1000 | 4 KB each | tile t = 0..3 |

The three peripherals sit behind `apb_bridge`, which turns each AXI access
into an APB SETUP/ACCESS pair and honours `pready` wait states. The DMA copies
LEN words from SRC to DST, one read and one write per word. It stops at the
first error response. The typical flow is to move an input vector from data
memory into a tile's IN buffer and the results back to memory.

### Typical sequence for one layer slice

1. Write the input bytes to IN, by DMA or by stores.
2. Set CFG.gain.
3. Write CMD = MAC.
4. Poll STATUS until not busy.
5. Read OUT or DIFF, or let the DMA move them.

## 4. Module list

| Module | Role |
|---|---|
| `cim_pkg` | sizes, AXI4-Lite and APB structs, tile op codes, address map |
| `dl_dac_array` | 64 per-row shift registers emitting one input bit per cycle |
| `dl_switch_matrix` | MAC: all rows; READ: selected row; program: one-hot drive line |
| `rram_crossbar` | behavioural 64 x 64 array: column currents and pulse response |
| `bl_switch_matrix` | connects column `8g+p` to TIA `g`, gates word lines per column |
| `tia_adc` | behavioural TIA plus halving accumulator and 8-bit conversion |
| `timing_ctrl` | cycle sequencer for MAC, READ and program pulses |
| `write_verify` | closed-loop programming sequencer |
| `tile_regs` | tile register file and counters |
| `axil_reg_adapter` | shared AXI4-Lite to simple register-port helper |
| `cim_tile` | one complete tile |
| `axil_xbar`, `sram`, `dma`, `config_reg` | SoC bus, memories, DMA, configuration |
| `apb_bridge`, `uart`, `gpio`, `spi_master` | peripheral bus and peripherals |
| `cim_soc` | top level |

Every file begins with a comment describing the module's behaviour, its
interface and timing, and which parts are specified by the chip description
and which are choices of this design.

## 5. What is outside the RTL

* **Processor core.** The chip has a RISC-V processor. Here its bus
  connection is the `cpu_req` / `cpu_rsp` AXI4-Lite master port of
  `cim_soc`. Firmware behaviour is emulated by driving that port, as the
  end-to-end testbench does.
* **PLL and word-line DAC.** These are analog. The RTL provides their
  control outputs: `pll_cfg` and one 10-bit `wl_dac_code` per tile.
* **Training arithmetic.** Gradient computation, the full-precision
  accumulation of updates and the threshold test run on a host. The chip
  supplies the VMM outputs (MAC), the conductance readout (READ) and
  programming (pulses and write-and-verify).

## 6. Where this design departs from, or adds to, the chip it models

* **Array and ADC behaviour is idealised.** Conductances are 128 integer
  levels. Currents add exactly. There is no read noise, drift, IR drop or ADC
  noise. The pulse response is a deterministic step with a per-cell offset.
  Real devices are stochastic.
* **Numbers chosen by this design:**
  * ADC full scale of 2560 current units, and a 2-bit gain that divides it by
    1/2/4/8;
  * G_OFF of 14 units;
  * 4-cycle program pulses;
  * the write-and-verify schedule (amplitude ramp, 32-pulse cap, trial
    limit);
  * all register layouts and the address map;
  * the DMA, UART, GPIO and SPI internals.
* **Timing.** Group `g` is taken as the eight adjacent columns `8g..8g+7`.
  The ADC result is registered one cycle after conversion, which makes a tile
  MAC 73 cycles long. The chip's own figure per tile operation is about
  0.65 us at 100 MHz, so the chip overlaps slightly more than this model.
* **Host link.** On the board, a host computer talks to the chip over SPI.
  Here the SPI block is a master, meant for the board's serial flash that
  holds the input data. An SPI slave for the host link is not built; the host
  is represented by the processor port.
* **Word lines run along the columns.** A column's word line is the gate
  enable of every cell in that column. MAC enables all columns. READ and
  program pulses enable only the addressed column.
* **Capacity.** The default size holds a small convolutional network. A
  LeNet-class model of three layers has 25 x 8, 100 x 24 and 192 x 20
  differential matrices. Sliced into at most 64 rows and packed side by side
  in columns, it fits in three tiles. Larger networks such as VGG-8 (1.1 M
  weights) or ResNet-18 (22.3 M) do not fit in 16,384 cells. The row count
  `ROWS` is a parameter, so a 256 x 64 array can be elaborated, but it has not
  been verified.

## 7. Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=N failures=M` and stops on its own, with a watchdog. With
Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_cim_soc \
        -y rtl -y tb +libext+.sv -Irtl -Itb rtl/cim_pkg.sv tb/tb_cim_soc.sv \
        --Mdir obj_soc -o sim
    obj_soc/sim

Replace `tb_cim_soc` with any other testbench name. The simulator is
two-state, and the testbenches pass with random initial values
(`+verilator+rand+reset+2`).

### `tb_cim_soc`

`tb_cim_soc` runs the whole chip at its default size: four 64 x 64 tiles and
the full memories. It acts as firmware on the processor port and does the
following:

* loads instruction memory and programs the configuration block;
* moves four input vectors into the tiles by DMA;
* runs MACs on all four tiles at once;
* moves the results back by DMA and checks every code against
  `min(255, floor(sum x (14+L) / (2560>>gain)))`, computed from the array
  models' stored levels;
* exercises DIFF, ADC clipping, READ, SET/RESET, and write-and-verify with
  success, over-reset and failure;
* runs a DMA copy while the processor uses the bus, producing arbitration
  conflicts;
* checks DECERR for an unmapped address and for a switched-off tile;
* runs UART and SPI in loop-back and checks the GPIO pins.

It counts each of these events and fails if any never occurred. It takes well
under a second.

### `tb_cim_tile`

`tb_cim_tile` tests one tile in more depth. It also checks the 73-cycle MAC
latency.

### `tb_lenet_conv1`

`tb_lenet_conv1` runs the first convolution layer of a small LeNet-class
network on tile 0 of the full chip:

* 4 filters of 5 x 5 with signed weights of -1, 0 or +1 steps;
* the filters are stored as a 25 x 8 differential slice, one of four
  conductance steps per cell;
* all 200 cells are programmed by write-and-verify;
* 16 image windows are then convolved by MACs.

Each DIFF output is checked exactly against the stored levels. Its sign is
compared with the ideal integer convolution wherever that value is clearly
non-zero.

### `tb_write_verify`

`tb_write_verify` checks the programming sequencer, command by command,
against an independent model of the expected next step.

## 8. Changing the design

* **Array size, group width, input and ADC resolution:** set these in
  `cim_pkg` (`ROWS`, `COLS`, `GROUP`, `IN_BITS`, `ADC_BITS`). The phase count
  follows `COLS / GROUP`. The number of samples per conversion follows
  `IN_BITS`.
* **Device response:** lives in `rram_crossbar`, in the `fab_row` function
  for the initial state and in the pulse step in the programming block. It is
  the place to add noise or non-linearity.
* **ADC full scale:** the `ADC_FS` parameter of `tia_adc` and `cim_tile`.
* **Number of tiles:** `N_TILES` on `cim_soc`, up to the four windows the
  address map reserves.
