# Pair-monitor readout ASIC: digital core in SystemVerilog

A linear collider must know the size of its beams at the collision point to keep
its luminosity. The beams are only nanometres high, too small to measure directly.
The pair monitor measures them indirectly. Each bunch crossing creates electron-positron
pairs. The oncoming beam deflects these pairs, and the deflection depends on the beam's
transverse size. A silicon pixel layer about 4 m downstream, in front of the forward
calorimeter, records where the pairs land. The beam profile is then fitted from the hit
distribution. The measurement does not need energy: each pixel only has to count hits.
The counts must be split into parts of the bunch train, because about 150 bunches already
give enough statistics. They must also be read out before the next train, about 200 ms
later.

This repository holds synthesizable RTL for the digital part of the prototype
readout chip. The chip has 36 pixel cells in a 6 x 6 array, each 400 x 400 um^2.
In each cell an analog front end (pre-amplifier, threshold stage, differential
amplifier, comparator) feeds an **8-bit Gray-code counter** and **16 count registers**.
A train of 2670 bunches is split into **16 timing parts of 167 bunches**. At the end of
each part, every cell copies its count into that part's register. Between trains, a
**shift register** selects one cell after another, and a **data-transfer** stage puts
the selected cell's registers on the output line. A **distributor** generates all of
these operation signals.

The analog front end is not modelled. Its digital output, one comparator level per
cell, is an input of the top module.

## Block map

```
 comp_in[35:0] (from the 36 analog front ends)
     |
     v
 +---------------- pm_readout_cell x 36 -----------------+
 |  pm_gray_counter  --count-->  pm_count_registers (16)  |--bus_out[c]--+
 +----------^----------------------------^---------------+              |
            | ctrl (pm_ctrl_t, broadcast) | sel[c]                       v
 +----------+----------+     +-----------+--------+        +------------------+
 |   pm_distributor    |---->| pm_cell_select_sr  |        | pm_data_transfer |--> dout[7:0]
 | train/bx/readout FSM|     | 36-stage token SR  |        | wired-OR + reg   |    dout_valid
 +---------------------+     +--------------------+        +------------------+
   ^ train_start, bx, train_end, rd_start, rd_next             ^ capture
```

| File | Role |
|---|---|
| `rtl/pm_pkg.sv` | sizes (36 cells, 8 bits, 16 registers, 167 bunches), the `pm_ctrl_t` struct, Gray/binary functions |
| `rtl/pm_gray_counter.sv` | synchroniser, edge detector and Gray-code hit counter |
| `rtl/pm_count_registers.sv` | 16 x 8-bit registers, one per timing part |
| `rtl/pm_readout_cell.sv` | counter + registers + gated output driver of one cell |
| `rtl/pm_cell_select_sr.sv` | token shift register that selects the readout cell |
| `rtl/pm_data_transfer.sv` | collects the selected cell's word onto the registered output line |
| `rtl/pm_distributor.sv` | controller: clear, counting window, part closing, readout sequence |
| `rtl/pm_readout_asic.sv` | top level |

## Counting a train

All logic runs on one clock, `clk`, with an active-low asynchronous reset `rst_n`.
The control inputs are single-cycle strobes.

1. `train_start` raises `ctrl.clear` for one cycle. This zeroes every counter and all
   16 x 36 count registers. It also opens the counting window (`counting`, `ctrl.count_en`).
2. Each `bx` strobe marks one bunch crossing. At the 167th strobe of a part, the
   distributor raises `ctrl.store` with `ctrl.store_slot` = the part index. In every
   cell the counter value goes into register `part_idx`, and the counter restarts.
3. `train_end` closes the open part at once. A nominal train needs this: 16 x 167 = 2672
   is more than 2670, so the 16th part holds only 165 bunches and is closed by
   `train_end`. A shorter train ends the same way, after fewer parts. The registers it
   never reached keep the zero from step 1.
4. The window closes after the 16th part or at `train_end`, whichever comes first.

Three details decide whether a count is exact:

* **Asynchronous comparator.** The comparator level goes through a 2-flop synchroniser,
  and each rising edge counts as one hit. The count therefore changes 3 clk cycles after
  the comparator rises. A pulse must stay high, and then low, for at least one clk period
  to be counted. For pulses at about 1 MHz, a clock of a few MHz is enough. The test-pulse
  testbench uses 40 MHz.
* **Hits at a part boundary.** A hit seen in the same cycle as `ctrl.store` is not lost.
  The counter restarts at 1 instead of 0, so that hit counts in the new part.
* **Overflow.** The 8-bit counter wraps from 255 to 0. The reader of the data must know
  that counts above 255 in one part are folded modulo 256.

The counter register holds the Gray code itself. Each step converts it to binary, adds
one and converts back, so exactly one bit changes per hit; an assertion checks this.
The count registers and the output line carry the Gray code unchanged. Software converts
a word `g` to binary with b[7] = g[7], b[i] = b[i+1] ^ g[i]. The package function
`gray2bin` does the same in SystemVerilog.

## Reading out

The chip accepts a readout only while the counting window is closed.

* `rd_start` shifts a single 1 into stage 0 of the cell-select shift register, which
  selects cell 0. It also sets the register index `ctrl.rd_slot` to 0.
* Each `rd_next` captures the addressed word into the output register. `dout` is valid
  with `dout_valid` one cycle later. The index then advances. After register 15 the token
  moves to the next cell.
* After the last register of cell 35, the token is shifted out of the register, `rd_done`
  pulses, and the chip returns to idle.

The output order is cell 0 registers 0..15, then cell 1, and so on: 576 words. Cell `c`
is at row `c / 6`, column `c % 6`. With `rd_next` held high, the last word appears 577
cycles after `rd_start`. At any clock above 3 kHz this finishes well within the 200 ms
between trains.

Each cell gates its register output with its select bit, and the data-transfer block ORs
the 36 results. This stands in for a bus driven by one cell at a time. An assertion
checks that at most one cell is ever selected.

The distributor ignores requests that arrive in the wrong mode: `rd_start` and `rd_next`
while counting, and `train_start` while reading.

## What is from the source design and what is not

The RTL follows these parts of the published chip description:

* the four digital blocks: distributor, cell-select shift register, data transfer and
  readout cells;
* 36 cells arranged 6 x 6;
* an 8-bit counter using Gray code;
* 16 count registers per cell;
* 16 timing parts per train of 2670 bunches (167 bunches each);
* readout between trains.

The distributor and the data transfer are only named in that description. The
description also says nothing about these choices, which this design makes itself:

* the clocking scheme and synchroniser;
* the control strobes and the state machine;
* the token scheme of the shift register;
* an 8-bit parallel output line (the real chip's output format is unknown);
* clearing the registers at train start;
* wrap-around on overflow;
* the boundary rule for hits;
* the reflected-binary form of the Gray code.

Not modelled: the analog front end (amplifier, threshold stage, comparator), the analog
monitor outputs, the bump-bonding pads, the sensor, and the external data-acquisition
system (an FPGA with a FIFO). The RTL has no radiation-hardening measures either. The
source gives none for the logic, although the monitor must tolerate more than 1 Mrad per
year.

## Simulating

Every testbench checks itself and prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl rtl/pm_pkg.sv tb/tb_pm_readout_asic.sv \
          --top-module tb_pm_readout_asic
./obj_dir/Vtb_pm_readout_asic
```

Verilator finds the other modules through `-Irtl`, one module per file.

| Testbench | What it shows |
|---|---|
| `tb_pm_gray_counter` | N_OUT = N_TP for 1..300 pulses (wrap at 256), one bit changes per hit, 3-cycle latency, window, clear, boundary hit |
| `tb_pm_count_registers` | ordered and random writes, read-back, clear |
| `tb_pm_readout_cell` | 16 parts with random hit counts (two above 255), read through the driver |
| `tb_pm_cell_select_sr` | token walk through 36 stages, hold, last-stage output |
| `tb_pm_data_transfer` | word of any one cell reaches `dout`, one-cycle `dout_valid`, hold |
| `tb_pm_distributor` | a store exactly every 167 bunches, 16th part closed by `train_end`, early end, self-stop after 16 parts, 576-word readout order |
| `tb_pm_readout_asic` | full chip at default sizes: a nominal and a short train with random hits on all cells, compared with an independent model; counts each mechanism (part closed by bunch count or by `train_end`, wrap, boundary hit, cell shift, ignored request, mode switch) and fails if one never happens |
| `tb_pm_testpulse_scan` | test-pulse scan N_TP = 0..255 at 1 MHz (40 MHz clock) into all 36 cells, read back through the chip |

All testbenches run the design at its default sizes. The full-chip tests take seconds.

## Changing it

The sizes are in `pm_pkg`: `N_ROWS`, `N_COLS`, `CNT_W`, `N_REGS` and `PART_BUNCHES`. The
top's only parameter is `BUNCHES_PER_PART`. The width of `part_idx` and `rd_slot` follows
`N_REGS` through `SLOT_W`. Verilator reports one lint warning class, SYNCASYNCNET. It
comes from the assertions' `disable iff (!rst_n)` next to the asynchronous reset, and it
is harmless.
