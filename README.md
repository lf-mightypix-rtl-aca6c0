# LF-MightyPix readout: RTL model of a small HV-MAPS pixel chip

LF-MightyPix is a small test chip for the silicon pixel part of the LHCb
Mighty-Tracker. It is a high-voltage monolithic active pixel sensor (HV-MAPS):
the sensor diode and the readout electronics share one CMOS die, in a 150 nm
process with a high-resistivity substrate. The chip measures 3.5 mm x 4.0 mm.
It has a matrix of 28 columns x 23 rows of 100 um x 100 um pixels. For every
particle hit it records two timestamps: the time of arrival (ToA), and the time
the comparator output falls back. Their difference is the time over threshold
(ToT), which measures the deposited charge. The timestamps must pick out the
right 25 ns bunch crossing at 40 MHz, so the leading edge is stamped with a
dual-edge counter. At an 80 MHz timestamp clock that gives a 6.25 ns step.

This repository gives synthesizable SystemVerilog for the chip's digital
readout chain. It also has a behavioural model of the analog pixel front-end,
so that the whole chain can be simulated from deposited charge to bits on the
serial line. The block structure follows the published description of the chip.
That description does not give field widths, the line code, the priority rules
or the handshakes. Those are this design's own choices. They are marked as
such below and in the header of every file.

## Signal path

```
 sensor charge / test injection
        |
  pixel_frontend (behavioural)   CSA -> high-pass -> comparator (Th + TDAC), en_comp
        |  comp (one per pixel)                       ^ pixel_config_ram (5 bits)
  hit_buffer_cell (one per pixel)  <-- ts_de / ts_se -- ts_counter (dual edge)
        |  full, le, te
  end_of_column (one per column)   column drain, lowest row first
        |  valid, row, le, te
  readout_fsm                      round robin over 28 columns, 32-bit packet
        |  valid/ready, clk_ts domain
  serializer + enc8b10b            clock crossing, 8b/10b, K28.5 idle
        |
  ser_out  (1.28 Gbit/s, one bit per clk_ser cycle)
```

On the die, the pixel matrix sits on top. The hit buffers sit below it, one
cell per pixel, with the end-of-column circuits. The chip periphery at the
bottom holds the state machine, the timestamp counter and the serializer. The
top module `lf_mightypix` wires the blocks together in the same way.

## Timestamps: what `le` and `te` mean

This is the part of the design that needs the most care.

`ts_counter` has two binary counters. One counts rising edges of `clk_ts` and
the other counts falling edges. Their sum, `ts_de`, is the number of clock
edges since reset, so it steps every half period (6.25 ns at 80 MHz). The
rising-edge counter alone is `ts_se`, which steps every 12.5 ns. Both are 11
bits wide and wrap after 2048 steps: 12.8 us for `ts_de` and 25.6 us for
`ts_se`. Release reset while `clk_ts` is low. The first counted edge is then a
rising one, and `ts_de == 2 * ts_se` holds at every rising edge.

A `hit_buffer_cell` samples the asynchronous comparator output on both clock
edges. It keeps the falling-edge sample together with the `ts_de` value of
that moment. At each rising edge it decides:

* If the comparator went high during the high half of the last clock period
  (sample at the falling edge is high, sample at the previous rising edge is
  low), the leading edge is the stamp taken at that falling edge.
* If it went high during the low half (high now, low at the falling edge), the
  leading edge is the `ts_de` value at this rising edge.
* The trailing edge is the `ts_se` value at the first rising edge that sees the
  comparator low again.

So, counting from the reset release:

* `le` = number of clock edges before the rise was seen (6.25 ns units),
* `te` = number of rising edges before the fall was seen (12.5 ns units),
* ToT in 6.25 ns units = `(2*te - le) mod 2048`. This holds for pulses shorter
  than 12.8 us.

A pulse that starts and ends between two clock edges is not seen. After the
trailing edge the cell reports `full` and keeps its data until the end of
column reads it. Until then any new pulse on that pixel is lost. After the
read, the cell re-arms only when it has seen the comparator low. A pulse that
is still high when the cell is cleared is therefore not recorded half-way
through.

## Column drain and readout order

Each `end_of_column` has one output register. In any cycle where that register
is empty, or is being emptied by the state machine, it takes the full cell
with the lowest row number. It pulses that cell's `rd`, which clears the cell
on the same clock edge. A column thus moves at most one hit per `clk_ts`
cycle.

`readout_fsm` looks for the next column holding a hit. It searches round
robin, starting after the column it served last. It pops that hit, adds the
column number and holds the packet until the serializer accepts it. When the
serializer is ready it can move one packet per clock cycle. In practice the
serial line is the limit.

## Packet format and serial line

Each hit leaves the chip as one 32-bit packet (`lfmp_pkg::hit_pkt_t`), sent
most significant bit first:

| bits  | field | meaning                                     |
|-------|-------|---------------------------------------------|
| 31:27 | col   | column 0..27                                |
| 26:22 | row   | row 0..22                                   |
| 21:11 | le    | leading-edge stamp, 6.25 ns units, mod 2048 |
| 10:0  | te    | trailing-edge stamp, 12.5 ns units, mod 2048 |

The serializer sends a packet as four 8b/10b data characters, high byte
first. Within each 10-bit symbol, bit `a` goes out first. When no packet is
waiting, the line carries the comma K28.5, and a receiver finds the symbol
boundaries from it. Packets can follow each other with no comma between them.
The line runs at one bit per `clk_ser` cycle, so 1.28 Gbit/s needs a 1.28 GHz
bit clock. `enc8b10b` uses the standard code tables for data characters and
K28.y control characters. It stores the negative-disparity column and derives
the other column from it.

Packets cross from the `clk_ts` domain to the `clk_ser` domain through a
toggle handshake with two-flop synchronisers, so the two clocks need no fixed
phase or ratio. The serializer acknowledges a packet as soon as it starts
sending it, so the next packet can arrive during transmission. At 80 MHz and
1.28 GHz, a continuous burst measures 48 bit periods per packet: 40 line bits
plus the crossing overhead. That is about 26.7 million hits per second. The
MightyPix hit-rate requirement is 34 MHz/cm^2. On this 0.0644 cm^2 matrix that
is about 2.2 million hits per second, well within the link.

## Pixel configuration and the analog model

Every pixel stores 5 configuration bits in `pixel_config_ram`:
`{tdac[3:0], en_comp}`. At reset all bits are 0, so every comparator is off.
In the top module one word is written at a time: `cfg_we` with `cfg_col`,
`cfg_row` and `cfg_data`, on a rising edge of `clk_ts`. The real chip's
configuration interface is not described, so this port is a stand-in.

`pixel_frontend` is a behavioural model with delays and real-valued
parameters. It is not synthesizable. Charge is given in electrons. The
effective threshold is `th_e + OFFSET_E - 40*tdac`, so a larger TDAC code
lowers the threshold. Above threshold the comparator rises after
`10 ns + 5000 ns*e / (q - thr)`, which makes small signals arrive later (time
walk). It then stays high for `20 ns + 10 ns * (q - thr)/1000`. All these
numbers are placeholders, not properties of the real chip. The top module
gives each pixel a fixed mismatch `OFFSET_E = (((11c + 7r) mod 17) - 8) * 25`
electrons, so that TDAC trimming has something to correct. The sensor diode
itself has no model. Its charge enters through the `sensor_stb`/`sensor_q`
ports.

## What follows the chip description and what does not

Taken from the chip description:

* matrix size 28 x 23
* the 5-bit pixel RAM (4-bit TDAC plus comparator enable)
* one hit-buffer cell per pixel storing leading- and trailing-edge timestamps
* the column drain with one end-of-column circuit per column
* a state machine in the periphery
* a dual-edge timestamp counter at 80 MHz with a 6.25 ns step
* a serializer that encodes the data into 32-bit packets at up to 1.28 Gbit/s

This design's own choices:

* the 11-bit stamp widths and the packet layout
* single-edge resolution for the trailing edge
* sampling the comparator on clock edges, where the chip latches the counter
  at the comparator edge
* registers in place of the in-cell DRAM, with no refresh
* the dead-time and re-arm rule
* lowest-row-first priority in each column
* round-robin column order
* the 8b/10b code with a K28.5 idle
* the clock-crossing handshake
* the configuration port and the reset values
* everything numeric in the analog model

Not modelled:

* the sensor diode and the n-well bias
* the source of the bit clock (no PLL is described)
* the output driver
* any other periphery blocks

## Files

| file | contents |
|------|----------|
| `rtl/lfmp_pkg.sv` | sizes, `pix_cfg_t`, `hit_pkt_t`, K28.5 |
| `rtl/pixel_frontend.sv` | behavioural analog pixel |
| `rtl/pixel_config_ram.sv` | 5-bit pixel configuration |
| `rtl/ts_counter.sv` | dual-edge timestamp counter |
| `rtl/hit_buffer_cell.sv` | per-pixel timestamp store |
| `rtl/end_of_column.sv` | column-drain end of column |
| `rtl/readout_fsm.sv` | round-robin readout state machine |
| `rtl/enc8b10b.sv` | 8b/10b encoder |
| `rtl/serializer.sv` | packet transmitter with clock crossing |
| `rtl/lf_mightypix.sv` | top level |
| `tb/tb_<block>.sv` | self-checking testbench of each block |
| `tb/tb_lf_mightypix.sv` | end-to-end test at full size |
| `tb/tb_tdac_tuning.sv` | threshold tuning of the whole matrix by test injection |
| `tb/ref8b10b_pkg.sv`, `tb/ser_rx.sv` | reference code tables and serial receiver model |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops by itself. A
watchdog also ends it. With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/lfmp_pkg.sv tb/ref8b10b_pkg.sv tb/tb_lf_mightypix.sv \
    --top-module tb_lf_mightypix -Mdir obj
./obj/Vtb_lf_mightypix
```

For the block testbenches, replace the top file and module name. Only
`tb_enc8b10b`, `tb_serializer`, `tb_lf_mightypix` and `tb_tdac_tuning` need
`tb/ref8b10b_pkg.sv`.
The full-size end-to-end test takes about two minutes to build and a few
seconds to run. It takes the 28 x 23 chip at its default parameters through
these steps:

1. configuration of all 644 pixels
2. isolated hits
3. several full cells in one column
4. several columns waiting at once
5. a masked pixel
6. a sub-threshold pixel that fires after TDAC trimming
7. a test-pulse injection
8. a hit in every pixel at once, followed by a second hit that falls into a
   still-full cell and must be lost

It predicts every stamp from the documented formulas, allowing one unit for
the sampling edge. It also checks the output rate during the burst.

`tb_tdac_tuning` runs the usual threshold-tuning procedure on the full matrix.
All pixels start at TDAC 0, their highest threshold. A fixed test charge of
2000 e- is injected into every untuned pixel, and each pixel that answers
through the serial line keeps its present code. All other pixels step their
code up by one, and the injection repeats. With the model's mismatch
pattern, all 644 pixels are tuned in 12 steps. The threshold spread falls
from 122 e- to 12 e-, about one TDAC step over the square root of 12. It
takes about two minutes to build and 40 seconds to run.

What the tests cover:

* the encoder is checked against all data and K28.y characters under both
  running disparities
* the timestamp counter and the hit-buffer cell are checked against an
  independent count of clock edges
* the end of column and the state machine are checked against queue models
  of their neighbours, including one transfer per cycle
* the serializer is checked through a receiver model

Every block testbench has also been run against a copy of its block with one
deliberate bug, and it fails on that copy.

Simulation time is in 1 fs steps (`` `timescale 1ns / 1fs ``), so that a
0.78125 ns bit clock can be represented exactly.
