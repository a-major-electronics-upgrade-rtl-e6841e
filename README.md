# Trigger, readout-control and safety logic for an upgraded H.E.S.S. I camera

The four 12-m H.E.S.S. I Cherenkov telescopes were refitted with new camera
electronics so that they can keep up with the much higher trigger rate of
the large central telescope. The old cameras needed about 450 us to read an
event; the new ones need about 5.5 us. Each camera has 960 photomultiplier
pixels in 60 *drawers* of 16 pixels. A drawer FPGA samples the pixel
comparators, a central *Drawer Interface Box* (DIB) forms the camera
trigger from overlapping 64-pixel sectors, and on a trigger every drawer
stops its NECTAR analogue memories and reads a short window of samples.

This repository gives synthesizable SystemVerilog for the digital parts of
that chain, plus behavioural models of the two analog trigger stages, so
that the whole trigger-to-readout path can be simulated:

```
 pixel comparators (16 per drawer, asynchronous)
        |
  drawer_trigger      x60   sample at 800 MHz, count pixels above threshold
        |                   in the left and right drawer half (0..8 each)
  trigger_dac         x120  [behavioural] pulse height = 33 mV per pixel
        |
  analog_trigger_board      [behavioural] 38 overlapping sector sums,
        |                   common threshold, OR -> camera trigger
  acq_manager               accept trigger, readout_start to all drawers,
        |                   busy >= 5.5 us, count accepted/lost triggers
  drawer_readout      x60   stop NECTAR sampling, read a 16-cell region of
                            interest of 16 pixels x 2 gains, send the event

  security_interlock        sensors -> drawer power enable, lid command
  power_distribution_box    64 drawer power channels, current table
```

`hess1u_camera` (in `rtl/`) wires all of these together. Everything outside
the logic (comparators, NECTAR chips, the drawer computers that receive the
events, sensors, power switches) is a port.

## The trigger: an N-majority over sectors

The camera triggers when at least N pixels inside any one sector of 64
pixels are above their pixel threshold at the same time. The sum is not
formed digitally. Each drawer reports two numbers: how many of its left
eight and how many of its right eight pixels are above threshold. Each
number leaves the drawer as an analog pulse whose height is 33 mV per
pixel. The DIB's analog trigger board adds the pulses of the eight
half-drawers of a sector, and one comparator per sector checks the sum
against a threshold common to all sectors. With 33 mV per pixel, a
threshold of (N - 1/2) x 33 mV fires on N pixels and never on N - 1. The
test bench uses 115 mV, which gives N = 4. The 38 comparator outputs are ORed
into the camera trigger.

In this RTL the pulse heights are integer millivolts and the sum and
comparator are ideal: no noise, no delay, and a sector fires when its sum is
strictly above `threshold_mv`. The sum is exact, so this reproduces the
majority rule. It does not reproduce the analog behaviour of a real
board.

### Sampling

`drawer_trigger` passes the 16 comparator outputs through a two-flop
synchroniser at 800 MHz. It ANDs them with a per-pixel enable mask and
registers the two population counts. A comparator edge therefore shows in
the counts three clock edges later. Pixel timing is quantised to 1.25 ns,
one sample period. Pixels 0..7 form the left half and pixels 8..15 the
right half.

### Sector geometry

The 60 drawers fill the central positions of a 9 x 8 matrix of drawer
positions. Sectors overlap by half a drawer sideways and by one full
drawer vertically, so one half-drawer feeds at most four sectors. Those
facts, and the count of 38 sectors, are all that is known. The exact map
below is a reconstruction that satisfies all of them. It is the
least-certain part of the design.

Drawer numbering (row-major over the populated positions; `.` = empty):

```
row 0:  .   .   0   1   2   3   4   .   .
row 1:  .   5   6   7   8   9  10  11   .
row 2: 12  13  14  15  16  17  18  19  20
row 3: 21  22  23  24  25  26  27  28  29
row 4: 30  31  32  33  34  35  36  37  38
row 5: 39  40  41  42  43  44  45  46  47
row 6:  .  48  49  50  51  52  53  54   .
row 7:  .   .  55  56  57  58  59   .   .
```

Each drawer is split into two half-columns, giving 18 half-columns in all.
Half-drawer number h = 2 x drawer + side, with side 0 = left. A sector
window is 4 half-columns wide and 2 rows high: 8 half-drawers, or 64 pixels
when they are all populated. Windows start at every third half-column
(0, 3, ..., 15), which gives the half-drawer overlap. They start at every
row (0..6), which gives the one-drawer overlap. That makes 6 x 7 = 42
windows. The four corner windows hold only one or two populated
half-drawers and are dropped, which leaves exactly 38 sectors. Of the
38 sectors, 27 have all 8 members, 9 have 6 or 7 and 2 have 4. The
last window column (start 15) covers only half-columns 15..17, so the map
is not mirror-symmetric: the right edge has smaller sectors than the left.
A half-drawer belongs to 1 to 4 sectors.

`hess_pkg::build_sector_map()` computes this map as a constant function.
`SECTOR_LIST` holds the same map as at most 8 member numbers per sector,
which is the form the trigger board model sums over. Sectors are numbered
by window row, then by window start column. To use a different map, pass a
different `MEMBERS` parameter to `analog_trigger_board`.

## Readout and dead time

Each pixel has one NECTAR chip. Its two channels hold the high-gain and
low-gain copies of the pixel signal in 1024-cell analogue memories, written
at 1 GS/s. A trigger stops the writing. Only a region of interest (ROI) of
16 cells is then digitised (12 bit) and sent to the FPGA.

`acq_manager` detects the rising edge of the camera trigger after a
two-flop synchroniser. If acquisition is enabled and the camera is not
busy, it sends a one-cycle `readout_start` to all drawers. It then holds
`busy` for `MIN_INTERVAL` = 4400 cycles (5.5 us at 800 MHz), the minimum
safe spacing of two events. Busy also stays up while any drawer is still
busy. A trigger edge that arrives while busy is counted as lost. From
comparator edge to `readout_start` takes 6 clock edges: 3 in the drawer and
3 in the manager.

`drawer_readout`, on `readout_start`:

1. raises `nec_stop` and takes `stop_cell`, the cell at which the chips
   stopped;
2. for k = 0..15 reads cell (stop_cell - ROI_OFFSET + k) mod 1024: it
   drives `nec_addr`, pulses `nec_read`, and waits until all 16 chips show
   `nec_valid`, then stores both gains of every pixel;
3. drops `nec_stop` and streams the 256-word event:
   `{pixel[3:0], cell[3:0], high_gain[11:0], low_gain[11:0]}`, pixel by
   pixel, on a valid/ready interface, with `ev_last` on the final word;
4. goes idle, which drops its `busy`.

The chip interface is a simplification. The NECTAR chip's real control
signals and serial link are not modelled. A chip's conversion and transfer
time shows only as the wait for `nec_valid`. ROI_OFFSET = 40 cells stands
for the trigger latency, which is a free parameter.

With quick chips and a consumer that is always ready, a readout takes about
350 cycles. The 5.5 us interval is then what limits the rate. If the
consumer is slow, the drawers hold the camera busy for longer.

### What the dead time buys

At 1.5 kHz of random triggers, a common array rate when the four telescopes
trigger together with the large one, a 5.5 us dead time loses
1 - 1/(1 + 1.5 kHz x 5.5 us) = 0.8 % of the events. The 450 us readout of
the old cameras loses about 40 %. `tb/tb_deadtime_workload.sv` drives 400
exponentially spaced triggers at 1.5 kHz into two acquisition managers, one
at 4400 cycles and one at 360000 cycles (450 us). It checks both against a
reference dead-time model: 0.5 % and 40.5 % of the triggers are lost. The
run simulates about 0.27 s of camera time and takes roughly two minutes.
At 1.5 kHz, one drawer's event (16 pixels x 16 cells x 2 gains x 12 bit =
6144 bit) makes 9.2 Mbit/s, well inside the 100 Mbit/s Ethernet link of a
drawer. That link is not part of this RTL.

## Safety interlock and drawer power

`security_interlock` checks five fault causes. In `fault_cause` bit order
they are: smoke, ventilation not OK, pneumatic pressure not OK, ambient
light high while the front lid is not closed, and back door open. Any
cause removes `drawer_power_enable` and `remote_lid_open` one cycle later.
The pneumatic lid control closes the lid when its open command drops.
Causes are latched. `fault_clear`
removes only the causes that have gone. In local mode the remote lid
command is not driven. Which sensors count as faults, the latching and the
local-mode rule are choices of this design.

`power_distribution_box` keeps an on/off state for each of 64 channels,
written by slow control. `ch_on` is that state ANDed with the interlock's
enable, so all drawers go off at once and come back in their programmed
state. A stream of (channel, 12-bit current) readings fills a 64-entry
table, and slow control reads it with one cycle of latency. No
over-current trip is built, because none is specified.

## Clocking and reset

The model uses a single clock for everything: the 800 MHz trigger
sampling clock. In the real camera the logic is spread over 60 drawer
FPGAs, the DIB FPGA and the power-box FPGA, each with its own clock and
cable delays. Their clock rates are not known. All flops have an
asynchronous, active-low reset `rst_n`, except the event buffer and the
current table, which are plain memories.

## Files

| file | what it is |
|---|---|
| `rtl/hess_pkg.sv` | constants, types, sector geometry functions |
| `rtl/drawer_trigger.sv` | 800 MHz comparator sampling and half-drawer counts |
| `rtl/trigger_dac.sv` | behavioural: count -> pulse height (33 mV/pixel) |
| `rtl/analog_trigger_board.sv` | behavioural: 38 sector sums, threshold, OR |
| `rtl/acq_manager.sv` | trigger acceptance, readout start, dead time, counters |
| `rtl/drawer_readout.sv` | NECTAR ROI readout and event stream of one drawer |
| `rtl/security_interlock.sv` | sensor interlock |
| `rtl/power_distribution_box.sv` | 64-channel drawer power switch logic |
| `rtl/hess1u_camera.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_deadtime_workload.sv` | dead-time fraction at a 1.5 kHz trigger rate |

Parameter defaults are the camera's own numbers: 16 pixels per drawer, 60
drawers, 38 sectors, 33 mV per pixel, 1024 cells, 16-cell ROI, 12-bit
samples, 64 power channels, and 4400 cycles = 5.5 us. No size has been
scaled down.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog counts a failure if a testbench hangs. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl +libext+.sv -Irtl rtl/hess_pkg.sv tb/tb_hess1u_camera.sv \
  --top-module tb_hess1u_camera -o sim
./obj_dir/sim
```

Replace `tb_hess1u_camera` with any other `tb_<module>` to test one block.
The package must come first on the command line. The testbenches use only
`$urandom`, so two-state simulators work.

`tb_hess1u_camera` runs the full-size top with no parameter changed. It
drives comparator patterns into the 60 drawers and models all 960 NECTAR
chips. It checks every event word of every drawer. It also covers each
mechanism of the design, and fails if any of them never happens: a
triggering shower (4 pixels), a sub-threshold one (3 pixels), a trigger
lost during busy, busy extended by slow drawers, a masked pixel, and an
interlock trip and recovery. Busy is checked to last exactly 4400 cycles,
and the trigger-to-readout latency to be 6 cycles. It takes about a minute
to build and a few seconds to run.

The block testbenches compare against models written separately from the
RTL. `tb_analog_trigger_board` rebuilds the sector map from drawer
coordinates rather than using the package tables. It checks the N-majority
rule in every sector for N = 2..5 and 3000 random pulse patterns.
`tb_acq_manager` runs `MIN_INTERVAL` = 50 to keep the simulation short.

## How far to trust it

Closely tied to the published description: the 800 MHz sampling, the
left/right half counts, 33 mV per pixel, 38 sectors summed over a 9 x 8
drawer matrix with the stated overlaps, the common threshold and OR, the
1024-cell memories with a 16-cell ROI and 12-bit samples, the 5.5 us
minimum event spacing, the interlock cutting drawer power and closing the
lid, and the 64-channel power switch with current monitoring.

This design's own choices:

- the exact sector map;
- the synchronisers;
- the pixel masks;
- the NECTAR chip interface and the event word format;
- ROI_OFFSET;
- the single clock domain;
- the interlock rules;
- the register interfaces of the power switch.

Not modelled:

- the analog front end (preamplifier, the three gain branches, the pixel
  comparators);
- the inside of the NECTAR chip;
- the drawer and DIB computers and their Ethernet links;
- the link to the central array trigger;
- GPS time stamping;
- the flat-field calibration trigger output;
- ventilation and pneumatics control;
- the slow-control protocols;
- the production-test pulse generator.
