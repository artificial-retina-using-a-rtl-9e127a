# A pulse-rate retina that computes a 2-D DCT: serial digital controller

The retina is a three-layer stack of 8x8 pulsing analog cells. Layer 1
turns light into pulse rates. Layer 2 pulses at rates that form the 1-D
discrete cosine transform (DCT) of each row of layer 1. Layer 3 does the
same along the columns, so its 64 pulse rates encode the 2-D DCT of the
image (B = T·A·Tᵀ). The DCT serves as a texture detector.

No synapse is wired between the analog cells. Each cell has one output
that is read through a scanning array, plus one excite and one inhibit
current input. All 64 x 64 synapses between two layers exist only as
numbers in a digital controller. The controller reads which cells pulsed,
adds up weighted inputs, and feeds each destination cell current for a
time that corresponds to its total input. Reprogramming the weights turns
the network into a different transform, even while it runs.

This repository holds the controller in synthesizable SystemVerilog, in
its serial form. One adder visits all 4096 (destination, source) pairs of a
layer pair in one 4096-cycle period, which is 81.92 us at a 50 MHz clock.
The analog cells are not part of the RTL. The testbenches model their pins.

## Data flow and the processing period

```
 layer 1 cells --scan--> cell_scanner --fired[64]--> synapse_stage 0 --stim--> layer 2 cells
 layer 2 cells --scan--> cell_scanner --fired[64]--> synapse_stage 1 --stim--> layer 3 cells
 layer 3 cells --scan--> cell_scanner --fired[64]--> layer_fired[2]  (read-out)

 synapse_stage = weight_memory -> calc_engine -> dest_delay_table -> control_output
```

Everything runs on one period of `NCELL*NCELL` = 4096 cycles. The
`calc_engine` of each stage counts it. Both engines are reset together and
stay in lockstep, and an assertion in `retina_top` checks this.
`period_start` is high in cycle 0 of every period.

A pulse travels through one stage over three periods:

| period | what happens |
|---|---|
| k | The scanner sees the pulse and sets the source's bit in its live register. |
| start of k+1 | The live register is copied to `fired` and cleared. |
| k+1 | `calc_engine` visits pair (d, s) at cycle d*64+s. It reads the weight and, if `fired[s]` is set, adds the weight to entry (d, delay) of the destination-delay table. |
| start of k+2 | The table releases its current column, the totals due now, and shifts. `control_output` loads the totals one cycle later. |
| k+2 | The destination cell gets excite or inhibit current for its time-on. |

A weight with delay `d` arrives `d` periods later. With zero delay, a pulse
reaches its destination between one period after it (pulse at the end of
period k, current from the start of k+2) and three periods after it (pulse
at the start of k, current to the end of k+2). That is 82 us to 246 us.

One detail at the period edge: the weight memory has a one-cycle read, so
the addition for the last pair (63, 63) is issued in cycle 0 of the next
period. That is the same cycle in which the table shifts. The table adds it
into the column it is releasing, so every released column holds all 4096
additions of its period.

## Complex weights and the DCT program

A weight is `retina_pkg::weight_t`:

| bits | field | meaning |
|---|---|---|
| [9:8] | `delay` | extra periods before the input takes effect (0..3) |
| [7:0] | `w` | signed strength: positive excites, negative inhibits |

Each stage has a 4096-word `weight_memory`, addressed `dst*64 + src`. Cell
index = `row*8 + column`. At power-up the memories hold the DCT program.
It is computed in `retina_pkg` from a 9-entry table of `127*cos(m·π/16)`:

```
T[k][n] = c(k)·cos((2n+1)·k·π/16),  c(0) = sqrt(1/8), c(k>0) = 1/2
w       = round(254·T[k][n])                      (|w| <= 127)
stage 0: w(dst=(r,k), src=(r',n)) = T[k][n] if r = r', else 0   (rows)
stage 1: w(dst=(k,c), src=(n,c')) = T[k][n] if c = c', else 0   (columns)
```

The host can overwrite any word at any time through `w_we`, `w_stage`,
`w_addr` and `w_data` on `retina_top`. A word changed before the engine
reaches it in the current period is used in that period.

## Destination-delay table

`dest_delay_table` holds 64 destinations x 4 delay slots of signed 16-bit
accumulators. Instead of moving data, a ring pointer `head` marks the slot
that is due at the end of the current period. Slot `(head+d) mod 4`
collects inputs that are d periods later. On `shift`, the head slot goes
to `col_out` and is cleared, and `head` advances. An entry's magnitude
cannot exceed 4 x 64 x 128, so it cannot overflow.

## Turning totals into current: time-on and the stimulating scan

A cell's input current is either fully on or off. A total input therefore
becomes a time for which the current stays on:

```
ton = min(|total| >> TON_SHIFT, SWEEPS)      SWEEPS = PERIOD / (8 * STIM_DWELL) = 64
current = excite if total >= 0, inhibit if total < 0
```

`ton` is counted in sweeps of the stimulating array. One sweep is 8
columns x `STIM_DWELL` (8) cycles = 64 cycles. A total that would need more
than a whole period is clamped to a whole period.

The stimulating array is driven by column. `col_sel` strobes one column for
8 cycles. During the strobe, `exc[r]` and `inh[r]` say whether the cell in
row r of that column should have its excite or inhibit current on. A cell
keeps what it was last given until its column comes round again. A cell
with time-on `ton` is switched on in sweep 0 and switched off in sweep
`ton`, so its current is on for exactly `ton*64` cycles. A clamped cell
stays on until its first strobe in the next period.

## Reading the cells: the scanning array

`cell_scanner` raises one row-select line at a time for `SCAN_DWELL` (2)
cycles, and samples the 8 column lines in the last of those cycles. A
layer is scanned every 16 cycles (320 ns at 50 MHz). The cells pulse at
kHz rates, so a pulse is seen on many consecutive scans. Only a
low-to-high change registers a pulse, so each pulse counts once. The
firing register has one bit per source per period, so a second pulse of
the same cell in one period adds nothing.

## Modules

| file | role |
|---|---|
| `rtl/retina_pkg.sv` | sizes, `weight_t`, the DCT weight functions |
| `rtl/cell_scanner.sv` | scans one layer, builds and latches the firing register |
| `rtl/weight_memory.sv` | simple dual-port weight RAM with DCT power-up contents |
| `rtl/calc_engine.sv` | serial 4096-cycle accumulation sequencer, period timer |
| `rtl/dest_delay_table.sv` | destination x delay accumulators |
| `rtl/control_output.sv` | time-on conversion and column-scanned stimulation |
| `rtl/synapse_stage.sv` | the four blocks above, for one layer pair |
| `rtl/retina_top.sv` | 3 scanners + 2 stages; top level |

Top-level pins: `scan_row_sel[3][8]` and `scan_col_in[3][8]` go to the
three scanning arrays. `stim_col_sel[2][8]`, `stim_exc[2][8]` and
`stim_inh[2][8]` drive the layer-2 and layer-3 stimulating arrays. The
host weight port is described above. `layer_fired[3][64]` is the latched
firing register of each layer, valid for the period after
`period_start`. Layer 3's register is the transform read-out. The
remaining pins (`pulse_seen`, `acc_add`, `acc_delayed`, `clamped`) are
event strobes for monitoring. Reset is asynchronous and active-low, and it
clears every register except the weight memories.

Resources: the destination-delay tables and time-on registers are
flip-flops, about 12k bits in the whole top. The weights take 2 x 4096 x
10 = 81,920 bits of RAM.

## Choices that are this design's, not the source design's

The original work describes the blocks and their order, the 8x8x3 size,
the 64x64 serial loop of 4096 cycles (~82 us), the destination-delay table
with per-weight delays, signed excite/inhibit totals, the conversion to
time-on and the column-scanned stimulation. The following are choices made
here:

- The clock is taken as 50 MHz. The 82 us period equals 4096 cycles at that rate.
- The weight format, the DCT scale of 254 and the 4 delay slots. The
  original only says the delay range and resolution can be chosen.
- The weights sit in a writable RAM with a DCT power-up program. The source
  calls this store RAM in one place and ROM in another.
- Both stages have their own engine and run in parallel in the same
  period. How the source's serial version shares its time between the two
  layer pairs is not known.
- The scan and stimulation protocols: dwell times, one-hot selects,
  separate excite/inhibit row lines, and cells that hold their state
  between strobes.
- The time-on scale (`TON_SHIFT` = 1, 64 steps per period).
- "Exclude conflicts" in the scanner is read as counting each pulse once.
- The source's FPGA used 35,840 memory bits in its serial version. This
  RTL uses more, because its weight format is a guess.

Not included: the analog cells and photodetectors, the host processor,
programming of the analog cells' thresholds and refractory times, and the
Hebbian learning mentioned in the source. None of them is described in
enough detail to build. The source's parallel version (64 adders, 64 cycles)
and its all-digital emulated cell were comparison points and are not part
of this design.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

- `tb_cell_scanner`: random pulses. Checks the latched register against
  the pulses of the previous period, that the register is stable through
  the period, that pulses are not double-counted, and that `row_sel` is
  one-hot.
- `tb_weight_memory`: all 8192 power-up words against a floating-point
  DCT. Then random writes, read-during-write and read latency.
- `tb_calc_engine`: random weights and firing vectors. Checks the summed
  additions per destination and delay against a direct sum, and checks the
  4096-cycle period.
- `tb_dest_delay_table`: random accumulates with delays, checked against
  an account of what falls due in each period.
- `tb_control_output`: latching cell models measure the on-time of every
  cell, which must be exact. Also checks polarity and clamping.
- `tb_retina_top`: the whole controller at its default sizes for 14
  periods. Layers are modelled at the pins, and layer 1 pulses from a test
  image. Every stimulated cell's on-time is compared cycle-exactly with a
  reference computed from floating-point DCT weights. Halfway through, two
  weights are rewritten, one of them with a delay of 2 periods. The test
  also checks that pulses, additions, delayed additions, excite, inhibit,
  clamping and rewrites all occurred.

- `tb_retina_dct_workload`: a closed loop. `tb/analog_cell_layer.sv` is a
  behavioural model of an 8x8 layer of integrate-and-fire cells, and it
  stands in for layers 2 and 3. With the DCT program and a uniformly bright
  image, only the DC cells fire: column 0 of layer 2 and cell (0,0) of
  layer 3. The host then rewrites all 8192 weights to an identity map while
  the network runs, and the image becomes a checkerboard. After that,
  layer 3 must fire exactly at the bright cells.

To simulate with Verilator, for example the top:

```
verilator --binary --timing --assert -y rtl rtl/retina_pkg.sv \
          tb/tb_retina_top.sv --top-module tb_retina_top -o sim
./obj_dir/sim
```

The full top-level test runs in well under a second.

Most of these tests check the controller's pins. Only the closed-loop
test uses a cell model, and that model is a simple stand-in. The tests show
that the DC term is separated, and that a rewritten weight map is followed.
They do not show that layer-3 pulse rates are proportional to DCT
coefficients: that depends on the analog cells.
