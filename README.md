# TARGET 1 waveform digitizer: chip and companion-FPGA RTL

TARGET 1 is a 16-channel waveform sampler and digitizer for Cherenkov-telescope
cameras. Each channel writes its input into a ring of 4096 sample capacitors at
about 1 GSa/s, so the last ~4 µs of every photosensor waveform is always held
in analog form. When a trigger arrives, writing stops, and a short window of
that history is converted to 12-bit (or fewer) digital codes by Wilkinson ADCs.
Only the chosen window is converted. A camera can therefore have thousands of
channels without a fast ADC on each one.

The chip does not do the work alone. In TARGET 1 the sampling sequence, the
ramp start and clear, the Wilkinson counters and the sampling-frequency servo
all run in a companion FPGA. This RTL models both sides:

* The FPGA part is synthesizable SystemVerilog: sequencer, trigger
  conditioning, digitization controller, dual-edge Wilkinson counters, event
  FIFO and frequency loop.
* The analog parts of the chip are behavioural models with the chip's pins:
  termination, storage array, comparators, ramps and the delay-line sampling
  clock.

Together they make a closed system that can be simulated with Verilator.

## Array geometry and addressing

Each channel's 4096 cells are organised as 8 rows × 32 columns × 16 cells.
A **block** is one column of one row: 16 consecutive cells. It is the unit
that is addressed and digitized. Block ids run in writing order:
`id = row*32 + column`, so 0..255, wrapping from 255 back to 0. One row lasts
512 ns at 1 GSa/s and one block lasts 16 ns.

A waveform read out after a trigger is `n_blocks` consecutive blocks. Within
the waveform these are called **segments** 0..n-1. The physical block of
segment k is `(start + k) mod 256`, where the start is
`start = T − lookback` and T is the block being written when the trigger
arrived.

The chip is addressed through two buses (`block_decoder`):

* `Sel_Col[4:0]` selects the column.
* `Sel_Row[6:0]` carries the row in bits [2:0], the channel pair in bits
  [5:3] and a read enable in bit 6.

The paper names both buses but does not give their encoding; this layout is
this design's own.

## Sampling: SmplCtrl and the two modes

`sampling_sequencer` drives `SmplCtrl[9:0]`:

* Bits [7:0] enable one row at a time.
* Bit 8 is the write strobe for even rows and bit 9 for odd rows.

The chip's own delay line moves the write point inside a row, so the FPGA
cannot see it. The sequencer tracks it by time instead: a picosecond
accumulator advances the column every `BLOCK_PS` (16 ns), and the row
changes when the column wraps. Its `cur_block` output is the FPGA's estimate
of T.

* **Standard mode.** On a trigger the controller raises `hold`, which removes
  all row enables. Digitization reads the frozen cells. When the event is
  done, sampling resumes at column 0 of the held row.
* **Multi-hit mode.** The array works as two 2048-cell halves: rows 0–3 and
  rows 4–7. The paper gives only the two-half idea, so this split is an
  assumption. Sampling wraps inside one half. On a trigger the controller
  pulses `swap`: sampling jumps to row 0 of the other half, and the half just
  left is digitized. Lookback arithmetic (`block_sub` / `block_add` in
  `target_pkg`) keeps the top address bit, so the window wraps inside its
  half.

## Trigger path

Each channel has a comparator against one shared threshold. The comparator
can fire on signals going up or going down (`trigger_comparator_model`).

`trigger_logic` ORs the 16 comparator outputs, passes the OR through two
synchroniser flops and detects its rising edge. On that edge it fires a
non-retriggerable pulse `max(width,1)` clocks long. The output polarity can
be inverted. The pulse leaves the chip as DHIT three clock edges after the
first comparator fires.

In the real chip the pulse width is set by an analog bias (WBIAS) and depends
on temperature. Here a width counter stands in for it.

The FPGA accepts either DHIT, after undoing the programmed polarity, or an
external trigger `ext_trig`, each gated by its enable in `cfg_t`. It also
copies DHIT to `glob_trig_out` for a camera-level trigger.

## Digitization: ramps, dual-edge counters and the dead time

This is the core of the design and the part that sets the dead time.

**Conversion of one block pair.** The chip has two banks of 16 ramps.
Bank 0 converts the selected block of channel p, and bank 1 converts the same
block of channel p+8. That makes 32 samples per conversion.
`digitization_controller` runs these steps:

1. Set the block and pair on Sel_Row/Sel_Col.
2. Release the ramp clear (`ramp_clr`).
3. Pulse `cnt_start` to the counters, and raise `ramp_en` on the very clock
   edge at which the counters start.

Each ramp rises linearly. Its comparator output `Wilk_Out[i]` rises when the
ramp passes the cell's stored voltage. That rising edge freezes counter i.

`wilkinson_counter` holds two counters per sample:

* one counts rising edges of the 222.5 MHz clock;
* one counts falling edges.

Their sum is a 445 MHz count. The counters stop independently when their
comparator output rises. A shared pair of counters ends the conversion at
full scale, `2^bits − 1`. A sample whose ramp never crosses reads full scale.
Results are gray-coded in the counter and converted back to binary when they
are written out.

**Resolution versus time.** The counter rate is fixed. Fewer bits are
obtained by making the ramp steeper by a factor of `2^(12−bits)`, so a full
conversion takes:

| bits | full-scale counts | conversion time |
|------|-------------------|-----------------|
| 12   | 4095              | 9.2 µs          |
| 10   | 1023              | 2.3 µs          |
| 9    | 511               | 1.15 µs         |

**Order and dead time.** The controller digitizes the pairs in the outer loop
and the segments in the inner loop. The dead time is therefore
`n_blocks × 8 × t_conv` plus a few clocks per block. For 4 blocks at 12 bits
that is 4 × 8 × 9.2 µs ≈ 294 µs. The end-to-end testbench measures it at
294–300 µs.

Triggers that arrive during an event are counted in `n_dropped` and ignored.

**Output format.** Every event starts with one header word. It is followed by
`n_blocks × 8 × 16` data words, one per sample pair.

```
header: [31:28]=0xA  [27:20]=event number  [19:12]=start block
        [11:8]=n_blocks [7:4]=bits [3]=external trigger [2]=multi-hit [1:0]=0
data:   [31]=1 [30:28]=pair [27:16]=code of channel pair+8
        [15]=0 [14:12]=pair [11:0]=code of channel pair
```

Within a block the words appear in cell order 0..15. A 64-sample, 16-channel
event is 513 words.

**Back-pressure.** The words go into `event_buffer`, a synchronous FIFO of
1024 × 32 with a registered read port; this stands in for the USB or fibre
readout. Before each block the controller waits for 16 free entries. If the
FIFO is short of space it stalls, and counts the stall in `n_stalls`, rather
than losing data.

## Sampling-frequency servo

The sampling rate is set by the control voltage ROVDD. It drifts with
temperature. The chip puts out a ripple-oscillator signal (RCO) whose rate is
proportional to the sampling rate; the model divides by 64.

`sampling_freq_loop` counts RCO edges over 4096 FPGA clocks. The target is
288 edges, which is 1 GSa/s. Each window it adds twice the error to a 12-bit
DAC code, clamped to the DAC range. The DAC code drives ROVDD, and
`sample_timing_model` turns it into a sampling rate with a straight-line fit
of 2.5 GSa/s per volt around 1.955 V, limited to 0.7–2.3 GSa/s. The loop
reports `locked` after a window with an error of at most ±1 edge.

The loop parameters, the division ratio and the fitted curve are all this
design's choices.

## Module map

| module | kind | role |
|---|---|---|
| `target_pkg` | package | sizes, `cfg_t`, gray code and block arithmetic |
| `target1_system` | top | one chip plus its FPGA, as on the evaluation board |
| `target1_asic` | model | chip: termination → storage → comparators/trigger, decoder, ramps, sampling clock |
| `target1_fpga` | RTL | sequencer, frequency loop, controller, counters, FIFO |
| `sampling_sequencer` | RTL | SmplCtrl generation, block tracking, hold and swap |
| `trigger_logic` | RTL | OR, synchroniser, width, polarity (the chip's digital trigger) |
| `block_decoder` | RTL | Sel_Row/Sel_Col to one-hot row, column and pair selects |
| `digitization_controller` | RTL | event sequencing, header, stalls, dropped triggers |
| `wilkinson_counter` | RTL | 32 dual-edge counters with per-channel stop |
| `event_buffer` | RTL | 32-bit FIFO |
| `sampling_freq_loop` | RTL | RCO counter and DAC servo |
| `input_termination_model` | model | 100 Ω / 1 kΩ / 10 kΩ switchable termination to Vped |
| `storage_array_model` | model | 16 × 4096 cells, row-wise writes, block readout |
| `trigger_comparator_model` | model | 16 threshold comparators, rising or falling |
| `wilkinson_ramp_model` | model | two banks of 16 ramps and comparators |
| `sample_timing_model` | model | ROVDD-controlled sampling clock and RCO |

Signals are in integer millivolts (`mv_t`) and microamps (`ua_t`) between the
models. The storage cells hold `real` values.

## Configuration (`cfg_t`)

| field | meaning |
|---|---|
| `n_blocks` | blocks per waveform (3 and 4 are the usual settings) |
| `adc_bits` | 9–12, sets the ramp slope and full-scale count |
| `lookback` | blocks between the trigger block and the window start |
| `multi_hit` | 0 standard, 1 ping-pong halves |
| `int_trig_en`, `ext_trig_en` | trigger sources |
| `trig_falling` | trigger on signals falling below the threshold |
| `trig_out_inv` | trigger output polarity |
| `trig_width` | trigger pulse width in clocks |
| `sel_term` | termination switches S1..S3 |
| `freq_lock_en` | run the frequency servo |

## Where this departs from the real chip

* All analog behaviour is idealised:
  * no noise, pedestal spread or leakage in the cells;
  * no bandwidth limit or slew saturation in the buffers;
  * no cross-talk;
  * a perfectly linear ramp (the measured transfer function is only close to
    linear);
  * a straight-line frequency curve.
* The ramp start voltage (−40 mV) and slope (0.303 mV/ns) are chosen so that
  12 bits span about 2.8 V in 9.2 µs.
* Codes carry an offset of about one count from the counter start. The
  end-to-end test allows ±2 counts.
* The trigger width is a counter, not a bias voltage. Hysteresis and the
  analog multiplicity sum are not modelled.
* The fixed-dead-time estimate of this controller is slightly above the
  measured dead times for 48 samples:
  * 9 bits: about 28 µs here, against 24 µs measured;
  * 10 bits: about 56 µs here, against 48 µs measured.
* The published per-block digitization times (about 1 µs at 9 bits, 2 µs at
  10 bits) are a little shorter than 9.2 µs scaled by powers of two. This
  design follows the scaling: 1.15 µs and 2.3 µs.
* The USB controller, the DAC chip, the fibre link and multi-chip camera
  modules are not included. `rd_en`/`rd_data` and `glob_trig_out` are where
  they would connect.
* The next chip generation (on-chip ramp control, serial readout, the
  two-stage buffer) is not modelled.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb \
  -y rtl -y tb +libext+.sv rtl/target_pkg.sv tb/tb_target1_system.sv \
  --top-module tb_target1_system -o sim
./obj_dir/sim
```

`tb_target1_system` runs the top at its default parameters (real clock rates,
full-size array and FIFO). It simulates about 0.5 ms in roughly ten seconds.
It does the following in order:

1. Locks the frequency loop.
2. Self-triggers on a pulse, digitizes 4 blocks at 12 bits and checks the
   dead time.
3. Takes an external-trigger event at 10 bits whose window wraps past
   block 0.
4. Runs multi-hit mode at 9 bits, with one trigger dropped while busy and one
   event that stalls on a full FIFO while the reader is paused.

Every code it reads is compared with the voltage held in the corresponding
cell of the storage model. The testbench counts each of these mechanisms and
fails if any of them never happened.

The sub-block testbenches use shortened parameters where the real ones would
be slow. For example, `tb_event_buffer` uses a 64-deep FIFO.
