# A TARGET-style waveform sampling and trigger ASIC in SystemVerilog

Cameras of imaging atmospheric Cherenkov telescopes see flashes of light a few nanoseconds
long. Each camera has thousands of pixels. The electronics behind the pixels has to record
every pixel's waveform at about 1 GSa/s, and it must keep that waveform long enough
(microseconds) for a camera-wide trigger to decide whether the event is worth reading out.
Digitising everything at 1 GSa/s would be expensive. The TARGET family of readout ASICs
avoids that. It stores the waveform as charges on a deep array of switched capacitors, and
it digitises only the short stretch that the trigger asks for. Beside this data path, each
chip also forms a first-level trigger from the analog sum of four neighbouring pixels.

This repository is a register-transfer model of such a chip: the 16-channel, TARGET 7
generation with its integrated trigger. The digital parts are written as synthesizable
RTL. These are the write sequencing, the storage address decoding, the 32 x 16 Wilkinson
counters with their Done bit, the readout sequencer, the serial configuration interface,
the trigger one-shots and the clock monitor. The analog parts have behavioural models that
carry voltages as numbers. These are the sampling and storage capacitors, the ramp, the
comparators and the trigger summing amplifiers. Everything fits together into one top
module, `target_asic`, that can be simulated end to end with Verilator.

## Sizes

| quantity | value | origin |
|---|---|---|
| channels | 16 | published chip |
| sampling array | 64 cells per channel, two ping-pong groups of 32 | published chip |
| storage array | 16,384 cells per channel = 512 blocks of 32, 8 rows x 64 columns | published chip |
| trigger latency covered | 16,384 samples = 16.4 us at 1 GSa/s | follows from the above |
| ADC | Wilkinson, 12 bits, 32 x 16 = 512 conversions at once | published chip |
| trigger | 4 groups of 4 adjacent channels, adjustable threshold and width | published chip |
| nominal clocks | 1 GHz sample clock, 208 MHz digitisation clock | published chip (TARGET 7) |
| voltage coding | 16-bit unsigned, 1 LSB = 0.1 mV | this model |
| default ramp step | 0.5 mV per count, so 4096 counts span 2.048 V (covers the 1.9 V range) | this model |

All sizes are constants in `target_pkg`. The top has no parameters, so every simulation of
`target_asic` runs at these sizes.

## How a waveform travels through the chip

```
 vin[16] --> sampling_array (64 cells) --WRITE--> storage_array (512 blocks x 32 cells)
               ^ cell_idx                 ^ wr_row/col_sel          | READ (one block)
         sampling_timebase ----------> addr_decode <----------------+--- rd_block
                                                                    v
   off-chip controller --dig_start--> serial_readout_sequencer --> wilkinson_adc (32 x 16)
                       --shift_start->        |  ramp_clear/run         ^ ramp
                       <--sdata[16]---        +--> ramp_generator ------+
 vin[4g..4g+3] --> trigger_sum_comparator --fire--> trigger_oneshot --> trig_out[g]
 sclk/sen/sin --> serial_config --> cfg (thresholds, widths, ramp step, delays, enables)
```

### Sampling and the ping-pong write

`sampling_timebase` steps a strobe through the 64 sampling cells, one cell per sample-clock
cycle. Cells 0-31 form group 0 and cells 32-63 form group 1. Once cell 31 (or 63) has
sampled, its group is complete. For the next 32 cycles it holds still while the other group
samples. In that window the timebase raises `wr_en` for one cycle, together with the group
and the next storage block number. On the following sample-clock edge, `storage_array`
copies the whole group (32 cells x 16 channels) into that block.

Blocks are filled in order 0, 1, ..., 511 and then wrap. Group 0 always lands in an even
block and group 1 in an odd one. So, counting samples from reset with n = 0:

* sample n sits in block `(n / 32) mod 512`, cell `n mod 32`;
* it stays there for 16,384 sample periods, until the write pointer comes round again;
* `wr_block` on the top shows the block most recently written, and `wr_wrap` pulses with
  every write of block 511.

This is what an off-chip controller uses to turn "trigger at time t, window starting L
samples earlier" into a block number: `((n_t - L) / 32) mod 512`. The chip does not check
the request. Reading a block in the same cycle as it is written gives undefined data, and
`rd_collide` flags that case.

### Storage addressing

The storage blocks form a grid of 8 rows by 64 columns, numbered down each column. Column 0
holds blocks 0-7 and column 63 holds blocks 504-511. `addr_decode` therefore takes the row
from bits [2:0] of a block number and the column from bits [8:3]. It drives one-hot row and
column selects for the write port and the read port. `storage_array` accepts only one-hot
(or idle) selects, and assertions check this.

### Wilkinson digitisation

A conversion works on one storage block: 32 samples of all 16 channels, 512 voltages in
all. `serial_readout_sequencer` runs it on the digitisation clock:

| cycle | state | action |
|---|---|---|
| 0 | IDLE/READY | `dig_start` seen, `rd_block` latched |
| 1 | READ | storage read strobe |
| 2 | LOAD | ADC cells take their voltages and clear their counters; ramp set to 0 |
| 3 ... | RAMP (t = 0, 1, ...) | ramp = t x step; counters enabled from t = D (`cnt_delay`) |
| end | READY | codes valid, `ready` high |

Each of the 512 cells in `wilkinson_adc` has a comparator and a 12-bit counter. While the
counters are enabled, a cell whose voltage is still above the ramp counts once per clock.
At the first clock where ramp >= voltage, the cell stops, and the count held then is its
code. A cell that reaches 4095 stays there (saturation). With this timing a voltage v
gives

    code = min( max( ceil(v / step) - D, 0 ), 4095 )

The slope `step` sets the gain. The counter start delay D subtracts a fixed offset: the
ramp has already risen D steps when the counters start.

The **Done bit** is high once all 512 cells have stopped. The slow external clock of
TARGET 7 (208 MHz) would make a full 4096-count conversion last about 20 us. With Done-stop
enabled (control bit 1), the sequencer ends the conversion as soon as Done appears. The
time from `dig_start` to `ready` then comes out in clock cycles as

* Done-stop: `5 + max(ceil(vmax / step), D)`, vmax being the largest voltage in the block;
* otherwise, or when a cell saturates: `3 + D + 4096`.

Both formulas are checked by the testbenches.

### Serial readout

In READY the codes stay in the counters, and any of the 32 samples can be read, in any
order and as often as wanted. `shift_start` with `sample_sel` loads the 16 codes of that
sample, one per channel. They then leave MSB first on the 16 `sdata` lines in parallel, one
bit per digitisation clock for 12 cycles, with `sdata_valid` high. Afterwards the
sequencer is READY again. A new `dig_start` is accepted in IDLE or READY. Requests while
`busy` are not allowed, and an assertion checks this.

### Trigger path

Each group of four adjacent channels (0-3, 4-7, 8-11, 12-15) has a summing amplifier and a
comparator. `trigger_sum_comparator` models both as `fire = en && (v0+v1+v2+v3 > thr)` on
the pulse amplitudes. In the chip the summing amplifier inverts, and TARGET 7 adds two
inverting gain stages per channel. The model folds these into a plain positive sum.
`trigger_oneshot` turns a rising edge of `fire` into a pulse of `width` sample-clock
cycles on `trig_out[g]`, starting on the next clock. It ignores new edges while the pulse
runs. The model has no analog noise, so the trigger efficiency against pulse amplitude is
a sharp step at the threshold.

### Configuration

`serial_config` shifts in 24-bit frames, 8-bit address then 16-bit data, MSB first, on the
rising edge of `sclk` while `sen` is high. The frame is stored when `sen` falls.

| address | field | reset value |
|---|---|---|
| 0x00-0x03 | trigger threshold of group 0-3 (0.1 mV units, on the sum) | 500 (50 mV) |
| 0x04-0x07 | trigger pulse width of group 0-3 (sample-clock cycles) | 16 |
| 0x08 | ramp step per digitisation clock (0.1 mV units) | 5 |
| 0x09 | counter start delay D (digitisation clocks) | 0 |
| 0x0A | clock-monitor window (sample-clock cycles) | 64 |
| 0x0B | bit 0 sampling enable, bit 1 Done-stop enable, bit 2 trigger enable | 0b111 |

Configuration values cross into the other clock domains unsynchronised. They are meant to
be static settings: change them only while the function that uses them is idle.

### Clock monitor

`wilkinson_clock_monitor` opens a gate for `window` sample-clock cycles, synchronises it
into the digitisation domain and counts digitisation clocks while it is open. `mon_count`
(with `mon_valid`) is therefore about window x f_wilk / f_sample, accurate to one count.
With the defaults (64 ns, 208 MHz) it reads 13.

### Clocks and reset

There are three clocks: `clk_sample` (sampling, writes, trigger one-shots, monitor gate),
`clk_wilk` (storage read, ADC, ramp, sequencer, serial data, monitor counter) and `sclk`
(configuration). One active-low asynchronous reset `rst_n` clears all of them. Sampling
starts with the first sample-clock edge after reset.

## How far the model follows the published chip

The following come from the published description of the chip: the block structure, the
sizes above, the ping-pong transfer into a 16,384-cell storage array, the 8 x 64 block
grid and its numbering, the on-demand conversion of 32 x 16 samples by a broadcast ramp and
per-cell 12-bit counters, the Done bit, random access to digitised samples with serial
output on all 16 channels in parallel, and four-channel trigger sums with adjustable
threshold and one-shot width.

The following are this model's own choices, because the chip's description leaves them
open:

* voltages as 0.1 mV integer codes, the ramp starting at 0 V with linear steps, and the
  comparator as `ramp >= v`;
* the sampling strobe as a clock-driven counter. The chip uses a delay line with a tunable
  1-2.5 ns step and temperature control loops. These are not modelled, so the sample-clock
  period stands in for the step;
* in-order write addressing, the one-cycle storage read latency and the sequencer's cycle
  sequence, handshake and MSB-first bit order;
* the configuration frame, register map and reset values;
* a synchronous counter where TARGET 7 has a ripple counter. The count is the same, and
  the later TARGET C generation also moved to a synchronous counter;
* the trigger polarity, a unit-gain sum, and a one-shot counted in sample-clock cycles that
  does not retrigger;
* the clock monitor's gate scheme, and its count brought out as a port (the chip's
  description mentions only a monitoring counter);
* the collision flag `rd_collide`.

Not modelled at all: the analog input network and pedestal, the analog bias settings that
the chip's configuration also controls, the write buffer amplifiers,
the LVDS trigger driver (the trigger leaves as a plain bit), noise, non-linearity (the
chip's is calibrated off-chip with lookup tables) and all analog performance. The
companion FPGA that configures the chip and requests readouts is not part of the chip; the
testbenches play its role.

## Files

`rtl/` holds one module or package per file:

| file | kind | role |
|---|---|---|
| `target_pkg.sv` | package | sizes, `volt_t`, `cfg_t`, register addresses |
| `target_asic.sv` | RTL | top level |
| `serial_config.sv` | RTL | serial configuration interface |
| `sampling_timebase.sv` | RTL | sampling strobe and ping-pong write sequencing |
| `sampling_array.sv` | behavioural | 64-cell sampling capacitors |
| `addr_decode.sv` | RTL | block number to one-hot row/column selects |
| `storage_array.sv` | behavioural | 16,384-cell storage capacitors (a 512 x 8192-bit memory) |
| `ramp_generator.sv` | behavioural | Wilkinson ramp |
| `wilkinson_adc.sv` | RTL | 512 comparator + counter cells, Done bit |
| `serial_readout_sequencer.sv` | RTL | conversion control and serial output |
| `wilkinson_clock_monitor.sv` | RTL | digitisation-clock rate counter |
| `trigger_sum_comparator.sv` | behavioural | four-channel sum and threshold |
| `trigger_oneshot.sv` | RTL | trigger pulse width |

The behavioural models are written so that they also synthesise, with the storage array as
a memory. The voltages they carry are stand-ins for analog quantities, though.

## Simulating

Every testbench in `tb/` is self-checking. It prints `TB_RESULT checks=N failures=M` and
stops itself, and a watchdog ends it if it hangs. With Verilator 5, from the repository
root:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
        --top-module tb_target_asic rtl/target_pkg.sv tb/tb_target_asic.sv -o sim
    obj_dir/sim

Replace the top module and file for any other testbench:

| testbench | what it shows |
|---|---|
| `tb_target_asic` | the whole chip at full size: configuration, storage wrap every 16,384 samples, conversions ending on Done, full-length and saturating conversions, Done disabled, counter delay, full readout of four blocks checked code by code, triggers above and below threshold on every group with their widths, clock monitor, sampling pause |
| `tb_transfer_function` | the whole chip: 3,072-level input sweep from 0 to 2.15 V; codes exact, monotonic, unsaturated up to 2.047 V |
| `tb_charge_linearity` | the whole chip: 10 ns wide pulses of 1-500 photoelectrons (4 mV each) on a 200 mV pedestal; rebuilt charge within the quantisation bound, below 4 % error at 10 p.e. and 0.8 % above 100 p.e., first saturation between 400 and 500 p.e. |
| `tb_trigger_scan` | the whole chip: trigger efficiency against amplitude for 4.5, 20 and 50 mV thresholds on all groups |
| `tb_<module>` | one block each: serial_config, sampling_timebase, sampling_array, addr_decode, storage_array, ramp_generator, wilkinson_adc, serial_readout_sequencer, wilkinson_clock_monitor, trigger_sum_comparator, trigger_oneshot |

The full-chip testbenches each take seconds. Most of that time is the 1 GHz sample clock
running through conversions of up to 20 us.

## Changing the design

* Storage depth: `STORAGE_CELLS` in `target_pkg` (a multiple of 32 x 8). The block number
  width follows, and so does the wrap period checked in `tb_target_asic`.
* ADC resolution: `ADC_BITS`. The full-length conversion becomes 2^ADC_BITS cycles.
* Voltage scale: `VOLT_W` and the meaning of one LSB. Ramp step and thresholds are in the
  same unit.
* New configuration fields: add them to `cfg_t`, `CFG_RESET` and the address decode in
  `serial_config`.
