# Sweep generator and DPM data selector for a tokamak reflectometry DACS

A microwave reflectometer measures the plasma density profile by sweeping the
frequency of a voltage-controlled oscillator (VCO) and recording the beat
between the wave reflected by the plasma and a reference. The sweep must be
reproducible to a fraction of a percent in frequency. A VCO's tuning curve is
not linear, so the control voltage cannot be a plain ramp: it has to be a
pre-distorted curve that yields a linear frequency sweep after the DAC, the
amplifier chain and the VCO. The sweeps must also start on the tokamak's
trigger, so that the five profile reflectometers and the digitizers recording
them stay aligned.

This RTL is the digital part of such a data acquisition and control system
(DACS), built for the EAST reflectometry upgrade described by Wen et al. (2018).
It has two independent parts:

* **`awg`**: the FPGA logic of a five-channel arbitrary waveform generator (AWG)
  that produces the VCO sweep-control signals. A host loads the waveforms and the
  calibration tables over USB. The AWG waits for the delayed trigger, then plays
  the waveforms at one sample per 250 MHz DAC clock into three dual 14-bit DACs.
* **`dpm_window`**: the selector in front of the real-time Data Processing
  Module (DPM). The DPM computes density profiles with a neural network and
  cannot keep up with the full digitizer stream, so it receives only the first
  50 µs of every 1 ms.

`dacs_top` instantiates both parts side by side. The rest of the system is
bought-in or analog and sits outside the RTL, reached through ports. That
includes the digitizers, the PXIe chassis and timing module, the RAID array,
the trigger delay lines and jitter cleaner, the DAC chips and the amplifiers.

## What the source describes and what is this design's own

The system description fixes the following, and the RTL follows it:

* five sweep outputs, 14-bit codes and three dual 250 MSPS DACs;
* commands and waveform data arriving over USB and kept in FPGA memory;
* a calibration look-up table in the FPGA that compensates the non-linearity of
  DAC and amplifiers;
* a delayed trigger that reaches the AWG from the trigger & clock manager;
* a sweep of 40 µs followed by 10 µs of dead time, and a possible future sweep
  of 10 µs;
* 62.5 MSPS on the profile channels, with 50 µs out of every 1 ms sent to the
  DPM.

The source says nothing about how the FPGA logic works inside. Everything
below is therefore one reasonable implementation of those functions:

* the USB byte protocol;
* the memory depth and the table organisation;
* the arm/trigger/stop control;
* the sweep count;
* the latencies;
* how the sequencer shares its address counter between channels;
* where the DPM window is cut and how its count is aligned.

Each file's opening comment says which of its choices are its own.

## AWG datapath

```
 USB byte FIFO ──► usb_cmd_decoder ──► cmd ──┬─► config regs (last_addr, num_sweeps, cal_en)
                                             ├─► awg_wave_ram[c] write port
                                             ├─► awg_cal_lut[c]  write port
                                             └─► arm / stop ──► awg_sequencer ◄── trig_in (async)
                                                                     │ rd_addr (shared)
                     for each channel c = 0..4:                      ▼
                     awg_wave_ram[c] ──► awg_cal_lut[c] ──► dac_data[c/2][c%2]
                        (1 clock)           (1 clock)        (1 clock)
```

All AWG logic runs on one clock, the 250 MHz cleaned clock that also drives the
DACs. The USB chip's FIFO side is assumed to be in that clock domain already;
with a USB chip on its own clock, put a clock-domain-crossing FIFO in front of
`usb_cmd_decoder`.

### Sweep timing (`awg_sequencer`)

One sweep period is a stored table of `last_addr + 1` samples. The dead time is
part of the table, typically held at the start code so that the VCO rests where
the next sweep begins. After reset the period is 12500 samples: 50 µs at
250 MSPS, the source's 40 µs sweep plus 10 µs dead time. All five channels read
the same address, so the five VCOs sweep in step.

Control is a three-state machine:

| state   | rd_addr                  | leaves on                                         |
|---------|--------------------------|---------------------------------------------------|
| idle    | 0 (outputs rest at sample 0) | `ARM` command → armed                          |
| armed   | 0                        | rising edge of the synchronised trigger → playing |
| playing | 0,1,…,last_addr,0,1,…    | `num_sweeps` periods finished, or `STOP` → idle   |

A `STOP` command ends playing and also cancels arming. A trigger that comes
while idle or while playing is ignored. `num_sweeps = 0` plays until `STOP`,
which is what a long plasma pulse needs: 1000 s is 2·10⁷ periods, and the
32-bit `sweeps_done` counter does not wrap. The sequencer asserts that
`rd_addr` never passes `last_addr` while playing.

**Latency.** Call edge 0 the first clock edge at which `trig_in` is sampled
high. `trig_in` goes through a two-flop synchroniser and an edge detector. At
edge 2 the sequencer enters playing with `rd_addr = 0`. Sample 0 of every
channel is on `dac_data` after edge 5, since RAM, table and output register
each add one clock. After that, one sample leaves per clock. The fixed 5-clock
(20 ns) offset adds to the 20–500 ns of the analog trigger delay lines, which
are set during alignment anyway.

### Calibration table (`awg_cal_lut`)

Each channel has its own 16384 × 14-bit table, indexed by the full ideal code:
`dac_code = table[ideal_code]`. Each entry is simply the DAC code that makes
that VCO reach the frequency the ideal code stands for. Computing the table
(from a measured tuning curve of DAC, amplifiers and VCO) is the host's job.
The `CAL_EN` mask switches a channel between table and pass-through. The
reset value is pass-through, because the table RAM holds nothing defined
until it is loaded. Both paths have the same one-clock latency, so switching
does not shift the waveform in time.

Alternative: the host could bake the calibration into the waveform and leave
the table off. With the table, the waveform stays a plain frequency ramp, and a
change of VCO needs only a new table.

### Memory budget

Per channel, 16384 × 14 bits of waveform and 16384 × 14 bits of table. For the
five channels that is 2.29 Mbit of block RAM. That fits the larger Cyclone IV E
devices, such as the EP4CE115 with about 3.9 Mbit. On a smaller device,
shrink `DEPTH` (12500 words is the minimum for a 50 µs period). Alternatively,
reduce the table index (`ADDR_W`) and feed it the top bits of the code.

## Host command protocol (`usb_cmd_decoder`, `awg_pkg`)

Every command is six bytes: opcode, channel, address (2 bytes, MSB first) and
data (2 bytes, MSB first). A frame whose opcode is unknown is consumed and
dropped. Frames need no gaps: the decoder takes one byte per clock and issues
the command one clock after the sixth byte.

| opcode | name        | effect                                                      |
|--------|-------------|-------------------------------------------------------------|
| 0x01   | `WAVE_WR`   | `wave[ch][addr] ← data[13:0]`                              |
| 0x02   | `LUT_WR`    | `table[ch][addr] ← data[13:0]`                             |
| 0x03   | `SET_LEN`   | `last_addr ← data` (period = data + 1 samples)             |
| 0x04   | `SET_COUNT` | `num_sweeps ← {addr, data}`; 0 = until stopped             |
| 0x05   | `CAL_EN`    | calibration on for channels whose bit is set in `data[4:0]` |
| 0x06   | `ARM`       | idle → armed                                               |
| 0x07   | `STOP`      | → idle                                                     |

Writes to the waveform and the table are allowed while playing. They take
effect at the next read of that word.

**Loading a channel.** Loading a 12500-sample waveform takes 75 000 bytes, and
a full table 98 304 bytes. Loading all five waveforms and all five tables is
about 0.87 MB, well under a second on a USB 2.0 link.

`dac_data[k][p]` is port `p` of dual DAC `k`. Channel `c` drives `[c/2][c%2]`,
and the unused sixth port is held at code 0. The DACs' own serial configuration
port and their data format setting are not handled here. The codes are plain
unsigned 14-bit values: set the DACs to straight binary.

## DPM data selector (`dpm_window`)

The digitizer stream arrives as one word of `LANES` 16-bit samples per
`in_valid` beat. By default that is 10 lanes: the I and Q signals of the five
profile reflectometers at 62.5 MSPS. A `trig` pulse starts the count, and the
beat on the trigger's own clock is sample 0. Of every `PERIOD = 62500` samples
(1 ms), the first `WINDOW = 3125` (50 µs) pass on. Each passed sample carries
`out_first` on the first sample of a window and `out_index`, the window number
since the trigger. A second trigger restarts the count at window 0. Nothing
passes before the first trigger.

The counter advances on samples, not on clocks. A stalled or gappy stream
therefore still cuts its windows at the right sample numbers, and the
selector can run on any clock at least as fast as the sample rate. Outputs are
registered, one clock after the input. Averaged over a period, the DPM
receives 5 % of the stream: 10 × 2 B × 62.5 MSPS × 0.05 = 62.5 MB/s.

If the DPM also needs the five sweep-monitor signals (the copies of the VCO
control voltage that the digitizers record), set `LANES = 15`.

## Top level (`dacs_top`)

| group | ports | connects to |
|-------|-------|-------------|
| AWG   | `clk_awg`, `rst_awg` | 250 MHz cleaned clock, reset |
|       | `usb_data`, `usb_valid`, `usb_ready` | FIFO side of the USB interface chip |
|       | `trig_awg` | delayed trigger from the trigger & clock manager |
|       | `dac_data[3][2]` | data ports of the three dual DACs |
|       | `awg_status` | armed, playing, sweep_start, sweeps_done |
| DPM   | `clk_dpm`, `rst_dpm`, `trig_dpm` | digitizer sample clock, reset, trigger |
|       | `dig_valid`, `dig_data[10]` | peer-to-peer stream from the digitizers |
|       | `dpm_valid`, `dpm_first`, `dpm_index`, `dpm_data[10]` | input of the neural-network processor |

All resets are synchronous and active high. The RAMs are not reset.

## Files

| file | contents |
|------|----------|
| `rtl/awg_pkg.sv` | channel count, widths, depth, opcodes, command and status structs |
| `rtl/usb_cmd_decoder.sv` | byte stream → command strobes |
| `rtl/awg_wave_ram.sv` | waveform RAM (simple dual-port, registered read) |
| `rtl/awg_cal_lut.sv` | calibration table with bypass |
| `rtl/awg_sequencer.sv` | trigger synchroniser, arm/play/stop, address counter |
| `rtl/awg.sv` | the AWG FPGA design |
| `rtl/dpm_window.sv` | 50 µs-per-1 ms selector |
| `rtl/dacs_top.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulating

Every testbench checks itself and ends with
`TB_RESULT checks=N failures=M`. Each one has a watchdog that counts a failure
if it does not finish. Run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/awg_pkg.sv tb/tb_dacs_top.sv --top-module tb_dacs_top -o sim
./obj_dir/sim
```

The testbenches:

* **`tb_dacs_top`**: runs the whole design at its default sizes, and takes
  about a second.
  * It loads five 12500-sample sweeps and two full calibration tables over the
    USB port.
  * It checks every output sample of a two-sweep train, with the first one
    exactly 5 clocks after the trigger.
  * It checks an ignored unarmed trigger, a continuous train ended by `STOP`,
    and a train of 10 µs periods.
  * On the DPM side, it streams over two 1 ms periods plus a retrigger and
    compares every output beat with a reference count.
  * It prints how often each mechanism occurred, and fails if one never did.
* **`tb_awg`**: the AWG alone, with a shallow (64-word) waveform RAM.
* The unit testbenches:
  * `tb_usb_cmd_decoder`: random frames, unknown opcodes, and a reset in
    mid-frame;
  * `tb_awg_wave_ram`: full depth;
  * `tb_awg_cal_lut`: full table, switching mode every clock;
  * `tb_awg_sequencer`: latency, wrap, count, stop and retrigger;
  * `tb_dpm_window`: short period with random gaps.

The simulator used has two-state logic, so the testbenches initialise
everything they read.

## Limits

* The calibration table has one entry per code and no interpolation. A
  smaller table with linear interpolation would save RAM but needs an extra
  multiplier stage.
* Commands are not acknowledged and there is no read-back path to the host.
  `awg_status` is brought out for a status register or for LEDs.
* The AWG and the USB chip are assumed to share a clock.
* Nothing here checks DAC timing at 250 MHz. The output registers sit right
  before the pins, and the longest path is the 14-bit table read, but no
  timing closure on a real device has been done.
* The real-time neural network of the DPM, which turns the selected data into
  a density profile, is not part of this RTL.
