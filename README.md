# A data-rate and TH-code reconfigurable TH-PPM IR-UWB receiver

Impulse-radio ultra-wideband (IR-UWB) links send data as trains of very
short pulses instead of a modulated carrier. This makes the radio mostly
digital, cheap and low-power, which suits wireless sensor networks. This
RTL is the digital back end of such a receiver. It takes ADC samples and
gives out data bits. Two of its properties can be changed while it
receives, by the MAC layer above it:

* the **data rate**, through the chip duration Tc and the number of chips per frame Nc;
* the **time-hopping (TH) code**, the sequence that says where in each frame this link's pulse sits.

Changing properties of a fixed receiver, instead of loading a different
receiver, is the "software defined radio layer" of the title of the
source paper: *Software defined radio layer for IR-UWB systems in
Wireless Sensor Network Context* (Lecointre, Dragomirecu, Plana, LAAS-CNRS).
That paper gives the receiver's block diagram, what each block is for,
and the reconfiguration inputs. It does not give the insides of the
blocks, the bus widths or any timing. Those are this design's own choices,
and they are marked as such below and in every source file.

## 1. The signal the receiver expects

Time is counted in samples. One ADC sample enters per clock cycle in which
`enable` is high.

```
frame (Tf = Nc*Tc samples)
|<------------------------------------------------------------>|
| chip 0 | chip 1 | chip 2 | ...                    | chip Nc-1 |
            ^ the TH code value for this frame names one chip

one chip (Tc samples)
|<----------------------- Tc ---------------------->|
|PPPP                     |PPPP                     |
 ^ pulse here for bit 0    ^ pulse here for bit 1 (sample Tc/2)
```

* Each frame carries **one** pulse and so one data bit.
* The pulse sits in the chip named by the TH code entry for that frame.
  The TH code is a list of `CODE_LEN` = 8 chip indices, used one per frame and repeated.
* Within its chip, the pulse starts at sample 0 for a 0. For a 1 it starts at sample Tc/2.
  This is binary pulse position modulation (PPM).
* The pulse is 4 samples long, with the shape `{2, 7, -7, -2}`. This shape is a sampled monocycle.
  Its autocorrelation is 106 at lag 0 and negative at every other lag.
* A transmission opens with one **preamble frame**. It has the current Tc
  and Nc, and a single pulse at sample 0 of chip 0. The receiver takes its
  chip and frame timing from this pulse. The preamble frame gives no data bit.

The data rate is therefore one bit per frame: 1 / (Nc · Tc) bits per
sample period. Changing Tc changes the rate, as the source says. The
source's formula, D = Nc/Tf = 1/Tc, counts one bit per chip. That
formula does not agree with its own TH discrimination, which keeps one
chip per frame. This design follows the block diagram.

## 2. Blocks

```
 sample ──┬──────────────► sync_filter ──start──┐
          │                 (matched filter)    │
          └► sample_delay ──► correlation ◄─────┘
             (SYNC_DELAY)     │ 2 template_gen, chip timer
                              │corr0, corr1, done_tc        chip_end
                              ▼                                │
                           decision ──bit──► th_discrimination ◄┘──► rx_bit, rx_valid
                                                   ▲ code   │ frame_end, code_step
                                              th_code_mgmt ◄┤
 MAC: tf, nc, tc, reconf ─► reconfig_regs ──cfg.tc/cfg.nc, apply──┘
 MAC: code_restart, code_load, code_in ─► th_code_mgmt
```

| module | source file | role |
|---|---|---|
| `uwb_pkg` | `rtl/uwb_pkg.sv` | widths, pulse shape, the configuration struct `rx_cfg_t` |
| `template_gen` | `rtl/template_gen.sv` | template sample for bit 0 or bit 1 at a sample index |
| `sync_filter` | `rtl/sync_filter.sv` | matched filter, finds the preamble pulse, marks chip 0 |
| `sample_delay` | `rtl/sample_delay.sv` | delays the correlators' sample stream by `SYNC_DELAY` |
| `correlation` | `rtl/correlation.sv` | chip timer and two integrate-and-dump correlators |
| `decision` | `rtl/decision.sv` | picks bit 1 if corr1 > corr0 |
| `th_discrimination` | `rtl/th_discrimination.sv` | chip and frame counting; keeps the coded chip's bit |
| `th_code_mgmt` | `rtl/th_code_mgmt.sv` | two-bank TH-code memory, switch at a frame boundary |
| `reconfig_regs` | `rtl/reconfig_regs.sv` | Tf/Nc/Tc registers and the reconfiguration signal |
| `ir_uwb_rx` | `rtl/ir_uwb_rx.sv` | top level |

The source's register-transfer view of its reconfigurable TH-PPM receiver
has four blocks: Correlation, Decision, TH-discrimination and TH-code
management. Its system view adds two template generators and a
synchronisation filter. This RTL keeps those block boundaries. The delay
line and the reconfiguration register block are its own.

## 3. Synchronisation: why the correlators run late

A coherent correlator must know where each chip begins. A filter matched
to the pulse finds a pulse only once the whole pulse has gone by. So
`sync_filter` watches the live stream, while the correlators see the
same stream `SYNC_DELAY` = 2 · `PULSE_LEN` = 8 samples later.

1. **Hunt.** Wait for the matched-filter output
   `y(t) = Σ PULSE[i] · x(t-3+i)` to exceed the threshold `sync_thr`.
2. **Peak.** Over that sample and the next 3, remember where `y` is largest.
   The peak is where the pulse ends, at sample `t0 + k`.
3. **Wait.** The pulse started at `t0 + k - 3`. It leaves the delay line at
   enabled sample `t0 + k - 3 + SYNC_DELAY`. At that moment `start` is
   raised for one cycle, and `synced` goes high.

`start` resets the chip timer, the chip and frame counters, and the TH-code
index. The lock is then held, with no tracking, until `rst` or `resync`.
`resync` also clears the correlator, the decision and the discrimination,
so no bits come out until the next preamble has been found. The setting
and the TH codes are kept.
Choose a threshold above the filter's noise output and below 106 × the
pulse amplitude. The testbenches use amplitude 1000, noise of ±60 and a threshold of 50 000.

## 4. From samples to bits: the pipeline

For every sample, `correlation` looks up both templates at the sample's
index inside the chip, multiplies, and adds into two 80-bit accumulators.
The accumulators restart at sample 0. The chip timer wraps after
`cfg.tc` samples.

| cycle | event |
|---|---|
| c | last sample of a chip is at the correlator input; `chip_end` = 1 (combinational) |
| c+1 | `done_tc` = 1, `corr0`/`corr1` hold the chip's sums |
| c+2 | `decision` gives `bit_out`, `bit_valid` = 1 |
| c+3 | `th_discrimination` gives `rx_bit`, `rx_valid` = 1 if this was the coded chip |

`th_discrimination` counts chips on `chip_end`. It decides whether a
chip is the coded one at `chip_end`, using the code value in force at
that moment. It then carries that flag two cycles to meet the chip's
decision. The code and Nc may change right at the frame boundary, so the
last chip of a frame must not be judged with the next frame's values.

Seen from the input, a bit leaves three clock cycles after the input
sample `SYNC_DELAY` places later than the last sample of its chip. This
holds whatever the `enable` pattern is. Only the sample path and the
counters stall with `enable`, and the three pipeline registers after
them always run. The end-to-end testbench checks this cycle exactly for
every bit.

## 5. Reconfiguration

### Rate: Tf, Nc, Tc

The MAC layer drives `tf`, `nc` and `tc`, then pulses `reconf` for one cycle. `reconfig_regs`:

* refuses the set and raises `cfg_error` if Tf ≠ Nc·Tc, if Tc < `TC_MIN` (8), or if Nc = 0.
  The setting in force stays. `cfg_error` clears on the next good set.
* otherwise holds the set as pending (`cfg_pending`). A later good set replaces it.
* applies the pending set at the next frame boundary while the receiver runs.
  The boundary is `frame_end`, the last sample of a frame, so no frame mixes two settings.
  Before the receiver has synchronised, it applies the set at once.

`reconfigured` pulses one cycle after a set takes effect. After reset the
setting is Tc = 16, Nc = 8, Tf = 128. Both the transmitter and the
receiver must change at the same frame. If the MAC sends the request
while the receiver is inside frame *f*, the new setting holds from frame
*f*+1.

### Code: TH-code management

`th_code_mgmt` holds two banks of 8 code values. The active bank is read.
The MAC writes a new code into the other bank while the active one is in
use. It pulses `code_restart`, then gives 8 `code_load` pulses, each with
a value on `code_in`. `code_complete` rises after the 8th value. The swap
comes with the next applied reconfiguration, so a code change is also
requested with `reconf`, with the current Tf, Nc and Tc if they stay the
same. If the new code is complete, the banks swap and the new code starts
at entry 0 in the next frame (`code_swapped`). Otherwise the old code
simply continues. After reset the active code is all zeros: the pulse is
in chip 0 of every frame.

Code values must be smaller than Nc. A larger value names a chip that
does not exist, and that frame yields no bit.

## 6. Parameters and ports

All sizes are in `uwb_pkg`:

| name | value | origin |
|---|---|---|
| `SAMPLE_W` | 64 | sample size of the source's reconfigurable TH-PPM versions |
| `TC_W`, `NC_W`, `CODE_W` | 8 | own choice; sets the rate range Tc, Nc ≤ 255 |
| `TF_W` | 16 | own choice (holds 255·255) |
| `CODE_LEN` | 8 | own choice (a power of two) |
| `PULSE_LEN`, `PULSE` | 4, {2,7,-7,-2} | own choice |
| `SYNC_DELAY` | 8 | own choice, must be ≥ 2·`PULSE_LEN` - 1 |
| `ACC_W`, `MF_W` | 80, 75 | derived, no overflow at any Tc |

The source says that the width of these entries bounds the reachable data
rate, and costs area and power. To widen the range, change `TC_W`/`NC_W`.
`TF_W` must then hold Nc·Tc. If `PULSE` or `PULSE_LEN` changes, keep
an autocorrelation with a single clear peak, or synchronisation may lock
off-peak.

Top-level ports of `ir_uwb_rx`: `clk`, `rst` (synchronous, active high),
`enable`, `sample` (signed), `sync_thr`, `resync`. MAC side: `reconf`,
`tf`, `nc`, `tc`, `code_restart`, `code_load`, `code_in`. Status:
`synced`, `mf_out` (matched-filter output, for choosing the threshold), `sample_idx`, `running`, `cfg`, `cfg_pending`, `cfg_error`, `code_complete`,
`reconfigured`, `code_swapped`, `frame_end`, `preamble`, `chip_cnt`,
`code_idx`. Data: `rx_bit`, `rx_valid`.

## 7. What is not here

* **The second channel.** The source lists a "double channel" version of its reconfigurable TH-PPM receiver,
  but does not say what the second channel is. This receiver has one channel.
* **The other receivers the source compares against.** These are energy-detection TH-OOK, single-correlation TH-BPAM,
  and a TH-PPM version with ranging. The source only names them, and its TH-code mechanism is the same for them.
* **Emitter, UWB channel, ADC, MAC layer.** The source simulates these in software next to the FPGA.
  Here the ADC samples and the MAC signals are top-level ports. `tb/uwb_tx_pkg.sv` is a simple emitter/ADC model
  with additive uniform noise, for testing only. It has no multipath.
* **Tracking and loss of lock.** Synchronisation happens once per transmission.

## 8. Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and stops.

| testbench | checks |
|---|---|
| `tb_template_gen` | both templates, every index, five values of Tc |
| `tb_sync_filter` | filter output against a reference, exact `start` cycle, random stalls, resync |
| `tb_correlation` | sums against a reference, `chip_end`/`done_tc` timing, Tc from 8 to 255 |
| `tb_decision` | random and tied correlations, one-cycle valid |
| `tb_th_discrimination` | coded-chip selection, preamble masking, Nc change |
| `tb_th_code_mgmt` | load, incomplete load, swap, restart, stepping |
| `tb_reconfig_regs` | refusal, idle and frame-boundary application |
| `tb_ir_uwb_rx` | end to end at the default parameters; see below |
| `tb_rate_range` | end to end over the whole Tc/Nc range, including 32-bit-range samples |

`tb_ir_uwb_rx` first sends 28 data frames with noise and random stalls. Meanwhile it:

* sends a bad Tf, which is refused;
* changes only the rate, from Tc = 16 to Tc = 20 (a slower rate), with no new code;
* loads a new code with Nc = 6, Tc = 24;
* loads a third code with Tc = 8;
* pulses `resync` after the last frame, then sends a second transmission of 6 frames with its own preamble.

It checks every bit and its arrival cycle, and it counts each of these mechanisms.

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb \
    rtl/uwb_pkg.sv tb/uwb_tx_pkg.sv tb/tb_ir_uwb_rx.sv --top-module tb_ir_uwb_rx
./obj_dir/Vtb_ir_uwb_rx
```

For the block testbenches that do not use the emitter model, leave out `tb/uwb_tx_pkg.sv`.
The testbenches use `$urandom` for their stimulus and work with two-state simulation.
Every register that is read is reset.
