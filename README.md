# Readout logic for a multi-strip germanium X-ray detector

A germanium strip detector for high-energy synchrotron diffraction has hundreds of strips, and
every strip has to report the energy of each photon it absorbs, together with when it arrived. The
front end that does this is a row of readout ASICs called MARS, 32 channels each. A channel
amplifies and shapes the charge from one strip and holds the pulse height in a peak detector until
someone reads it. Each chip sends everything out through a single amplitude output and a single
timing output. So an FPGA next to the cryostat reads the chips one event at a time. It digitises
the two outputs, stamps each reading with a system clock, and turns the readings into photon
events.

This SystemVerilog describes that system at its full size: twelve ASICs, 384 strips, and the
readout logic. The digital parts are RTL. The analog parts of the ASIC (amplifiers, shaper,
discriminator, peak detector, time-to-analog converter) and the ADCs are behavioural models. They
exist so that the digital parts can be simulated against something that behaves like the chip.

The design follows the published description of these detectors (A. K. Rumaiz et al.,
"Multi-element Germanium Detectors for Synchrotron Applications"). That description gives the
architecture, the channel counts, the gain and shaping ranges, and the principles of the readout,
the timing and the charge-sharing correction. It does not give any digital details: protocols,
encodings, bit widths, register maps. All of those are this design's own choices. They are
marked as such below and in the header comment of each file.

## Signal chain

```
 strip charge ──► MARS ASIC (x12) ──amplitude──► ADC ──┐
                  32 channels    ──timing─────► ADC ──┤
                  flag/addr ◄──► cs/rw/enable ────────┤
                                                      ▼
                       FPGA: germ_readout
   per-ASIC sequencer (x12) ─► merge FIFO ─► calibration + time reconstruction
        ─► charge-sharing recombination ─► event stream (to the network interface)
   system clock (loadable from the facility timing receiver), configuration loader,
   memory-mapped registers for the embedded processor
```

| file | what it is |
|---|---|
| `rtl/mars_pkg.sv` | counts, widths, configuration and event types |
| `rtl/mars_channel_analog.sv` | behavioural model of one channel's analog chain |
| `rtl/mars_channel_logic.sv` | per-channel request latch, clear, mask, test-pulse gate |
| `rtl/mars_global_logic.sv` | chip-level event selection, flag/address, acknowledge |
| `rtl/mars_config_reg.sv` | serial configuration register |
| `rtl/mars_test_pulse.sv` | behavioural model of the test-pulse generator |
| `rtl/mars_asic.sv` | one ASIC: all of the above plus the output multiplexer |
| `rtl/adc_model.sv` | behavioural model of one ADC channel |
| `rtl/germ_asic_readout.sv` | FPGA sequencer for one ASIC |
| `rtl/germ_event_merge.sv`, `rtl/sync_fifo.sv` | round-robin merge of the 12 streams into a FIFO |
| `rtl/germ_event_proc.sv` | strip number, energy calibration, arrival time |
| `rtl/charge_share_combiner.sv` | recombination of charge-shared pairs |
| `rtl/germ_timestamp.sv` | system clock |
| `rtl/germ_cfg_loader.sv` | writes configuration images into the ASICs |
| `rtl/germ_regs.sv` | processor registers |
| `rtl/germ_readout.sv` | the FPGA logic, all of the above |
| `rtl/ge_detector_system.sv` | top: 12 ASICs, 24 ADC channels, FPGA logic |

Photons enter the top as `hit[a][c]`, a one-cycle pulse, and `hit_q[a][c]`, the deposited
energy in eV. The sign of `hit_q` is the carrier polarity. Strip `s` is channel `s % 32` of ASIC
`s / 32`. Events leave on `ev_valid`/`ev_ready`/`ev`. The processor uses `bus_*`. The timing
receiver uses `evr_sync`/`evr_time`.

## The MARS channel

The following comes from the published description:

* 32 channels per ASIC.
* Four gains, from 12.5 keV to 75 keV full scale.
* Four shaping times, from 0.25 µs to 2 µs.
* A threshold made of a global setting plus a per-channel trim.
* A peak detector that doubles as storage until readout.
* A time-to-analog converter (TAC) with two modes. It measures either the time over threshold,
  or the interval from peak detection to readout.

The model (`mars_channel_analog`) fills in the rest:

* **Amplitude.** `code = E × 4095 / FS[gain]`, saturating at 4095. `FS = {12.5, 25, 50, 75} keV`.
  The two middle values are assumed.
* **Threshold.** `4 × thr + (trim − 8) × 4` in the same codes. `thr` is a 10-bit DAC and `trim`
  is 4 bits with 8 meaning "no shift". The channel fires only if `code` exceeds it. Charge of the
  wrong polarity is ignored.
* **Peaking.** The amplitude is captured `PEAK_CYC[shaping] = {12, 25, 50, 100}` cycles after the
  photon. This is 0.25, 0.5, 1 and 2 µs at an assumed 50 MHz clock. `peak` then stays high until
  `pd_clear`.
* **Dead time.** A photon that arrives while the channel is shaping or holding is lost.
* **TAC, time-of-arrival mode.** `tdo` counts clock cycles since the capture.
* **TAC, time-over-threshold mode.** `tdo` is `3·PEAK·(code−thr)/code`: the time a triangular
  pulse would spend over threshold.

The HE-MARS variant, with a 25–200 keV range, differs only in gain. Override `FS_EV` on
`ge_detector_system` (or `mars_asic`) to get it, for example `'{25000, 50000, 100000, 200000}`.
The two middle values are assumed. The default is the standard MARS, as used on the 384-strip
detector.

## Talking to the ASIC

The chip's digital pins are CS, R/W, Enable, Clock, Flag, Address and Configuration Data, plus a
Test Clock. The pin names come from the source; the protocol on them is this design's:

| cs | rw | enable | effect |
|---|---|---|---|
| 1 | 1 | 1 | shift `cfg_data` into the configuration register (MSB first) |
| 1 | 0 | 1 | the event shown on `flag`/`addr` has been read; free that channel |
| other | | | nothing |

A channel whose peak detector holds a value raises a request, unless it is masked. The global
logic picks one requesting channel in round-robin order, starting after the last one served. It
raises `flag` and shows the channel number on `addr`. The output multiplexer then drives that
channel's peak level onto `amp_out` and its TAC level onto `time_out`. The selection does not
change until it is acknowledged, so the readout can take its time to digitise. After the
acknowledge, the channel's peak detector is released with a one-cycle `pd_clear`. `flag` drops for
at least one cycle before the next channel is shown. A rising edge on `test_clk` injects
`tp_amp × 200 eV` into every channel whose `tp_en` bit is set.

### Configuration image (250 bits, shifted MSB first)

| bits | field |
|---|---|
| 249:248 | gain |
| 247:246 | shaping |
| 245 | polarity (1 = negative charge) |
| 244 | timing mode (1 = time of arrival) |
| 243:234 | global threshold DAC |
| 233:224 | test-pulse DAC |
| 7c+6 : 7c | channel c: trim[3:0], mask, tp_en, mon_en |

At reset every channel is masked and everything else is zero. The register drives the chip
directly; there is no shadow latch. Gain, shaping and polarity are chip-wide here. The source does
not say whether they are per chip or per channel.

## Reading an event

`germ_asic_readout` runs one ASIC as follows:

1. Idle until `run` is set and `flag` is high (1 cycle).
2. Raise `cs` and wait `SETTLE_CYC` = 4 cycles for the analog multiplexer to settle.
3. On the last settle cycle, latch `addr` and the system clock `ts`, and start both ADCs on the
   same clock edge.
4. Collect both conversions (ADC latency 4, plus 1 cycle).
5. Offer the raw event `{asic, chan, amp, tdo, ts}`. Hold here as long as `ev_ready` is low: the
   ASIC keeps the event in its peak detector, which is exactly what the peak detector's storage
   role is for.
6. Pulse `enable` (1 cycle), then wait `GAP_CYC` = 2 cycles.

With no back-pressure that is 14 clock cycles per event and per ASIC. The twelve ASICs are read
in parallel. A round-robin merger then feeds a 16-entry FIFO.

## Reconstructing the arrival time

Events are read long after they happen, and the readout order has nothing to do with arrival
order. In time-of-arrival mode the TAC has been counting since the peak was captured. The ADC
samples it on the same clock edge that latches the system clock. So

    toa = ts − tdo

is the system-clock value at the moment of peak capture. The readout delay cancels out. Two
strips hit by the same photon therefore get exactly the same `toa`, even when they sit on
different ASICs that were read at different times. `germ_event_proc` computes this, with
`TAC_SHIFT` for a TAC that does not count one unit per clock cycle. In time-over-threshold mode it
passes `ts` through.

The system clock is a 48-bit counter. A strobe from the facility's timing event receiver loads it,
so events can be matched with other data streams later.

## Energy calibration

Each strip has its own straight line, set from two known lines of a reference source such as the
14.4 keV and 122 keV lines of ⁵⁷Co:

    energy[eV] = amp × gain / 256 + offset        gain: eV per ADC unit in 8.8, offset: signed eV

The 384-entry table is written through the registers. Results below zero are clipped to zero.

## Charge-sharing recombination

The strips are narrow (125 µm) compared with the 3 mm thickness, so many photons split their
charge between two neighbouring strips. Both strips then fire at the same time, and their
calibrated energies add up to the photon energy. `charge_share_combiner` does this recombination.
It works on the calibrated stream and keeps events in `NSLOT` = 4 slots:

* **Pair.** An incoming event is compared with every waiting event. A match needs adjacent strips
  (numbers differ by one) and arrival times no more than `window` cycles apart (register, default
  4). On a match the pair leaves as one event. Its energy is the sum. Its strip and time are those
  of the larger part. `shared` is set.
* **No partner.** Otherwise the event takes a free slot. An event that finds no partner within
  `HOLD_CYC` = 256 cycles leaves unchanged. That is long enough for the partner to come through
  another ASIC's sequencer.
* **Full slots.** If all slots are full, the oldest event leaves to make room.
* **Output.** At most one event leaves per cycle. Timed-out events take priority over new input.
  Back-pressure on the output stalls the block.
* **Off.** With recombination off (CTRL bit 1 = 0), the slots drain and events pass straight
  through.

Only pairs are combined. Three-strip events and the sub-pitch position interpolation that charge
sharing would allow are not implemented. The source names the interpolation only as future work.

## Registers

| address | access | content |
|---|---|---|
| 0x000 | rw | [0] run, [1] recombination on, [2] time-of-arrival mode |
| 0x004 | rw | [7:0] coincidence window (cycles) |
| 0x008 | wo | write an ASIC number: load the configuration image into it |
| 0x00C | ro | [0] configuration load busy, [15:8] FIFO level |
| 0x010 / 0x014 | ro | events delivered / pairs recombined |
| 0x018 / 0x01C | ro | system clock [31:0] / [47:32] |
| 0x040–0x05C | rw | configuration image, word k = bits 32k+31..32k |
| 0x800 + 4·s | wo | calibration of strip s: [31:16] gain, [15:0] offset |

Writes take effect on the clock edge with `we` high. Reads are combinational. A configuration
load takes 250 cycles, and readout pauses while it runs. Software should clear `run` first. The
timing mode in CTRL must agree with the one in the ASIC configuration.

## What is modelled, and what is not

* **Behavioural models** (stand-ins for analog circuits, not hardware descriptions):
  `mars_channel_analog`, `mars_test_pulse`, `adc_model`. Analog levels are 12-bit codes.
  `mars_asic` and `ge_detector_system` contain them, so they are system models rather than
  netlists. The FPGA logic under `germ_readout` is synthesizable.
* **No model:** the bias circuits, the analog monitor (only its `mon_en` bit is stored), the
  differential buffers (wires here), the processor, the Ethernet interface and the timing
  receiver. The last three appear as ports.
* **Not given by the source, chosen here:** the clock frequency (50 MHz is implied by
  `PEAK_CYC`), ADC resolution and latency, bit widths, the round-robin policies, FIFO and slot
  sizes, and the hold time.
* **Where the processing runs:** the source does not say whether calibration and recombination run
  in the FPGA or in the computer behind it. They are in the FPGA here.
* **Event rate:** the source gives no rate, so none is checked against it.
* **Energy range:** with the default MARS gains the 122 and 136 keV calibration lines saturate.
  Runs at those energies need the HE-MARS `FS_EV`.

## Measurement scenarios

Two testbenches replay the detector's published measurements at the level of photons in, events
out.

* **`tb_workload_edx_co57`: ⁵⁷Co calibration of the 192-strip EDX detector.** That detector uses
  every other ASIC position and HE-MARS chips.
  1. Every strip sees a 14.4 keV and a 122 keV photon, read with an identity calibration.
  2. The testbench computes a two-point line per strip and writes it.
  3. Every strip sees a 136 keV photon. It must come out within 0.2 keV of 136 keV.

  The model has no strip-to-strip gain spread, so all strips end up with the same line.
* **`tb_workload_xpd_53kev`: 53 keV monochromatic diffraction on the 384-strip detector.**
  600 photons land on random strips; 30 % are split between two strips. The same photons are
  played twice:
  * With recombination on, all 600 give one event each in the 53 keV peak, with the exact
    expected energy.
  * With it off, only the unshared ones do, and each shared photon leaves two partial events
    below the peak.

  A typical run gives 600 against 407 events in the peak. This is the improvement that charge
  sharing correction is meant to bring.

## Simulating

Every testbench in `tb/` checks itself and ends with `TB_RESULT checks=N failures=M`. Each has a
watchdog. For example:

```
verilator --binary --timing --assert -Wno-fatal rtl/mars_pkg.sv rtl/*.sv \
    tb/tb_ge_detector_system.sv --top-module tb_ge_detector_system
./obj_dir/Vtb_ge_detector_system
```

Use the same command with any other `tb_<module>.sv`. Listing the package first is enough;
verilator ignores the duplicate.

* **`tb_ge_detector_system`** runs the full-size design with default parameters, in about a
  second. It configures all 12 ASICs over the bus, calibrates all 384 strips and syncs the clock.
  It then checks, against values computed in the testbench:
  * single photons;
  * threshold and mask suppression;
  * a test pulse;
  * charge sharing inside one ASIC and across the ASIC 1/2 boundary;
  * a photon on every ASIC at once while the output is stalled;
  * dead time;
  * recombination switched off.
* **`tb_germ_readout`** repeats the method with two ASICs.
* **The other testbenches** each check one module. They cover bit order, round-robin order,
  peaking delay, fixed-point calibration, ADC latency and cycles per event.
