# Digital quench detection for superconducting magnets

When part of a superconducting magnet, bus or current lead loses
superconductivity (a *quench*), a resistive voltage appears across it and grows
quickly. If the stored energy is not taken out of the circuit in time, the
conductor is damaged. A quench protection system watches the voltages across
pairs of voltage taps (VT) on every superconducting element. When one exceeds a
threshold for long enough, it fires the energy-extraction switch ("dump") and
puts the magnet power supply into bypass.

This repository holds synthesizable SystemVerilog for the digital parts of
such a system, which has two independent, redundant hardware tiers:

* **Tier 1, the Digital Quench Detector (DQD).** A chassis holds up to 8
  four-channel DQD modules and one controller, joined by a backplane. Each
  module digitises its four isolated VT signals at 10 kHz with 16-bit ADCs.
  It forms four more *bucked* channels and runs a quench detector on each of
  its 8 channels. All 8 channels are also logged into a 60 kS/channel circular
  buffer in external SRAM. The controller combines the modules' quench lines
  into `DQD_DUMP_FIRE` and `DQD_PS_INHIBIT`.
* **Tier 2, the Analog Quench Detector (AQD).** Detection in this tier is analog.
  The digital part built here is its backplane CPLD, which watches the 10 kHz modulated
  status lines of up to 7 AQD modules and drives modulated `AQD_DUMP_FIRE` and
  `AQD_PS_INHIBIT` outputs.

A supervisory computer ("Tier 3") configures the DQD over SPI and reads out the
buffers after a quench. The two hardware tiers do not depend on it while they
run.

The structure follows a published description of the Fermilab quench detection
system for the Mu2e solenoids. That description gives the block structure, the
channel types, the register names `CUR_DEP_THRESH`, `VALID_TIME` and
`DELAY_TIME`, the sample rate and the buffer size. It does not give the
arithmetic, the encodings, the protocols or the timing. Those are this design's
own choices, listed in [Where this design departs from or fills in the
source](#where-this-design-departs-from-or-fills-in-the-source).

## Block structure

```
                       Tier-3 SPI           magnet current word
                           |                        |
  +------------------------v------------------------v-----------------+
  | dqd_controller   sample tick (10 kHz), I, Idot, chassis trigger,  |
  |                  chassis clear, SPI fan-out, first-fault record   |
  |   DQD_DUMP_FIRE  DQD_PS_INHIBIT  DQD_SRD  indicators              |
  +--------^---------------------------------------------------------+
           | q1 q2 srd hw_flt dat_rdy first_ch      (backplane, x8)
  +--------+---------------------------------------------------------+
  | dqd_module (slot n)                                               |
  |  4 x adc_spi_master --> raw ch0..3 --+--> 8 x quench_channel --> q1/q2/srd
  |                                      |                            |
  |  4 x buck_unit (ch_a - g*ch_b|Idot) -+--> circ_buffer_ctrl --> SRAM
  |  spi_reg_slave <--> register file                                 |
  +-------------------------------------------------------------------+

  aqd_backplane_cpld: 7 x (trip, fault) modulated lines --> AQD_DUMP_FIRE,
                      AQD_PS_INHIBIT, AQD_FAULT (modulated)
```

`qps_top` instantiates the controller, `NMOD` modules and the AQD CPLD. The
ADCs, the SRAMs, the analog front ends and the Tier-3 computer lie outside the
logic, so their signals are ports of the top.

| File | Contents |
|---|---|
| `rtl/qd_pkg.sv` | channel-type enum, sample type, register map, SPI frame layout, indicator structs |
| `rtl/adc_spi_master.sv` | reads one 16-bit ADC word per sample tick |
| `rtl/buck_unit.sv` | one bucked channel |
| `rtl/quench_channel.sv` | threshold, validation and delay for one channel |
| `rtl/circ_buffer_ctrl.sv` | circular logger in external SRAM, freeze after trigger, read-back |
| `rtl/spi_reg_slave.sv` | register access over SPI |
| `rtl/dqd_module.sv` | one DQD module |
| `rtl/dqd_controller.sv` | DQD chassis controller |
| `rtl/aqd_backplane_cpld.sv` | AQD backplane CPLD |
| `rtl/qps_top.sv` | top level |

## Deciding that a channel has quenched

This is the core of the design, in `quench_channel`. Every sample of every
channel goes through three steps.

1. **Current-dependent threshold.** The threshold is
   `thr = CUR_DEP_THRESH + (slope * |I|) >> 16`, saturated at 0xFFFF. Here
   `|I|` is the magnitude of the magnet current word and `slope` is a Q0.16
   fraction. A coil's voltage noise and the residual left after bucking grow
   with current, so the threshold can rise with it. With `slope = 0` the
   threshold is fixed. The sample's magnitude is compared, so quenches of
   either polarity are seen.
2. **Validation.** The sample must be over the threshold for `VALID_TIME`
   consecutive samples (0.1 ms each). A sample back under the threshold
   restarts the count, which rejects noise spikes. `VALID_TIME = 0` behaves
   like 1.
3. **Delay.** Once the channel is validated, its quench signal rises
   `DELAY_TIME` samples later. It rises even if the voltage has dropped in the
   meantime. The signal then stays latched until a clear.

Number the first over-threshold sample 0. The quench signal then comes with
sample `max(VALID_TIME,1) - 1 + DELAY_TIME`. For example, with VALID_TIME = 3
and DELAY_TIME = 2 it comes with sample 4, so the quench must last 0.4 to 0.5 ms
before the line moves. Within one sample period the latency is fixed:

| Step | Clock cycles after the sample tick (10 MHz clock, `ADC_HALF = 2`) |
|---|---|
| ADC word in the FPGA | 33 x `ADC_HALF` = 66 |
| raw sample registered | +1 |
| bucked sample | +1 |
| channel quench signal, module line | +1 (69 cycles = 6.9 us) |
| controller output (`DQD_DUMP_FIRE` ...) | +1 |

## Bucking

The voltage across a coil segment during a current ramp is mostly inductive
(`L dI/dt`). This voltage can be far above the quench threshold. A *bucked*
channel removes it by subtraction:

```
bucked = ch[a] - (gain * ref) >>> 8        ref = Idot  or  ch[b]
```

The gain is signed Q8.8 (256 = 1.0), and the result saturates to 16 bits. Two
uses are possible:

* Subtract a neighbouring segment (`ref = ch[b]`). Both segments see the same
  ramp, so a quench in one of them shows up as an unbalance.
* Subtract the measured current derivative (`ref = Idot`), with the gain set to
  the inductance in ADC units.

Idot is formed in the controller as the difference of two consecutive current
samples, in counts per 0.1 ms, and broadcast to all modules with the current.

Each module has four bucked channels, numbered 4 to 7. They are set by the
register `BUCKSRC`: bits [1:0] select `a`, bits [3:2] select `b` and bit [4]
selects Idot as the reference. After reset, bucked channel `4+b` is
`ch[b] - ch[0]` at unity gain.

## Channel actions and chassis outputs

Every one of the 32 detectors in a chassis (8 per module) has an action type:

| Type | Module line | Controller output |
|---|---|---|
| `QUENCH1` | `q1` | `DQD_DUMP_FIRE` and `DQD_PS_INHIBIT` |
| `QUENCH2` | `q2` | `DQD_PS_INHIBIT` only |
| `SRD` (slow ramp down) | `srd` | `DQD_SRD` |
| `NO_ACTION` | none | none. The channel is only logged, for characterisation. |

The source names the four types and the two outputs. The mapping in the table
is this design's choice.

The controller obeys a module only if the module's bit in its `ENABLE` register
is set. All bits are set after reset. The outputs latch until a clear: a write
of bit 0 to the controller's `CTRL` register. That write also sends
`chassis_clear` to every module. A module can also be cleared on its own by its
`CTRL` bit 1 or its front-panel RST button. The TRIP_Q1, TRIP_Q2 and TRIP_SRD
buttons set the module's lines directly, for tests.

The controller keeps a **first-fault record** (`FIRST`): valid [15],
channel-known [12], channel [10:8], type [5:4] and module [2:0]. It holds the
first module whose line rose, with that module's first tripped channel. A tie
goes to the lowest-numbered module, and within a module to QUENCH1 over
QUENCH2 over SRD.

Each module also raises `hw_flt` when a channel with an action type reads a
full-scale code (0x7FFF or 0x8000). An open or overdriven input produces such a
code. This flag does not trip anything. The controller reports it on its
HW_FLT indicator.

## Circular buffer

Each module logs its 8 channels, 4 raw and 4 bucked, into its own external
asynchronous SRAM. The buffer holds `DEPTH` = 60 000 samples per channel, which
is 6 s at 10 kHz. The words are interleaved: channel `c` of slot `s` is at
`s*8 + c`, so 480 000 words per module and a 19-bit address. After each
sample, 8 single-cycle writes follow.

* Setting `LOG_ARM` (module `CTRL` bit 0) starts the buffer at slot 0.
* The `chassis_trig` signal rises whenever any controller output is latched. A
  local action-channel trip also counts. The logger then records `POST` =
  30 000 more samples, counting the first sample that sees the trigger, and
  stops. At that point `DAT_RDY` rises and the slot of the trigger sample is
  readable in `TRIG_L`/`TRIG_H`.
* The trigger is seen by the first sample *after* the one that made the line
  rise. The frozen buffer therefore holds 30 000 samples from the trigger on
  and 30 000 before it. The oldest sample is in slot `(trig + POST) mod DEPTH`.
* To read out, write `RDADDR_L`/`RDADDR_H`, then read `RDDATA` repeatedly. The
  address steps by one after each read. Writing `CTRL` bit 2 sets `DAT_SVD` to
  tell the operator the data are saved. Clearing `LOG_ARM` returns the logger
  to idle.

The controller's DATA indicator lights when every enabled module has `DAT_RDY`.

## Register access

The Tier-3 drives a single SPI bus into the controller. The controller buffers
it onto the backplane, so every module sees every frame. The bus runs in SPI
mode 0 with SCLK at most clk/8. Each frame is 32 bits, MSB first:

```
[31] rw (1 = read)   [30:27] device (0-7 = module slot, 8 = controller)
[26:16] register     [15:0]  write data / read data returned on MISO
```

In a read frame, the addressed device shifts the register value out during
the last 16 bits. Other devices keep MISO at 0, and the MISO lines are ORed.

Module registers, 16 bits each (channel `c` uses `c*8 + offset`):

| Index | Name | Meaning |
|---|---|---|
| c*8+0 | TYPE | action type: 0 NO_ACTION, 1 QUENCH1, 2 QUENCH2, 3 SRD |
| c*8+1 | CUR_DEP_THRESH | threshold at zero current (ADC counts) |
| c*8+2 | SLOPE | threshold increase per count of \|I\|, Q0.16 |
| c*8+3 | VALID_TIME | samples |
| c*8+4 | DELAY_TIME | samples |
| c*8+5 | BUCKSRC | channels 4-7 only (see Bucking) |
| c*8+6 | BUCKGAIN | channels 4-7 only, signed Q8.8 |
| c*8+7 | LIVE | read only: latest sample |
| 0x40 | CTRL | [0] LOG_ARM, [1] clear (pulse), [2] set DAT_SVD |
| 0x41 | STATUS | [0] q1 [1] q2 [2] srd [3] hw_flt [4] LOG_ARM [5] logging [6] triggered [7] DAT_RDY [8] DAT_SVD |
| 0x42/0x43 | RDADDR_L/H | read-back address |
| 0x44 | RDDATA | SRAM word at the read-back address, then address + 1 |
| 0x45/0x46 | TRIG_L/H | slot of the trigger sample |
| 0x47 | FIRST | [3] valid, [2:0] first channel to trip |
| 0x48 | ID | 0xD0D1 |
| 0x49 | TRIPS | [7:0] channel trips, [15:8] channels over threshold |

Controller registers: 0x00 ENABLE, 0x01 CTRL ([0] clear), 0x02 STATUS
([0] dump fire, [1] PS inhibit, [2] SRD, [4] DATA, [5] HW_FLT), 0x03 FIRST,
0x04 ID = 0xDC01.

After reset every channel is NO_ACTION with threshold 0x7FFF, VALID_TIME 1 and
DELAY_TIME 0. A chassis therefore does nothing until it is configured.

## Front-panel indicators

The indicator names are those printed on the hardware panels. Their behaviour
here is inferred from the names.

| Module | Meaning here |
|---|---|
| MOD_HB | toggles every `HB_SAMPLES` samples (0.5 s) |
| SPI_LINK | a frame for this module arrived in the last second |
| HW_FLT | hardware fault latched |
| SRD, Q1_FF, Q2_FF | SRD / QUENCH1 / QUENCH2 line latched |
| LOG_ARM, DAT_RDY, DAT_SVD | logger armed / frozen / saved |

Controller: QUENCH (dump fire or PS inhibit), SRD, DATA, CTRL_HB, SPI_LINK and
HW_FLT.

## AQD backplane CPLD

Each AQD module sends a trip line and a fault line. Each line toggles at
10 kHz while the module is healthy. The CPLD counts a line as lost when it
shows no edge for `LOSS_CYCLES` clocks (two modulation periods). Because of
this a cut wire, a dead module or a stuck driver reads as a trip. A loss
latches until `reset`.

The outputs `AQD_DUMP_FIRE`, `AQD_PS_INHIBIT` and `AQD_FAULT` toggle at 10 kHz
while no selected module is tripped. They stop, held low, when one is. The
firmware parameters `DUMP_MASK`, `INHIBIT_MASK` and `FAULT_MASK` choose which
modules act on which output. For one grace period after reset, lines that have
not toggled yet are not flagged.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `NMOD` | 8 modules (32 individual channels) | source |
| channels per module | 4 individual + 4 bucked | source |
| `SAMPLE_HZ` | 10 000 | source |
| ADC width | 16 bits | source |
| `DEPTH` | 60 000 samples per channel | source |
| `AQD_NMOD` | 7 | source |
| AQD modulation | 10 kHz | source |
| `CLK_HZ` | 10 MHz | this design |
| `POST` | 30 000 | this design |
| `ADC_HALF` | 2 (ADC SCLK 2.5 MHz) | this design |
| `HB_SAMPLES` | 5 000 | this design |
| `LOSS_CYCLES` | 2 modulation periods | this design |

## Where this design departs from or fills in the source

The source gives these points:

* the chassis structure
* the channel counts
* the four action types
* the register names for threshold, validation and delay
* bucking against a channel or Idot
* the 10 kHz rate, the 16-bit ADCs, SPI links and the 60 kS/channel buffer in
  external SRAM that stops after a quench
* the controller's aggregation into DUMP_FIRE and PS_INHIBIT
* the AQD CPLD's modulated inputs and outputs

Everything below is this design's own choice:

* the linear form of the current-dependent threshold and its second register
  (`SLOPE`)
* comparing the magnitude of the sample
* counting validation as consecutive samples
* the delay running to the end once started
* latching until a clear
* the bucking arithmetic and gain format
* the mapping of action types to outputs, and the separate `DQD_SRD` output
* the SPI frame format, the register map and the reset values
* the magnet current entering as a parallel 16-bit word at the controller,
  with Idot computed there
* `POST`, the SRAM layout and the read-back path
* the hardware-fault criterion of the DQD module
* the meanings of the indicators
* the enable mask and the first-fault record format
* the AQD line supervision scheme and masks
* active-high outputs: a failsafe, de-energise-to-trip polarity would sit in
  the output drivers

These parts are not built:

* the analog front end (divider, filter and amplifiers)
* the ADCs, digital isolators, SRAM and EEPROM: the testbenches model the
  ADCs, SRAM and Tier-3 SPI master behaviourally
* the AQD's analog modules
* the DIO link between DQD and AQD, whose signals are not described
* the Tier-3 software

The AQD CPLD shares the DQD's clock in `qps_top` only for convenience. In the
real system the two chassis are separate.

## Simulation

Every testbench checks itself, stops at a watchdog, and prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb rtl/qd_pkg.sv tb/tb_qps_top.sv \
          --top-module tb_qps_top -Mdir obj && obj/Vtb_qps_top
```

Replace `tb_qps_top` by any testbench below. `rtl/qd_pkg.sv` must come first.

| Testbench | What it covers |
|---|---|
| `tb_adc_spi_master` | random and extreme ADC words, latency, SCLK count, start while busy |
| `tb_buck_unit` | 400 random cases against an integer reference, saturation |
| `tb_quench_channel` | random streams against a reference that finds the trip sample; spikes, VALID/DELAY = 0, current-dependent threshold, test trip |
| `tb_circ_buffer_ctrl` | 16-slot buffer: freeze after POST, trigger slot, full read-back, no writes after freeze |
| `tb_spi_reg_slave` | random reads and writes against a shadow copy; foreign frames ignored |
| `tb_dqd_module` | one module, 32-slot buffer: all action types, exact trip sample, spike rejection, Idot bucking, full SRAM read-back over SPI, HW_FLT, buttons |
| `tb_dqd_controller` | tick period, current and Idot, output mapping, latching, clear, first fault, enable mask, indicators |
| `tb_aqd_backplane_cpld` | line loss (low and stuck high), masks, latching, reset |
| `tb_qps_top` | end to end with 3 modules, a 32-slot buffer and a 2 MHz clock. It runs every mechanism above at least once, counts each, and fails if one never happened. |
| `tb_qps_full` | the full default configuration (8 modules, 60 kS buffers, 10 MHz): one quench from configuration to buffer freeze (30 000 post-trigger samples) and read-back. About one minute. |

The testbenches use the behavioural models `tb/adc_model.sv`,
`tb/sram_model.sv` and `tb/spi_host.sv`.

## Size

With the default parameters, coarse synthesis of `qps_top` gives about 11 500
word-level cells and 12 700 flip-flops. Most of this is the eight module
register files. The SRAM is external.
