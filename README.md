# A run-time reconfigurable TH-PPM IR-UWB receiver

Impulse-radio ultra-wideband (IR-UWB) sends information as trains of very
short pulses instead of a modulated carrier. With no mixer and no synthesiser
on the receive path, almost the whole radio can sit behind an ADC as digital
logic: the "mostly digital" radio. That makes it cheap to reconfigure. Here the
receiver is not rebuilt for each application. Its key timing values are ordinary
inputs that can be changed while it runs:

* **Tc**, the length of a time slot ("chip") in clock cycles;
* **Nc**, the number of time slots in a frame;
* the **time-hopping (TH) code**, the sequence that says which slot of each
  frame carries a given user's pulse.

Changing Tc changes the data rate. Because every slot carries one decided bit,
the chip rate is `f_clk / Tc` bits per second. Changing Nc and the code changes
the multi-user time-hopping pattern. This RTL implements the digital receiver:
a time-hopping, pulse-position-modulated (TH-PPM) demodulator whose data rate
and TH code can be reconfigured. It is written in SystemVerilog and follows a
published VHDL receiver of this kind, with the same port list and the same four
processing blocks.

## Signal model

The receiver runs on a grid of slots and frames:

```
frame  = Nc slots                         slot = Tc clock cycles
|<-------------------- frame ------------------->|
| slot 0 | slot 1 | ... | slot c_j | ... | Nc-1 |      c_j = TH code of frame j
          |<- Tc ->|
          | pos 0  | pos 1 |                          PPM: pulse early = 0, late = 1
          |0..Tc/2-1|Tc/2..Tc-1|
```

A bit is sent by placing a pulse in the first half of the slot (position 0,
bit 0) or in the second half (position 1, bit 1). The ADC delivers one signed
32-bit sample per clock on `signal_recu`. The receiver decides every slot, and
it also picks out the slot that the time-hopping code names for each frame.

## The processing chain

```
signal_recu ─► correlation ─outm_0/outm_1─► decision ─bit─► th_discrimination ─► out/rythme_*_chip
                                                              ▲                  └► out/rythme_*_trame
 load/unload/lg/code ─► th_code_management ──code_out_j───────┘
 Tc, Nc, sig_reconf ─► reconf_control ──Tc, Nc in force──► all blocks
```

| block | file | what it does |
|---|---|---|
| correlation | `rtl/correlation.sv` | Squares each sample and adds it to the energy of the PPM position the cycle belongs to. At the end of each slot it publishes both energies (`outm_0`, `outm_1`, 32 bits, saturating). |
| decision | `rtl/decision.sv` | In the first cycle of each slot it compares the two energies and registers the bit. Later position wins; a tie gives 0. |
| th_discrimination | `rtl/th_discrimination.sv` | Emits every slot's bit at chip rate. Also emits the bit of the slot whose index equals the frame's TH code, at frame rate. Each output comes with a one-cycle strobe (`rythme_*`). |
| th_code_management | `rtl/th_code_management.sv` | Holds the TH code in a 256 x 8 memory and gives the current frame's value. It steps once per frame and wraps after `lg_code` frames. |
| reconf_control | `rtl/reconf_control.sv` | Holds the Tc and Nc in force. It takes the requested values on `sig_reconf` and applies them at the next frame boundary. |
| top | `rtl/reconfigurable_receiver.sv` | Connects the blocks. |

Shared items are `rtl/uwb_pkg.sv` (widths, types, and the Tc/Nc clamping
functions) and `rtl/slot_timer.sv`, the slot/frame counter that each block
instantiates.

**Energy detection.** The correlator squares the sample, so it measures energy
instead of correlating against a stored pulse shape. The source only says that
the receiver correlates; it gives no template waveform. A square-law detector
works for any pulse shape and either polarity. UWB pulses such as Gaussian
derivatives have no DC content, so correlating them against a flat window would
give nothing. If a specific pulse template is wanted, replace the square with
`sample * template[cnt]` in `correlation.sv`.

## Timing: which bit comes out when

Keeping the outputs aligned is the least obvious part of the design. Each block
counts slots for itself from the same clock, reset, enable, Tc and Nc, and all
the counters run in step. The source's block diagram feeds Tc to every block,
and this design follows that. No valid signals pass between the blocks. Each
stage knows when to act from its own counter:

| cycle | event |
|---|---|
| last cycle of slot s | correlator adds the last sample; at the clock edge `outm_*` take slot s's energies |
| 0 of slot s+1 | `decision` compares them; `out_decision` for slot s valid from cycle 1 |
| 1 of slot s+1 | `th_discrimination` takes the bit of slot s ("take" cycle) |
| 2 of slot s+1 (0 of s+2 if Tc = 2) | `rythme_out_recepteur_chip` pulses; `out_recepteur_chip` holds slot s's bit |

So the chip output trails the end of its slot by two clock cycles, and the
strobes are exactly Tc cycles apart. The frame-rate strobe arrives in the same
cycle as the chip-rate strobe of the selected slot.

Because the last slot of a frame (index Nc-1) is judged during the first slot
of the next frame, `th_discrimination` keeps two values. One is the code of the
current frame and of the frame before, each sampled in the first cycle of its
frame. The other is the index of the slot that has just ended. Both matter when
a reconfiguration changes Nc at that very boundary. During the first slot after
enable rises no slot has ended yet, so nothing is output then. A code value of
Nc or more selects no slot, so that frame produces no frame-rate bit.

Tc must be at least 2 (two PPM positions), and Nc at least 1. Smaller values on
the inputs are treated as 2 and 1.

## Reconfiguration

**Data rate (Tc, Nc).** The MAC places new values on `Tc` and
`nb_Tc_par_trame_TH` and raises `sig_reconf` for at least one cycle. The values
present in the last cycle of the request are kept. They take effect at the end
of the current frame, and every block switches in the same cycle, so no slot is
cut short and reception continues without a restart. If the receiver is
disabled (`Renable` low), the new values apply one cycle after the request. At
reset Tc = 16 and Nc = 8 (parameters `DEFAULT_TC`, `DEFAULT_NC` of
`reconf_control`).

**TH code.** Raise `load_code` for one cycle per value, with the value on
`code_j_data`. `lg_code` is read with the first value. After the last value,
the code is complete. It is used from the next frame start, beginning with
value 0. `unload_code` discards the code so that a new one can be loaded. While
no complete code is held, the code is 0, meaning the pulse is expected in slot
0 of every frame. Loading works with the receiver running or stopped. Further
load strobes are ignored until the code is unloaded.

## Ports of the top, `reconfigurable_receiver`

| port | dir | width | meaning |
|---|---|---|---|
| CLK, RESET | in | 1 | clock; synchronous active-high reset |
| Renable | in | 1 | receiver enable; low holds all counters at 0 |
| signal_recu | in | 32 | signed ADC sample, one per clock |
| load_code, unload_code | in | 1 | TH code write strobe / discard |
| lg_code, code_j_data | in | 8 | TH code length / value |
| Tc, nb_Tc_par_trame_TH | in | 8 | requested slot length / slots per frame |
| sig_reconf | in | 1 | apply the requested Tc/Nc |
| out_recepteur_chip, rythme_out_recepteur_chip | out | 1 | every slot's bit and its strobe |
| out_recepteur_trame, rythme_out_recepteur_trame | out | 1 | TH-selected slot's bit and its strobe |

The names and widths are those of the original VHDL entity. Its
`integer range 0 to 255` inputs become 8-bit vectors.

## What follows the original and what does not

These follow the source:

* the port list;
* the four blocks and how they are connected;
* the 32-bit sample and correlation widths;
* the 8-bit range of Tc, Nc, the code length and the code values;
* the chip-rate and frame-rate outputs with their rhythm strobes;
* D = 1/Tc;
* reconfiguration by the MAC while the receiver runs.

These are this design's own choices:

* square-law energy detection;
* the PPM windows (the two halves of a slot) and the bit mapping;
* the rule that the frame-rate output is the slot selected by the code;
* the cycle-level pipeline timing;
* the load/unload protocol, and the zero code while no code is loaded;
* applying reconfiguration at the frame boundary, and the power-up Tc and Nc;
* the clamping of Tc < 2 and Nc = 0;
* synchronous reset.

Not included:

* the ADC, the RF front end and the transmitter (pulse waveform memory and DAC);
* the MAC or host that drives the parameters;
* the other parameters a full system would also reconfigure: pulse waveform,
  amplitude, duration and sampling rate.

The testbenches generate the received signal themselves.

Size after generic synthesis of the top: about 190 word-level cells, 280
flip-flops and a 2048-bit code memory. The published implementations ran at
50 MHz (0.35 um ASIC), 63 MHz (Spartan III) and 104 MHz (Virtex 5). At 50 MHz
the chip rate ranges from 25 Mbit/s (Tc = 2) down to 196 kbit/s (Tc = 255).

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the block
against a model written independently in the testbench, checks the cycle on
which outputs appear, and ends with a `TB_RESULT checks=N failures=M` line.

* `tb_correlation`: random samples over odd, even, extreme (255) and clamped
  slot lengths. Checks the window energies, saturation, and that outputs hold
  for a whole slot.
* `tb_decision`: decision timing, the tie rule, and hold during the slot.
* `tb_th_discrimination`: strobe timing at 1/Tc and 1/(NcTc), code selection,
  codes out of range, and Nc = 1.
* `tb_th_code_management`: loading with gaps, the 255-value code, wrap, unload,
  length 0, and ignored extra loads.
* `tb_reconf_control`: random requests against a frame-grid model.
* `tb_reconfigurable_receiver` (end to end, at the default sizes): a TH-PPM
  transmitter and channel model with noise, and a cycle-accurate model of the
  grid, the code memory and the reconfiguration rule. The run covers start-up
  with no code, loading a code while receiving, four rate and frame-size
  changes while receiving, replacing the code, out-of-frame code values,
  saturating pulses, reconfiguring while stopped with clamped values, and a
  restart. It counts each of these and fails if any never happened. It runs in
  well under a second.
* `tb_workload_rates`: the receiver started from reset at each of six
  configurations, from the fastest (Tc = 2) to the slowest (Tc = 255, Nc = 255,
  65025 cycles per frame), with TH codes of 1 to 255 values. It checks every
  chip-rate and frame-rate bit and the exact cycle of every strobe, so one bit
  is delivered every Tc cycles.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_reconfigurable_receiver \
    rtl/uwb_pkg.sv rtl/slot_timer.sv rtl/correlation.sv rtl/decision.sv \
    rtl/th_code_management.sv rtl/th_discrimination.sv rtl/reconf_control.sv \
    rtl/reconfigurable_receiver.sv tb/tb_reconfigurable_receiver.sv
./obj_dir/Vtb_reconfigurable_receiver
```

The testbenches use only `$urandom` for stimulus. The design uses
two-state-safe resets for every register that is read; the code memory is not
reset, and it is never read before it has been written.
