# Switching-gate multiplexer logic for pulse-mode radiation detectors

Large detector arrays are expensive to read out when every detector needs its own
digitizer channel. Multiplexing helps, but schemes that sum or encode all detector
signals also sum the noise of every idle detector into the output. A switching-gate
multiplexer avoids that. Each detector's analog pulse passes through its own analog
switch, and all switch outputs feed one summing amplifier (the fan-in). Only the
switch of the detector that fired first is closed, for a fixed time. All other
detectors are disconnected, so their noise never reaches the fan-in. A second
digitizer channel receives a logic pulse whose width says which detector fired.
N detectors therefore need only two ADC channels: the multiplexed pulse and the
identification pulse.

This repository holds the synthesizable logic of that scheme. It is the part that
runs on an FPGA next to the analog electronics, clocked at 200 MHz (1 cycle = 5 ns).
It takes one discriminator pulse per detector and produces:

* `control[N-1:0]`: one switch-control pulse per channel (650 cycles = 3.25 µs
  by default), HIGH only for the first detector of an event;
* `id_pulse`: the delayed, pulse-width-coded detector number (20/40/60/80 cycles
  for detectors 0..3), sent to the second ADC channel;
* `trigger`: the delayed external trigger of the digitizer.

Defaults are those of a four-channel prototype built for four NaI(Tl) scintillators.

## Signal chain around the logic

Each detector's anode pulse is inverted (gain −1). It then splits two ways. One copy
goes to a leading-edge discriminator, whose LVDS output is received by the FPGA. The
other copy goes through an analog delay line (270 ns in the prototype) and an
adjustable-gain buffer to the analog switch of its channel. The delay makes the
pulse reach its switch only after the logic has closed that switch. The switch
outputs meet in an inverting summing amplifier, whose output is ADC channel 0.
None of these analog parts is in this RTL. `led_in[i]` is the discriminator output
after the FPGA's differential input buffer, and `control[i]` drives switch *i*.

## First-arrival gating (`switch_trigger_logic`)

This unit is the heart of the design and the part most worth understanding.

```
led_in[i] ─► pulse_shaper (in_width) ─ gate[i] ─┬───────────────► AND ─► pulse_shaper (out_width) ─► control[i]
                                                 │                 ▲
                                   OR of all gate[] ─► edge_detector (edge_width) ─ first_edge ─┘ (to every AND)
```

1. **Input stage.** Every discriminator pulse, however short, is stretched into
   a `gate` of `in_width` cycles (650).
2. **First-arrival pulse.** The gates are ORed. The OR rises only when it goes
   from "no channel open" to "some channel open", which happens at the first
   detector of an event. That rising edge makes a `first_edge` pulse of
   `edge_width` cycles (3 cycles, 15 ns).
3. **Selection.** Each channel ANDs its own gate with `first_edge`. A channel
   whose gate is already open during those few cycles passes the pulse, and its
   output-stage shaper produces the control pulse (`out_width` = 650 cycles).

Three consequences follow:

* **Blocking.** A detector that fires while the OR is already HIGH creates no new
  edge, so it never gets a control pulse. Its own gate still opens and keeps the OR
  HIGH. A later detector can therefore be blocked even after the first detector's
  gate has closed, as long as some blocked detector's gate is still open (pile-up
  extends the dead time). The next event is accepted only after every gate has
  closed.
* **Coincidence window.** Two detectors whose gates both rise while `first_edge`
  is HIGH are both passed, and the fan-in output is then their sum. With the
  default 3-cycle edge, a second discriminator pulse first sampled up to three
  clock edges after the first one is passed. In time, that is a separation below
  15–20 ns, depending on where the first pulse falls within a clock period.
  The control pulse of the later channel starts 0, 1 or 2 cycles after the first.
* **Latency.** If edge 0 is the first clock edge that samples `led_in[i]` HIGH,
  `gate[i]` is HIGH after edge 0, `first_edge` after edge 1, and `control[i]` after
  edge 2, for `out_width` cycles. The analog delay line must cover these 15 ns plus
  the discriminator and I/O delays. The prototype used 270 ns.

## Identification code (`detector_id_logic`)

Each control pulse starts an `edge_detector` whose width is the channel's code
(`id_width[i]`, by default 20·(i+1) cycles). The N code pulses go through a
single N-input XOR, then a `delay_unit` (`id_delay`, 20 cycles), to `id_pulse`.

For an ordinary event exactly one code pulse exists, and the XOR passes it
unchanged. Its width names the detector. The XOR was chosen instead of an OR
because it marks the coincident events that the gating let through:

* **Same start** (both control pulses start on the same cycle): the XOR is LOW
  while both codes are HIGH. What remains is one pulse that starts late by the
  shorter code's width. For channels 0 and 1 that is a 20-cycle pulse, 20 cycles
  late.
* **Starts one or two cycles apart**: the XOR output splits into a short pulse and
  a second, later pulse.

Offline, any record whose identification channel does not show exactly one pulse
of a valid width at the expected position is a summed event and can be
discarded. The top-level testbench decodes the code exactly this way.

Timing: `id_pulse` rises after edge `3 + id_delay` (edge 0 as above) and lasts
`id_width[i]` cycles.

## Digitizer trigger (`adc_trigger_logic`)

The control pulses are ORed and delayed by `trig_delay` (110 cycles). `trigger`
rises after edge `2 + trig_delay` and stays HIGH as long as any control pulse,
delayed by the same amount. The delay places the start of the record after the
switching transient of the analog switch (charge injection makes a spike when it
closes). Because the identification pulse is delayed by only 20 cycles, a
digitizer used with these default delays must record some pre-trigger samples.
Otherwise it has to be set up so that both the code and the analog pulse fall
inside its record. Choose `id_delay`, `trig_delay` and the analog delay together
for the cabling at hand.

## Settings (`config_regs`)

Every width and delay is a run-time register, loaded with the prototype values
at reset, so the logic works without any host access. The host port is a plain
one-cycle write strobe with address and data; read-back is combinational.

| address | register | reset | unit |
|---|---|---|---|
| 0 | input-stage gate width `in_width` | 650 | cycles |
| 1 | first-arrival edge width `edge_width` | 3 | cycles |
| 2 | control pulse width `out_width` | 650 | cycles |
| 3 | identification delay `id_delay` (8 bit) | 20 | cycles |
| 4 | trigger delay `trig_delay` (8 bit) | 110 | cycles |
| 8+i | identification width of channel i `id_width[i]` | 20·(i+1) | cycles |

Widths are 16 bits. A width of 0 disables that shaper. Delays above 255 cannot be
written; the delay lines are 255 stages deep (`mux_pkg::MAX_DELAY`).

## Building blocks

* `pulse_shaper`: samples its input on every clock edge. A LOW→HIGH change loads
  a down-counter with `width`, and the output is HIGH while the counter is
  non-zero. An edge during a running pulse is ignored, except on the clock edge
  where the pulse ends: there it starts the next pulse back-to-back.
* `edge_detector`: the same behaviour, kept as a separate unit because the design
  uses it in a different role (short marker pulses and code pulses).
* `delay_unit`: a 255-stage shift register with a tap multiplexer. Its output is
  the input from exactly `delay` cycles earlier, so pulse widths are preserved.
  Changing the delay takes effect immediately.
* `mux_pkg`: widths, reset values, the `mux_cfg_t` settings struct and the
  register address enum.
* `switching_gate_mux`: the top. It connects the registers and the three units.

The top's parameter `N_CH` (default 4) sets the channel count. The register map
holds up to 8 channels. For more than 4, the default codes continue in 20-cycle
steps.

## How this RTL relates to the original design

The published prototype was built from the vendor's graphical block library on
a commercial FPGA board. The block diagrams, the gate types, the chaining and every
numeric setting (650, 3, 650, 20/40/60/80, 20, 110 cycles at 200 MHz) follow that
design. The following are choices of this implementation, because the original
does not specify them:

* the inside of the pulse shaper, edge detector and delay unit (counter and
  shift-register construction), their one-cycle latency and their retrigger
  behaviour;
* no extra input synchroniser: the input shaper's sampling register is the first
  flip-flop, as in the original description (put the pin's input register in the
  I/O cell to limit metastability);
* a synchronous active-low reset;
* the register file, its host port, its address map and the 8-bit delay registers;
* generalising the XOR fan-in and the code widths to N channels.

Not included:

* the analog electronics, the LVDS input buffers (an FPGA primitive) and the
  digitizer;
* the coincidence logic (a 10-cycle window) that the original authors added
  only for a timing-resolution measurement with two independent one-channel
  multiplexers. That measurement needs channels that gate independently. This
  top shares one first-arrival circuit across its channels. Two instances with
  `N_CH = 1` gate independently (see `tb_workload_two_single_channel`), but the
  coincidence logic would still have to be added;
* the N-to-1 variant that was suggested but not built: it would add the delayed
  identification pulse into the fan-in behind the analog pulse instead of
  sending it to a second ADC channel.

## Testbenches and simulation

Each unit has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops through a watchdog if it hangs.

| testbench | what it checks |
|---|---|
| `tb_pulse_shaper`, `tb_edge_detector` | every cycle against an event-level reference, for widths 0–650, random input pulses, ignored retriggers |
| `tb_delay_unit` | output = input from `delay` cycles ago, for fixed, maximum and changing delays |
| `tb_switch_trigger_logic` | lone events, second detector 0…6 cycles later (window edge), blocking, pile-up, refire; prototype and short widths |
| `tb_detector_id_logic` | each code alone, all same-start pairs (shifted pulse), one/two-cycle offsets (split pulse), random cases |
| `tb_adc_trigger_logic` | trigger = OR of controls delayed, 650-cycle pulse appears 110 cycles later |
| `tb_config_regs` | reset values, random writes against a shadow copy, read-back |
| `tb_switching_gate_mux` | whole design at its default settings, see below |
| `tb_workload_four_detectors` | 1200 random firings on four detectors at the default settings, against an event-level prediction |
| `tb_workload_two_single_channel` | two one-channel instances recording photon pairs, independent gating, no added time offset |

`tb_switching_gate_mux` runs the top unchanged. A behavioural model
(`tb/tb_analog_readout_model.sv`) stands for the delay line, switches and fan-in,
with one integer sample per clock and a linearly decaying pulse. The testbench plays
lone events on every channel, blocked events (as in an event where detector 2
fires before 0 and 1), same-start and offset coincidences, a pile-up, and a
run with rewritten settings. For each event it checks the integrated fan-in charge
(only the first detector's pulse, or the sum for a coincidence), decodes the
identification pulse, and checks control, code and trigger timing to the cycle.
It fails if any of these cases never occurs.

`tb_workload_four_detectors` runs a long random sequence: four detectors fire at
random times and heights, and every seventh firing or so gets a partner on another
detector within 0–6 cycles. Before simulating, the testbench derives every control
pulse from the firing list alone, using the event rules of "First-arrival
gating". It then requires an exact match of all control pulses, one trigger per
event, a correct code for every single-detector event, a flagged code for every
two-detector event, and the total fan-in charge.

To run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/mux_pkg.sv \
    tb/tb_switching_gate_mux.sv --top-module tb_switching_gate_mux -Mdir obj
./obj/Vtb_switching_gate_mux
```

Replace the testbench name to run another. All testbenches finish in well under a
second. To lint the RTL:
`verilator --lint-only -Wall -y rtl rtl/mux_pkg.sv rtl/switching_gate_mux.sv`.
The remaining lint warnings are expected. One is a constant comparison in
`delay_unit` (the clamp can never fire with the default 8-bit delay). The other is
the deliberately open `pwm` observation port of `detector_id_logic`.

## Trust and limits

The logic was verified in simulation only, cycle by cycle, against expectations
derived from the timing rules above. It has not been run on hardware. The
coincidence window and all latencies are properties of this implementation. The
original firmware blocks may differ by a cycle. The analog model in the testbench
is idealised: no switch resistance, charge injection, offsets or noise.
