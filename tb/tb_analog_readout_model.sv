// tb_analog_readout_model: behavioural model of the analog side of the
// multiplexer, for testbenches only.
//
// It stands for the delay line, the signal amplifier/copier, the analog
// switches and the summing fan-in, with one integer sample per clock cycle.
// When detector i fires (fire[i] HIGH for one cycle), its anode pulse reaches
// the switch input PULSE_DELAY cycles later (the 270 ns cable delay of the
// prototype is 54 cycles). The pulse then decays linearly from amp[i] to 0
// over PULSE_LEN cycles. original[i] is that delayed pulse. fanin_out is the
// inverted sum of the pulses whose switch control is HIGH in that cycle, as
// an inverting summing amplifier behind SPST switches would give. Switch
// on-resistance, charge injection and noise are not modelled.
module tb_analog_readout_model #(
  parameter int N_CH        = 4,
  parameter int PULSE_DELAY = 54,
  parameter int PULSE_LEN   = 100
) (
  input  logic            clk,
  input  logic [N_CH-1:0] fire,
  input  int              amp [N_CH],
  input  logic [N_CH-1:0] control,
  output int              original [N_CH],
  output int              fanin_out
);

  longint cyc = 0;
  longint fired_at [N_CH];
  int     fired_amp [N_CH];

  initial for (int i = 0; i < N_CH; i++) begin
    fired_at[i] = -1000000;
    fired_amp[i] = 0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = 0; i < N_CH; i++)
      if (fire[i]) begin
        fired_at[i]  <= cyc;
        fired_amp[i] <= amp[i];
      end
  end

  always_comb begin
    longint age;
    fanin_out = 0;
    for (int i = 0; i < N_CH; i++) begin
      age = cyc - fired_at[i] - PULSE_DELAY;
      original[i] = (age >= 0 && age < PULSE_LEN) ? int'(fired_amp[i] * (PULSE_LEN - age) / PULSE_LEN) : 0;
      if (control[i]) fanin_out -= original[i];
    end
  end

endmodule
