// adc_trigger_logic: digitizer external trigger.
//
// The N control pulses are ORed into one trigger pulse, which a delay_unit
// delays by trig_delay cycles (110 by default) so that the digitizer record
// starts in step with the multiplexed pulse and the identification pulse.
// The trigger is HIGH for as long as any control pulse is, delayed by
// trig_delay.
//
// Timing: trigger(t) = |control(t - trig_delay).
// The OR fan-in and the delay follow the paper; the delay-line construction is
// that of delay_unit.
module adc_trigger_logic #(
  parameter int unsigned N_CH      = 4,
  parameter int unsigned DLY_W     = 8,
  parameter int unsigned MAX_DELAY = 255
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_CH-1:0]  control,
  input  logic [DLY_W-1:0] trig_delay,
  output logic             trigger
);

  logic trig_fanin;  // OR gate output, before the delay

  assign trig_fanin = |control;

  delay_unit #(.MAX_DELAY(MAX_DELAY), .DLY_W(DLY_W)) u_trig_delay (
    .clk, .rst_n, .delay(trig_delay), .in_sig(trig_fanin), .out_sig(trigger)
  );

endmodule
