// detector_id_logic: pulse-width code that names the active detector.
//
// Every control pulse starts the edge_detector of its channel, and that
// detector emits a pulse whose width is the channel's identification width
// (20, 40, 60 and 80 cycles for channels 0..3 by default). The N PWM pulses
// are combined by an N-input XOR and the result is delayed by id_delay cycles
// (20 by default) to form the identification pulse sent to the digitizer.
//
// The XOR works as an anti-coincidence fan-in. For a single channel it
// passes that channel's pulse unchanged. When two control pulses start in the
// same cycle, the XOR output is LOW until the shorter code ends, so the pulse
// appears shifted later. When they start a cycle or two apart, the XOR output
// splits into several pulses. In both cases offline analysis sees a malformed
// code and can reject the summed event.
//
// Timing: a control pulse rising in cycle c gives a PWM pulse from c+1 for
// id_width[i] cycles, and an identification pulse from c+1+id_delay.
// The unit structure and the settings follow the paper; the single XOR
// reduction for arbitrary N and the generic widths are this design's
// generalisation of the four-channel case.
module detector_id_logic #(
  parameter int unsigned N_CH      = 4,
  parameter int unsigned CNT_W     = 16,
  parameter int unsigned DLY_W     = 8,
  parameter int unsigned MAX_DELAY = 255
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_CH-1:0]            control,
  input  logic [N_CH-1:0][CNT_W-1:0] id_width,
  input  logic [DLY_W-1:0]           id_delay,
  output logic [N_CH-1:0]            pwm,
  output logic                       id_pulse
);

  logic id_fanin;  // XOR gate output, before the delay

  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    edge_detector #(.CNT_W(CNT_W)) u_pwm (
      .clk, .rst_n, .width(id_width[i]), .in_sig(control[i]), .out_sig(pwm[i])
    );
  end

  assign id_fanin = ^pwm;

  delay_unit #(.MAX_DELAY(MAX_DELAY), .DLY_W(DLY_W)) u_id_delay (
    .clk, .rst_n, .delay(id_delay), .in_sig(id_fanin), .out_sig(id_pulse)
  );

endmodule
