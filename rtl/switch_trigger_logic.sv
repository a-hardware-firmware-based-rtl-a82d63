// switch_trigger_logic: first-arrival gating of N detector channels.
//
// Each discriminator (LED) pulse is stretched by an input-stage pulse_shaper
// into a fixed-width gate (650 cycles by default). The gates are ORed; an
// edge_detector turns the LOW-to-HIGH transition of the OR into a short
// "first arrival" pulse (3 cycles = 15 ns by default). Each channel's gate is
// ANDed with that pulse. Only a channel whose gate is already HIGH during
// those few cycles passes it, and its output-stage pulse_shaper then
// produces the fixed-width control pulse that closes the channel's analog
// switch.
//
// A detector that fires while the OR is already HIGH makes no new OR edge,
// so it is blocked. This also holds while another channel's gate still keeps
// the OR HIGH after the first channel's gate has ended. Blocking fails
// only when two gates rise within the edge-detector pulse. Both channels
// then get control pulses; the XOR in detector_id_logic marks that case.
//
// Timing (default widths): a pulse sampled HIGH on led_in[i] at clock edge t0
// gives control[i] HIGH from the cycle after edge t0+2 for out_width cycles.
// A second channel first sampled HIGH at t0+1..t0+3 is also passed (at the
// same time, or one or two cycles later). From t0+4 on it is blocked.
//
// Interface: led_in is the single-ended discriminator output of each channel
// after the FPGA LVDS receiver; control drives the TTL outputs to the switches.
// The structure (shapers, OR, edge detector, AND gates, shapers) follows the
// paper's logic diagram; the gates are combinational and all registers sit in
// the shaper and edge-detector units.
module switch_trigger_logic #(
  parameter int unsigned N_CH  = 4,
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] in_width,
  input  logic [CNT_W-1:0] edge_width,
  input  logic [CNT_W-1:0] out_width,
  input  logic [N_CH-1:0]  led_in,
  output logic [N_CH-1:0]  control
);

  logic [N_CH-1:0] gate;        // input-stage shaper outputs
  logic            any_gate;    // OR gate
  logic            first_edge;  // edge detector output
  logic [N_CH-1:0] first_hit;   // AND gate outputs

  for (genvar i = 0; i < N_CH; i++) begin : g_in
    pulse_shaper #(.CNT_W(CNT_W)) u_in_shaper (
      .clk, .rst_n, .width(in_width), .in_sig(led_in[i]), .out_sig(gate[i])
    );
  end

  assign any_gate = |gate;

  edge_detector #(.CNT_W(CNT_W)) u_first_edge (
    .clk, .rst_n, .width(edge_width), .in_sig(any_gate), .out_sig(first_edge)
  );

  assign first_hit = gate & {N_CH{first_edge}};

  for (genvar i = 0; i < N_CH; i++) begin : g_out
    pulse_shaper #(.CNT_W(CNT_W)) u_out_shaper (
      .clk, .rst_n, .width(out_width), .in_sig(first_hit[i]), .out_sig(control[i])
    );
  end

endmodule
