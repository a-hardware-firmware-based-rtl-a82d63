// delay_unit: programmable clock-cycle delay of a one-bit logic signal.
//
// A MAX_DELAY-stage shift register samples the input every clock cycle, and
// the output is taken from the tap selected by `delay`. So out_sig(t) equals
// in_sig(t - delay) for 1 <= delay <= MAX_DELAY, with no loss of pulse width.
// delay = 0 passes the input straight through; larger values are clamped to
// MAX_DELAY. The delay can be changed at run time; the output then jumps to
// the new tap.
//
// The unit delays the identification pulse (20 cycles) and the ADC trigger
// (110 cycles) so that both line up with the multiplexed analog pulse at the
// digitizer. The paper gives the function and the settings. The shift-register
// construction and the 255-cycle maximum (8-bit register) are this design's
// choices.
module delay_unit #(
  parameter int unsigned MAX_DELAY = 255,
  parameter int unsigned DLY_W     = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [DLY_W-1:0] delay,
  input  logic             in_sig,
  output logic             out_sig
);

  // line[k] holds in_sig delayed by k cycles; line[0] is the input itself.
  logic [MAX_DELAY:0] line;

  assign line[0] = in_sig;

  always_ff @(posedge clk) begin
    if (!rst_n)
      line[MAX_DELAY:1] <= '0;
    else
      line[MAX_DELAY:1] <= line[MAX_DELAY-1:0];
  end

  always_comb begin
    if (int'(delay) > MAX_DELAY)
      out_sig = line[MAX_DELAY];
    else
      out_sig = line[delay];
  end

  initial assert (MAX_DELAY >= 1) else $error("delay_unit: MAX_DELAY must be at least 1");

endmodule
