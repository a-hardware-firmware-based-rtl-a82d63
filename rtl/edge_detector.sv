// edge_detector: positive-edge detector with a programmable output width.
//
// On each rising clock edge the input is compared with its previous sample.
// A LOW-to-HIGH transition starts an output pulse of `width` clock cycles.
// The first-arrival logic uses it with a width of 3 cycles (15 ns) on the OR
// of the input-stage shaper outputs. The identification logic uses it with
// widths of 20/40/60/80 cycles on the control pulses, which produces the PWM
// code.
//
// Timing: out_sig rises in the cycle after the clock edge that first samples
// in_sig HIGH and stays HIGH for `width` cycles. Transitions during an active
// output pulse are ignored, except on the clock edge where the pulse ends,
// which starts the next pulse at once; width = 0 gives no pulse.
//
// The function (detect the rising edge, emit a programmable-width pulse) is
// the paper's. The register-and-counter construction, the one-cycle latency
// and the reset are this design's choices. In this implementation it behaves
// like pulse_shaper; the two units are kept separate as the paper names them.
module edge_detector #(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] width,
  input  logic             in_sig,
  output logic             out_sig
);

  logic             in_q;
  logic             rise;
  logic [CNT_W-1:0] remaining;

  assign rise = in_sig & ~in_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_q      <= 1'b0;
      remaining <= '0;
    end else begin
      in_q <= in_sig;
      if (rise && remaining <= 1)
        remaining <= width;
      else if (remaining != '0)
        remaining <= remaining - 1'b1;
    end
  end

  assign out_sig = |remaining;

endmodule
