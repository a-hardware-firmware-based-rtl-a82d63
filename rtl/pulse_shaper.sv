// pulse_shaper: rising-edge triggered fixed-width pulse generator.
//
// The input is sampled on every rising clock edge. When a sample is HIGH and
// the previous one was LOW, a down-counter is loaded with `width` and the
// output stays HIGH for exactly `width` clock cycles, whatever the length of
// the input pulse. This stretches short discriminator pulses into wide gates
// (650 cycles = 3250 ns in the prototype).
//
// Timing: out_sig rises in the cycle that follows the first clock edge that
// samples in_sig HIGH (one register stage), and falls `width` cycles later.
// A rising edge that arrives while the output is still HIGH is ignored (the
// unit is not retriggerable), except on the clock edge where the pulse ends:
// there it starts the next pulse back-to-back. width = 0 gives no pulse.
//
// The sampling, the rising-edge trigger and the programmable width in clock
// cycles follow the paper. The latency, the non-retriggerable behaviour and
// the synchronous active-low reset are this design's choices.
module pulse_shaper #(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] width,
  input  logic             in_sig,
  output logic             out_sig
);

  logic             in_prev;
  logic [CNT_W-1:0] count;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_prev <= 1'b0;
      count   <= '0;
    end else begin
      in_prev <= in_sig;
      if (in_sig && !in_prev && count <= 1)
        count <= width;
      else if (count != '0)
        count <= count - 1'b1;
    end
  end

  assign out_sig = (count != '0);

endmodule
