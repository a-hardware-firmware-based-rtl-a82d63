// tb_edge_detector: self-checking testbench for edge_detector.
//
// Drives random pulses of random length and spacing into the unit under a
// range of width settings (1 cycle up to the 650-cycle prototype value, plus
// 0), and compares the output in every cycle with an event-level reference:
// a HIGH sample that follows a LOW sample, while no pulse is running, opens a
// window of exactly 'width' cycles starting in the cycle after that clock edge.
// It also checks that pulse lengths equal the programmed width, which is the
// unit's timing rule, and counts retrigger attempts that must be ignored.
module tb_edge_detector;
  localparam int unsigned CNT_W = 16;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic [CNT_W-1:0] width = '0;
  logic             in_sig = 1'b0;
  logic             out_sig;

  int checks = 0, failures = 0;
  longint cyc = 0;

  edge_detector dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // Reference state, updated at the falling edge after each rising edge.
  logic   ref_prev = 1'b0;
  longint win_start = 0, win_end = 0;   // expected HIGH for win_start <= n < win_end
  int     ignored_edges = 0, pulses_started = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL cycle %0d: %s", cyc, what);
    end
  endtask

  // Runs n cycles of random stimulus with the current width.
  task automatic run_random(input int n, input int max_len, input int max_gap);
    int remaining_len = 0, remaining_gap = 0;
    repeat (n) begin
      @(negedge clk);
      // The value of in_sig now is what the last rising edge sampled.
      if (in_sig && !ref_prev) begin
        if (cyc - 1 >= win_end) begin
          win_start = cyc - 1;
          win_end   = cyc - 1 + longint'(width);
          if (width != 0) pulses_started++;
        end else ignored_edges++;
      end
      ref_prev = in_sig;
      check(out_sig == (cyc - 1 >= win_start && cyc - 1 < win_end),
            $sformatf("out=%0b expected window [%0d,%0d)", out_sig, win_start, win_end));
      // next stimulus
      if (remaining_len > 0) begin
        remaining_len--; in_sig = 1'b1;
      end else if (remaining_gap > 0) begin
        remaining_gap--; in_sig = 1'b0;
      end else begin
        remaining_len = $urandom_range(max_len, 1) - 1;
        remaining_gap = $urandom_range(max_gap, 1);
        in_sig = 1'b1;
      end
    end
    // let the input go low and the output settle
    in_sig = 1'b0;
  endtask

  // Measures the length of the next output pulse.
  task automatic measure_pulse(input int w);
    int len = 0;
    @(negedge clk); in_sig = 1'b1;
    @(negedge clk); in_sig = 1'b0;
    while (out_sig) begin len++; @(negedge clk); end
    check(len == w, $sformatf("pulse length %0d, expected %0d", len, w));
    ref_prev = 1'b0; win_end = 0; win_start = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(out_sig == 1'b0, "output low after reset");
    foreach (int_widths[k]) begin
      width = CNT_W'(int_widths[k]);
      repeat (int_widths[k] + 3) @(negedge clk);
      ref_prev = in_sig; win_start = 0; win_end = 0;
      run_random(4000, 3 * int_widths[k] + 4, 2 * int_widths[k] + 4);
      repeat (int_widths[k] + 3) @(negedge clk);
      ref_prev = 1'b0; win_start = 0; win_end = 0;
      if (int_widths[k] > 0) measure_pulse(int_widths[k]);
    end
    check(pulses_started > 100, "enough pulses generated");
    check(ignored_edges > 10, "retrigger attempts exercised");
    $display("pulses=%0d ignored_edges=%0d", pulses_started, ignored_edges);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int int_widths[] = '{1, 2, 3, 7, 20, 80, 650, 0};

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
