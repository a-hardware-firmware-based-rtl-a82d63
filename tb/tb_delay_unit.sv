// tb_delay_unit: self-checking testbench for delay_unit.
//
// Feeds a random bit stream into the delay line and keeps a history of every
// input sample. In each cycle the output must equal the input sampled
// `delay` cycles earlier. Delays tried: 0, 1, the paper's 20 and 110, the
// maximum 255, and random values changed on the fly. A value above the
// maximum must clamp to MAX_DELAY. Bits older than the reset are not checked.
module tb_delay_unit;
  localparam int unsigned MAX_DELAY = 255;
  localparam int unsigned DLY_W     = 8;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic [DLY_W-1:0] delay = '0;
  logic             in_sig = 1'b0;
  logic             out_sig;

  int checks = 0, failures = 0;
  int n = 0;                 // samples taken since reset
  bit hist[$];               // hist[k] = input in sample k

  delay_unit dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL sample %0d: %s", n, what);
    end
  endtask

  // One cycle: drive a new bit after the falling edge, check the
  // combinational output, then let the rising edge shift it in.
  task automatic step(input int d);
    int eff;
    @(negedge clk);
    delay  = DLY_W'(d);
    in_sig = 1'($urandom);
    eff = (d > int'(MAX_DELAY)) ? int'(MAX_DELAY) : d;
    #1;
    hist.push_back(in_sig);
    if (n - eff >= 0)
      check(out_sig == hist[n - eff], $sformatf("delay %0d: out=%0b expected %0b", d, out_sig, hist[n - eff]));
    n++;
  endtask

  int fixed_delays[] = '{0, 1, 20, 110, 255, 2, 254};

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (fixed_delays[k])
      repeat (700) step(fixed_delays[k]);
    // change the delay every few cycles
    for (int blk = 0; blk < 300; blk++) begin
      automatic int d = $urandom_range(MAX_DELAY, 0);
      repeat ($urandom_range(20, 1)) step(d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
