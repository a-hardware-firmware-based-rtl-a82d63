// tb_adc_trigger_logic: self-checking testbench for adc_trigger_logic.
//
// Drives random control pulses (long and short, overlapping and separate) on
// the four channels and checks in every cycle that the trigger equals the OR
// of the control inputs from trig_delay cycles earlier. It uses the
// prototype's 110-cycle delay and a few others. It also checks that a single
// 650-cycle control pulse gives a trigger of the same width, starting exactly
// 110 cycles later.
module tb_adc_trigger_logic;
  localparam int unsigned N_CH = 4;
  localparam int unsigned DLY_W = 8;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic [N_CH-1:0]  control = '0;
  logic [DLY_W-1:0] trig_delay = 8'd110;
  logic             trigger;

  int checks = 0, failures = 0;
  int n = 0;
  bit any_hist[$];

  adc_trigger_logic dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL sample %0d: %s", n, what);
    end
  endtask

  task automatic step(input logic [N_CH-1:0] c);
    bit any;
    int d;
    @(negedge clk);
    control = c;
    #1;
    any = 1'b0;
    for (int i = 0; i < N_CH; i++) if (c[i]) any = 1'b1;
    any_hist.push_back(any);
    d = int'(trig_delay);
    if (n >= d)
      check(trigger == any_hist[n - d], "trigger differs from delayed OR");
    n++;
  endtask

  int delays[] = '{110, 0, 1, 37, 255};
  int rise_at, fall_at;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (delays[k]) begin
      trig_delay = DLY_W'(delays[k]);
      for (int ev = 0; ev < 40; ev++) begin
        automatic logic [N_CH-1:0] c = N_CH'($urandom_range(15, 1));
        automatic int len = $urandom_range(30, 1);
        repeat (len) step(c);
        repeat ($urandom_range(30, 0)) step('0);
      end
    end
    // one prototype-sized control pulse: 650 cycles on channel 2, delay 110
    trig_delay = 8'd110;
    repeat (300) step('0);
    rise_at = -1; fall_at = -1;
    for (int k = 0; k < 1250; k++) begin
      step((k < 650) ? 4'b0100 : 4'b0000);
      if (trigger && rise_at < 0) rise_at = k;
      if (!trigger && rise_at >= 0 && fall_at < 0) fall_at = k;
    end
    check(rise_at == 110, $sformatf("trigger rise %0d cycles after control, expected 110", rise_at));
    check(fall_at - rise_at == 650, $sformatf("trigger width %0d, expected 650", fall_at - rise_at));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
