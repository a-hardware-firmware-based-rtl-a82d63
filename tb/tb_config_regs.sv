// tb_config_regs: self-checking testbench for config_regs.
//
// Checks that reset loads the prototype settings (650, 3, 650, 20, 110 and
// 20/40/60/80), both on the register outputs and through read-back. Then it
// writes random values to every register in random order, and checks the
// outputs and read-back against a shadow copy kept by the testbench. Writes to
// unused addresses must change nothing and must read back as 0.
module tb_config_regs;
  import mux_pkg::*;
  localparam int unsigned N_CH = 4;

  logic                       clk = 1'b0;
  logic                       rst_n = 1'b0;
  logic                       cfg_we = 1'b0;
  logic [3:0]                 cfg_addr = '0;
  logic [15:0]                cfg_wdata = '0;
  logic [15:0]                cfg_rdata;
  mux_cfg_t                   cfg;
  logic [N_CH-1:0][CNT_W-1:0] id_width;

  int checks = 0, failures = 0;
  int shadow[16];

  config_regs dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic bit bool_used(int a);
    return (a <= 4) || (a >= 8 && a < 8 + int'(N_CH));
  endfunction

  task automatic compare_all(string when);
    check(int'(cfg.in_width)   == shadow[0], {when, ": in_width"});
    check(int'(cfg.edge_width) == shadow[1], {when, ": edge_width"});
    check(int'(cfg.out_width)  == shadow[2], {when, ": out_width"});
    check(int'(cfg.id_delay)   == shadow[3], {when, ": id_delay"});
    check(int'(cfg.trig_delay) == shadow[4], {when, ": trig_delay"});
    for (int i = 0; i < N_CH; i++)
      check(int'(id_width[i]) == shadow[8 + i], $sformatf("%s: id_width[%0d]", when, i));
    for (int a = 0; a < 16; a++) begin
      cfg_addr = 4'(a);
      #1;
      check(int'(cfg_rdata) == (bool_used(a) ? shadow[a] : 0),
            $sformatf("%s: read-back address %0d = %0d", when, a, cfg_rdata));
    end
  endtask

  initial begin
    shadow = '{default: 0};
    shadow[0] = 650; shadow[1] = 3; shadow[2] = 650; shadow[3] = 20; shadow[4] = 110;
    for (int i = 0; i < N_CH; i++) shadow[8 + i] = 20 * (i + 1);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare_all("after reset");
    for (int w = 0; w < 400; w++) begin
      automatic int a = $urandom_range(15, 0);
      automatic int v = $urandom_range(65535, 0);
      @(negedge clk);
      cfg_we = 1'b1; cfg_addr = 4'(a); cfg_wdata = 16'(v);
      @(negedge clk);
      cfg_we = 1'b0;
      if (a == 3 || a == 4) v = v & 8'hFF;
      if (bool_used(a)) shadow[a] = v;
      if (w % 20 == 19) compare_all($sformatf("after write %0d", w));
    end
    compare_all("end");
    // reset restores the defaults
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    shadow[0] = 650; shadow[1] = 3; shadow[2] = 650; shadow[3] = 20; shadow[4] = 110;
    for (int i = 0; i < N_CH; i++) shadow[8 + i] = 20 * (i + 1);
    compare_all("after second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
