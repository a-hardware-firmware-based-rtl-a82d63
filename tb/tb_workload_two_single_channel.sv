// tb_workload_two_single_channel: two independent one-channel multiplexers.
//
// It models the timing-resolution setup: two detectors facing each other
// record back-to-back annihilation photons, and each detector has its own
// one-channel multiplexer and its own fan-in. Two instances of the top with
// N_CH = 1 stand for it. Photon pairs arrive at both detectors 0..10 cycles
// apart (within a 50 ns coincidence window). Single hits on one side are
// mixed in.
//
// For every hit, the testbench checks that its own multiplexer switches on
// independently of the other. Both control pulses open 3 cycles after their
// own discriminator pulse, so their time difference equals the arrival
// difference and the logic adds no timing offset. It also checks that each
// fan-in carries exactly its own detector's charge and that each trigger
// follows 110 cycles after its control pulse. The coincidence logic that
// selected pairs in the original measurement is not modelled.
module tb_workload_two_single_channel;
  localparam int PULSE_DELAY = 54, PULSE_LEN = 100;
  localparam int N_EVENTS = 300;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic [1:0] led = '0;
  logic [1:0] ctrl, idp, trig;
  logic [1:0] fire = '0;
  int         amp_a [1], amp_b [1];
  int         orig_a [1], orig_b [1];
  int         fan [2];
  logic [15:0] rd [2];

  int checks = 0, failures = 0;

  for (genvar m = 0; m < 2; m++) begin : g_mux
    switching_gate_mux #(.N_CH(1)) u_mux (
      .clk, .rst_n, .led_in(led[m]), .cfg_we(1'b0), .cfg_addr(4'd0), .cfg_wdata(16'd0),
      .cfg_rdata(rd[m]), .control(ctrl[m]), .id_pulse(idp[m]), .trigger(trig[m])
    );
  end

  tb_analog_readout_model #(.N_CH(1), .PULSE_DELAY(PULSE_DELAY), .PULSE_LEN(PULSE_LEN)) analog_a (
    .clk, .fire(fire[0]), .amp(amp_a), .control(ctrl[0]), .original(orig_a), .fanin_out(fan[0])
  );
  tb_analog_readout_model #(.N_CH(1), .PULSE_DELAY(PULSE_DELAY), .PULSE_LEN(PULSE_LEN)) analog_b (
    .clk, .fire(fire[1]), .amp(amp_b), .control(ctrl[1]), .original(orig_b), .fanin_out(fan[1])
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  function automatic longint pulse_charge(int a);
    longint q = 0;
    for (int k = 0; k < PULSE_LEN; k++) q += a * (PULSE_LEN - k) / PULSE_LEN;
    return q;
  endfunction

  initial begin
    int n_pairs = 0, n_single = 0;
    amp_a[0] = 0; amp_b[0] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int ev = 0; ev < N_EVENTS; ev++) begin
      automatic int  t_hit[2];
      automatic int  a[2];
      automatic bit  hit[2];
      automatic int  kind = $urandom_range(3, 0);   // 0: only A, 1: only B, else pair
      automatic int  c_rise[2] = '{-1, -1}, t_rise[2] = '{-1, -1}, id_w[2] = '{0, 0};
      automatic longint q[2] = '{0, 0};
      automatic logic [1:0] pc = '0, pt = '0;
      hit[0] = (kind != 1); hit[1] = (kind != 0);
      t_hit[0] = 10 + $urandom_range(10, 0);
      t_hit[1] = 10 + $urandom_range(10, 0);
      a[0] = $urandom_range(900, 100); a[1] = $urandom_range(900, 100);
      for (int k = 0; k < 1500; k++) begin
        @(negedge clk);
        fire = '0;
        for (int m = 0; m < 2; m++) begin
          led[m] = hit[m] && k >= t_hit[m] && k < t_hit[m] + 4;
          if (hit[m] && k == t_hit[m]) fire[m] = 1'b1;
        end
        amp_a[0] = a[0]; amp_b[0] = a[1];
        #1;
        for (int m = 0; m < 2; m++) begin
          q[m] += -fan[m];
          if (ctrl[m] && !pc[m]) c_rise[m] = k;
          if (trig[m] && !pt[m]) t_rise[m] = k;
          if (idp[m]) id_w[m]++;
        end
        pc = ctrl; pt = trig;
      end
      for (int m = 0; m < 2; m++) begin
        if (hit[m]) begin
          check(c_rise[m] == t_hit[m] + 3, $sformatf("event %0d side %0d: control at %0d", ev, m, c_rise[m]));
          check(q[m] == pulse_charge(a[m]), $sformatf("event %0d side %0d: charge", ev, m));
          check(t_rise[m] == c_rise[m] + 110, $sformatf("event %0d side %0d: trigger", ev, m));
          check(id_w[m] == 20, $sformatf("event %0d side %0d: code width %0d", ev, m, id_w[m]));
        end else begin
          check(c_rise[m] < 0 && q[m] == 0 && t_rise[m] < 0, $sformatf("event %0d side %0d idle", ev, m));
        end
      end
      if (hit[0] && hit[1]) begin
        check(c_rise[1] - c_rise[0] == t_hit[1] - t_hit[0], "pair: control time difference = arrival difference");
        n_pairs++;
      end else n_single++;
    end
    check(n_pairs > 0 && n_single > 0, "pairs and singles both occurred");
    $display("pairs=%0d singles=%0d", n_pairs, n_single);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (N_EVENTS * 1600 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
