// tb_switching_gate_mux: end-to-end testbench of the multiplexer logic at its
// default (prototype) settings: four channels, 650-cycle gates, a 3-cycle
// first-arrival window, 20/40/60/80-cycle identification codes, and 20- and
// 110-cycle delays.
//
// Detectors fire as LED pulses on led_in. A behavioural model of the analog
// side (tb_analog_readout_model) turns the control outputs into the
// multiplexed signal. For every event the testbench plays the digitizer. It
// integrates the multiplexed signal into a charge, measures the
// identification pulses and decodes them into a detector number (or flags a
// corrupted code), and measures the trigger. Every expectation is computed
// from the event description:
//   lone       a single detector: its charge, its code, trigger 110 cycles
//              after the control pulse, code 20 cycles after it (+1 edge);
//   blocked    later detectors inside the 650-cycle gate are switched off, so
//              the charge and the code are those of the first detector only;
//   complete   two detectors in the same cycle: charges add, and the code is one
//              pulse shifted right -> flagged as corrupted;
//   partial    two detectors one to three cycles apart: the code splits into two
//              pulses -> flagged as corrupted;
//   pileup     a blocked detector keeps the gate OR HIGH and blocks a third;
//   reconfig   settings rewritten through the register port, then restored.
// A mechanism that never occurs counts as a failure.
module tb_switching_gate_mux;
  import mux_pkg::*;
  localparam int N_CH = 4;
  localparam int PULSE_DELAY = 54, PULSE_LEN = 100;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  logic [N_CH-1:0] led_in = '0;
  logic            cfg_we = 1'b0;
  logic [3:0]      cfg_addr = '0;
  logic [15:0]     cfg_wdata = '0;
  logic [15:0]     cfg_rdata;
  logic [N_CH-1:0] control;
  logic            id_pulse;
  logic            trigger;

  logic [N_CH-1:0] fire = '0;
  int              amp [N_CH];
  int              original [N_CH];
  int              fanin_out;

  int checks = 0, failures = 0;
  int n_lone = 0, n_blocked = 0, n_complete = 0, n_partial = 0, n_pileup = 0, n_reconfig = 0;

  // current settings, mirrored by the testbench
  int in_w = 650, out_w = 650, id_d = 20, trig_d = 110;
  int id_w [N_CH] = '{20, 40, 60, 80};

  switching_gate_mux dut (.*);

  tb_analog_readout_model #(.N_CH(N_CH), .PULSE_DELAY(PULSE_DELAY), .PULSE_LEN(PULSE_LEN)) analog (
    .clk, .fire, .amp, .control, .original, .fanin_out
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

  typedef struct { int ch; int step; int amp; } fire_t;
  typedef struct {
    longint charge;          // integral of -fanin_out
    int     ctrl_rise [N_CH];
    int     ctrl_len  [N_CH];
    int     id_start [$];
    int     id_len   [$];
    int     trig_rise;
    int     trig_len;
    int     decoded;         // detector number, -1 = corrupted code, -2 = none
  } record_t;

  task automatic cfg_write(int addr, int value);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = 4'(addr); cfg_wdata = 16'(value);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // Plays one event (fires at steps relative to the start) for `total` steps.
  task automatic play(input fire_t fires[$], input int total, output record_t r);
    logic [N_CH-1:0] pc = '0;
    logic pid = 1'b0, ptr = 1'b0;
    r.charge = 0; r.trig_rise = -1; r.trig_len = 0;
    r.id_start.delete(); r.id_len.delete();
    for (int i = 0; i < N_CH; i++) begin r.ctrl_rise[i] = -1; r.ctrl_len[i] = 0; end
    for (int k = 0; k < total; k++) begin
      @(negedge clk);
      led_in = '0; fire = '0;
      foreach (fires[f]) begin
        if (k >= fires[f].step && k < fires[f].step + 4) led_in[fires[f].ch] = 1'b1;
        if (k == fires[f].step) begin fire[fires[f].ch] = 1'b1; amp[fires[f].ch] = fires[f].amp; end
      end
      #1;
      r.charge += -fanin_out;
      for (int i = 0; i < N_CH; i++) begin
        if (control[i] && !pc[i] && r.ctrl_rise[i] < 0) r.ctrl_rise[i] = k;
        if (control[i]) r.ctrl_len[i]++;
      end
      if (id_pulse && !pid) begin r.id_start.push_back(k); r.id_len.push_back(0); end
      if (id_pulse) r.id_len[r.id_len.size() - 1]++;
      if (trigger && !ptr && r.trig_rise < 0) r.trig_rise = k;
      if (trigger) r.trig_len++;
      pc = control; pid = id_pulse; ptr = trigger;
    end
    fire = '0;
    // digitizer-side decoding of the identification channel
    r.decoded = -2;
    if (r.id_start.size() == 1 && r.trig_rise >= 0 &&
        r.id_start[0] == r.trig_rise - trig_d + 1 + id_d) begin
      r.decoded = -1;
      for (int i = 0; i < N_CH; i++) if (r.id_len[0] == id_w[i]) r.decoded = i;
    end else if (r.id_start.size() > 0) r.decoded = -1;
    check(control == '0 && !id_pulse && !trigger, "outputs idle at the end of an event");
  endtask

  // One detector fires first and is the only one passed.
  task automatic expect_single(record_t r, int ch, int first_step, int a, string name);
    check(r.ctrl_rise[ch] == first_step + 3, $sformatf("%s: control rise %0d", name, r.ctrl_rise[ch]));
    check(r.ctrl_len[ch] == out_w, $sformatf("%s: control width %0d", name, r.ctrl_len[ch]));
    for (int i = 0; i < N_CH; i++)
      if (i != ch) check(r.ctrl_rise[i] < 0, $sformatf("%s: channel %0d not blocked", name, i));
    check(r.charge == pulse_charge(a), $sformatf("%s: charge %0d expected %0d", name, r.charge, pulse_charge(a)));
    check(r.decoded == ch, $sformatf("%s: decoded %0d expected %0d", name, r.decoded, ch));
    check(r.id_start.size() == 1 && r.id_start[0] == first_step + 3 + 1 + id_d,
          $sformatf("%s: id pulse timing", name));
    check(r.trig_rise == first_step + 3 + trig_d, $sformatf("%s: trigger rise %0d", name, r.trig_rise));
    check(r.trig_len == out_w, $sformatf("%s: trigger width %0d", name, r.trig_len));
  endtask

  record_t r;

  initial begin
    for (int i = 0; i < N_CH; i++) amp[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // reset settings read back as the prototype values
    cfg_addr = 4'd0; #1 check(cfg_rdata == 650, "reset in_width");
    cfg_addr = 4'd4; #1 check(cfg_rdata == 110, "reset trig_delay");

    // lone detectors
    for (int ch = 0; ch < N_CH; ch++) begin
      automatic int a = 200 + 150 * ch;
      play('{'{ch, 10, a}}, 1500, r);
      expect_single(r, ch, 10, a, $sformatf("lone %0d", ch));
      n_lone++;
    end

    // detector 2 first, 0 and 1 later inside its gate (their pulses reach
    // the switches while channel 2 is still closed on the fan-in)
    play('{'{2, 10, 500}, '{0, 60, 700}, '{1, 110, 900}}, 2000, r);
    expect_single(r, 2, 10, 500, "blocked");
    n_blocked++;
    // detector 0 first, 1 later
    play('{'{0, 10, 300}, '{1, 30, 800}}, 2000, r);
    expect_single(r, 0, 10, 300, "blocked 0/1");
    n_blocked++;

    // complete overlap: both pass, charges add, code flagged
    play('{'{0, 10, 300}, '{1, 10, 400}}, 1500, r);
    check(r.ctrl_rise[0] == 13 && r.ctrl_rise[1] == 13, "complete: both switches on");
    check(r.charge == pulse_charge(300) + pulse_charge(400), "complete: summed charge");
    check(r.decoded == -1, $sformatf("complete: code flagged (decoded %0d)", r.decoded));
    check(r.id_start.size() == 1 && r.id_len[0] == 20, "complete: one shifted pulse of 40-20 cycles");
    if (r.decoded == -1) n_complete++;

    // partial overlap: second detector 2 and 3 cycles later
    for (int d = 2; d <= 3; d++) begin
      play('{'{0, 10, 300}, '{1, 10 + d, 400}}, 1500, r);
      check(r.ctrl_rise[1] == 13 + d - 1, $sformatf("partial %0d: second switch on", d));
      check(r.decoded == -1 && r.id_start.size() == 2, $sformatf("partial %0d: code split", d));
      if (r.id_start.size() == 2) n_partial++;
    end

    // pile-up: detector 1 near the end of detector 0's gate, detector 3 just
    // after it closed: both blocked
    play('{'{0, 10, 300}, '{1, 10 + 640, 500}, '{3, 10 + 660, 600}}, 2500, r);
    expect_single(r, 0, 10, 300, "pileup");
    n_pileup++;

    // settings changed through the register port
    in_w = 300; out_w = 200; id_d = 5; trig_d = 50;
    id_w = '{10, 25, 45, 70};
    cfg_write(REG_IN_WIDTH, in_w);
    cfg_write(REG_OUT_WIDTH, out_w);
    cfg_write(REG_ID_DELAY, id_d);
    cfg_write(REG_TRIG_DELAY, trig_d);
    for (int i = 0; i < N_CH; i++) cfg_write(int'(REG_ID_WIDTH0) + i, id_w[i]);
    for (int ch = 0; ch < N_CH; ch++) begin
      play('{'{ch, 10, 250}, '{(ch + 1) % N_CH, 10 + 250, 900}}, 1000, r);
      expect_single(r, ch, 10, 250, $sformatf("reconfig %0d", ch));
    end
    // a detector after the shorter gate closed is now passed
    play('{'{1, 10, 250}, '{2, 10 + 320, 350}}, 1200, r);
    check(r.ctrl_rise[1] == 13 && r.ctrl_rise[2] == 10 + 320 + 3, "reconfig: second event after shorter gate");
    check(r.charge == pulse_charge(250) + pulse_charge(350), "reconfig: both charges recorded");
    n_reconfig++;

    // back to reset values
    rst_n = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    in_w = 650; out_w = 650; id_d = 20; trig_d = 110;
    id_w = '{20, 40, 60, 80};
    play('{'{3, 10, 400}}, 1500, r);
    expect_single(r, 3, 10, 400, "after reset");

    check(n_lone > 0, "lone event seen");
    check(n_blocked > 0, "blocking seen");
    check(n_complete > 0, "complete overlap seen");
    check(n_partial > 0, "partial overlap seen");
    check(n_pileup > 0, "pile-up seen");
    check(n_reconfig > 0, "reconfiguration seen");
    $display("lone=%0d blocked=%0d complete=%0d partial=%0d pileup=%0d reconfig=%0d",
             n_lone, n_blocked, n_complete, n_partial, n_pileup, n_reconfig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
