// tb_detector_id_logic: self-checking testbench for detector_id_logic.
//
// Each test drives control pulses that start at given offsets and computes
// the expected outputs from the pulse-width code alone. A channel i whose
// control pulse is first sampled at step s has a PWM pulse HIGH in steps
// s+1 .. s+W_i. The identification pulse is the XOR of those intervals,
// delayed by D steps. Every step compares pwm and id_pulse with that
// expectation. The tests are: each channel alone (pulse width identifies the
// channel: 20/40/60/80), complete overlap (same start, pulse shifted right by
// the shorter width), partial overlap (starts one or two cycles apart, two
// separate pulses), random starts, and other widths and delays, including
// the 255-cycle maximum delay.
module tb_detector_id_logic;
  localparam int unsigned N_CH  = 4;
  localparam int unsigned CNT_W = 16;
  localparam int unsigned DLY_W = 8;

  logic                       clk = 1'b0;
  logic                       rst_n = 1'b0;
  logic [N_CH-1:0]            control = '0;
  logic [N_CH-1:0][CNT_W-1:0] id_width;
  logic [DLY_W-1:0]           id_delay = 8'd20;
  logic [N_CH-1:0]            pwm;
  logic                       id_pulse;

  int checks = 0, failures = 0;
  int single_ok = 0, split_events = 0, shifted_events = 0;

  detector_id_logic dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic bit pwm_exp(int ch, int k, int s[N_CH]);
    return s[ch] >= 0 && k >= s[ch] + 1 && k <= s[ch] + int'(id_width[ch]);
  endfunction

  // Runs one event: channel ch's control pulse starts at step s[ch] (-1: no
  // pulse) and lasts ctrl_len steps. Returns the list of id pulses seen as
  // start/length pairs (relative to step 0).
  task automatic run_event(input int s[N_CH], input int ctrl_len,
                           output int starts[$], output int lens[$]);
    int d = int'(id_delay);
    int total = ctrl_len + 2 * 255 + 200;
    bit exp_hist[$];
    bit prev_id = 1'b0;
    starts.delete(); lens.delete();
    for (int k = 0; k < total; k++) begin
      bit x = 1'b0;
      @(negedge clk);
      for (int i = 0; i < N_CH; i++)
        control[i] = (s[i] >= 0 && k >= s[i] && k < s[i] + ctrl_len);
      #1;
      for (int i = 0; i < N_CH; i++) begin
        check(pwm[i] == pwm_exp(i, k, s), $sformatf("pwm[%0d] step %0d = %0b", i, k, pwm[i]));
        x ^= pwm_exp(i, k, s);
      end
      exp_hist.push_back(x);
      check(id_pulse == ((k >= d) ? exp_hist[k - d] : 1'b0),
            $sformatf("id_pulse step %0d = %0b", k, id_pulse));
      if (id_pulse && !prev_id) begin starts.push_back(k); lens.push_back(0); end
      if (id_pulse) lens[lens.size() - 1]++;
      prev_id = id_pulse;
    end
  endtask

  int st[$], ln[$];

  initial begin
    for (int i = 0; i < N_CH; i++) id_width[i] = CNT_W'(20 * (i + 1));
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // each channel alone: one pulse, width 20*(i+1), at s+1+20
    for (int ch = 0; ch < N_CH; ch++) begin
      automatic int s[N_CH] = '{-1, -1, -1, -1};
      s[ch] = 5;
      run_event(s, 650, st, ln);
      check(st.size() == 1 && st[0] == 5 + 1 + 20 && ln[0] == 20 * (ch + 1),
            $sformatf("single channel %0d: %0d pulses", ch, st.size()));
      if (st.size() == 1 && ln[0] == 20 * (ch + 1)) single_ok++;
    end

    // complete overlap of two channels: one pulse, shifted by the shorter width
    for (int a = 0; a < N_CH; a++)
      for (int b = a + 1; b < N_CH; b++) begin
        automatic int s[N_CH] = '{-1, -1, -1, -1};
        s[a] = 5; s[b] = 5;
        run_event(s, 650, st, ln);
        check(st.size() == 1 && st[0] == 5 + 1 + 20 + 20 * (a + 1) && ln[0] == 20 * (b - a),
              $sformatf("complete overlap %0d/%0d", a, b));
        if (st.size() == 1 && st[0] > 5 + 1 + 20) shifted_events++;
      end

    // partial overlap: second channel one or two cycles later -> two pulses
    for (int off = 1; off <= 2; off++) begin
      automatic int s[N_CH] = '{5, -1, -1, -1};
      s[1] = 5 + off;
      run_event(s, 650, st, ln);
      check(st.size() == 2 && ln[0] == off && st[1] == 5 + 1 + 20 + 20 && ln[1] == 40 - 20 + off,
            $sformatf("partial overlap offset %0d: %0d pulses", off, st.size()));
      if (st.size() > 1) split_events++;
    end

    // random starts with other widths and delays
    for (int t = 0; t < 30; t++) begin
      automatic int s[N_CH];
      for (int i = 0; i < N_CH; i++) begin
        id_width[i] = CNT_W'($urandom_range(100, 1));
        s[i] = ($urandom_range(1, 0) == 1) ? int'($urandom_range(10, 0)) : -1;
      end
      id_delay = DLY_W'((t % 3 == 0) ? 255 : $urandom_range(60, 0));
      run_event(s, $urandom_range(200, 120), st, ln);
    end

    check(single_ok == N_CH, "every channel identified");
    check(shifted_events == 6, "complete overlaps shift the pulse");
    check(split_events == 2, "partial overlaps split the pulse");
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
