// tb_switch_trigger_logic: self-checking testbench for switch_trigger_logic.
//
// Each scenario fires detectors at chosen steps (an LED pulse driven in step
// L is first sampled at the following rising edge) and records every control
// pulse as (channel, first HIGH step, length). Expected pulses come from the
// first-arrival rule with closed-form timing:
//   - a lone detector fired at L gets control HIGH from L+3 for out_width steps;
//   - a second detector fired d steps later is also passed when
//     d <= edge_width, starting at L+3+max(0,d-1) (the coincidence case);
//   - later detectors are blocked while any input gate is still open, also
//     when the OR is held HIGH by an already blocked detector (pile-up);
//   - once all gates have closed, the next detector is passed again.
// The prototype settings (650/3/650) are used, plus shorter widths.
module tb_switch_trigger_logic;
  localparam int unsigned N_CH  = 4;
  localparam int unsigned CNT_W = 16;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic [CNT_W-1:0] in_width = 16'd650, edge_width = 16'd3, out_width = 16'd650;
  logic [N_CH-1:0]  led_in = '0;
  logic [N_CH-1:0]  control;

  int checks = 0, failures = 0;
  int n_passed = 0, n_blocked = 0, n_coinc = 0, n_pileup = 0;

  switch_trigger_logic dut (.*);

  always #5 clk = ~clk;

  typedef struct { int ch; int start; int len; } pulse_t;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // fire[k] = {channel, step, led length}
  typedef struct { int ch; int step; int len; } fire_t;

  task automatic run(input fire_t fires[$], input int total, output pulse_t seen[$]);
    int start[N_CH];
    logic [N_CH-1:0] prev = '0;
    seen.delete();
    for (int k = 0; k < total; k++) begin
      @(negedge clk);
      led_in = '0;
      foreach (fires[f])
        if (k >= fires[f].step && k < fires[f].step + fires[f].len) led_in[fires[f].ch] = 1'b1;
      #1;
      for (int i = 0; i < N_CH; i++) begin
        if (control[i] && !prev[i]) start[i] = k;
        if (!control[i] && prev[i]) seen.push_back('{i, start[i], k - start[i]});
      end
      prev = control;
    end
    check(control == '0, "control pulses over at the end of a scenario");
  endtask

  function automatic bit has(pulse_t seen[$], int ch, int st, int len);
    foreach (seen[k]) if (seen[k].ch == ch && seen[k].start == st && seen[k].len == len) return 1;
    return 0;
  endfunction

  task automatic expect_pulses(pulse_t seen[$], pulse_t want[$], string name);
    check(seen.size() == want.size(),
          $sformatf("%s: %0d control pulses, expected %0d", name, seen.size(), want.size()));
    foreach (want[k])
      check(has(seen, want[k].ch, want[k].start, want[k].len),
            $sformatf("%s: missing control ch%0d at %0d len %0d", name, want[k].ch, want[k].start, want[k].len));
  endtask

  pulse_t seen[$];

  initial begin
    automatic int W, E, L = 10;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int cfg = 0; cfg < 2; cfg++) begin
      if (cfg == 0) begin in_width = 650; edge_width = 3; out_width = 650; end
      else          begin in_width = 40;  edge_width = 5; out_width = 25;  end
      W = int'(in_width); E = int'(edge_width);

      // lone detector on each channel, short and long LED pulses
      for (int ch = 0; ch < N_CH; ch++) begin
        run('{'{ch, L, 1 + 7 * ch}}, L + 2 * W + 20, seen);
        expect_pulses(seen, '{'{ch, L + 3, int'(out_width)}}, $sformatf("lone ch%0d", ch));
        n_passed++;
      end

      // second detector d steps after the first
      for (int d = 0; d <= E + 3; d++) begin
        automatic pulse_t want[$] = '{'{0, L + 3, int'(out_width)}};
        if (d <= E) begin
          want.push_back('{1, L + 3 + ((d > 0) ? d - 1 : 0), int'(out_width)});
          n_coinc++;
        end else n_blocked++;
        run('{'{0, L, 2}, '{1, L + d, 2}}, L + 2 * W + 20, seen);
        expect_pulses(seen, want, $sformatf("pair offset %0d", d));
      end

      // blocked far inside the gate (ch2 fires first, ch3 late)
      run('{'{2, L, 3}, '{3, L + W / 2, 3}, '{0, L + W - 2, 3}}, L + 3 * W, seen);
      expect_pulses(seen, '{'{2, L + 3, int'(out_width)}}, "blocked inside gate");
      n_blocked += 2;

      // pile-up: ch1 blocked near the end of ch0's gate keeps the OR HIGH, so
      // ch2 firing just after ch0's gate closed is blocked too; ch3 firing
      // after everything closed passes.
      run('{'{0, L, 2}, '{1, L + W - 5, 2}, '{2, L + W + 5, 2}, '{3, L + 3 * W, 2}},
          L + 5 * W, seen);
      expect_pulses(seen, '{'{0, L + 3, int'(out_width)}, '{3, L + 3 * W + 3, int'(out_width)}}, "pile-up");
      n_pileup++;

      // same detector again after its gate closed
      run('{'{1, L, 2}, '{1, L + W + 2, 2}}, L + 3 * W, seen);
      expect_pulses(seen, '{'{1, L + 3, int'(out_width)}, '{1, L + W + 2 + 3, int'(out_width)}}, "refire");
    end

    check(n_coinc > 0 && n_blocked > 0 && n_pileup > 0 && n_passed > 0, "every case exercised");
    $display("passed=%0d coincident=%0d blocked=%0d pileup=%0d", n_passed, n_coinc, n_blocked, n_pileup);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
