// tb_workload_four_detectors: long random run of the four-detector setup.
//
// It models a 137Cs energy-resolution run with four scintillators on one
// four-channel multiplexer at its default settings. Detectors fire at random
// times, with random pulse heights, at a rate high enough that blocked
// detectors, pile-up and near-coincidences all occur many times. About one
// firing in seven gets a partner on another detector 0..6 cycles later.
//
// Before simulation, the testbench predicts every control pulse from the
// fire list alone, using the event rules of the design. A new event starts
// when a detector fires while no input gate is open. A detector whose gate
// opens within the first-arrival window is also switched on. Every other
// detector is blocked. The simulation must then match exactly:
//   - the list of control pulses (channel, start cycle, 650-cycle width);
//   - one trigger per event, 110 cycles after the event's first control pulse;
//   - the identification code of each event: the detector number for
//     single-detector events, and a flagged (malformed) code for events in
//     which two detectors were switched on;
//   - the total charge through the fan-in model, which is the sum of the
//     pulse samples that fall inside a predicted control window.
// The count rate is this testbench's own choice; the source activity alone
// does not fix it.
module tb_workload_four_detectors;
  import mux_pkg::*;
  localparam int N_CH = 4;
  localparam int PULSE_DELAY = 54, PULSE_LEN = 100;
  localparam int W = 650, E = 3, WOUT = 650, ID_D = 20, TRIG_D = 110;
  localparam int N_FIRES = 1200;

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

  typedef struct { int ch; int step; int amp; } fire_t;
  typedef struct { int ch; int start; } ctrl_t;
  typedef struct { int first_start; int n_on; int ch; } event_t;

  fire_t  fires[$];
  ctrl_t  pred_ctrl[$];
  event_t pred_ev[$];

  // --- stimulus -------------------------------------------------------------
  task automatic make_fires();
    int t = 100;
    int last[N_CH] = '{-100000, -100000, -100000, -100000};
    while (fires.size() < N_FIRES) begin
      int ch = $urandom_range(N_CH - 1, 0);
      t += $urandom_range(1400, 20);
      if (t - last[ch] >= 200) begin
        fires.push_back('{ch, t, $urandom_range(1000, 50)});
        last[ch] = t;
        if ($urandom_range(6, 0) == 0) begin
          int ch2 = (ch + $urandom_range(N_CH - 1, 1)) % N_CH;
          int t2 = t + $urandom_range(6, 0);
          if (t2 - last[ch2] >= 200) begin
            fires.push_back('{ch2, t2, $urandom_range(1000, 50)});
            last[ch2] = t2;
          end
        end
        t += 1;
      end
    end
    fires.sort() with (item.step);
  endtask

  // --- event-level prediction ---------------------------------------------------
  // Step convention: an LED pulse driven in step L is sampled at the next
  // clock edge; registered outputs change one step later.
  task automatic predict();
    int gate_end[N_CH] = '{-1, -1, -1, -1};   // last step a gate is open
    int or_end = -1;                           // last step the OR is HIGH
    int r = -1000000;                          // step the OR last rose
    foreach (fires[f]) begin
      int ch = fires[f].ch, L = fires[f].step;
      if (L < gate_end[ch]) continue;          // own gate still open: ignored
      gate_end[ch] = L + W;
      if (or_end < L) begin
        // OR rises at L+1: a new event, this detector is passed
        r = L + 1;
        pred_ctrl.push_back('{ch, L + 3});
        pred_ev.push_back('{L + 3, 1, ch});
      end else if (L + 1 <= r + E) begin
        // gate opens while the first-arrival pulse is still HIGH
        int h = (L + 1 > r + 1) ? L + 1 : r + 1;
        pred_ctrl.push_back('{ch, h + 1});
        pred_ev[pred_ev.size() - 1].n_on++;
      end
      if (L + W > or_end) or_end = L + W;
    end
  endtask

  function automatic bit ctrl_on(int ch, int k);
    foreach (pred_ctrl[c])
      if (pred_ctrl[c].ch == ch && k >= pred_ctrl[c].start && k < pred_ctrl[c].start + WOUT) return 1;
    return 0;
  endfunction

  function automatic longint predicted_charge();
    longint q = 0;
    foreach (fires[f])
      for (int a = 0; a < PULSE_LEN; a++) begin
        int k = fires[f].step + PULSE_DELAY + a;  // sample a of the delayed pulse
        if (ctrl_on(fires[f].ch, k)) q += fires[f].amp * (PULSE_LEN - a) / PULSE_LEN;
      end
    return q;
  endfunction

  // --- simulation -----------------------------------------------------------------
  ctrl_t seen_ctrl[$];
  int    seen_ctrl_len[$];
  int    trig_rise[$];
  int    id_start[$], id_len[$];

  initial begin
    int total, fi;
    int led_left[N_CH] = '{0, 0, 0, 0};
    int cstart[N_CH];
    logic [N_CH-1:0] pc = '0;
    logic pid = 0, ptr = 0;
    longint charge = 0, q_pred;
    int n_single = 0, n_multi = 0, n_flagged = 0, n_blocked, ev;

    for (int i = 0; i < N_CH; i++) amp[i] = 0;
    make_fires();
    predict();
    total = fires[fires.size() - 1].step + 2000;
    n_blocked = fires.size() - pred_ctrl.size();

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    fi = 0;
    for (int k = 0; k < total; k++) begin
      @(negedge clk);
      fire = '0;
      for (int i = 0; i < N_CH; i++) if (led_left[i] > 0) led_left[i]--;
      while (fi < fires.size() && fires[fi].step == k) begin
        led_left[fires[fi].ch] = 4;
        fire[fires[fi].ch] = 1'b1;
        amp[fires[fi].ch] = fires[fi].amp;
        fi++;
      end
      for (int i = 0; i < N_CH; i++) led_in[i] = (led_left[i] > 0);
      #1;
      charge += -fanin_out;
      for (int i = 0; i < N_CH; i++) begin
        if (control[i] && !pc[i]) cstart[i] = k;
        if (!control[i] && pc[i]) begin
          seen_ctrl.push_back('{i, cstart[i]});
          seen_ctrl_len.push_back(k - cstart[i]);
        end
      end
      if (trigger && !ptr) trig_rise.push_back(k);
      if (id_pulse && !pid) begin id_start.push_back(k); id_len.push_back(0); end
      if (id_pulse) id_len[id_len.size() - 1]++;
      pc = control; pid = id_pulse; ptr = trigger;
    end

    // control pulses
    seen_ctrl.sort() with (item.start * 8 + item.ch);
    pred_ctrl.sort() with (item.start * 8 + item.ch);
    check(seen_ctrl.size() == pred_ctrl.size(),
          $sformatf("%0d control pulses, predicted %0d", seen_ctrl.size(), pred_ctrl.size()));
    for (int c = 0; c < seen_ctrl.size() && c < pred_ctrl.size(); c++)
      check(seen_ctrl[c].ch == pred_ctrl[c].ch && seen_ctrl[c].start == pred_ctrl[c].start,
            $sformatf("control %0d: ch%0d at %0d, predicted ch%0d at %0d", c,
                      seen_ctrl[c].ch, seen_ctrl[c].start, pred_ctrl[c].ch, pred_ctrl[c].start));
    foreach (seen_ctrl_len[c]) check(seen_ctrl_len[c] == WOUT, "control width 650");

    // triggers and identification codes, event by event
    check(trig_rise.size() == pred_ev.size(),
          $sformatf("%0d triggers, predicted %0d events", trig_rise.size(), pred_ev.size()));
    ev = 0;
    foreach (pred_ev[e]) begin
      automatic int codes[$], code_len[$];
      automatic int from = pred_ev[e].first_start, to = pred_ev[e].first_start + WOUT;
      if (e < trig_rise.size())
        check(trig_rise[e] == from + TRIG_D, $sformatf("event %0d trigger at %0d", e, trig_rise[e]));
      foreach (id_start[p]) if (id_start[p] >= from && id_start[p] < to) begin
        codes.push_back(id_start[p]); code_len.push_back(id_len[p]);
      end
      if (pred_ev[e].n_on == 1) begin
        n_single++;
        check(codes.size() == 1 && codes[0] == from + 1 + ID_D && code_len[0] == 20 * (pred_ev[e].ch + 1),
              $sformatf("event %0d: code of detector %0d", e, pred_ev[e].ch));
      end else begin
        n_multi++;
        if (pred_ev[e].n_on == 2 &&
            !(codes.size() == 1 && codes[0] == from + 1 + ID_D &&
              (code_len[0] == 20 || code_len[0] == 40 || code_len[0] == 60 || code_len[0] == 80)))
          n_flagged++;
      end
    end
    check(n_multi > 0 && n_flagged == n_multi, $sformatf("%0d of %0d coincident events flagged", n_flagged, n_multi));
    check(n_blocked > 100, "blocked detectors occurred");

    q_pred = predicted_charge();
    check(charge == q_pred, $sformatf("fan-in charge %0d, predicted %0d", charge, q_pred));

    $display("fires=%0d events=%0d single=%0d coincident=%0d flagged=%0d blocked=%0d",
             fires.size(), pred_ev.size(), n_single, n_multi, n_flagged, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
