// switching_gate_mux: FPGA logic of an N-to-2 switching-gate multiplexer for
// pulse-mode radiation detectors.
//
// Each detector has a leading-edge discriminator whose pulse arrives on
// led_in. The logic closes the analog switch of the first detector that fired
// for a fixed time (control), blocks all others, and produces two more
// outputs for the digitizer: a delayed pulse-width-coded identification pulse
// (id_pulse, ADC channel 1) and a delayed external trigger (trigger). The
// analog path (amplifiers, delay line, switches and summing fan-in) is outside
// this module.
//
//   switch_trigger_logic  led_in  -> control  (first-arrival gating)
//   detector_id_logic     control -> id_pulse (PWM code, XOR fan-in, delay)
//   adc_trigger_logic     control -> trigger  (OR fan-in, delay)
//   config_regs           host port -> all Pulse Width / Delay settings
//
// Timing with the reset settings (1 cycle = 5 ns at 200 MHz): a discriminator
// pulse first sampled at clock edge t0 gives control[i] HIGH for 650 cycles
// from the cycle after edge t0+2. id_pulse is HIGH for 20*(i+1) cycles from
// t0+3+20, and trigger is HIGH for 650 cycles from t0+2+110. Any detector
// that fires while the 650-cycle input gates are still open is blocked.
//
// The outputs are not re-registered. control is a decode of the output-stage
// counters (counter != 0). id_pulse and trigger come from delay-line
// flip-flops whenever their delay is non-zero. The split into the three units and
// their internal structure follow the published design; the settings register
// port and the pin-out as plain ports are this design's own.
module switching_gate_mux
  import mux_pkg::*;
#(
  parameter int unsigned N_CH = N_CH_DEFAULT
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_CH-1:0] led_in,
  input  logic            cfg_we,
  input  logic [3:0]      cfg_addr,
  input  logic [15:0]     cfg_wdata,
  output logic [15:0]     cfg_rdata,
  output logic [N_CH-1:0] control,
  output logic            id_pulse,
  output logic            trigger
);

  mux_cfg_t                   cfg;
  logic [N_CH-1:0][CNT_W-1:0] id_width;

  config_regs #(.N_CH(N_CH)) u_regs (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .cfg, .id_width
  );

  switch_trigger_logic #(.N_CH(N_CH), .CNT_W(CNT_W)) u_switch_trigger (
    .clk, .rst_n,
    .in_width(cfg.in_width), .edge_width(cfg.edge_width), .out_width(cfg.out_width),
    .led_in, .control
  );

  detector_id_logic #(.N_CH(N_CH), .CNT_W(CNT_W), .DLY_W(DLY_W), .MAX_DELAY(MAX_DELAY)) u_detector_id (
    .clk, .rst_n, .control, .id_width, .id_delay(cfg.id_delay), .pwm(), .id_pulse
  );

  adc_trigger_logic #(.N_CH(N_CH), .DLY_W(DLY_W), .MAX_DELAY(MAX_DELAY)) u_adc_trigger (
    .clk, .rst_n, .control, .trig_delay(cfg.trig_delay), .trigger
  );

endmodule
