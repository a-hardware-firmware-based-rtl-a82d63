// mux_pkg: types and constants shared by the switching-gate multiplexer logic.
//
// All timing values are counted in cycles of the single 200 MHz system clock
// (1 cycle = 5 ns). The reset defaults below are the settings used with the
// four-channel NaI(Tl) prototype: 650-cycle (3250 ns) input- and output-stage
// pulse shapers, a 3-cycle (15 ns) first-arrival edge detector, identification
// widths of 20/40/60/80 cycles, a 20-cycle identification delay and a
// 110-cycle trigger delay. Counter and delay-register widths are this
// design's own choice.
package mux_pkg;

  localparam int unsigned N_CH_DEFAULT = 4;   // prototype channel count
  localparam int unsigned CNT_W        = 16;  // pulse-width register width
  localparam int unsigned DLY_W        = 8;   // delay register width
  localparam int unsigned MAX_DELAY    = 255; // deepest delay line tap

  localparam logic [CNT_W-1:0] IN_WIDTH_DEFAULT   = 16'd650;
  localparam logic [CNT_W-1:0] EDGE_WIDTH_DEFAULT = 16'd3;
  localparam logic [CNT_W-1:0] OUT_WIDTH_DEFAULT  = 16'd650;
  localparam logic [CNT_W-1:0] ID_WIDTH_STEP      = 16'd20;  // ch i: 20*(i+1)
  localparam logic [DLY_W-1:0] ID_DELAY_DEFAULT   = 8'd20;
  localparam logic [DLY_W-1:0] TRIG_DELAY_DEFAULT = 8'd110;

  // Settings shared by all channels.
  typedef struct packed {
    logic [CNT_W-1:0] in_width;    // input-stage Pulse Shapers
    logic [CNT_W-1:0] edge_width;  // first-arrival Edge Detector
    logic [CNT_W-1:0] out_width;   // output-stage Pulse Shapers (control pulse)
    logic [DLY_W-1:0] id_delay;    // identification pulse Delay unit
    logic [DLY_W-1:0] trig_delay;  // ADC trigger Delay unit
  } mux_cfg_t;

  // Register addresses of config_regs.
  typedef enum logic [3:0] {
    REG_IN_WIDTH   = 4'd0,
    REG_EDGE_WIDTH = 4'd1,
    REG_OUT_WIDTH  = 4'd2,
    REG_ID_DELAY   = 4'd3,
    REG_TRIG_DELAY = 4'd4,
    REG_ID_WIDTH0  = 4'd8   // 8 + channel index
  } reg_addr_e;

  // Default identification width of channel ch.
  function automatic logic [CNT_W-1:0] id_width_default(int unsigned ch);
    return CNT_W'(ID_WIDTH_STEP * (ch + 1));
  endfunction

endpackage
