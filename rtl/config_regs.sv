// config_regs: the programmable settings of the multiplexer logic.
//
// One register feeds each Pulse Width or Delay input: the input-stage and
// output-stage shaper widths, the first-arrival edge width, the identification
// and trigger delays, and one identification width per channel. Reset loads the
// prototype settings (650, 3, 650, 20, 110 and 20*(i+1) cycles), so the logic
// works with no host access at all.
//
// Host port (this design's own, the board's bus is outside the scope): a
// one-cycle write strobe cfg_we with cfg_addr/cfg_wdata writes a register at
// the next clock edge; cfg_rdata returns the register at cfg_addr
// combinationally (0 for unused addresses). Values wider than a register are
// truncated.
//
// Address map: 0 input width, 1 edge width, 2 output width, 3 identification
// delay, 4 trigger delay, 8+i identification width of channel i.
module config_regs
  import mux_pkg::*;
#(
  parameter int unsigned      N_CH           = 4,
  parameter logic [CNT_W-1:0] IN_WIDTH_RST   = IN_WIDTH_DEFAULT,
  parameter logic [CNT_W-1:0] EDGE_WIDTH_RST = EDGE_WIDTH_DEFAULT,
  parameter logic [CNT_W-1:0] OUT_WIDTH_RST  = OUT_WIDTH_DEFAULT,
  parameter logic [CNT_W-1:0] ID_WIDTH_STEP_RST = ID_WIDTH_STEP,
  parameter logic [DLY_W-1:0] ID_DELAY_RST   = ID_DELAY_DEFAULT,
  parameter logic [DLY_W-1:0] TRIG_DELAY_RST = TRIG_DELAY_DEFAULT
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_we,
  input  logic [3:0]                 cfg_addr,
  input  logic [15:0]                cfg_wdata,
  output logic [15:0]                cfg_rdata,
  output mux_cfg_t                   cfg,
  output logic [N_CH-1:0][CNT_W-1:0] id_width
);

  initial assert (N_CH <= 8) else $error("config_regs: address map holds at most 8 channels");

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg.in_width   <= IN_WIDTH_RST;
      cfg.edge_width <= EDGE_WIDTH_RST;
      cfg.out_width  <= OUT_WIDTH_RST;
      cfg.id_delay   <= ID_DELAY_RST;
      cfg.trig_delay <= TRIG_DELAY_RST;
      for (int i = 0; i < N_CH; i++)
        id_width[i] <= CNT_W'(ID_WIDTH_STEP_RST * (i + 1));
    end else if (cfg_we) begin
      case (cfg_addr)
        REG_IN_WIDTH:   cfg.in_width   <= CNT_W'(cfg_wdata);
        REG_EDGE_WIDTH: cfg.edge_width <= CNT_W'(cfg_wdata);
        REG_OUT_WIDTH:  cfg.out_width  <= CNT_W'(cfg_wdata);
        REG_ID_DELAY:   cfg.id_delay   <= DLY_W'(cfg_wdata);
        REG_TRIG_DELAY: cfg.trig_delay <= DLY_W'(cfg_wdata);
        default: begin
          for (int i = 0; i < N_CH; i++)
            if (cfg_addr == 4'(int'(REG_ID_WIDTH0) + i))
              id_width[i] <= CNT_W'(cfg_wdata);
        end
      endcase
    end
  end

  always_comb begin
    cfg_rdata = '0;
    case (cfg_addr)
      REG_IN_WIDTH:   cfg_rdata = 16'(cfg.in_width);
      REG_EDGE_WIDTH: cfg_rdata = 16'(cfg.edge_width);
      REG_OUT_WIDTH:  cfg_rdata = 16'(cfg.out_width);
      REG_ID_DELAY:   cfg_rdata = 16'(cfg.id_delay);
      REG_TRIG_DELAY: cfg_rdata = 16'(cfg.trig_delay);
      default: begin
        for (int i = 0; i < N_CH; i++)
          if (cfg_addr == 4'(int'(REG_ID_WIDTH0) + i))
            cfg_rdata = 16'(id_width[i]);
      end
    endcase
  end

endmodule
