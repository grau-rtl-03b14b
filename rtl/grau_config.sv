// grau_config: run-time configuration registers of one GRAU core.
//
// The paper reconfigures GRAU by reloading "a small set of breakpoint and
// shift-encoding registers". This block decodes writes from the configuration
// bus (grau_pkg::cfg_wr_t): it holds the SEGMENTS-1 breakpoints, the global
// pre-shift amount m, the output precision and the output signedness, and
// turns CFG_SETTING / CFG_BIAS writes into write strobes for the settings
// buffer. A write takes effect at the next clock edge. The register map,
// the reset values (all breakpoints 0, m = 0, 8-bit signed output) and the
// rule that configuration changes only while the core is idle are this
// design's own choices.
module grau_config
  import grau_pkg::*;
#(
  parameter int IN_W      = 32,
  parameter int SEGMENTS  = 6,
  parameter int EXPONENTS = 16,
  localparam int NT       = SEGMENTS - 1,
  localparam int CW       = $clog2(SEGMENTS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_wr_t                cfg,
  output logic signed [IN_W-1:0] thresholds [NT],
  output logic [PRE_W-1:0]       pre_shift,
  output prec_e                  prec,
  output logic                   out_signed,
  output logic                   buf_we_setting,
  output logic                   buf_we_bias,
  output logic [CW-1:0]          buf_idx,
  output logic [EXPONENTS:0]     buf_setting,
  output logic signed [IN_W-1:0] buf_bias
);

  initial begin
    assert (EXPONENTS < CFG_DW) else $error("grau_config: setting word wider than the bus");
  end

  logic signed [IN_W-1:0] wvalue;
  always_comb wvalue = IN_W'($signed(cfg.wdata));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NT; j++) thresholds[j] <= '0;
      pre_shift  <= '0;
      prec       <= PREC_8;
      out_signed <= 1'b1;
    end else if (cfg.we) begin
      if (cfg.sel == CFG_THRESH && int'(cfg.idx) < NT)
        thresholds[CW'(cfg.idx)] <= wvalue;
      if (cfg.sel == CFG_GLOBAL) begin
        pre_shift  <= cfg.wdata[PRE_W-1:0];
        prec       <= prec_e'(cfg.wdata[6:5]);
        out_signed <= cfg.wdata[7];
      end
    end
  end

  always_comb begin
    buf_we_setting = cfg.we && cfg.sel == CFG_SETTING && int'(cfg.idx) < SEGMENTS;
    buf_we_bias    = cfg.we && cfg.sel == CFG_BIAS    && int'(cfg.idx) < SEGMENTS;
    buf_idx        = CW'(cfg.idx);
    buf_setting    = cfg.wdata[EXPONENTS:0];
    buf_bias       = wvalue;
  end

endmodule
