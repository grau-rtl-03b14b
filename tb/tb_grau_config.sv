// tb_grau_config: issues random configuration writes of every kind and
// checks the threshold registers, pre-shift, precision and signedness
// against a shadow model, and that CFG_SETTING/CFG_BIAS writes (and only
// those, and only with we set) raise the matching buffer strobe with the
// right index and data in the same cycle.
module tb_grau_config;
  import grau_pkg::*;
  localparam int IN_W = 32, SEGMENTS = 6, EXPONENTS = 16, NT = SEGMENTS - 1, CW = $clog2(SEGMENTS);
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic signed [IN_W-1:0] thresholds [NT];
  logic [PRE_W-1:0] pre_shift; prec_e prec; logic out_signed;
  logic buf_we_setting, buf_we_bias; logic [CW-1:0] buf_idx;
  logic [EXPONENTS:0] buf_setting; logic signed [IN_W-1:0] buf_bias;
  logic [IN_W-1:0] sh_thr [NT];
  logic [PRE_W-1:0] sh_m; prec_e sh_prec; logic sh_signed;
  int checks = 0, failures = 0;

  grau_config #(.IN_W(IN_W), .SEGMENTS(SEGMENTS), .EXPONENTS(EXPONENTS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_regs();
    for (int j = 0; j < NT; j++) begin
      checks++;
      if (thresholds[j] !== sh_thr[j]) begin failures++; $display("FAIL thr %0d", j); end
    end
    checks += 3;
    if (pre_shift !== sh_m) begin failures++; $display("FAIL m"); end
    if (prec !== sh_prec) begin failures++; $display("FAIL prec"); end
    if (out_signed !== sh_signed) begin failures++; $display("FAIL signed"); end
  endtask

  initial begin
    cfg = '0;
    for (int j = 0; j < NT; j++) sh_thr[j] = '0;
    sh_m = 0; sh_prec = PREC_8; sh_signed = 1;
    @(posedge clk); @(negedge clk); rst_n = 1;
    check_regs();
    for (int n = 0; n < 400; n++) begin
      logic exp_ws, exp_wb;
      @(negedge clk);
      cfg.we = 1'($urandom % 4 != 0);
      cfg.sel = cfg_sel_e'($urandom % 4);
      cfg.idx = CFG_IW'($urandom % 8);
      cfg.wdata = $urandom;
      #1;
      exp_ws = cfg.we && cfg.sel == CFG_SETTING && cfg.idx < SEGMENTS;
      exp_wb = cfg.we && cfg.sel == CFG_BIAS && cfg.idx < SEGMENTS;
      checks += 2;
      if (buf_we_setting !== exp_ws || buf_we_bias !== exp_wb) begin failures++; $display("FAIL strobes"); end
      if (exp_ws || exp_wb) begin
        checks++;
        if (buf_idx !== CW'(cfg.idx) || buf_setting !== cfg.wdata[EXPONENTS:0] || buf_bias !== cfg.wdata)
          begin failures++; $display("FAIL buffer data"); end
      end
      @(posedge clk); #1;
      if (cfg.we && cfg.sel == CFG_THRESH && cfg.idx < NT) sh_thr[cfg.idx] = cfg.wdata;
      if (cfg.we && cfg.sel == CFG_GLOBAL) begin
        sh_m = cfg.wdata[4:0]; sh_prec = prec_e'(cfg.wdata[6:5]); sh_signed = cfg.wdata[7];
      end
      check_regs();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
