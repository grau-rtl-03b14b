// grau_pipelined: the pipelined GRAU activation unit.
//
// Takes one signed integer MAC output per cycle and returns the quantised,
// activated value: a piecewise linear function whose segment slopes are
// PoT or APoT numbers (SU_KIND), computed without multipliers.
//
//   MAC -> threshold pipeline (SEGMENTS-1 cycles) -> segment index
//       -> settings buffer read + loader register  | Init pre-shift (1 cycle)
//       -> shifter-unit pipeline (EXPONENTS cycles)
//       -> sign unit (1 cycle) -> bias adder + clamp (1 cycle) -> output
//
// Latency for 4- and 8-bit outputs is SEGMENTS + EXPONENTS + 2 cycles (24 for
// 6 segments and 16 exponents), the pipeline depths the paper reports for its
// pipelined instances. For 1- and 2-bit outputs the unit acts as a
// multi-threshold activation and the count of breakpoints reached leaves
// through a bypass after 1 or 3 cycles, also as reported. Throughput is one
// item per cycle; there is no back-pressure.
//
// Configuration (breakpoints, per-segment sign/shift bits/bias, pre-shift,
// precision, signedness) is written through cfg (see grau_pkg) and must only
// change while busy is low: an item takes the precision that was set when it
// entered. An item reaches a breakpoint when it is >= that breakpoint.
// The block structure follows the paper's pipelined-architecture figure;
// widths, the register map, the clamp and the bypass mux are this design's.
module grau_pipelined
  import grau_pkg::*;
#(
  parameter int       IN_W      = 32,
  parameter int       SEGMENTS  = 6,
  parameter int       EXPONENTS = 16,
  parameter su_kind_e SU_KIND   = SU_APOT,
  localparam int      NT        = SEGMENTS - 1,
  localparam int      CW        = $clog2(SEGMENTS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_wr_t                cfg,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_data,
  output logic                   out_valid,
  output logic [OUT_W-1:0]       out_data,
  output logic                   busy
);

  // ---------------- configuration ----------------
  logic signed [IN_W-1:0] thresholds [NT];
  logic [PRE_W-1:0]       pre_shift;
  prec_e                  prec;
  logic                   out_signed;
  logic                   buf_we_setting, buf_we_bias;
  logic [CW-1:0]          buf_idx;
  logic [EXPONENTS:0]     buf_setting;
  logic signed [IN_W-1:0] buf_bias;

  grau_config #(.IN_W(IN_W), .SEGMENTS(SEGMENTS), .EXPONENTS(EXPONENTS)) u_cfg (
    .clk, .rst_n, .cfg,
    .thresholds, .pre_shift, .prec, .out_signed,
    .buf_we_setting, .buf_we_bias, .buf_idx, .buf_setting, .buf_bias
  );

  // ---------------- threshold pipeline ----------------
  logic                   th_valid;
  logic signed [IN_W-1:0] th_data;
  logic [CW-1:0]          th_count;
  prec_e                  th_prec;
  logic                   byp1_valid, byp2_valid;
  logic [0:0]             byp1_count;
  logic [1:0]             byp2_count;

  grau_threshold_pipe #(.IN_W(IN_W), .SEGMENTS(SEGMENTS)) u_thr (
    .clk, .rst_n, .thresholds,
    .in_valid, .in_data, .in_prec(prec),
    .out_valid(th_valid), .out_data(th_data), .out_count(th_count), .out_prec(th_prec),
    .byp1_valid, .byp1_count, .byp2_valid, .byp2_count
  );

  // ---------------- settings buffer, loader, init ----------------
  logic [EXPONENTS:0]     rd_setting;
  logic signed [IN_W-1:0] rd_bias;

  grau_setting_buffer #(.IN_W(IN_W), .SEGMENTS(SEGMENTS), .EXPONENTS(EXPONENTS)) u_buf (
    .clk, .rst_n,
    .we_setting(buf_we_setting), .we_bias(buf_we_bias), .widx(buf_idx),
    .wsetting(buf_setting), .wbias(buf_bias),
    .ridx(th_count), .rsetting(rd_setting), .rbias(rd_bias)
  );

  logic [EXPONENTS-1:0]   su_bits;
  logic                   meta_valid, meta_sign, meta_zero;
  logic signed [IN_W-1:0] meta_bias;
  prec_e                  meta_prec;

  grau_setting_loader #(.IN_W(IN_W), .EXPONENTS(EXPONENTS)) u_ld (
    .clk, .rst_n,
    .in_valid(th_valid), .in_setting(rd_setting), .in_bias(rd_bias), .in_prec(th_prec),
    .su_bits, .meta_valid, .meta_sign, .meta_zero, .meta_bias, .meta_prec
  );

  logic                   init_valid;
  logic signed [IN_W-1:0] init_data;

  grau_init #(.IN_W(IN_W)) u_init (
    .clk, .rst_n, .pre_shift,
    .in_valid(th_valid), .in_data(th_data),
    .out_valid(init_valid), .out_data(init_data)
  );

  // ---------------- shifter pipeline ----------------
  logic                   su_valid;
  logic signed [IN_W-1:0] su_acc;

  grau_su_pipeline #(.IN_W(IN_W), .EXPONENTS(EXPONENTS), .SU_KIND(SU_KIND)) u_sup (
    .clk, .rst_n,
    .in_valid(init_valid), .in_data(init_data), .su_bits,
    .out_valid(su_valid), .out_acc(su_acc)
  );

  // ---------------- sign, bias, clamp ----------------
  logic             full_valid;
  logic [OUT_W-1:0] full_data;

  grau_output #(.IN_W(IN_W)) u_out (
    .clk, .rst_n, .out_signed,
    .in_valid(su_valid), .in_acc(su_acc), .in_sign(meta_sign), .in_zero(meta_zero),
    .in_bias(meta_bias), .in_prec(meta_prec),
    .out_valid(full_valid), .out_data(full_data)
  );

  // ---------------- output mux: bypass or full path ----------------
  always_comb begin
    out_valid = byp1_valid || byp2_valid || full_valid;
    if (byp1_valid)      out_data = OUT_W'(byp1_count);
    else if (byp2_valid) out_data = OUT_W'(byp2_count);
    else                 out_data = full_data;
  end

  // Items in flight, for the "reconfigure only when idle" rule.
  logic [7:0] inflight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + 8'(in_valid) - 8'(out_valid);
  end
  assign busy = (inflight != 0);

  // The loader's metadata and the shifter data must stay aligned, and at most
  // one of the three result sources may fire in a cycle.
  a_align: assert property (@(posedge clk) disable iff (!rst_n) su_valid == meta_valid);
  a_one_result: assert property (@(posedge clk) disable iff (!rst_n)
                                 $onehot0({byp1_valid, byp2_valid, full_valid}));

endmodule
