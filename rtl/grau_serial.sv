// grau_serial: the serialized GRAU activation unit.
//
// Computes the same piecewise linear PoT/APoT activation as grau_pipelined
// with a single comparator and a single shifter unit, reused over cycles:
// the comparator walks the SEGMENTS-1 breakpoints while a counter counts the
// ones reached, the count addresses the settings buffer, the loader places
// the shifter bits in a shift register that feeds one setting bit per cycle
// to the shifter unit, whose outputs are fed back into its inputs, and the
// shared sign/bias/clamp stage produces the result. The structure (MAC,
// threshold, counter, encode, settings buffer and loader, Init, SU, SU Ctl,
// output) follows the paper's serialized-architecture figure; the controller
// sequence and cycle counts are this design's (see grau_serial_ctl).
//
// Interface: valid/ready on the input (one item at a time), a one-cycle
// out_valid pulse on the output, no output back-pressure. Latency from
// acceptance: 2 cycles (1-bit), 4 (2-bit), SEGMENTS+EXPONENTS+3 (4/8-bit).
// Configuration as in grau_pipelined, changed only while busy is low.
module grau_serial
  import grau_pkg::*;
#(
  parameter int       IN_W      = 32,
  parameter int       SEGMENTS  = 6,
  parameter int       EXPONENTS = 16,
  parameter su_kind_e SU_KIND   = SU_APOT,
  localparam int      NT        = SEGMENTS - 1,
  localparam int      CW        = $clog2(SEGMENTS),
  localparam int      MAXC      = (NT > EXPONENTS) ? NT : EXPONENTS,
  localparam int      KW        = $clog2(MAXC) + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_wr_t                cfg,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic signed [IN_W-1:0] in_data,
  output logic                   out_valid,
  output logic [OUT_W-1:0]       out_data,
  output logic                   busy
);

  // ---------------- configuration and settings buffer ----------------
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

  logic [CW-1:0]          count_q;
  logic [EXPONENTS:0]     rd_setting;
  logic signed [IN_W-1:0] rd_bias;

  grau_setting_buffer #(.IN_W(IN_W), .SEGMENTS(SEGMENTS), .EXPONENTS(EXPONENTS)) u_buf (
    .clk, .rst_n,
    .we_setting(buf_we_setting), .we_bias(buf_we_bias), .widx(buf_idx),
    .wsetting(buf_setting), .wbias(buf_bias),
    .ridx(count_q), .rsetting(rd_setting), .rbias(rd_bias)
  );

  // ---------------- controller ----------------
  logic          accept, cmp_en, load, shift_en, fin, byp_out;
  logic [KW-1:0] thr_sel;
  prec_e         item_prec;

  grau_serial_ctl #(.SEGMENTS(SEGMENTS), .EXPONENTS(EXPONENTS)) u_ctl (
    .clk, .rst_n, .in_valid, .prec,
    .in_ready, .accept, .cmp_en, .thr_sel, .load, .shift_en, .fin, .byp_out,
    .item_prec, .busy
  );

  // ---------------- datapath ----------------
  logic signed [IN_W-1:0] x_q, data_q, sum_q, bias_q;
  logic [EXPONENTS-1:0]   sreg_q;
  logic                   sign_q, zero_q;
  logic signed [IN_W-1:0] su_data, su_sum;
  logic                   reached;

  always_comb reached = (x_q >= thresholds[thr_sel[$clog2(NT)-1:0]]);

  if (SU_KIND == SU_POT) begin : g_pot
    grau_su_pot #(.W(IN_W)) u_su (
      .data_in(data_q), .setting_in(sreg_q[EXPONENTS-1]), .data_out(su_data)
    );
    assign su_sum = sum_q;
  end else begin : g_apot
    grau_su_apot #(.W(IN_W)) u_su (
      .data_in(data_q), .sum_in(sum_q), .setting_in(sreg_q[EXPONENTS-1]),
      .data_out(su_data), .sum_out(su_sum)
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q     <= '0;
      count_q <= '0;
      data_q  <= '0;
      sum_q   <= '0;
      sreg_q  <= '0;
      sign_q  <= 1'b0;
      zero_q  <= 1'b0;
      bias_q  <= '0;
    end else begin
      if (accept) begin
        x_q     <= in_data;
        count_q <= '0;
      end
      if (cmp_en && reached) count_q <= count_q + 1'b1;
      if (load) begin
        data_q <= x_q >>> pre_shift;          // Init: pre-right-shift by m
        sum_q  <= '0;
        sreg_q <= rd_setting[EXPONENTS-1:0];  // loader: bits in shift order
        sign_q <= rd_setting[EXPONENTS];
        zero_q <= (rd_setting[EXPONENTS-1:0] == '0);
        bias_q <= rd_bias;
      end
      if (shift_en) begin
        data_q <= su_data;
        sum_q  <= su_sum;
        sreg_q <= sreg_q << 1;
      end
    end
  end

  // ---------------- sign, bias, clamp ----------------
  logic             o_valid;
  logic [OUT_W-1:0] o_data;

  grau_output #(.IN_W(IN_W)) u_out (
    .clk, .rst_n, .out_signed,
    .in_valid(fin), .in_acc((SU_KIND == SU_POT) ? data_q : sum_q),
    .in_sign(sign_q), .in_zero(zero_q), .in_bias(bias_q), .in_prec(item_prec),
    .out_valid(o_valid), .out_data(o_data)
  );

  always_comb begin
    out_valid = o_valid || byp_out;
    out_data  = byp_out ? OUT_W'(count_q) : o_data;
  end

  a_one_result: assert property (@(posedge clk) disable iff (!rst_n) !(o_valid && byp_out));

endmodule
