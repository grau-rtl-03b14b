// grau_su_pipeline: the chain of EXPONENTS registered shifter units.
//
// Stage k applies one shifter unit (grau_su_pot or grau_su_apot, chosen by
// SU_KIND) with setting bit su_bits[k] and registers the result, so the
// chain multiplies the pre-shifted input by the encoded slope in EXPONENTS
// cycles, one stage per cycle, accepting a new item every cycle.
// PoT: the data path alone carries the result, x >>> (number of set bits).
// APoT: a sum path starts at 0 and collects x >>> (k+1) for every set bit k.
// su_bits must already be skewed (grau_setting_loader): su_bits[k] belongs to
// the item entering stage k in this cycle. Follows the paper's pipelined
// architecture figure; the valid bit travelling with the data is this
// design's addition.
module grau_su_pipeline
  import grau_pkg::*;
#(
  parameter int       IN_W      = 32,
  parameter int       EXPONENTS = 16,
  parameter su_kind_e SU_KIND   = SU_APOT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_data,
  input  logic [EXPONENTS-1:0]   su_bits,
  output logic                   out_valid,
  output logic signed [IN_W-1:0] out_acc
);

  logic                   v_q    [EXPONENTS];
  logic signed [IN_W-1:0] d_q    [EXPONENTS];
  logic signed [IN_W-1:0] s_q    [EXPONENTS];
  logic signed [IN_W-1:0] d_next [EXPONENTS];
  logic signed [IN_W-1:0] s_next [EXPONENTS];

  for (genvar k = 0; k < EXPONENTS; k++) begin : g_stage
    logic signed [IN_W-1:0] d_in, s_in;
    if (k == 0) begin : g_first
      assign d_in = in_data;
      assign s_in = '0;
    end else begin : g_next
      assign d_in = d_q[k-1];
      assign s_in = s_q[k-1];
    end

    if (SU_KIND == SU_POT) begin : g_pot
      grau_su_pot #(.W(IN_W)) u_su (
        .data_in   (d_in),
        .setting_in(su_bits[k]),
        .data_out  (d_next[k])
      );
      assign s_next[k] = '0;
    end else begin : g_apot
      grau_su_apot #(.W(IN_W)) u_su (
        .data_in   (d_in),
        .sum_in    (s_in),
        .setting_in(su_bits[k]),
        .data_out  (d_next[k]),
        .sum_out   (s_next[k])
      );
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v_q[k] <= 1'b0;
        d_q[k] <= '0;
        s_q[k] <= '0;
      end else begin
        v_q[k] <= (k == 0) ? in_valid : v_q[(k == 0) ? 0 : k-1];
        d_q[k] <= d_next[k];
        s_q[k] <= s_next[k];
      end
    end
  end

  always_comb begin
    out_valid = v_q[EXPONENTS-1];
    out_acc   = (SU_KIND == SU_POT) ? d_q[EXPONENTS-1] : s_q[EXPONENTS-1];
  end

endmodule
