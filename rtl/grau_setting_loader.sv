// grau_setting_loader: encode + shifter settings loader of the pipelined GRAU.
//
// The threshold stage's segment count addresses the settings buffer (the
// "Encode" step is the identity: segment index = number of breakpoints
// reached). This block registers the selected entry and then regenerates it
// in the form the shifter pipeline needs: setting bit k reaches shifter stage
// k exactly when the item does, i.e. k cycles after the load. That is the
// diagonal (skewed) arrangement of setting bits drawn in the paper's
// pipelined-architecture figure. The sign bit, the bias, an "all bits zero"
// flag (slope 0, which the PoT chain cannot express by itself) and the
// item's precision are delayed EXPONENTS cycles so that they reach the
// output stage together with the product.
//
// Timing: the load register samples at the same edge as grau_init, so
// su_bits[0] belongs to the item in grau_init's output register, and the
// meta_* outputs belong to the item at the shifter pipeline's output.
module grau_setting_loader
  import grau_pkg::*;
#(
  parameter int IN_W      = 32,
  parameter int EXPONENTS = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [EXPONENTS:0]     in_setting,
  input  logic signed [IN_W-1:0] in_bias,
  input  prec_e                  in_prec,
  output logic [EXPONENTS-1:0]   su_bits,
  output logic                   meta_valid,
  output logic                   meta_sign,
  output logic                   meta_zero,
  output logic signed [IN_W-1:0] meta_bias,
  output prec_e                  meta_prec
);

  typedef struct packed {
    logic                   valid;
    logic                   sign;
    logic                   zero;
    logic signed [IN_W-1:0] bias;
    prec_e                  prec;
  } meta_t;

  logic [EXPONENTS-1:0] l0_bits;
  meta_t                l0_meta;
  meta_t                meta_q [EXPONENTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l0_bits <= '0;
      l0_meta <= '0;
      for (int d = 0; d < EXPONENTS; d++) meta_q[d] <= '0;
    end else begin
      l0_bits       <= in_setting[EXPONENTS-1:0];
      l0_meta.valid <= in_valid;
      l0_meta.sign  <= in_setting[EXPONENTS];
      l0_meta.zero  <= (in_setting[EXPONENTS-1:0] == '0);
      l0_meta.bias  <= in_bias;
      l0_meta.prec  <= in_prec;
      meta_q[0] <= l0_meta;
      for (int d = 1; d < EXPONENTS; d++) meta_q[d] <= meta_q[d-1];
    end
  end

  // Shifter stage 0 uses the first (most significant) setting bit straight
  // from the load register; stage k uses bit EXPONENTS-1-k delayed k cycles.
  assign su_bits[0] = l0_bits[EXPONENTS-1];

  for (genvar k = 1; k < EXPONENTS; k++) begin : g_skew
    logic [k-1:0] chain;
    if (k == 1) begin : g_one
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) chain <= '0;
        else        chain <= l0_bits[EXPONENTS-1-k];
      end
    end else begin : g_many
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) chain <= '0;
        else        chain <= {chain[k-2:0], l0_bits[EXPONENTS-1-k]};
      end
    end
    assign su_bits[k] = chain[k-1];
  end

  always_comb begin
    meta_valid = meta_q[EXPONENTS-1].valid;
    meta_sign  = meta_q[EXPONENTS-1].sign;
    meta_zero  = meta_q[EXPONENTS-1].zero;
    meta_bias  = meta_q[EXPONENTS-1].bias;
    meta_prec  = meta_q[EXPONENTS-1].prec;
  end

endmodule
