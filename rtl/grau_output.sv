// grau_output: sign-bit unit, bias adder and output clamp.
//
// Two register stages, as in the paper's latency count ("one sign bit
// processing unit, and one bias adder"):
//   stage 1: p = 0 if the slope is 0, else -acc if the sign bit is set, else acc
//   stage 2: y = clamp(p + bias) to the range of the item's precision
// The clamp reproduces the saturation the paper shows where the folded
// activation leaves the output range (signed 8-bit in its SiLU example).
// Whether the range is signed [-2^(n-1), 2^(n-1)-1] or unsigned [0, 2^n-1]
// is a configuration bit (out_signed); that bit and the clamp placement in
// the bias stage are this design's choices. The result is returned in 8 bits,
// sign-extended for signed output.
module grau_output
  import grau_pkg::*;
#(
  parameter int IN_W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   out_signed,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_acc,
  input  logic                   in_sign,
  input  logic                   in_zero,
  input  logic signed [IN_W-1:0] in_bias,
  input  prec_e                  in_prec,
  output logic                   out_valid,
  output logic [OUT_W-1:0]       out_data
);

  logic                   s1_valid;
  logic signed [IN_W:0]   s1_p;
  logic signed [IN_W-1:0] s1_bias;
  prec_e                  s1_prec;

  logic signed [IN_W+1:0] sum;
  logic signed [IN_W+1:0] lo, hi, y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_p     <= '0;
      s1_bias  <= '0;
      s1_prec  <= PREC_8;
    end else begin
      s1_valid <= in_valid;
      s1_bias  <= in_bias;
      s1_prec  <= in_prec;
      if (in_zero)      s1_p <= '0;
      else if (in_sign) s1_p <= -(IN_W+1)'(in_acc);
      else              s1_p <= (IN_W+1)'(in_acc);
    end
  end

  always_comb begin
    sum = (IN_W+2)'(s1_p) + (IN_W+2)'(s1_bias);
    if (out_signed) begin
      hi = (IN_W+2)'((1 << (prec_bits(s1_prec) - 1)) - 1);
      lo = -(IN_W+2)'(1 << (prec_bits(s1_prec) - 1));
    end else begin
      hi = (IN_W+2)'((1 << prec_bits(s1_prec)) - 1);
      lo = '0;
    end
    if (sum > hi)      y = hi;
    else if (sum < lo) y = lo;
    else               y = sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= s1_valid;
      out_data  <= y[OUT_W-1:0];
    end
  end

endmodule
