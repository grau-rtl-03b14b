// grau_su_apot: one shifter unit for additive-power-of-two (APoT) slopes.
//
// The unit always shifts its data input right by one bit and hands the
// shifted value on; when its 1-bit setting is 1 it also adds that shifted
// value to the running sum coming from the previous unit (a multiplexer
// between the shifted data and 0 feeds the adder). A chain of E units
// therefore forms sum over set bits k of x / 2^(k+1): the input times an
// APoT slope. Structure follows the paper's shifter-unit figure (b); the
// arithmetic shift (floor division for negative inputs) is this design's
// choice. Purely combinational; registers live in grau_su_pipeline.
module grau_su_apot #(
  parameter int W = 32
) (
  input  logic signed [W-1:0] data_in,
  input  logic signed [W-1:0] sum_in,
  input  logic                setting_in,
  output logic signed [W-1:0] data_out,
  output logic signed [W-1:0] sum_out
);

  logic signed [W-1:0] shifted;

  always_comb begin
    shifted  = data_in >>> 1;
    data_out = shifted;
    sum_out  = sum_in + (setting_in ? shifted : '0);
  end

endmodule
