// grau_su_pot: one shifter unit for power-of-two (PoT) slopes.
//
// The unit passes either its input or its input shifted right by one bit to
// the next unit; the 1-bit setting selects which (setting 1 = shift). A chain
// of these units with k settings at 1 divides the input by 2^k, so a
// thermometer-coded setting word selects a single power of two.
// Structure (a shifter, a 2:1 multiplexer, setting as select) follows the
// paper's shifter-unit figure (a). The shift is arithmetic, so negative MAC
// outputs are divided with rounding towards minus infinity: that is this
// design's choice, the paper only draws ">>".
// Purely combinational; the pipeline register lives in grau_su_pipeline.
module grau_su_pot #(
  parameter int W = 32
) (
  input  logic signed [W-1:0] data_in,
  input  logic                setting_in,
  output logic signed [W-1:0] data_out
);

  always_comb begin
    data_out = setting_in ? (data_in >>> 1) : data_in;
  end

endmodule
