// grau_init: the "Init" stage, a registered pre-right-shift of the MAC output.
//
// All slopes the paper uses are negative powers of two within a window of
// EXPONENTS consecutive exponents. The Init stage divides the input by 2^m
// (arithmetic right shift by the configured pre_shift m), so the shifter
// chain only has to cover 2^-1 ... 2^-EXPONENTS; together they realise
// slopes 2^-(m+1) ... 2^-(m+EXPONENTS). Because floor(floor(x/2^m)/2^k) equals
// floor(x/2^(m+k)), the pre-shift loses nothing for a PoT slope.
// One register stage (the "pre-right-shifting unit" of the paper's latency
// count); valid travels alongside. The arithmetic (flooring) shift is this
// design's choice.
module grau_init
  import grau_pkg::*;
#(
  parameter int IN_W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [PRE_W-1:0]       pre_shift,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_data,
  output logic                   out_valid,
  output logic signed [IN_W-1:0] out_data
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_data  <= in_data >>> pre_shift;
    end
  end

endmodule
