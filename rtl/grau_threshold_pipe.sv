// grau_threshold_pipe: pipelined breakpoint comparison (segment classifier).
//
// A function with SEGMENTS linear segments has SEGMENTS-1 breakpoints
// (inputs below the first or above the last belong to the outer segments).
// Stage j compares the MAC output with breakpoint j and adds 1 to a running
// count when the input is at or above it; after SEGMENTS-1 stages the count is
// the index of the segment the input falls in. One comparator per cycle,
// as in the paper's latency breakdown ("3/5/7 thresholds" take 3/5/7 cycles).
//
// The same count is the output of a multi-threshold activation: after stage 1
// it is a 1-bit result, after stage 3 a 2-bit result. These two taps form the
// 1/2-bit bypass with latency 1 and 3 cycles, the figures the paper reports.
// "At or above" (>=) is this design's choice; the paper says "exceeds".
// Breakpoints must be programmed in ascending order.
//
// Interface: in_valid/in_data/in_prec enter every cycle (no back-pressure).
// out_* leave SEGMENTS-1 cycles later for 4/8-bit items only; byp1_* and
// byp2_* fire for 1-bit and 2-bit items. Each item carries its precision tag.
module grau_threshold_pipe
  import grau_pkg::*;
#(
  parameter int IN_W     = 32,
  parameter int SEGMENTS = 6,
  localparam int NT      = SEGMENTS - 1,
  localparam int CW      = $clog2(SEGMENTS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [IN_W-1:0] thresholds [NT],
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_data,
  input  prec_e                  in_prec,
  output logic                   out_valid,
  output logic signed [IN_W-1:0] out_data,
  output logic [CW-1:0]          out_count,
  output prec_e                  out_prec,
  output logic                   byp1_valid,
  output logic [0:0]             byp1_count,
  output logic                   byp2_valid,
  output logic [1:0]             byp2_count
);

  initial begin
    assert (SEGMENTS >= 4)
      else $error("grau_threshold_pipe: the 2-bit bypass needs at least 3 breakpoints");
  end

  logic                   v [NT];
  logic signed [IN_W-1:0] x [NT];
  logic [CW-1:0]          c [NT];
  prec_e                  p [NT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NT; j++) begin
        v[j] <= 1'b0;
        x[j] <= '0;
        c[j] <= '0;
        p[j] <= PREC_8;
      end
    end else begin
      v[0] <= in_valid;
      x[0] <= in_data;
      p[0] <= in_prec;
      c[0] <= CW'(in_data >= thresholds[0]);
      for (int j = 1; j < NT; j++) begin
        v[j] <= v[j-1];
        x[j] <= x[j-1];
        p[j] <= p[j-1];
        c[j] <= c[j-1] + CW'(x[j-1] >= thresholds[j]);
      end
    end
  end

  always_comb begin
    byp1_valid = v[0] && (p[0] == PREC_1);
    byp1_count = c[0][0];
    byp2_valid = v[2] && (p[2] == PREC_2);
    byp2_count = c[2][1:0];
    out_valid  = v[NT-1] && (p[NT-1] == PREC_4 || p[NT-1] == PREC_8);
    out_data   = x[NT-1];
    out_count  = c[NT-1];
    out_prec   = p[NT-1];
  end

endmodule
