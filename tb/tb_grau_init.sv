// tb_grau_init: checks the registered pre-right-shift: one cycle after an
// input, out_data = floor(x / 2^m) and out_valid follows in_valid.
module tb_grau_init;
  import grau_pkg::*;
  import tb_grau_ref_pkg::*;
  localparam int IN_W = 32;
  logic clk = 0, rst_n = 0;
  logic [PRE_W-1:0] pre_shift;
  logic in_valid, out_valid;
  logic signed [IN_W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  longint exp_d; logic exp_v;

  grau_init #(.IN_W(IN_W)) dut (.clk, .rst_n, .pre_shift, .in_valid, .in_data, .out_valid, .out_data);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = 0; pre_shift = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      in_valid  = 1'($urandom);
      in_data   = $signed($urandom);
      pre_shift = PRE_W'($urandom);
      exp_d = floor_div_pow2(longint'(in_data), int'(pre_shift));
      exp_v = in_valid;
      @(posedge clk); #1;
      checks += 2;
      if (out_valid !== exp_v) begin failures++; $display("FAIL valid"); end
      if (longint'(out_data) != exp_d) begin
        failures++; $display("FAIL x=%0d m=%0d got %0d exp %0d", in_data, pre_shift, out_data, exp_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
