// tb_grau_su_pot: checks one PoT shifter unit against floor(x/2) or x,
// for random and corner inputs (positive, negative, odd, extremes).
module tb_grau_su_pot;
  import tb_grau_ref_pkg::*;
  localparam int W = 32;
  logic signed [W-1:0] data_in, data_out;
  logic setting_in;
  int checks = 0, failures = 0;

  grau_su_pot #(.W(W)) dut (.data_in, .setting_in, .data_out);

  task automatic check(logic signed [W-1:0] d, logic s);
    longint exp;
    data_in = d; setting_in = s;
    #1;
    exp = s ? floor_div_pow2(longint'(d), 1) : longint'(d);
    checks++;
    if (longint'(data_out) != exp) begin
      failures++;
      $display("FAIL d=%0d s=%0d got %0d exp %0d", d, s, data_out, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'sd7, 1'b1); check(-32'sd7, 1'b1); check(-32'sd1, 1'b1);
    check(32'sd1, 1'b1); check(32'sd100, 1'b0); check(-32'sd100, 1'b0);
    check(32'h7fffffff, 1'b1); check(32'h80000000, 1'b1);
    for (int i = 0; i < 500; i++) check($signed($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
