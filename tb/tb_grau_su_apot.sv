// tb_grau_su_apot: checks one APoT shifter unit: data_out = floor(x/2) and
// sum_out = sum_in + (setting ? floor(x/2) : 0), modulo 2^32.
module tb_grau_su_apot;
  import tb_grau_ref_pkg::*;
  localparam int W = 32;
  logic signed [W-1:0] data_in, sum_in, data_out, sum_out;
  logic setting_in;
  int checks = 0, failures = 0;

  grau_su_apot #(.W(W)) dut (.data_in, .sum_in, .setting_in, .data_out, .sum_out);

  task automatic check(logic signed [W-1:0] d, logic signed [W-1:0] s, logic b);
    longint half;
    logic [W-1:0] exp_sum;
    data_in = d; sum_in = s; setting_in = b;
    #1;
    half = floor_div_pow2(longint'(d), 1);
    exp_sum = W'(longint'(s) + (b ? half : 0));
    checks += 2;
    if (longint'(data_out) != half) begin
      failures++;
      $display("FAIL data d=%0d got %0d exp %0d", d, data_out, half);
    end
    if (sum_out !== exp_sum) begin
      failures++;
      $display("FAIL sum d=%0d s=%0d b=%0d got %0d exp %0d", d, s, b, sum_out, exp_sum);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'sd64, 32'sd0, 1'b1); check(-32'sd9, 32'sd3, 1'b1);
    check(-32'sd9, 32'sd3, 1'b0); check(32'sd1000, -32'sd5, 1'b1);
    for (int i = 0; i < 500; i++)
      check($signed($urandom) >>> ($urandom % 8), $signed($urandom) >>> 4, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
