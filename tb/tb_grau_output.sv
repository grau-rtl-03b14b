// tb_grau_output: random products, signs, zero flags, biases, precisions and
// signedness through the sign/bias/clamp stage; each result must appear two
// cycles later and equal clamp((zero ? 0 : sign ? -acc : acc) + bias) to the
// precision's signed or unsigned range. Counts clamps at both ends.
module tb_grau_output;
  import grau_pkg::*;
  localparam int IN_W = 32, N = 800;
  logic clk = 0, rst_n = 0;
  logic out_signed, in_valid, in_sign, in_zero;
  logic signed [IN_W-1:0] in_acc, in_bias; prec_e in_prec;
  logic out_valid; logic [OUT_W-1:0] out_data;
  logic h_v [N+10];
  int checks = 0, failures = 0, cyc = 0, n_hi = 0, n_lo = 0, n_mid = 0;

  grau_output #(.IN_W(IN_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The sum is taken at the input; the clamp uses the signedness present when
  // the second stage computes (one edge later), as the configuration is static.
  longint h_raw [N+10]; int h_nb [N+10]; logic h_sg [N+10];

  always @(posedge clk) if (rst_n) begin
    longint p;
    p = in_zero ? 0 : (in_sign ? -longint'(in_acc) : longint'(in_acc));
    h_raw[cyc] = p + longint'(in_bias);
    h_nb[cyc] = 1 << int'(in_prec);
    h_v[cyc] = in_valid; h_sg[cyc] = out_signed;
    cyc = cyc + 1;
  end

  always @(negedge clk) if (rst_n && cyc >= 2 && cyc < N) begin
    int t, nb;
    longint y, lo, hi;
    t = cyc - 2;
    nb = h_nb[t];
    lo = h_sg[t+1] ? -(longint'(1) << (nb - 1)) : 0;
    hi = h_sg[t+1] ? (longint'(1) << (nb - 1)) - 1 : (longint'(1) << nb) - 1;
    y = h_raw[t];
    if (y > hi) begin y = hi; if (h_v[t]) n_hi++; end
    else if (y < lo) begin y = lo; if (h_v[t]) n_lo++; end
    else if (h_v[t]) n_mid++;
    checks++;
    if (out_valid !== h_v[t]) begin failures++; $display("FAIL valid"); end
    if (h_v[t]) begin
      checks++;
      if (out_data !== y[7:0]) begin failures++; $display("FAIL t=%0d got %h exp %h", t, out_data, y[7:0]); end
    end
  end

  initial begin
    in_valid = 0; in_sign = 0; in_zero = 0; in_acc = 0; in_bias = 0; in_prec = PREC_8; out_signed = 1;
    @(posedge clk); @(negedge clk); rst_n = 1;
    for (int n = 0; n < N + 5; n++) begin
      @(negedge clk);
      in_valid = 1'($urandom % 4 != 0);
      in_sign = 1'($urandom); in_zero = ($urandom % 8 == 0);
      in_acc = ($urandom % 4 == 0) ? $signed($urandom) : $signed($urandom % 600) - 300;
      in_bias = $signed($urandom % 200) - 100;
      in_prec = prec_e'($urandom % 4);
      out_signed = 1'($urandom);
    end
    $display("clamp_hi=%0d clamp_lo=%0d in_range=%0d", n_hi, n_lo, n_mid);
    if (n_hi == 0 || n_lo == 0 || n_mid == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
