// tb_grau_setting_loader: feeds a new random settings entry every cycle and
// checks the skew: k cycles after an entry is loaded, su_bits[k] must carry
// its bit EXPONENTS-1-k, and EXPONENTS cycles after loading its sign, bias,
// zero flag (all shifter bits 0), precision and valid must appear on meta_*.
module tb_grau_setting_loader;
  import grau_pkg::*;
  localparam int IN_W = 32, EXPONENTS = 16, N = 400;
  logic clk = 0, rst_n = 0;
  logic in_valid; logic [EXPONENTS:0] in_setting; logic signed [IN_W-1:0] in_bias; prec_e in_prec;
  logic [EXPONENTS-1:0] su_bits;
  logic meta_valid, meta_sign, meta_zero; logic signed [IN_W-1:0] meta_bias; prec_e meta_prec;
  logic               h_v [N+40];
  logic [EXPONENTS:0] h_s [N+40];
  logic [IN_W-1:0]    h_b [N+40];
  prec_e              h_p [N+40];
  int checks = 0, failures = 0, cyc = 0, zeros = 0;

  grau_setting_loader #(.IN_W(IN_W), .EXPONENTS(EXPONENTS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    h_v[cyc] = in_valid; h_s[cyc] = in_setting; h_b[cyc] = in_bias; h_p[cyc] = in_prec;
    cyc = cyc + 1;
  end

  always @(negedge clk) if (rst_n && cyc > EXPONENTS && cyc < N) begin
    int t;
    for (int k = 0; k < EXPONENTS; k++) begin
      t = cyc - 1 - k;
      checks++;
      if (su_bits[k] !== h_s[t][EXPONENTS-1-k]) begin failures++; $display("FAIL su_bits[%0d] at %0d", k, cyc); end
    end
    t = cyc - 1 - EXPONENTS;
    checks += 5;
    if (meta_valid !== h_v[t]) begin failures++; $display("FAIL meta_valid"); end
    if (meta_sign !== h_s[t][EXPONENTS]) begin failures++; $display("FAIL meta_sign"); end
    if (meta_zero !== (h_s[t][EXPONENTS-1:0] == 0)) begin failures++; $display("FAIL meta_zero"); end
    if (meta_bias !== h_b[t]) begin failures++; $display("FAIL meta_bias"); end
    if (meta_prec !== h_p[t]) begin failures++; $display("FAIL meta_prec"); end
    if (h_s[t][EXPONENTS-1:0] == 0) zeros++;
  end

  initial begin
    in_valid = 0; in_setting = 0; in_bias = 0; in_prec = PREC_8;
    @(posedge clk); @(negedge clk); rst_n = 1;
    for (int n = 0; n < N + 5; n++) begin
      @(negedge clk);
      in_valid = 1'($urandom);
      in_setting = (n % 7 == 0) ? {1'($urandom), {EXPONENTS{1'b0}}} : (EXPONENTS+1)'($urandom);
      in_bias = $signed($urandom);
      in_prec = prec_e'($urandom % 4);
    end
    if (zeros == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
