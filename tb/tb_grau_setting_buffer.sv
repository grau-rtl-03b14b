// tb_grau_setting_buffer: writes random settings and biases into random
// entries (including out-of-range indices, which must be ignored) and reads
// every entry back against a shadow copy, after reset and after each write.
module tb_grau_setting_buffer;
  localparam int IN_W = 32, SEGMENTS = 6, EXPONENTS = 16, CW = $clog2(SEGMENTS);
  logic clk = 0, rst_n = 0;
  logic we_setting, we_bias;
  logic [CW-1:0] widx, ridx;
  logic [EXPONENTS:0] wsetting, rsetting;
  logic signed [IN_W-1:0] wbias, rbias;
  logic [EXPONENTS:0] sh_set [SEGMENTS];
  logic [IN_W-1:0]    sh_bias [SEGMENTS];
  int checks = 0, failures = 0;

  grau_setting_buffer #(.IN_W(IN_W), .SEGMENTS(SEGMENTS), .EXPONENTS(EXPONENTS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all();
    for (int i = 0; i < SEGMENTS; i++) begin
      ridx = CW'(i); #1;
      checks += 2;
      if (rsetting !== sh_set[i]) begin failures++; $display("FAIL setting %0d", i); end
      if (rbias !== sh_bias[i]) begin failures++; $display("FAIL bias %0d", i); end
    end
  endtask

  initial begin
    we_setting = 0; we_bias = 0; widx = 0; ridx = 0; wsetting = 0; wbias = 0;
    for (int i = 0; i < SEGMENTS; i++) begin sh_set[i] = '0; sh_bias[i] = '0; end
    @(posedge clk); @(negedge clk); rst_n = 1;
    read_all();
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      we_setting = 1'($urandom); we_bias = 1'($urandom);
      widx = CW'($urandom % 8);
      wsetting = (EXPONENTS+1)'($urandom); wbias = $signed($urandom);
      @(posedge clk); #1;
      if (int'(widx) < SEGMENTS) begin
        if (we_setting) sh_set[widx] = wsetting;
        if (we_bias) sh_bias[widx] = wbias;
      end
      we_setting = 0; we_bias = 0;
      read_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
