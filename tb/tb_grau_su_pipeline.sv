// tb_grau_su_pipeline: streams random pre-shifted inputs and random slope
// encodings through a PoT and an APoT shifter pipeline, delivering setting
// bit k to stage k k cycles after the item entered (as the loader does), and
// checks each product, EXPONENTS cycles later, against the floor-division
// reference: PoT x / 2^popcount, APoT sum of x / 2^(k+1) over set bits.
module tb_grau_su_pipeline;
  import grau_pkg::*;
  import tb_grau_ref_pkg::*;
  localparam int IN_W = 32, E = 16, N = 400;
  logic clk = 0, rst_n = 0;
  logic in_valid; logic signed [IN_W-1:0] in_data;
  logic [E-1:0] su_bits_p, su_bits_a;
  logic v_p, v_a; logic signed [IN_W-1:0] acc_p, acc_a;
  logic         h_v [N+40];
  longint       h_x [N+40];
  logic [E-1:0] h_bp [N+40];
  logic [E-1:0] h_ba [N+40];
  int checks = 0, failures = 0, cyc = 0;

  grau_su_pipeline #(.IN_W(IN_W), .EXPONENTS(E), .SU_KIND(SU_POT)) dut_p (
    .clk, .rst_n, .in_valid, .in_data, .su_bits(su_bits_p), .out_valid(v_p), .out_acc(acc_p));
  grau_su_pipeline #(.IN_W(IN_W), .EXPONENTS(E), .SU_KIND(SU_APOT)) dut_a (
    .clk, .rst_n, .in_valid, .in_data, .su_bits(su_bits_a), .out_valid(v_a), .out_acc(acc_a));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // skewed setting delivery: stage k sees the bits of the item that entered k cycles ago
  always_comb begin
    for (int k = 0; k < E; k++) begin
      int t;
      t = cyc - k;
      su_bits_p[k] = (t >= 0) ? h_bp[t][E-1-k] : 1'b0;
      su_bits_a[k] = (t >= 0) ? h_ba[t][E-1-k] : 1'b0;
    end
  end

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && cyc >= E && cyc < N) begin
    int t, ones;
    longint ep, ea;
    t = cyc - E;
    ones = $countones(h_bp[t]);
    ep = floor_div_pow2(h_x[t], ones);
    ea = 0;
    for (int i = 0; i < E; i++) if (h_ba[t][i]) ea += floor_div_pow2(h_x[t], E - i);
    checks += 4;
    if (v_p !== h_v[t] || v_a !== h_v[t]) begin failures++; $display("FAIL valid"); end
    if (longint'(acc_p) != ep) begin failures++; $display("FAIL pot x=%0d bits=%h got %0d exp %0d", h_x[t], h_bp[t], acc_p, ep); end
    if (longint'(acc_a) != ea) begin failures++; $display("FAIL apot x=%0d bits=%h got %0d exp %0d", h_x[t], h_ba[t], acc_a, ea); end
    if (t > 0 && longint'(acc_a) == 0 && ea != 0) failures++;
  end

  initial begin
    for (int i = 0; i < N + 40; i++) begin
      int k;
      h_v[i] = 1'($urandom); h_x[i] = longint'($signed($urandom));
      k = $urandom % (E + 1);
      h_bp[i] = E'(((longint'(1) << E) - (longint'(1) << (E - k))));   // thermometer code
      h_ba[i] = E'($urandom);
    end
    in_valid = 0; in_data = 0;
    @(posedge clk); @(negedge clk); rst_n = 1;
    for (int n = 0; n < N + 5; n++) begin
      in_valid = h_v[cyc]; in_data = IN_W'(h_x[cyc]);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
