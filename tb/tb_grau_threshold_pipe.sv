// tb_grau_threshold_pipe: drives a random stream (random precision tags,
// values around and on the breakpoints) through the threshold pipeline and
// checks, with the cycle counts, that 4/8-bit items leave after SEGMENTS-1
// cycles with the right segment count, 1-bit items after 1 cycle and 2-bit
// items after 3 cycles with the multi-threshold count.
module tb_grau_threshold_pipe;
  import grau_pkg::*;
  import tb_grau_ref_pkg::*;
  localparam int IN_W = 32, SEGMENTS = 6, NT = SEGMENTS - 1, CW = $clog2(SEGMENTS);
  localparam int N = 600;
  logic clk = 0, rst_n = 0;
  logic signed [IN_W-1:0] thresholds [NT];
  logic in_valid; logic signed [IN_W-1:0] in_data; prec_e in_prec;
  logic out_valid; logic signed [IN_W-1:0] out_data; logic [CW-1:0] out_count; prec_e out_prec;
  logic byp1_valid, byp2_valid; logic [0:0] byp1_count; logic [1:0] byp2_count;
  int checks = 0, failures = 0, cyc = 0;
  int n_full = 0, n_b1 = 0, n_b2 = 0;

  // what was sent at each cycle
  logic   s_v [N+20]; longint s_x [N+20]; prec_e s_p [N+20];

  grau_threshold_pipe #(.IN_W(IN_W), .SEGMENTS(SEGMENTS)) dut (.*);

  always #5 clk = ~clk;
  // record what the DUT samples at each rising edge
  always @(posedge clk) if (rst_n) begin
    if (cyc < N + 20) begin s_v[cyc] = in_valid; s_x[cyc] = longint'(in_data); s_p[cyc] = in_prec; end
    cyc = cyc + 1;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int cnt(longint x, int upto);
    int c = 0;
    for (int j = 0; j < upto; j++) if (x >= longint'(thresholds[j])) c++;
    return c;
  endfunction

  // checker: at send cycle t + L the result of the item of cycle t is due
  always @(negedge clk) if (rst_n) begin
    int t;
    logic e;
    // an item sampled at edge t is visible after edge t+L-1
    t = cyc - NT;
    if (t >= 0 && t < N) begin
      e = s_v[t] && (s_p[t] == PREC_4 || s_p[t] == PREC_8);
      checks++;
      if (out_valid !== e) begin failures++; $display("FAIL out_valid t=%0d", t); end
      else if (e) begin
        n_full++; checks += 2;
        if (int'(out_count) != cnt(s_x[t], NT)) begin failures++; $display("FAIL count x=%0d got %0d", s_x[t], out_count); end
        if (longint'(out_data) != s_x[t] || out_prec != s_p[t]) begin failures++; $display("FAIL data"); end
      end
    end
    t = cyc - 1;
    if (t >= 0 && t < N) begin
      e = s_v[t] && s_p[t] == PREC_1;
      checks++;
      if (byp1_valid !== e) begin failures++; $display("FAIL byp1_valid t=%0d", t); end
      else if (e) begin
        n_b1++; checks++;
        if (int'(byp1_count) != cnt(s_x[t], 1)) begin failures++; $display("FAIL byp1 x=%0d", s_x[t]); end
      end
    end
    t = cyc - 3;
    if (t >= 0 && t < N) begin
      e = s_v[t] && s_p[t] == PREC_2;
      checks++;
      if (byp2_valid !== e) begin failures++; $display("FAIL byp2_valid t=%0d", t); end
      else if (e) begin
        n_b2++; checks++;
        if (int'(byp2_count) != cnt(s_x[t], 3)) begin failures++; $display("FAIL byp2 x=%0d got %0d", s_x[t], byp2_count); end
      end
    end
  end

  initial begin
    for (int i = 0; i < N + 20; i++) s_v[i] = 0;
    thresholds[0] = -1000; thresholds[1] = -10; thresholds[2] = 0;
    thresholds[3] = 37;    thresholds[4] = 5000;
    in_valid = 0; in_data = 0; in_prec = PREC_8;
    @(posedge clk); @(negedge clk);
    rst_n = 1;
    // cyc counts posedges since reset release
    for (int t = 0; t < N + 10; t++) begin
      @(negedge clk);
      if (t < N) begin
        in_valid = 1'($urandom % 4 != 0);
        case ($urandom % 3)
          0: in_data = thresholds[$urandom % NT] + ($signed($urandom % 3) - 1);
          1: in_data = $signed($urandom % 12000) - 6000;
          default: in_data = $signed($urandom);
        endcase
        in_prec = prec_e'($urandom % 4);
      end else in_valid = 0;
    end
    if (n_full == 0 || n_b1 == 0 || n_b2 == 0) failures++;
    $display("full=%0d byp1=%0d byp2=%0d", n_full, n_b1, n_b2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
