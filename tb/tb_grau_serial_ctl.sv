// tb_grau_serial_ctl: runs items of every precision through the serialized
// controller, with random gaps, and checks the sequence it produces per item:
// in_ready only when idle; 1, 3 or SEGMENTS-1 comparison cycles with thr_sel
// counting 0,1,2...; for 1/2-bit a single byp_out cycle; for 4/8-bit one load
// cycle, EXPONENTS shift cycles and one fin cycle, in that order; and the
// total cycle counts 2, 4 and SEGMENTS+EXPONENTS+1 from acceptance to the
// result cycle (byp_out or fin).
module tb_grau_serial_ctl;
  import grau_pkg::*;
  localparam int SEGMENTS = 6, EXPONENTS = 16, NT = SEGMENTS - 1;
  localparam int KW = $clog2(EXPONENTS) + 1;
  logic clk = 0, rst_n = 0;
  logic in_valid; prec_e prec;
  logic in_ready, accept, cmp_en, load, shift_en, fin, byp_out, busy;
  logic [KW-1:0] thr_sel; prec_e item_prec;
  int checks = 0, failures = 0;
  int n_item [4];

  grau_serial_ctl #(.SEGMENTS(SEGMENTS), .EXPONENTS(EXPONENTS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect1(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // One item: present it, then follow the controller cycle by cycle.
  task automatic run_item(prec_e p);
    int ncmp;
    ncmp = (p == PREC_1) ? 1 : (p == PREC_2) ? 3 : NT;
    @(negedge clk);
    expect1(in_ready, 1'b1, "ready when idle");
    in_valid = 1; prec = p;
    #1 expect1(accept, 1'b1, "accept");
    @(negedge clk);
    in_valid = 0; prec = prec_e'($urandom % 4);   // config may change after acceptance
    for (int j = 0; j < ncmp; j++) begin
      expect1(cmp_en, 1'b1, "cmp_en");
      expect1(in_ready, 1'b0, "not ready while busy");
      checks++;
      if (int'(thr_sel) != j) begin failures++; $display("FAIL thr_sel %0d exp %0d", thr_sel, j); end
      @(negedge clk);
    end
    if (p == PREC_1 || p == PREC_2) begin
      expect1(byp_out, 1'b1, "byp_out");
      expect1(load, 1'b0, "no load in bypass");
    end else begin
      expect1(load, 1'b1, "load");
      @(negedge clk);
      for (int k = 0; k < EXPONENTS; k++) begin
        expect1(shift_en, 1'b1, "shift_en");
        @(negedge clk);
      end
      expect1(fin, 1'b1, "fin");
      checks++;
      if (item_prec != p) begin failures++; $display("FAIL item_prec"); end
    end
    n_item[p]++;
  endtask

  initial begin
    in_valid = 0; prec = PREC_8;
    @(posedge clk); @(negedge clk); rst_n = 1;
    for (int n = 0; n < 80; n++) begin
      run_item(prec_e'($urandom % 4));
      repeat ($urandom % 3) begin
        @(negedge clk);
        expect1(busy, 1'b0, "idle between items");
      end
    end
    for (int p = 0; p < 4; p++) if (n_item[p] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
