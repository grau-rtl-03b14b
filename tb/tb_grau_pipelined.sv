// tb_grau_pipelined: end-to-end test of the pipelined GRAU, PoT and APoT.
//
// For a sequence of configurations (a ReLU-like 4-bit unsigned function, a
// SiLU-like non-monotonic 8-bit signed function, random functions at every
// precision, and 1/2-bit multi-threshold modes) the testbench programs both
// cores through the configuration bus, streams inputs with random gaps and
// compares each output with the reference model, in order, and checks its
// latency: SEGMENTS+EXPONENTS+2 cycles for 4/8-bit, 1 for 1-bit, 3 for 2-bit.
// Precision changes happen only after busy falls. It counts the mechanisms
// exercised (bypasses, clamps, negative and zero slopes, precision switches,
// reconfigurations) and fails if one never occurred.
module tb_grau_pipelined;
  import grau_pkg::*;
  import tb_grau_ref_pkg::*;
  localparam int IN_W = 32, S = 6, E = 16, NT = S - 1;
  localparam int LAT_FULL = S + E + 2;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg [2];
  logic in_valid; logic signed [IN_W-1:0] in_data;
  logic out_valid [2]; logic [OUT_W-1:0] out_data [2]; logic busy [2];
  int checks = 0, failures = 0, cyc = 0;
  grau_model md [2];

  typedef struct { logic [7:0] y; int due; } exp_t;
  exp_t q [2][$];

  int n_byp1 = 0, n_byp2 = 0, n_clamp_hi = 0, n_clamp_lo = 0, n_neg = 0, n_zero = 0;
  int n_prec_switch = 0, n_reconfig = 0, n_full = 0;

  grau_pipelined #(.IN_W(IN_W), .SEGMENTS(S), .EXPONENTS(E), .SU_KIND(SU_POT)) dut_p (
    .clk, .rst_n, .cfg(cfg[0]), .in_valid, .in_data,
    .out_valid(out_valid[0]), .out_data(out_data[0]), .busy(busy[0]));
  grau_pipelined #(.IN_W(IN_W), .SEGMENTS(S), .EXPONENTS(E), .SU_KIND(SU_APOT)) dut_a (
    .clk, .rst_n, .cfg(cfg[1]), .in_valid, .in_data,
    .out_valid(out_valid[1]), .out_data(out_data[1]), .busy(busy[1]));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  for (genvar c = 0; c < 2; c++) begin : g_chk
    always @(negedge clk) if (rst_n) begin
      if (out_valid[c]) begin
        checks += 2;
        if (q[c].size() == 0) begin failures++; $display("FAIL core %0d: unexpected output", c); end
        else begin
          exp_t e;
          e = q[c].pop_front();
          if (out_data[c] !== e.y) begin
            failures++; $display("FAIL core %0d: got %h exp %h", c, out_data[c], e.y);
          end
          if (cyc != e.due) begin
            failures++; $display("FAIL core %0d: latency, out at %0d due %0d", c, cyc, e.due);
          end
        end
      end
    end
  end

  task automatic wr(int c, cfg_sel_e sel, int idx, logic [31:0] data);
    @(negedge clk);
    cfg[c].we = 1; cfg[c].sel = sel; cfg[c].idx = CFG_IW'(idx); cfg[c].wdata = data;
    @(negedge clk);
    cfg[c].we = 0;
  endtask

  task automatic load_cfg(int c);
    for (int j = 0; j < NT; j++) wr(c, CFG_THRESH, j, 32'(md[c].thr[j]));
    for (int i = 0; i < S; i++) begin
      wr(c, CFG_SETTING, i, md[c].setting_word(i));
      wr(c, CFG_BIAS, i, 32'(md[c].bias[i]));
    end
    wr(c, CFG_GLOBAL, 0, {24'd0, md[c].signed_out, 2'($clog2(md[c].prec_bits)), 5'(md[c].m)});
  endtask

  task automatic drain();
    @(negedge clk);
    while (busy[0] || busy[1]) @(negedge clk);
  endtask

  // Stream n inputs, spread over [lo, hi] plus some extremes.
  task automatic stream(int n, longint lo, longint hi);
    for (int i = 0; i < n; i++) begin
      longint x;
      @(negedge clk);
      if ($urandom % 5 == 0) begin in_valid = 0; continue; end
      case ($urandom % 8)
        0: x = longint'($signed($urandom)) >>> ($urandom % 8);
        1: x = md[0].thr[$urandom % NT] + longint'($urandom % 3) - 1;
        default: x = lo + longint'($urandom % (hi - lo + 1));
      endcase
      in_valid = 1; in_data = IN_W'(x);
      for (int c = 0; c < 2; c++) begin
        exp_t e;
        int pb, seg;
        pb = md[c].prec_bits;
        e.y = md[c].eval(x);
        e.due = cyc + ((pb == 1) ? 1 : (pb == 2) ? 3 : LAT_FULL);
        q[c].push_back(e);
        if (pb == 1) n_byp1++;
        else if (pb == 2) n_byp2++;
        else begin
          n_full++;
          seg = md[c].segment(x, NT);
          if (md[c].raw(x) > md[c].hi()) n_clamp_hi++;
          if (md[c].raw(x) < md[c].lo()) n_clamp_lo++;
          if (md[c].sign[seg] && md[c].bits[seg] != 0) n_neg++;
          if (md[c].bits[seg] == 0) n_zero++;
        end
      end
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  // ReLU-like: 0 below 0, then slopes falling off, 4-bit unsigned.
  task automatic cfg_relu(int c);
    md[c].m = 6; md[c].prec_bits = 4; md[c].signed_out = 0;
    md[c].thr[0] = -50000; md[c].thr[1] = 0; md[c].thr[2] = 300; md[c].thr[3] = 900; md[c].thr[4] = 2000;
    md[c].set_segment(0, 0.0, -50000, 0);
    md[c].set_segment(1, 0.0, -50000, 0);
    md[c].set_segment(2, 1.0/64, 0, 0);
    md[c].set_segment(3, 1.0/128, 300, 4);
    md[c].set_segment(4, 1.0/256, 900, 9);
    md[c].set_segment(5, 1.0/512, 2000, 13);
  endtask

  // SiLU-like: dips below zero then rises, 8-bit signed, clamps at 127.
  task automatic cfg_silu(int c);
    md[c].m = 2; md[c].prec_bits = 8; md[c].signed_out = 1;
    md[c].thr[0] = -4000; md[c].thr[1] = -1200; md[c].thr[2] = 0; md[c].thr[3] = 1500; md[c].thr[4] = 6000;
    md[c].set_segment(0, 0.0, -4000, 0);
    md[c].set_segment(1, -1.0/64, -4000, -3);
    md[c].set_segment(2, 1.0/32, -1200, -40);
    md[c].set_segment(3, 1.0/16, 0, 0);
    md[c].set_segment(4, 1.0/8, 1500, 90);
    md[c].set_segment(5, 1.0/32, 6000, 150);
  endtask

  task automatic cfg_random(int c, int pb);
    longint t;
    md[c].m = $urandom % 6; md[c].prec_bits = pb; md[c].signed_out = 1'($urandom);
    t = -longint'($urandom % 20000);
    for (int j = 0; j < NT; j++) begin md[c].thr[j] = t; t += 1 + longint'($urandom % 8000); end
    for (int i = 0; i < S; i++) begin
      md[c].sign[i] = 1'($urandom);
      if (c == 1) md[c].bits[i] = longint'($urandom % (1 << E));
      else begin
        int k;
        k = $urandom % (E + 1);
        md[c].bits[i] = (longint'(1) << E) - (longint'(1) << (E - k));
      end
      if ($urandom % 6 == 0) md[c].bits[i] = 0;
      md[c].bias[i] = longint'($signed($urandom % 512)) - 256;
    end
  endtask

  initial begin
    md[0] = new(S, E, 1'b0);
    md[1] = new(S, E, 1'b1);
    cfg[0] = '0; cfg[1] = '0; in_valid = 0; in_data = 0;
    @(posedge clk); @(negedge clk); rst_n = 1;

    for (int c = 0; c < 2; c++) begin cfg_relu(c); load_cfg(c); end
    stream(300, -3000, 6000);
    drain(); n_reconfig++;
    for (int c = 0; c < 2; c++) begin cfg_silu(c); load_cfg(c); end
    stream(300, -8000, 12000);
    for (int r = 0; r < 12; r++) begin
      int pb;
      pb = 1 << (r % 4);
      drain(); n_reconfig++; n_prec_switch++;
      for (int c = 0; c < 2; c++) begin cfg_random(c, pb); load_cfg(c); end
      stream(150, -25000, 30000);
    end
    drain();
    repeat (5) @(negedge clk);
    for (int c = 0; c < 2; c++) begin
      checks++;
      if (q[c].size() != 0) begin failures++; $display("FAIL core %0d: %0d outputs missing", c, q[c].size()); end
    end
    $display("byp1=%0d byp2=%0d full=%0d clamp_hi=%0d clamp_lo=%0d neg_slope=%0d zero_slope=%0d prec_switch=%0d reconfig=%0d",
             n_byp1, n_byp2, n_full, n_clamp_hi, n_clamp_lo, n_neg, n_zero, n_prec_switch, n_reconfig);
    if (n_byp1 == 0 || n_byp2 == 0 || n_full == 0 || n_clamp_hi == 0 || n_clamp_lo == 0 ||
        n_neg == 0 || n_zero == 0 || n_prec_switch == 0 || n_reconfig == 0) begin
      failures++; $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
