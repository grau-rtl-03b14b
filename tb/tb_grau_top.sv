// tb_grau_top: whole-design test of grau_top at its default parameters
// (6 segments, 16 exponents, 32-bit inputs), all four cores at once.
//
// The configuration bus programs a ReLU-like 4-bit unsigned function, a
// SiLU-like non-monotonic 8-bit signed function, then a mixed-precision
// sequence 8/4/2/4/8 bits (one random function per "layer") and a 1-bit
// multi-threshold layer; every write goes to the cores selected by the core
// mask (PoT functions to cores 0 and 2, APoT functions to 1 and 3). Each core
// gets its own random input stream: the pipelined cores with random gaps, the
// serialized cores through valid/ready. Every output is compared, in order,
// with the reference model and its latency checked (pipelined: 24, 1, 3
// cycles; serialized: 25, 2, 4 cycles from acceptance). Mechanisms counted
// and required: 1-bit and 2-bit bypass, clamp at both ends, negative slope,
// zero slope, precision switch, reconfiguration, input stall.
module tb_grau_top;
  import grau_pkg::*;
  import tb_grau_ref_pkg::*;
  localparam int IN_W = 32, S = 6, E = 16, NT = S - 1;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic [NC-1:0] cfg_core_mask, in_valid, in_ready, out_valid, busy;
  logic signed [IN_W-1:0] in_data [NC];
  logic [OUT_W-1:0] out_data [NC];
  int checks = 0, failures = 0, cyc = 0;
  grau_model md [NC];

  typedef struct { logic [7:0] y; int due; } exp_t;
  exp_t q [NC][$];

  int n_byp1 = 0, n_byp2 = 0, n_clamp_hi = 0, n_clamp_lo = 0, n_neg = 0, n_zero = 0;
  int n_prec_switch = 0, n_reconfig = 0, n_full = 0, n_stall = 0;

  grau_top dut (.clk, .rst_n, .cfg, .cfg_core_mask, .in_valid, .in_ready, .in_data,
                .out_valid, .out_data, .busy);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  for (genvar c = 0; c < NC; c++) begin : g_chk
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

  function automatic int latency(int c, int pb);
    if (c < 2) return (pb == 1) ? 1 : (pb == 2) ? 3 : S + E + 2;
    else       return (pb == 1) ? 2 : (pb == 2) ? 4 : S + E + 3;
  endfunction

  task automatic wr(logic [NC-1:0] mask, cfg_sel_e sel, int idx, logic [31:0] data);
    @(negedge clk);
    cfg.we = 1; cfg.sel = sel; cfg.idx = CFG_IW'(idx); cfg.wdata = data; cfg_core_mask = mask;
    @(negedge clk);
    cfg.we = 0;
  endtask

  // program model c into the cores in mask
  task automatic load_cfg(int c, logic [NC-1:0] mask);
    for (int j = 0; j < NT; j++) wr(mask, CFG_THRESH, j, 32'(md[c].thr[j]));
    for (int i = 0; i < S; i++) begin
      wr(mask, CFG_SETTING, i, md[c].setting_word(i));
      wr(mask, CFG_BIAS, i, 32'(md[c].bias[i]));
    end
    wr(mask, CFG_GLOBAL, 0, {24'd0, md[c].signed_out, 2'($clog2(md[c].prec_bits)), 5'(md[c].m)});
  endtask

  task automatic drain();
    @(negedge clk);
    while (busy != 0) @(negedge clk);
  endtask

  task automatic stream_core(int c, int n, longint lo, longint hi);
    for (int i = 0; i < n; i++) begin
      longint x;
      exp_t e;
      int pb, seg;
      @(negedge clk);
      if ($urandom % 5 == 0) begin in_valid[c] = 0; continue; end
      case ($urandom % 8)
        0: x = longint'($signed($urandom)) >>> ($urandom % 8);
        1: x = md[c].thr[$urandom % NT] + longint'($urandom % 3) - 1;
        default: x = lo + longint'($urandom % (hi - lo + 1));
      endcase
      in_valid[c] = 1; in_data[c] = IN_W'(x);
      #1;
      if (!in_ready[c]) n_stall++;
      while (!in_ready[c]) begin @(negedge clk); #1; end
      pb = md[c].prec_bits;
      e.y = md[c].eval(x);
      e.due = cyc + latency(c, pb);
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
    @(negedge clk);
    in_valid[c] = 0;
  endtask

  task automatic stream(int n, longint lo, longint hi);
    fork
      stream_core(0, n, lo, hi);
      stream_core(1, n, lo, hi);
      stream_core(2, n / 4, lo, hi);
      stream_core(3, n / 4, lo, hi);
    join
  endtask

  // cores 0/2 take the PoT model 0, cores 1/3 the APoT model 1
  task automatic load_all();
    load_cfg(0, 4'b0101);
    load_cfg(1, 4'b1010);
    md[2].copy_from(md[0]);
    md[3].copy_from(md[1]);
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
    int plan [6];
    md[0] = new(S, E, 1'b0);
    md[1] = new(S, E, 1'b1);
    md[2] = new(S, E, 1'b0);
    md[3] = new(S, E, 1'b1);
    cfg = '0; cfg_core_mask = '0; in_valid = '0;
    for (int c = 0; c < NC; c++) in_data[c] = '0;
    @(posedge clk); @(negedge clk); rst_n = 1;

    for (int c = 0; c < 2; c++) cfg_relu(c);
    load_all();
    stream(200, -3000, 6000);
    drain(); n_reconfig++;
    for (int c = 0; c < 2; c++) cfg_silu(c);
    load_all();
    stream(200, -8000, 12000);
    // mixed precision: 8/4/2/4/8-bit layers, then a 1-bit layer
    plan = '{8, 4, 2, 4, 8, 1};
    for (int r = 0; r < 6; r++) begin
      drain(); n_reconfig++; n_prec_switch++;
      for (int c = 0; c < 2; c++) cfg_random(c, plan[r]);
      load_all();
      stream(120, -25000, 30000);
    end
    drain();
    repeat (5) @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (q[c].size() != 0) begin failures++; $display("FAIL core %0d: %0d outputs missing", c, q[c].size()); end
    end
    $display("byp1=%0d byp2=%0d full=%0d clamp_hi=%0d clamp_lo=%0d neg_slope=%0d zero_slope=%0d prec_switch=%0d reconfig=%0d stall=%0d",
             n_byp1, n_byp2, n_full, n_clamp_hi, n_clamp_lo, n_neg, n_zero, n_prec_switch, n_reconfig, n_stall);
    if (n_byp1 == 0 || n_byp2 == 0 || n_full == 0 || n_clamp_hi == 0 || n_clamp_lo == 0 ||
        n_neg == 0 || n_zero == 0 || n_prec_switch == 0 || n_reconfig == 0 || n_stall == 0) begin
      failures++; $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
