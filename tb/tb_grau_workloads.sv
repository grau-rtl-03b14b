// tb_grau_workloads: the activation workloads GRAU is meant to run, fitted and
// streamed through the pipelined unit at 4, 6 and 8 segments, PoT and APoT.
//
// What a layer needs from the activation unit is the "folded" function: batch
// normalisation, the nonlinearity (ReLU, Sigmoid or SiLU) and the output
// re-quantisation applied to an integer MAC result x, i.e.
//   f(x) = clamp(round(act(zs*x + zo) / s_out) + zp)
// For every layer the testbench builds such an f (MAC range [-1e5, 1e5], the
// range reported for 8-bit ResNet-18 on ImageNet; the BN scale/offset and
// output scale are drawn per layer), samples it at 1000 points over twice the
// MAC range, and fits a piecewise linear function with the greedy
// integer-breakpoint algorithm: start from one segment over the whole range,
// repeatedly split the segment whose sample lies farthest from its chord at
// that sample's rounded position, provided the split is inside the segment,
// at least GAP away from its ends and the distance exceeds EPS; stop at the
// target segment count. Each segment's line is a least-squares fit; its slope
// is rounded to the nearest PoT or APoT value inside a window of 4, 8 or 16
// consecutive negative exponents (the window sets the pre-shift m), and its
// bias makes the line pass through the fitted value at the segment's left
// breakpoint. 2-bit layers use the multi-threshold mode instead: the first
// three breakpoints are the inputs where f steps to 1, 2 and 3.
//
// Twelve pipelined units, the instance grid 4/6/8 segments x 8/16 shifter
// units x PoT/APoT with 32-bit input, run every layer in parallel (the
// 8-unit instances use at most an 8-exponent window): a sweep over ReLU/Sigmoid/SiLU x 4/8 bit x the
// three exponent windows, VGG16-style mixed-precision sequences 8/4/2/4/8 for
// each function, and ResNet-18-style sequences with ReLU in the first three
// stages and SiLU in the fourth, at 8 bits and mixed precision. Every output is
// checked bit-exactly against the reference model and for its latency
// (SEGMENTS+EXPONENTS+2, i.e. 14 to 26 cycles, or 3 in 2-bit mode); the mean error against the exact
// folded function is printed per unit and layer class. As loose sanity bounds
// on the fitting flow, ReLU layers with the 16-exponent window must stay
// within a mean error of 1.5 LSB on the 6- and 8-segment APoT units, and
// every layer must stay below a mean error of a quarter of its output range.
module tb_grau_workloads;
  import grau_pkg::*;
  import tb_grau_ref_pkg::*;
  localparam int IN_W = 32, ND = 12, NS = 1000, NTEST = 1000;
  localparam real R = 100000.0;
  localparam real GAP = 1000.0, EPS = 0.5;
  localparam longint THR_MAX = 64'h7fff_ffff;

  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg [ND];
  logic in_valid; logic signed [IN_W-1:0] in_data;
  logic out_valid [ND]; logic [OUT_W-1:0] out_data [ND]; logic busy [ND];
  int checks = 0, failures = 0, cyc = 0;
  grau_model md [ND];

  // units 0-5: 16 shifter units, 6-11: 8 shifter units;
  // within each group 4/4/6/6/8/8 segments, alternating PoT/APoT
  function automatic int nseg_of(int d); return 4 + 2 * ((d % 6) / 2); endfunction
  function automatic bit apot_of(int d); return 1'(d % 2); endfunction
  function automatic int nexp_of(int d); return (d < 6) ? 16 : 8; endfunction

  for (genvar d = 0; d < ND; d++) begin : g_dut
    grau_pipelined #(.IN_W(IN_W), .SEGMENTS(4 + 2 * ((d % 6) / 2)), .EXPONENTS((d < 6) ? 16 : 8),
                     .SU_KIND((d % 2 == 1) ? SU_APOT : SU_POT)) u_dut (
      .clk, .rst_n, .cfg(cfg[d]), .in_valid, .in_data,
      .out_valid(out_valid[d]), .out_data(out_data[d]), .busy(busy[d]));
  end

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- layers
  typedef struct {
    int  fn;        // 0 ReLU, 1 Sigmoid, 2 SiLU
    int  pb;        // output bits
    bit  sgn;       // signed output
    int  zp;        // output zero point
    real zs, zo;    // BN scale and offset into the activation's domain
    real s_out;     // output quantisation step
    int  win;       // exponent window (4, 8, 16)
  } layer_t;

  layer_t ly;

  function automatic real act(int fn, real z);
    case (fn)
      0: return (z > 0.0) ? z : 0.0;
      1: return 1.0 / (1.0 + $exp(-z));
      default: return z / (1.0 + $exp(-z));
    endcase
  endfunction

  function automatic longint lo_of(layer_t l);
    return l.sgn ? -(longint'(1) << (l.pb - 1)) : 0;
  endfunction
  function automatic longint hi_of(layer_t l);
    return l.sgn ? (longint'(1) << (l.pb - 1)) - 1 : (longint'(1) << l.pb) - 1;
  endfunction

  function automatic longint ftrue(layer_t l, longint x);
    real    v;
    longint y;
    v = act(l.fn, l.zs * real'(x) + l.zo) / l.s_out;
    y = longint'(v) + longint'(l.zp);            // real-to-int conversion rounds
    if (y > hi_of(l)) y = hi_of(l);
    if (y < lo_of(l)) y = lo_of(l);
    return y;
  endfunction

  function automatic real urand01();
    return real'($urandom % 1000000) / 1000000.0;
  endfunction

  function automatic layer_t make_layer(int fn, int pb, int win);
    layer_t l;
    real zmax;
    l.fn = fn; l.pb = pb; l.win = win;
    zmax = 4.0 + 4.0 * urand01();
    l.zs = zmax / R;
    l.zo = urand01() - 0.5;
    l.zp = 0;
    if (pb == 2) begin
      // multi-threshold mode: unsigned 2-bit code
      l.sgn = 0;
      case (fn)
        0: l.s_out = zmax / 3.0;
        1: l.s_out = 1.0 / 3.0;
        default: begin l.s_out = zmax / 2.5; l.zp = 1; end
      endcase
    end else begin
      case (fn)
        0: begin l.sgn = 0; l.s_out = 0.8 * zmax / real'((1 << pb) - 1); end
        1: begin l.sgn = 0; l.s_out = 1.0 / real'((1 << pb) - 1); end
        default: begin l.sgn = 1; l.s_out = 0.8 * zmax / real'((1 << (pb - 1)) - 1); end
      endcase
    end
    return l;
  endfunction

  // ------------------------------------------------------ greedy PWLF fit
  real xs [NS], ys [NS];
  real bp [8];        // breakpoints found, sorted
  int  nbp;

  task automatic sample_layer(layer_t l);
    for (int i = 0; i < NS; i++) begin
      xs[i] = -2.0 * R + real'(i) * 4.0 * R / real'(NS - 1);
      ys[i] = real'(ftrue(l, longint'(xs[i])));
    end
  endtask

  task automatic greedy_fit(layer_t l, int nseg);
    real sa [8], sb [8];
    int  nsg;
    nsg = 1; sa[0] = xs[0]; sb[0] = xs[NS-1];
    nbp = 0;
    while (nbp < nseg - 1) begin
      real best_d, best_x;
      int  best_k;
      best_d = -1.0; best_x = 0.0; best_k = -1;
      for (int k = 0; k < nsg; k++) begin
        real a, b, ya, yb, dmax, xstar, xh;
        a = sa[k]; b = sb[k];
        ya = real'(ftrue(l, longint'(a))); yb = real'(ftrue(l, longint'(b)));
        dmax = -1.0; xstar = a;
        for (int i = 0; i < NS; i++) if (xs[i] > a && xs[i] < b) begin
          real ch, dd;
          ch = ya + (yb - ya) * (xs[i] - a) / (b - a);
          dd = ys[i] - ch;
          if (dd < 0.0) dd = -dd;
          if (dd > dmax) begin dmax = dd; xstar = xs[i]; end
        end
        xh = real'(longint'(xstar));
        if (xh > a && xh < b && dmax > EPS && xh - a >= GAP && b - xh >= GAP && dmax > best_d) begin
          best_d = dmax; best_x = xh; best_k = k;
        end
      end
      if (best_k < 0) break;
      bp[nbp] = best_x; nbp++;
      sa[nsg] = best_x; sb[nsg] = sb[best_k]; sb[best_k] = best_x; nsg++;
    end
    // sort
    for (int i = 0; i < nbp; i++)
      for (int j = i + 1; j < nbp; j++)
        if (bp[j] < bp[i]) begin real t; t = bp[i]; bp[i] = bp[j]; bp[j] = t; end
  endtask

  // Program model d with the fitted function quantised to its slope kind.
  task automatic build_model(int d, layer_t l);
    int  nseg, a_top, ne, win;
    real slope [8], yleft [8], xleft [8], maxmag;
    nseg = nseg_of(d);
    ne = nexp_of(d);
    win = (l.win < ne) ? l.win : ne;
    greedy_fit(l, nseg);
    // least-squares line per segment
    maxmag = 0.0;
    for (int j = 0; j < nseg; j++) begin
      real lo_x, hi_x, sx, sy, sxx, sxy, n, mx, my, vx;
      lo_x = (j == 0) ? -1.0e30 : (j - 1 < nbp) ? bp[j-1] : 1.0e30;
      hi_x = (j < nbp) ? bp[j] : 1.0e30;
      if (j > nbp) lo_x = 1.0e30;
      sx = 0; sy = 0; sxx = 0; sxy = 0; n = 0;
      for (int i = 0; i < NS; i++) if (xs[i] >= lo_x && xs[i] < hi_x) begin
        sx += xs[i]; sy += ys[i]; sxx += xs[i] * xs[i]; sxy += xs[i] * ys[i]; n += 1.0;
      end
      xleft[j] = (j == 0) ? xs[0] : (j - 1 < nbp) ? bp[j-1] : xs[NS-1];
      if (n < 1.0) begin slope[j] = 0.0; yleft[j] = 0.0; end
      else begin
        mx = sx / n; my = sy / n;
        vx = sxx / n - mx * mx;
        slope[j] = (n >= 2.0 && vx > 0.0) ? (sxy / n - mx * my) / vx : 0.0;
        yleft[j] = my + slope[j] * (xleft[j] - mx);
      end
      if (slope[j] > maxmag) maxmag = slope[j];
      if (-slope[j] > maxmag) maxmag = -slope[j];
    end
    // window: top weight 2^-a_top with 2^-a_top >= largest slope
    a_top = 1;
    while (a_top < 32 && 1.0 / (2.0 ** (a_top + 1)) >= maxmag) a_top++;
    md[d].m = a_top - 1;
    md[d].prec_bits = l.pb;
    md[d].signed_out = l.sgn;
    for (int j = 0; j < nseg - 1; j++) md[d].thr[j] = (j < nbp) ? longint'(bp[j]) : THR_MAX;
    for (int j = 0; j < nseg; j++) begin
      real    mag;
      longint p;
      mag = (slope[j] < 0.0) ? -slope[j] : slope[j];
      md[d].sign[j] = (slope[j] < 0.0);
      if (apot_of(d)) begin
        longint q;
        q = longint'(mag * (2.0 ** (md[d].m + win)));
        if (q > (longint'(1) << win) - 1) q = (longint'(1) << win) - 1;
        md[d].bits[j] = q << (ne - win);
      end else begin
        real best_e, e;
        md[d].bits[j] = 0; best_e = mag;
        for (int k = 1; k <= win; k++) begin
          e = mag - 1.0 / (2.0 ** (md[d].m + k));
          if (e < 0.0) e = -e;
          if (e < best_e) begin best_e = e; md[d].bits[j] = (longint'(1) << ne) - (longint'(1) << (ne - k)); end
        end
      end
      p = md[d].product(longint'(xleft[j]), j);
      if (md[d].sign[j]) p = -p;
      md[d].bias[j] = longint'(yleft[j]) - p;
    end
    if (l.pb == 2) begin
      // multi-threshold mode: breakpoint k is where f first reaches code k+1
      longint xlo;
      xlo = longint'(-2.0 * R);
      if (l.fn == 2) xlo = longint'((-1.278 - l.zo) / l.zs);   // SiLU minimum
      for (int k = 0; k < 3; k++) begin
        longint a, b;
        a = xlo; b = longint'(2.0 * R);
        if (ftrue(l, b) < longint'(k + 1)) md[d].thr[k] = THR_MAX;
        else if (ftrue(l, a) >= longint'(k + 1)) md[d].thr[k] = a;
        else begin
          while (b - a > 1) begin
            longint c;
            c = (a + b) / 2;
            if (ftrue(l, c) >= longint'(k + 1)) b = c; else a = c;
          end
          md[d].thr[k] = b;
        end
      end
    end
  endtask

  // ---------------------------------------------------- bus and checking
  typedef struct { logic [7:0] y; int due; longint yt; } exp_t;
  exp_t q [ND][$];
  real  err_sum [ND];
  int   err_n [ND];

  for (genvar d = 0; d < ND; d++) begin : g_chk
    always @(negedge clk) if (rst_n && out_valid[d]) begin
      checks += 2;
      if (q[d].size() == 0) begin failures++; $display("FAIL unit %0d: unexpected output", d); end
      else begin
        exp_t e;
        longint got, diff;
        e = q[d].pop_front();
        if (out_data[d] !== e.y) begin
          failures++; $display("FAIL unit %0d: got %h exp %h", d, out_data[d], e.y);
        end
        if (cyc != e.due) begin
          failures++; $display("FAIL unit %0d: latency, out at %0d due %0d", d, cyc, e.due);
        end
        got = md[d].signed_out && md[d].prec_bits > 2 ? longint'($signed(out_data[d])) : longint'(out_data[d]);
        diff = got - e.yt;
        err_sum[d] += (diff < 0) ? real'(-diff) : real'(diff);
        err_n[d]++;
      end
    end
  end

  task automatic wr(int d, cfg_sel_e sel, int idx, logic [31:0] data);
    @(negedge clk);
    cfg[d].we = 1; cfg[d].sel = sel; cfg[d].idx = CFG_IW'(idx); cfg[d].wdata = data;
    @(negedge clk);
    cfg[d].we = 0;
  endtask

  task automatic load_cfg(int d);
    for (int j = 0; j < nseg_of(d) - 1; j++) wr(d, CFG_THRESH, j, 32'(md[d].thr[j]));
    for (int i = 0; i < nseg_of(d); i++) begin
      wr(d, CFG_SETTING, i, md[d].setting_word(i));
      wr(d, CFG_BIAS, i, 32'(md[d].bias[i]));
    end
    wr(d, CFG_GLOBAL, 0, {24'd0, md[d].signed_out, 2'($clog2(md[d].prec_bits)), 5'(md[d].m)});
  endtask

  task automatic drain();
    bit any;
    do begin
      @(negedge clk);
      any = 0;
      for (int d = 0; d < ND; d++) if (busy[d]) any = 1;
    end while (any);
  endtask

  task automatic stream_layer(layer_t l);
    for (int i = 0; i < NTEST; i++) begin
      longint x;
      @(negedge clk);
      if (i % 8 == 7) x = md[5].thr[$urandom % 7] + longint'($urandom % 5) - 2;
      else x = longint'(-2.0 * R) + (longint'($urandom) % longint'(4.0 * R + 1.0));
      if (x >= THR_MAX - 2) x = 0;
      in_valid = 1; in_data = IN_W'(x);
      for (int d = 0; d < ND; d++) begin
        exp_t e;
        int pb;
        pb = md[d].prec_bits;
        e.y = md[d].eval(x);
        e.due = cyc + ((pb == 1) ? 1 : (pb == 2) ? 3 : nseg_of(d) + nexp_of(d) + 2);
        e.yt = ftrue(l, x);
        q[d].push_back(e);
      end
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  // Run one layer on all units; returns mean error per unit.
  real last_err [ND];
  int  n_layers = 0, n_fits = 0;

  task automatic run_layer(layer_t l);
    sample_layer(l);
    drain();
    for (int d = 0; d < ND; d++) begin
      build_model(d, l);
      if (nbp > 0) n_fits++;
      err_sum[d] = 0.0; err_n[d] = 0;
    end
    for (int d = 0; d < ND; d++) load_cfg(d);
    stream_layer(l);
    drain();
    repeat (3) @(negedge clk);
    for (int d = 0; d < ND; d++) begin
      last_err[d] = (err_n[d] > 0) ? err_sum[d] / real'(err_n[d]) : 1.0e9;
      checks++;
      if (last_err[d] > real'(hi_of(l) - lo_of(l) + 1) / 4.0) begin
        failures++;
        $display("FAIL unit %0d: mean error %f LSB on fn %0d %0d-bit window %0d",
                 d, last_err[d], l.fn, l.pb, l.win);
      end
    end
    n_layers++;
  endtask

  function automatic string fname(int fn);
    return (fn == 0) ? "ReLU" : (fn == 1) ? "Sigmoid" : "SiLU";
  endfunction

  task automatic report(string tag, layer_t l);
    $display("%-26s %-7s %0d-bit win %2d | mean |err| LSB  S4 PoT %5.2f APoT %5.2f  S6 PoT %5.2f APoT %5.2f  S8 PoT %5.2f APoT %5.2f",
             tag, fname(l.fn), l.pb, l.win, last_err[0], last_err[1], last_err[2], last_err[3],
             last_err[4], last_err[5]);
    $display("%-26s %-7s %0d-bit win %2d | 8 units:             S4 PoT %5.2f APoT %5.2f  S6 PoT %5.2f APoT %5.2f  S8 PoT %5.2f APoT %5.2f",
             "", "", l.pb, (l.win < 8) ? l.win : 8, last_err[6], last_err[7], last_err[8], last_err[9],
             last_err[10], last_err[11]);
  endtask

  int n_mixed = 0, n_fn_switch = 0;

  initial begin
    int wins [3];
    int mixed [5];
    wins[0] = 16; wins[1] = 8; wins[2] = 4;
    mixed[0] = 8; mixed[1] = 4; mixed[2] = 2; mixed[3] = 4; mixed[4] = 8;
    for (int d = 0; d < ND; d++) begin
      md[d] = new(nseg_of(d), nexp_of(d), apot_of(d));
      cfg[d] = '0;
    end
    in_valid = 0; in_data = 0;
    @(posedge clk); @(negedge clk); rst_n = 1;

    // sweep: function x precision x exponent window
    for (int fn = 0; fn < 3; fn++)
      for (int pi = 0; pi < 2; pi++)
        for (int w = 0; w < 3; w++) begin
          layer_t l;
          l = make_layer(fn, pi ? 8 : 4, wins[w]);
          run_layer(l);
          report("sweep", l);
          if (fn == 0 && wins[w] == 16) begin
            for (int d = 3; d < 6; d += 2) begin
              checks++;
              if (last_err[d] > 1.5) begin
                failures++; $display("FAIL unit %0d: ReLU mean error %f above 1.5 LSB", d, last_err[d]);
              end
            end
          end
        end

    // VGG16-style: same function in every stage, precision 8/4/2/4/8
    for (int fn = 0; fn < 3; fn++)
      for (int s = 0; s < 5; s++) begin
        layer_t l;
        l = make_layer(fn, mixed[s], 16);
        run_layer(l);
        report($sformatf("vgg16 mixed stage %0d", s), l);
        n_mixed++;
      end

    // ResNet-18-style: ReLU in stages 1-3, SiLU in stage 4, then the classifier
    for (int mp = 0; mp < 2; mp++)
      for (int s = 0; s < 5; s++) begin
        layer_t l;
        l = make_layer((s == 3) ? 2 : 0, mp ? mixed[s] : 8, 16);
        if (s == 3 || s == 4) n_fn_switch++;
        run_layer(l);
        report($sformatf("resnet18 %s stage %0d", mp ? "mixed" : "8-bit", s), l);
      end

    for (int d = 0; d < ND; d++) begin
      checks++;
      if (q[d].size() != 0) begin failures++; $display("FAIL unit %0d: %0d outputs missing", d, q[d].size()); end
    end
    $display("layers=%0d fits=%0d mixed_stages=%0d function_switches=%0d", n_layers, n_fits, n_mixed, n_fn_switch);
    if (n_layers == 0 || n_fits == 0 || n_mixed == 0 || n_fn_switch == 0) begin
      failures++; $display("FAIL a workload class never ran");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
