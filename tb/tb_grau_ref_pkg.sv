// tb_grau_ref_pkg: reference model of the GRAU activation, for testbenches.
//
// Written from the arithmetic definition, not from the RTL structure: the
// segment is the number of breakpoints b with x >= b; the slope of a segment
// with sign s and shifter bits B (bit E-1 = weight 2^-(m+1), bit 0 = weight
// 2^-(m+E)) is applied as floor divisions in 64-bit integers:
//   PoT : prod = B == 0 ? 0 : floor(floor(x / 2^m) / 2^popcount(B))
//   APoT: prod = sum over set bits i of floor(floor(x / 2^m) / 2^(E-i))
// result = clamp((s ? -prod : prod) + bias) to the precision's range;
// 1- and 2-bit precisions return the count of the first 1 or 3 breakpoints.
// Also provides a stimulus helper that fits a PoT/APoT piecewise linear
// function to a target activation (sampled at integer breakpoints).
package tb_grau_ref_pkg;

  function automatic longint floor_div_pow2(longint v, int k);
    longint d, q;
    d = longint'(1) << k;
    q = v / d;
    if (v < 0 && (v % d) != 0) q = q - 1;
    return q;
  endfunction

  class grau_model;
    int     nseg;            // segments
    int     nexp;            // exponents (shifter units)
    bit     apot;            // 1 = APoT, 0 = PoT
    longint thr     [16];    // breakpoints 0 .. nseg-2
    bit     sign    [16];
    longint bits    [16];    // shifter bits per segment (nexp bits)
    longint bias    [16];
    int     m;               // pre-shift
    int     prec_bits;       // 1, 2, 4 or 8
    bit     signed_out;

    function new(int nseg_i, int nexp_i, bit apot_i);
      nseg = nseg_i; nexp = nexp_i; apot = apot_i;
      m = 0; prec_bits = 8; signed_out = 1;
      for (int i = 0; i < 16; i++) begin
        thr[i] = 0; sign[i] = 0; bits[i] = 0; bias[i] = 0;
      end
    endfunction

    function int segment(longint x, int upto);
      int c = 0;
      for (int j = 0; j < upto; j++) if (x >= thr[j]) c++;
      return c;
    endfunction

    function longint product(longint x, int seg);
      longint xp, p;
      int     ones;
      xp = floor_div_pow2(x, m);
      p = 0;
      if (apot) begin
        for (int i = 0; i < nexp; i++)
          if (bits[seg][i]) p += floor_div_pow2(xp, nexp - i);
      end else begin
        ones = 0;
        for (int i = 0; i < nexp; i++) if (bits[seg][i]) ones++;
        p = (ones == 0) ? 0 : floor_div_pow2(xp, ones);
      end
      return p;
    endfunction

    // Value before clamping, for coverage of the clamp.
    function longint raw(longint x);
      int seg;
      longint p;
      seg = segment(x, nseg - 1);
      p = product(x, seg);
      if (sign[seg]) p = -p;
      return p + bias[seg];
    endfunction

    function longint lo();
      return signed_out ? -(longint'(1) << (prec_bits - 1)) : 0;
    endfunction
    function longint hi();
      return signed_out ? (longint'(1) << (prec_bits - 1)) - 1 : (longint'(1) << prec_bits) - 1;
    endfunction

    function logic [7:0] eval(longint x);
      longint y;
      if (prec_bits == 1) return 8'(segment(x, 1));
      if (prec_bits == 2) return 8'(segment(x, 3));
      y = raw(x);
      if (y > hi()) y = hi();
      if (y < lo()) y = lo();
      return y[7:0];
    endfunction

    function void copy_from(grau_model o);
      nseg = o.nseg; nexp = o.nexp; apot = o.apot; m = o.m;
      prec_bits = o.prec_bits; signed_out = o.signed_out;
      for (int i = 0; i < 16; i++) begin
        thr[i] = o.thr[i]; sign[i] = o.sign[i]; bits[i] = o.bits[i]; bias[i] = o.bias[i];
      end
    endfunction

    // Setting word as written to the configuration bus: {sign, bits}.
    function logic [31:0] setting_word(int seg);
      logic [31:0] w;
      w = 32'(bits[seg]);
      w[nexp] = sign[seg];
      return w;
    endfunction

    // Fit a PoT/APoT piecewise linear function to target(x) = a*x*scale
    // style shapes: the caller gives slope (real, may be negative) and value
    // at the left breakpoint of each segment; this routine turns each slope
    // into the nearest encodable sign/bits pattern for the current m and sets
    // the bias so that the line passes through (left breakpoint, value).
    function void set_segment(int seg, real slope, longint x_left, longint y_left);
      real    mag, best_err, e;
      longint best, cand;
      sign[seg] = (slope < 0);
      mag = (slope < 0) ? -slope : slope;
      best = 0; best_err = mag;
      if (apot) begin
        // greedy: take the largest power that still fits, for each unit
        real rem;
        rem = mag;
        cand = 0;
        for (int i = nexp - 1; i >= 0; i--) begin
          real w;
          w = 1.0 / (2.0 ** (m + nexp - i));
          if (rem >= w * 0.75) begin cand[i] = 1'b1; rem = rem - w; end
        end
        best = cand;
      end else begin
        for (int k = 1; k <= nexp; k++) begin
          e = mag - 1.0 / (2.0 ** (m + k));
          if (e < 0) e = -e;
          if (e < best_err) begin
            best_err = e;
            best = (longint'(1) << nexp) - (longint'(1) << (nexp - k));
          end
        end
      end
      bits[seg] = best;
      // bias so that the realised line goes through the left point
      begin
        longint p;
        p = product(x_left, seg);
        if (sign[seg]) p = -p;
        bias[seg] = y_left - p;
      end
    endfunction
  endclass

endpackage
