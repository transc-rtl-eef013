// sc_ref_pkg -- reference models used by the testbenches.
//
// Written independently of the RTL: the VDC number is computed arithmetically
// as the radical inverse of the counter value in base 2^nb (digits taken by
// integer division, summed as a real fraction), not by rewiring bits, and the
// coefficient values are rounded in real arithmetic.
package sc_ref_pkg;

  // base-2^nb radical inverse of c, a real in [0,1)
  function automatic real vdc_frac(int c, int nb, int m);
    int  b;
    int  rest;
    real w;
    real v;
    b    = 1 << nb;
    rest = c;
    w    = 1.0 / b;
    v    = 0.0;
    for (int k = 0; k * nb < m; k++) begin
      v    = v + w * (rest % b);
      rest = rest / b;
      w    = w / b;
    end
    return v;
  endfunction

  // one stream bit: value/2^m > R
  function automatic bit sng(int value, int c, int nb, int m);
    return (real'(value) / real'(1 << m)) > vdc_frac(c, nb, m);
  endfunction

  // coefficient num/den as an m-bit binary value, rounded to nearest
  function automatic int q(int num, int den, int m);
    return $rtoi(real'(num) * real'(1 << m) / real'(den) + 0.5);
  endfunction

  function automatic real absr(real a);
    return (a < 0.0) ? -a : a;
  endfunction

  // ---------------------------------------------------------------------
  // Whole-function reference: number of 1s the circuit for function fn
  // (0 sin, 1 cos, 2 tan, 3 tanh, 4 arctan, 5 sigmoid, 6 Sinc, 7 e^-x,
  // 8 ln(1+x)) emits for input x over its output period, with the default
  // configuration, starting from cleared delays. tan streams two periods:
  // the sin count of the first is re-emitted against cos in the second.
  // ---------------------------------------------------------------------
  function automatic int ref_count(int fn, int x, int m);
    int  n;
    int  len;
    bit  xs [];
    bit  i1 [];
    bit  xc [];
    bit  j1 [];
    bit  ys [];
    bit  yc [];
    int  ones;
    int  up;
    int  dn;
    bit  prev;
    n   = 1 << m;
    len = (fn == 2) ? 2 * n : n;
    xs  = new[len];
    i1  = new[len];
    xc  = new[len];
    j1  = new[len];
    ys  = new[len];
    yc  = new[len];
    for (int t = 0; t < len; t++) begin
      int  c;
      bit  s1, s2, s3, s4;
      c = t % n;
      case (fn)
        0, 3, 4: begin
          int nbi, b1, b2, b3, n1, d1, n2, d2, n3, d3, dd;
          if (fn == 0) begin nbi = 2; b1 = 7; b2 = 8; b3 = 9; n1 = 1; d1 = 42; n2 = 1; d2 = 20; n3 = 1; d3 = 6; dd = 2; end
          else if (fn == 3) begin nbi = 4; b1 = 5; b2 = 4; b3 = 1; n1 = 17; d1 = 42; n2 = 2; d2 = 5; n3 = 1; d3 = 3; dd = 3; end
          else begin nbi = 3; b1 = 9; b2 = 3; b3 = 8; n1 = 5; d1 = 21; n2 = 3; d2 = 5; n3 = 1; d3 = 3; dd = 2; end
          xs[t] = sng(x, c, nbi, m);
          i1[t] = xs[t] & ((t >= dd) ? xs[t-dd] : 1'b0);
          s1 = ~(sng(q(n1, d1, m), c, b1, m) & i1[t]);
          s2 = ~(sng(q(n2, d2, m), c, b2, m) & i1[t] & s1);
          s3 = ~(sng(q(n3, d3, m), c, b3, m) & i1[t] & s2);
          ys[t] = xs[t] & s3;
        end
        1: begin
          xs[t] = sng(x, c, 3, m);
          i1[t] = xs[t] & ((t >= 2) ? xs[t-2] : 1'b0);
          s1 = ~(sng(q(1, 56, m), c, 3, m) & i1[t]);
          s2 = ~(sng(q(1, 30, m), c, 2, m) & i1[t] & s1);
          s3 = ~(sng(q(1, 12, m), c, 4, m) & i1[t] & s2);
          ys[t] = ~(sng(q(1, 2, m), c, 8, m) & i1[t] & s3);
        end
        2: begin
          // sin part: input VDC-8, coefficients VDC-128 x3, delays 3,0,0,1
          xs[t] = sng(x, c, 3, m);
          i1[t] = xs[t] & ((t >= 3) ? xs[t-3] : 1'b0);
          s1 = ~(sng(q(1, 42, m), c, 7, m) & i1[t]);
          s2 = ~(sng(q(1, 20, m), c, 7, m) & i1[t] & s1);
          s3 = ~(sng(q(1, 6, m), c, 7, m) & i1[t] & s2);
          ys[t] = ((t >= 1) ? xs[t-1] : 1'b0) & s3;
          // cos part: input VDC-4, coefficients VDC-16,8,2,128, delays 3,0,0,2
          xc[t] = sng(x, c, 2, m);
          j1[t] = xc[t] & ((t >= 3) ? xc[t-3] : 1'b0);
          s1 = ~(sng(q(1, 56, m), c, 4, m) & j1[t]);
          s2 = ~(sng(q(1, 30, m), c, 3, m) & j1[t] & s1);
          s3 = ~(sng(q(1, 12, m), c, 1, m) & j1[t] & s2);
          yc[t] = ~(sng(q(1, 2, m), c, 7, m) & ((t >= 2) ? j1[t-2] : 1'b0) & s3);
        end
        5: begin
          xs[t] = sng(x, c, 10, m);
          i1[t] = xs[t] & ((t >= 2) ? xs[t-2] : 1'b0);
          s1 = ~(sng(q(1, 10, m), c, 1, m) & i1[t]);
          s2 = ~(sng(q(1, 12, m), c, 2, m) & i1[t] & s1);
          s3 = ~(sng(q(1, 2, m), c, 5, m) & xs[t] & s2);
          ys[t] = ~(sng(q(1, 2, m), c, 2, m) & s3);
        end
        6: begin
          xs[t] = sng(x, c, 3, m);
          i1[t] = xs[t] & ((t >= 2) ? xs[t-2] : 1'b0);
          s1 = ~(sng(q(1, 42, m), c, 8, m) & i1[t]);
          s2 = ~(sng(q(1, 20, m), c, 5, m) & i1[t] & s1);
          ys[t] = ~(sng(q(1, 6, m), c, 10, m) & i1[t] & s2);
        end
        7: begin
          xs[t] = sng(x, c, 7, m);
          s1 = ~(sng(q(1, 5, m), c, 4, m) & xs[t]);
          s2 = ~(sng(q(1, 4, m), c, 10, m) & xs[t] & s1);
          s3 = ~(sng(q(1, 3, m), c, 9, m) & xs[t] & s2);
          s4 = ~(sng(q(1, 2, m), c, 9, m) & xs[t] & s3);
          ys[t] = ~(xs[t] & s4);
        end
        default: begin
          xs[t] = sng(x, c, 6, m);
          s1 = ~(sng(q(4, 5, m), c, 2, m) & xs[t]);
          s2 = ~(sng(q(3, 4, m), c, 9, m) & xs[t] & s1);
          s3 = ~(sng(q(2, 3, m), c, 10, m) & xs[t] & s2);
          s4 = ~(sng(q(1, 2, m), c, 9, m) & xs[t] & s3);
          ys[t] = xs[t] & s4;
        end
      endcase
    end
    ones = 0;
    if (fn != 2) begin
      for (int t = 0; t < n; t++) ones += int'(ys[t]);
      return ones;
    end
    up = 0;
    for (int t = 0; t < n; t++) up += int'(ys[t]);
    dn   = up;
    prev = 1'b0;
    for (int t = n; t < 2 * n; t++) begin
      bit a, qb;
      a = yc[t] && (dn != 0);
      if (a) dn--;
      qb   = yc[t] ? a : prev;
      prev = qb;
      ones += int'(qb);
    end
    return ones;
  endfunction

endpackage
