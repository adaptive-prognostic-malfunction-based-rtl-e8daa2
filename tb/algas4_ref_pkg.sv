// algas4_ref_pkg: reference models used by the testbenches.
//
// Written from the design description, not from the RTL: membership
// grades from the triangle/shoulder formulas, the rule table typed out
// again, a real-arithmetic version of the fuzzy system, the FIR taps from Pascal's triangle, and the APMU window sum.
package algas4_ref_pkg;

  // grade of input term k (0=EN .. 4=EF) at distance x; terms peak at
  // k*256, rise over the 256 units before the peak and fall over the 256
  // after it; EN is flat to the left, EF flat to the right.
  function automatic int ref_mf(input int x, input int k);
    int c;
    c = k * 256;
    if (x < c) begin
      if (k == 0) return 255;
      if (c - x >= 256) return 0;
      return (256 - (c - x) > 255) ? 255 : 256 - (c - x);
    end else begin
      if (k == 4) return 255;
      if (x - c >= 256) return 0;
      return (256 - (x - c) > 255) ? 255 : 256 - (x - c);
    end
  endfunction

  // rule table: lidar term, radar term, output term (0=L 1=M 2=H 3=EH)
  function automatic void ref_rule(input int r, output int l, output int d, output int o);
    int tbl [11][3] = '{'{0,0,3}, '{1,0,2}, '{0,1,2}, '{1,1,2}, '{2,2,1}, '{3,2,1},
                        '{3,3,0}, '{4,3,0}, '{3,4,0}, '{4,4,0}, '{2,3,1}};
    l = tbl[r][0]; d = tbl[r][1]; o = tbl[r][2];
  endfunction

  function automatic int ref_fls(input int lidar, input int radar);
    int w [4];
    int centre [4] = '{10, 40, 70, 110};
    int l, d, o, s, num, den;
    for (int i = 0; i < 4; i++) w[i] = 0;
    for (int r = 0; r < 11; r++) begin
      ref_rule(r, l, d, o);
      s = ref_mf(lidar, l);
      if (ref_mf(radar, d) < s) s = ref_mf(radar, d);
      if (s > w[o]) w[o] = s;
    end
    num = 0; den = 0;
    for (int i = 0; i < 4; i++) begin
      num += w[i] * centre[i];
      den += w[i];
    end
    return (den == 0) ? 0 : num / den;
  endfunction

  // the same fuzzy system in real arithmetic (exact triangles, no grade
  // quantisation, exact divide): the fixed-point design is measured
  // against this, as the published design was measured against a
  // floating-point model.
  function automatic real ref_mf_real(input int x, input int k);
    real d;
    d = real'(x - k * 256) / 256.0;
    if ((k == 0 && d < 0.0) || (k == 4 && d > 0.0)) return 1.0;
    if (d < 0.0) d = -d;
    return (d >= 1.0) ? 0.0 : 1.0 - d;
  endfunction

  function automatic real ref_fls_real(input int lidar, input int radar);
    real w [4];
    real centre [4] = '{10.0, 40.0, 70.0, 110.0};
    real s, num, den;
    int l, d, o;
    for (int i = 0; i < 4; i++) w[i] = 0.0;
    for (int r = 0; r < 11; r++) begin
      ref_rule(r, l, d, o);
      s = ref_mf_real(lidar, l);
      if (ref_mf_real(radar, d) < s) s = ref_mf_real(radar, d);
      if (s > w[o]) w[o] = s;
    end
    num = 0.0; den = 0.0;
    for (int i = 0; i < 4; i++) begin
      num += w[i] * centre[i];
      den += w[i];
    end
    return (den == 0.0) ? 0.0 : num / den;
  endfunction

  // taps of an n-tap binomial filter from Pascal's triangle
  function automatic void ref_taps(input int n, output longint h [32]);
    for (int i = 0; i < 32; i++) h[i] = 0;
    h[0] = 1;
    for (int row = 1; row < n; row++)
      for (int i = row; i > 0; i--) h[i] = h[i] + h[i-1];
  endfunction

endpackage
