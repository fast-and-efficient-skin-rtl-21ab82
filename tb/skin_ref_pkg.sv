// skin_ref_pkg: reference models used by the testbenches.
//
// Each function recomputes one step of the skin detector in a plain
// behavioural style (real arithmetic where the hardware uses fixed point,
// explicit searches where the hardware uses parallel logic), so that the
// testbenches compare the RTL against an independent statement of the rule.
package skin_ref_pkg;

  // ITU-R BT.601 full range, rounded to nearest
  function automatic int ycc_ref(input int r, input int g, input int b, input int ch);
    real v;
    case (ch)
      0: v = 0.299 * r + 0.587 * g + 0.114 * b;
      1: v = 128.0 - 0.168736 * r - 0.331264 * g + 0.5 * b;
      default: v = 128.0 + 0.5 * r - 0.418688 * g - 0.081312 * b;
    endcase
    if (v < 0.0) v = 0.0;
    if (v > 255.0) v = 255.0;
    return int'(v);   // round to nearest
  endfunction

  // neighbour refinement of an 8x8 window, codes 0 black, 2 gray, 3 white
  function automatic void nb_ref(input int t [64], input int k, input int th1, input int th2,
                                 output int o [64]);
    o = t;
    for (int r = 2; r <= 5; r++)
      for (int c = 2; c <= 5; c++) begin
        int w3, g3, w5, g5, xi;
        w3 = 0; g3 = 0; w5 = 0; g5 = 0;
        for (int rr = r - 2; rr <= r + 2; rr++)
          for (int cc = c - 2; cc <= c + 2; cc++) begin
            if (rr == r && cc == c) continue;
            if (t[rr * 8 + cc] == 3) begin w5++; if (rr >= r - 1 && rr <= r + 1 && cc >= c - 1 && cc <= c + 1) w3++; end
            if (t[rr * 8 + cc] == 2) begin g5++; if (rr >= r - 1 && rr <= r + 1 && cc >= c - 1 && cc <= c + 1) g3++; end
          end
        xi = k * (2 * w3 + g3) + (2 * w5 + g5);
        if (t[r * 8 + c] != 3) o[r * 8 + c] = (xi < th1) ? 0 : (xi > th2) ? 3 : 2;
      end
  endfunction

  // three-class Otsu on 16 bins by between-class variance (real)
  function automatic void otsu_ref(input int v [64], output int t1, output int t2, output real best);
    best = -1.0;
    t1 = 0; t2 = 1;
    for (int a = 0; a <= 13; a++)
      for (int b = a + 1; b <= 14; b++) begin
        real w [3], s [3], mu, var_b;
        w = '{0.0, 0.0, 0.0}; s = '{0.0, 0.0, 0.0};
        for (int i = 0; i < 64; i++) begin
          int bin, k;
          bin = v[i] / 16;
          k = (bin <= a) ? 0 : (bin <= b) ? 1 : 2;
          w[k] += 1.0; s[k] += bin;
        end
        mu = (s[0] + s[1] + s[2]) / 64.0;
        var_b = 0.0;
        for (int k = 0; k < 3; k++)
          if (w[k] > 0.0) var_b += w[k] * (s[k] / w[k] - mu) * (s[k] / w[k] - mu);
        if (var_b > best * (1.0 + 1e-12) + 1e-12) begin
          best = var_b; t1 = a; t2 = b;
        end
      end
  endfunction

  function automatic real otsu_var(input int v [64], input int a, input int b);
    real w [3], s [3], mu, var_b;
    w = '{0.0, 0.0, 0.0}; s = '{0.0, 0.0, 0.0};
    for (int i = 0; i < 64; i++) begin
      int bin, k;
      bin = v[i] / 16;
      k = (bin <= a) ? 0 : (bin <= b) ? 1 : 2;
      w[k] += 1.0; s[k] += bin;
    end
    mu = (s[0] + s[1] + s[2]) / 64.0;
    var_b = 0.0;
    for (int k = 0; k < 3; k++)
      if (w[k] > 0.0) var_b += w[k] * (s[k] / w[k] - mu) * (s[k] / w[k] - mu);
    return var_b;
  endfunction

  function automatic bit ratio_ref(input int ps, input int pn, input int theta);
    return real'(ps) >= real'(theta) * real'(pn) / 16.0;
  endfunction

  function automatic bit seed_ref(input int ps, input int pn, input bit amb, input bit fb,
                                  input int th_pure, input int t_amb, input int t_fb, input int t_hi);
    int th;
    th = amb ? t_amb : fb ? t_fb : t_hi;
    return (ps >= th_pure) && ratio_ref(ps, pn, th);
  endfunction

  function automatic int cd_ref(input int cls [3][64], input int a, input int b);
    int d;
    d = 0;
    for (int ch = 0; ch < 3; ch++) d += (cls[ch][a] > cls[ch][b]) ? cls[ch][a] - cls[ch][b] : cls[ch][b] - cls[ch][a];
    return d;
  endfunction

  // first diffusion to its fixed point, worklist style
  function automatic void diff1_ref(input bit seed [64], input int cls [3][64], input bit edg [64],
                                    input bit amb [64], input int th, input int th_amb,
                                    output bit o [64]);
    int q [$];
    o = seed;
    for (int i = 0; i < 64; i++) if (seed[i]) q.push_back(i);
    while (q.size() > 0) begin
      int m, mr, mc;
      m = q.pop_front(); mr = m / 8; mc = m % 8;
      for (int r = mr - 1; r <= mr + 1; r++)
        for (int c = mc - 1; c <= mc + 1; c++) begin
          int x;
          if (r < 0 || r > 7 || c < 0 || c > 7) continue;
          x = r * 8 + c;
          if (o[x] || edg[x]) continue;
          if (cd_ref(cls, x, m) <= (amb[x] ? th_amb : th)) begin
            o[x] = 1; q.push_back(x);
          end
        end
    end
  endfunction

  function automatic int expt(input int d);
    return int'(255.0 * $exp(-1.0 * d));
  endfunction

  function automatic void diff2_ref(input bit seed [64], input int cls [3][64], input int y [64],
                                    input int ps [64], input bit amb [64], input bit fb [64],
                                    input int w [5], input int beta, input int th_f, input int th_e2,
                                    output bit o [64]);
    o = seed;
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        int x, g, m, f2, f;
        x = r * 8 + c;
        if (seed[x]) continue;
        g = 0;
        if (c > 0) g += (y[x] > y[x-1]) ? y[x] - y[x-1] : y[x-1] - y[x];
        if (r > 0) g += (y[x] > y[x-8]) ? y[x] - y[x-8] : y[x-8] - y[x];
        if (g > th_e2) continue;
        m = -1; f2 = 0;
        for (int rad = 1; rad <= 2 && m < 0; rad++)
          for (int rr = r - rad; rr <= r + rad; rr++)
            for (int cc = c - rad; cc <= c + rad; cc++) begin
              int dr, dc, cheb;
              dr = (rr > r) ? rr - r : r - rr; dc = (cc > c) ? cc - c : c - cc;
              cheb = (dr > dc) ? dr : dc;
              if (m >= 0 || cheb != rad || rr < 0 || rr > 7 || cc < 0 || cc > 7) continue;
              if (seed[rr * 8 + cc]) begin m = rr * 8 + cc; f2 = (rad == 1) ? 63 : 31; end
            end
        if (m < 0) continue;
        f = w[0] * (expt(cd_ref(cls, x, m)) + beta) + w[1] * f2 + w[2] * ps[x] +
            w[3] * (amb[x] ? 63 : 0) + w[4] * (fb[x] ? 63 : 0);
        if (f >= th_f) o[x] = 1;
      end
  endfunction

endpackage
