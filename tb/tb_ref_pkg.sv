// tb_ref_pkg: reference arithmetic for the TPG testbenches.
//
// Everything here is written directly from the algorithm description with
// plain integers and reals, independently of the RTL: network evaluation,
// network input encoding, one-hit-per-layer selection, muon hit generation
// for a straight track, a real-valued mean-timer solution and a real-valued
// least-squares fit.
package tb_ref_pkg;

  localparam int T    = 467;   // half cell width in drift units
  localparam int TPB  = 30;    // TDC counts per BX

  typedef int ivec_t[];

  // Quantized one-hidden-layer network, same definition as documented:
  // act = clip(relu((b1 + sum w1*x) >>> 4), 255), logit = b2 + sum w2*act.
  function automatic ivec_t mlp(int nin, int nhid, int nout, ivec_t x,
                                ivec_t w1, ivec_t b1, ivec_t w2, ivec_t b2);
    ivec_t act = new[nhid];
    ivec_t o   = new[nout];
    for (int h = 0; h < nhid; h++) begin
      int a = b1[h];
      for (int i = 0; i < nin; i++) a += w1[h*nin + i] * x[i];
      a = a >>> 4;
      if (a < 0) a = 0;
      if (a > 255) a = 255;
      act[h] = a;
    end
    for (int k = 0; k < nout; k++) begin
      int a = b2[k];
      for (int h = 0; h < nhid; h++) a += w2[k*nhid + h] * act[h];
      o[k] = a;
    end
    return o;
  endfunction

  // Signed BX difference modulo 4096.
  function automatic int bxd(int a, int b);
    int d = (a - b) & 32'h0000_0fff;
    return (d >= 2048) ? d - 4096 : d;
  endfunction

  // Relative TDC difference between two (bx, fine) times.
  function automatic int td(int abx, int afine, int bbx, int bfine);
    return bxd(abx, bbx) * TPB + afine - bfine;
  endfunction

  // Network input code: 1 + bx - bx_min over present entries, clipped to 31.
  function automatic ivec_t enc_bx(int n, bit pres[], int bx[]);
    ivec_t x = new[n];
    int anchor = -1, dmin = 0;
    for (int i = 0; i < n; i++) if (pres[i] && anchor < 0) anchor = bx[i];
    for (int i = 0; i < n; i++) if (pres[i] && bxd(bx[i], anchor) < dmin) dmin = bxd(bx[i], anchor);
    for (int i = 0; i < n; i++) begin
      int r = bxd(bx[i], anchor) - dmin + 1;
      x[i] = !pres[i] ? 0 : (r > 31 ? 31 : r);
    end
    return x;
  endfunction

  // Wire centre in drift units (layers 0 and 2 shifted by half a cell).
  function automatic int wx(int layer, int w);
    return (2*w + 1 + ((layer % 2 == 0) ? 1 : 0)) * T;
  endfunction

  // Hits of a straight track x(z) = x0 + m (z - 1.5), z in layers.
  // Returns for each layer: in-macro-cell flag, wn, laterality (1 = right)
  // and drift time in TDC counts (rounded).
  function automatic void track_hits(real x0, real m, output bit in_mc[4],
                                     output int wn[4], output bit right[4],
                                     output int drift[4]);
    for (int l = 0; l < 4; l++) begin
      real x = x0 + m * (l - 1.5);
      in_mc[l] = 0; wn[l] = 0; right[l] = 0; drift[l] = 0;
      for (int w = 0; w < 4; w++) begin
        real c = wx(l, w);
        if (x >= c - T && x < c + T) begin
          in_mc[l] = 1;
          wn[l]  = w;
          right[l] = (x >= c);
          drift[l] = $rtoi((x >= c ? x - c : c - x) + 0.5);
        end
      end
    end
  endfunction

  // Real-valued straight-line t0: least-squares over t0, slope and intercept
  // of x_l = w_l + s_l (t_l - t0) for the used layers (exact for 3 hits).
  // Solved by scanning t0 in 1/8 count steps around the window and keeping
  // the smallest residual, which needs no algebra shared with the RTL.
  function automatic real t0_scan(bit use_[4], int wn[4], bit right[4], int tau[4],
                                  int lo, int hi);
    real best = 1.0e30, bt = 0.0;
    for (int k = lo * 8; k <= hi * 8; k++) begin
      real t0 = k / 8.0;
      real r  = fit_resid(use_, wn, right, tau, t0);
      if (r < best) begin best = r; bt = t0; end
    end
    return bt;
  endfunction

  function automatic real fit_resid(bit use_[4], int wn[4], bit right[4], int tau[4], real t0);
    real sx = 0, sz = 0, szz = 0, szx = 0, n = 0, m, q, r = 0;
    real x[4];
    for (int l = 0; l < 4; l++) if (use_[l]) begin
      x[l] = wx(l, wn[l]) + (right[l] ? 1.0 : -1.0) * (tau[l] - t0);
      n += 1; sz += l; szz += l*l; sx += x[l]; szx += l * x[l];
    end
    m = (n*szx - sz*sx) / (n*szz - sz*sz);
    q = (sx - m*sz) / n;
    for (int l = 0; l < 4; l++) if (use_[l]) r += (x[l] - q - m*l) ** 2;
    return r;
  endfunction

  // Real least-squares fit; returns slope per layer and position at z = 1.5.
  function automatic void ls_fit(bit use_[4], int wn[4], bit right[4], int tau[4],
                                 int t0r, output real m, output real x0);
    real sx = 0, sz = 0, szz = 0, szx = 0, n = 0;
    for (int l = 0; l < 4; l++) if (use_[l]) begin
      real x = wx(l, wn[l]) + (right[l] ? 1.0 : -1.0) * (tau[l] - t0r);
      n += 1; sz += l; szz += l*l; sx += x; szx += l * x;
    end
    m  = (n*szx - sz*sx) / (n*szz - sz*sz);
    x0 = (sx - m*sz) / n + m * 1.5;
  endfunction

  function automatic int rnd(real v);
    return (v >= 0) ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5);
  endfunction

  // Integer mean-timer: three points in layers a < b < c on a line give
  // (zc-zb) x_a - (zc-za) x_b + (zb-za) x_c = 0, linear in t0 (N/D).
  // Quadruplets combine the A-B-C and B-C-D solutions weighted by |D|.
  function automatic void trip_nd(int a, int b, int c, int wn[4], bit right[4], int tau[4],
                                  output int n, output int d);
    int cf[3], ly[3];
    cf[0] = c - b; cf[1] = -(c - a); cf[2] = b - a;
    ly[0] = a; ly[1] = b; ly[2] = c;
    n = 0; d = 0;
    for (int k = 0; k < 3; k++) begin
      int s = right[ly[k]] ? 1 : -1;
      n += cf[k] * (wx(ly[k], wn[ly[k]]) + s * tau[ly[k]]);
      d += cf[k] * s;
    end
  endfunction

  function automatic int rdiv(int n, int d);
    int a = (n < 0) ? -n : n;
    a = (a + d / 2) / d;
    return (n < 0) ? -a : a;
  endfunction

  function automatic bit mt_exact(bit use_[4], int wn[4], bit right[4], int tau[4],
                                  int tol, output int t0r);
    int n1 = 0, d1 = 0, n2 = 0, d2 = 0, cnt = 0, nn, dd;
    for (int l = 0; l < 4; l++) cnt += use_[l];
    if (cnt == 4) begin
      trip_nd(0, 1, 2, wn, right, tau, n1, d1);
      trip_nd(1, 2, 3, wn, right, tau, n2, d2);
    end else if (!use_[3]) trip_nd(0, 1, 2, wn, right, tau, n1, d1);
    else if (!use_[2])     trip_nd(0, 1, 3, wn, right, tau, n1, d1);
    else if (!use_[1])     trip_nd(0, 2, 3, wn, right, tau, n1, d1);
    else                   trip_nd(1, 2, 3, wn, right, tau, n1, d1);
    nn = (d1 < 0 ? -n1 : n1) + (d2 < 0 ? -n2 : n2);
    dd = (d1 < 0 ? -d1 : d1) + (d2 < 0 ? -d2 : d2);
    t0r = 0;
    if (dd == 0) return 0;
    t0r = rdiv(nn, dd);
    for (int l = 0; l < 4; l++)
      if (use_[l] && (tau[l] - t0r < -tol || tau[l] - t0r > T + tol)) return 0;
    return 1;
  endfunction

endpackage
