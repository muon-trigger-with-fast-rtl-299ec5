// track_fit: hit positions and least-squares straight-line fit.
//
// With t0 known, every used hit is placed at
//     x_l = w_l + s_l * (t_l - t0)          (drift units of 45 um)
// in layer z_l = l (0 = bottom). A least-squares line x = x0 + m (z - 1.5)
// is fitted through the three or four points:
//     den = n Szz - Sz^2           (6, 14 or 20 for the possible layer sets)
//     m   = (n Szx - Sz Sx) / den
//     x0  = (Sx + m (1.5 n - Sz)) / n
// m is the x change per layer (drift units per layer pitch) with 6
// fractional bits, x0 the crossing point in the mid-plane of the macro-cell
// (between layers B and C) with 2 fractional bits, both rounded to nearest.
// The crossing angle follows as phi = atan(m * 45 um / 13 mm).
//
// Interface: the mean-timer outputs in, tp_o/valid_o out (trigger primitive:
// t0, m, x0, number of hits, layers used, laterality, wires).
// Timing: 2 clocks of latency, one set per clock.
//
// Converting t0-corrected times to positions with a uniform drift velocity and
// the least-squares fit giving slope and mid-plane position follow the
// published design; the units, fixed-point formats and rounding are choices
// of this implementation.
module track_fit
  import tpg_pkg::*;
(
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  valid_i,
  input  tdc_t                                  t0_i,
  input  logic signed [REL_W-1:0]               t0_rel_i,
  input  logic signed [N_LAYERS-1:0][REL_W-1:0] tau_i,
  input  logic [N_LAYERS-1:0]                   use_i,
  input  lat_e [N_LAYERS-1:0]                   lat_i,
  input  logic [N_LAYERS-1:0][1:0]              wire_i,
  output logic                                  valid_o,
  output tp_t                                   tp_o
);

  localparam int SW = 32;

  // ---------------- stage 1: positions and sums ----------------
  logic signed [SW-1:0] n_d, sz_d, szz_d, sx_d, szx_d;
  always_comb begin
    logic signed [SW-1:0] x;
    n_d = '0; sz_d = '0; szz_d = '0; sx_d = '0; szx_d = '0;
    for (int l = 0; l < N_LAYERS; l++) begin
      x = SW'(wire_x(2'(l), wire_i[l]));
      if (lat_i[l] == LAT_RIGHT) x = x + (SW'($signed(tau_i[l])) - SW'(t0_rel_i));
      else                       x = x - (SW'($signed(tau_i[l])) - SW'(t0_rel_i));
      if (use_i[l]) begin
        n_d   = n_d + 1;
        sz_d  = sz_d + SW'(l);
        szz_d = szz_d + SW'(l * l);
        sx_d  = sx_d + x;
        szx_d = szx_d + SW'(l) * x;
      end
    end
  end

  logic                 v1;
  logic signed [SW-1:0] n1, sz1, szz1, sx1, szx1;
  tp_t                  tp1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; n1 <= '0; sz1 <= '0; szz1 <= '0; sx1 <= '0; szx1 <= '0; tp1 <= '0;
    end else begin
      v1 <= valid_i;
      n1 <= n_d; sz1 <= sz_d; szz1 <= szz_d; sx1 <= sx_d; szx1 <= szx_d;
      tp1       <= '0;
      tp1.t0    <= t0_i;
      tp1.nhits <= 3'(n_d);
      tp1.used  <= use_i;
      tp1.lat   <= lat_i;
      tp1.wno  <= wire_i;
    end
  end

  // ---------------- stage 2: divisions ----------------
  logic signed [15:0] m_d, x0_d;
  logic               fit_ok;
  always_comb begin
    logic signed [39:0] mnum, den, xnum;
    mnum = 40'(n1) * 40'(szx1) - 40'(sz1) * 40'(sx1);
    den  = 40'(n1) * 40'(szz1) - 40'(sz1) * 40'(sz1);
    xnum = 2 * (2 * 40'(sx1) * den + mnum * (3 * 40'(n1) - 2 * 40'(sz1)));
    fit_ok = (den > 0);
    m_d  = fit_ok ? 16'(rdiv(mnum * 64, den)) : '0;
    x0_d = fit_ok ? 16'(rdiv(xnum, 40'(n1) * den)) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0; tp_o <= '0;
    end else begin
      valid_o  <= v1 && fit_ok;
      tp_o     <= tp1;
      tp_o.m   <= m_d;
      tp_o.x0  <= x0_d;
    end
  end

endmodule
