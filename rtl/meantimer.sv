// meantimer: time pedestal (t0) finder for a disambiguated set of hits.
//
// Each hit i, in layer z_i (0..3) and on a wire at x = w_i, with laterality
// s_i (+1 right, -1 left) and time t_i, puts the muon at
//     x_i = w_i + s_i * (t_i - t0)                     (drift units, TDC counts)
// because the drift velocity is uniform. Three points on a straight line in
// layers a < b < c satisfy
//     (z_c - z_b) x_a - (z_c - z_a) x_b + (z_b - z_a) x_c = 0,
// which is linear in t0:  t0 = N / D  with
//     N = sum_i c_i (w_i + s_i t_i),   D = sum_i c_i s_i.
// This single relation covers every mean-timer equation of the 4x4
// macro-wno; for example cells 4-6-3 of layers A-B-C, right-left-right, give
// t0 = (t4 + 2 t6 + t3 - 2 Tmax) / 4. A triplet uses its own three layers. A
// quadruplet uses the two triplets A-B-C and B-C-D and combines them as
// t0 = (sgn(D1) N1 + sgn(D2) N2) / (|D1| + |D2|), a weighted mean of the two
// solutions that stays defined when one of them is not (D = 0).
// The solution is accepted only if every drift time t_i - t0 lies within
// [-TOL, TMAX_TDC + TOL]; otherwise the set is rejected as inconsistent.
//
// Times inside the block are relative to the first used hit (the anchor), in
// full TDC precision; t0 is rounded to the nearest TDC count.
//
// Interface: valid_i, quad_i, lat_i in (hits marked LAT_NOISE are not used).
// Out: valid_o with t0_o (absolute), t0_rel_o, tau_o (hit times
// relative to the anchor), use_o, lat_o, wire_o; short_o when fewer than
// three hits remain and invalid_o when no consistent t0 exists.
// Timing: 2 clocks of latency, one set per clock.
//
// The generalized mean-timer method, one equation per disambiguated pattern,
// and the full-TDC-precision t0 follow the published design. The closed form
// for all patterns, the quadruplet combination, the drift-time window check
// and the rounding are choices of this implementation.
module meantimer
  import tpg_pkg::*;
#(
  parameter int TOL = 30
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              valid_i,
  input  quad_t                             quad_i,
  input  lat_e [N_LAYERS-1:0]               lat_i,
  output logic                              valid_o,
  output logic                              short_o,
  output logic                              invalid_o,
  output tdc_t                              t0_o,
  output logic signed [REL_W-1:0]           t0_rel_o,
  output logic signed [N_LAYERS-1:0][REL_W-1:0] tau_o,
  output logic [N_LAYERS-1:0]               use_o,
  output lat_e [N_LAYERS-1:0]               lat_o,
  output logic [N_LAYERS-1:0][1:0]          wire_o
);

  localparam int NW = 24;

  typedef struct packed {
    logic signed [NW-1:0] n;
    logic signed [NW-1:0] d;
  } frac_t;

  // N and D of the triplet in layers a < b < c.
  function automatic frac_t triplet(int a, int b, int c,
                                    logic signed [N_LAYERS-1:0][REL_W-1:0] w,
                                    logic signed [N_LAYERS-1:0][REL_W-1:0] tau,
                                    logic [N_LAYERS-1:0] right);
    frac_t f;
    int ca, cb, cc;
    ca = c - b;
    cb = -(c - a);
    cc = b - a;
    f.n = NW'(ca) * (NW'($signed(w[a])) + (right[a] ? NW'($signed(tau[a])) : -NW'($signed(tau[a]))))
        + NW'(cb) * (NW'($signed(w[b])) + (right[b] ? NW'($signed(tau[b])) : -NW'($signed(tau[b]))))
        + NW'(cc) * (NW'($signed(w[c])) + (right[c] ? NW'($signed(tau[c])) : -NW'($signed(tau[c]))));
    f.d = NW'(right[a] ? ca : -ca) + NW'(right[b] ? cb : -cb) + NW'(right[c] ? cc : -cc);
    return f;
  endfunction

  // ---------------- stage 1: equation selection ----------------
  logic [N_LAYERS-1:0]                   use_d;
  logic [N_LAYERS-1:0]                   right_d;
  logic [2:0]                            n_d;
  tdc_t                                  anchor_d;
  logic signed [N_LAYERS-1:0][REL_W-1:0] tau_d, w_d;
  frac_t                                 eq_d;

  always_comb begin
    frac_t f1, f2;
    logic found;
    n_d      = '0;
    anchor_d = '0;
    found    = 1'b0;
    for (int l = 0; l < N_LAYERS; l++) begin
      use_d[l]   = quad_i.present[l] && (lat_i[l] != LAT_NOISE);
      right_d[l] = (lat_i[l] == LAT_RIGHT);
      n_d        = n_d + 3'(use_d[l]);
      if (use_d[l] && !found) begin
        anchor_d = quad_i.t[l];
        found    = 1'b1;
      end
    end
    for (int l = 0; l < N_LAYERS; l++) begin
      tau_d[l] = use_d[l] ? tdiff(quad_i.t[l], anchor_d) : '0;
      w_d[l]   = wire_x(2'(l), quad_i.wno[l]);
    end
    f1 = '0;
    f2 = '0;
    if (n_d == 3'd4) begin
      f1 = triplet(0, 1, 2, w_d, tau_d, right_d);
      f2 = triplet(1, 2, 3, w_d, tau_d, right_d);
    end else if (!use_d[3]) f1 = triplet(0, 1, 2, w_d, tau_d, right_d);
    else if (!use_d[2])     f1 = triplet(0, 1, 3, w_d, tau_d, right_d);
    else if (!use_d[1])     f1 = triplet(0, 2, 3, w_d, tau_d, right_d);
    else                    f1 = triplet(1, 2, 3, w_d, tau_d, right_d);
    eq_d.n = ((f1.d < 0) ? -f1.n : f1.n) + ((f2.d < 0) ? -f2.n : f2.n);
    eq_d.d = ((f1.d < 0) ? -f1.d : f1.d) + ((f2.d < 0) ? -f2.d : f2.d);
  end

  logic                                  v1, ok1;
  logic [N_LAYERS-1:0]                   use1;
  tdc_t                                  anchor1;
  logic signed [N_LAYERS-1:0][REL_W-1:0] tau1;
  frac_t                                 eq1;
  lat_e [N_LAYERS-1:0]                   lat1;
  logic [N_LAYERS-1:0][1:0]              wire1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; ok1 <= 1'b0; use1 <= '0; anchor1 <= '0; tau1 <= '0;
      eq1 <= '0; lat1 <= {N_LAYERS{LAT_NOISE}}; wire1 <= '0;
    end else begin
      v1      <= valid_i;
      ok1     <= (n_d >= 3'd3);
      use1    <= use_d;
      anchor1 <= anchor_d;
      tau1    <= tau_d;
      eq1     <= eq_d;
      lat1    <= lat_i;
      wire1   <= quad_i.wno;
    end
  end

  // ---------------- stage 2: division and consistency ----------------
  logic signed [REL_W-1:0] t0r;
  logic                    cons;
  always_comb begin
    logic signed [39:0] q;
    logic signed [39:0] drift;
    q    = (eq1.d == 0) ? 40'sd0 : rdiv(40'(eq1.n), 40'(eq1.d));
    t0r  = REL_W'(q);
    cons = (eq1.d != 0);
    for (int l = 0; l < N_LAYERS; l++) begin
      drift = 40'($signed(tau1[l])) - q;
      if (use1[l] && (drift < -40'sd1 * 40'(TOL) || drift > 40'(TMAX_TDC + TOL)))
        cons = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0; short_o <= 1'b0; invalid_o <= 1'b0;
      t0_o <= '0; t0_rel_o <= '0; tau_o <= '0;
      use_o <= '0; lat_o <= {N_LAYERS{LAT_NOISE}}; wire_o <= '0;
    end else begin
      valid_o   <= v1 && ok1 && cons;
      short_o   <= v1 && !ok1;
      invalid_o <= v1 && ok1 && !cons;
      t0_o      <= tadd(anchor1, t0r);
      t0_rel_o  <= t0r;
      tau_o     <= tau1;
      use_o     <= use1;
      lat_o     <= lat1;
      wire_o    <= wire1;
    end
  end

endmodule
