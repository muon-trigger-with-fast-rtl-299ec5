// tpg_pkg: types, geometry constants and small arithmetic helpers shared by
// the drift-tube trigger primitive generator (TPG).
//
// Geometry. A macro-cell is a block of 4 staggered layers x 4 cells. Layers
// are numbered 0..3 from the bottom (A, B, C, D). Layers A and C are shifted
// by half a cell towards +x with respect to B and D. Inside the macro-cell a
// channel is numbered layer*4 + wire.
//
// Units. Times are TDC counts: 30 counts per bunch crossing (BX) of 25 ns, so
// one count is 0.833 ns. A hit time is kept as a {bx, fine} pair with a
// wrapping 12-bit BX counter and fine = 0..29. Positions are expressed in
// "drift units": the distance an electron drifts in one TDC count,
// 54 um/ns * 0.833 ns = 45 um. The half cell width (21 mm) is then
// TMAX_TDC = 467 drift units, which is also the maximum drift time in TDC
// counts. The layer pitch (13 mm) is 289 drift units; track slopes are given
// per layer, so the pitch only enters when converting a slope to an angle.
//
// The 30-count BX, the 1/30 BX TDC, the 4x4 macro-cell, the 30-clock
// persistence and the ANN sizes follow the
// published design. The 12-bit BX counter, the hit word layout and the
// rounding rules are choices of this implementation.
package tpg_pkg;

  // ---------------- geometry ----------------
  localparam int N_LAYERS   = 4;          // layers per macro-cell
  localparam int N_WIRES    = 4;          // cells per layer in a macro-cell
  localparam int N_CH       = N_LAYERS * N_WIRES;
  localparam int TMAX_TDC   = 467;        // half cell width in drift units (= max drift time in TDC counts)

  // ---------------- time ----------------
  localparam int BX_W       = 12;         // BX counter width (wraps)
  localparam int FINE_W     = 5;          // fine time, 0..29
  localparam int TDC_PER_BX = 30;
  localparam int PERSIST    = 30;         // hit persistence in clock cycles
  localparam int REL_W      = 14;         // signed relative time in TDC counts

  // ---------------- ANN ----------------
  localparam int ANN_IN_W   = 5;          // unsigned input width of both ANNs
  localparam int WGT_W      = 6;          // weight width (6-bit quantization)
  localparam int BIAS_W     = 12;         // bias width
  localparam int ACT_W      = 8;          // hidden activation width (unsigned, after ReLU)
  localparam int WGT_FRAC   = 4;          // fractional bits of weights
  localparam int CFG_ADDR_W = 11;

  typedef struct packed {
    logic [BX_W-1:0]   bx;
    logic [FINE_W-1:0] fine;
  } tdc_t;

  // Hit as delivered by the read-out link, one per lane and clock.
  typedef struct packed {
    logic              valid;
    logic [1:0]        chamber;
    logic [1:0]        layer;   // 0 = bottom (A)
    logic [3:0]        wno;    // 0..15 within the chamber layer
    tdc_t              t;
  } hit_t;

  // Contents of the persistence window of one macro-cell.
  typedef struct packed {
    logic [N_CH-1:0]   mask;
    tdc_t [N_CH-1:0]   t;
  } group_t;

  // At most one hit per layer, as handed to the disambiguation network.
  typedef struct packed {
    logic [N_LAYERS-1:0]       present;
    logic [N_LAYERS-1:0][1:0]  wno;
    tdc_t [N_LAYERS-1:0]       t;
  } quad_t;

  typedef enum logic [1:0] {
    LAT_LEFT  = 2'd0,
    LAT_RIGHT = 2'd1,
    LAT_NOISE = 2'd2
  } lat_e;

  // Weight / bias write into one of the two networks.
  typedef struct packed {
    logic                         we;
    logic                         sel;   // 0 = filtering ANN, 1 = disambiguation ANN
    logic [CFG_ADDR_W-1:0]        addr;
    logic signed [BIAS_W-1:0]     data;
  } ann_cfg_t;

  // Trigger primitive.
  typedef struct packed {
    tdc_t                         t0;        // crossing time
    logic signed [15:0]           m;         // slope, drift units per layer, 6 fractional bits
    logic signed [15:0]           x0;        // position at mid-plane, drift units, 2 fractional bits
    logic [2:0]                   nhits;     // 3 or 4
    logic [N_LAYERS-1:0]          used;      // layers used in the fit
    lat_e [N_LAYERS-1:0]          lat;       // laterality per layer
    logic [N_LAYERS-1:0][1:0]     wno;      // wire per layer
  } tp_t;

  // One-clock event pulses, for monitoring.
  typedef struct packed {
    logic hit_accepted;   // a hit entered the macro-cell window
    logic hit_replaced;   // a hit replaced an older one on the same channel
    logic group_sent;     // a window set was sent to filtering
    logic group_dup;      // a window set was suppressed as a duplicate
    logic filter_reject;  // filtering left fewer than three layers
    logic disamb_reject;  // disambiguation left fewer than three hits
    logic mt_invalid;     // no consistent mean-timer solution
    logic tp_valid;       // a trigger primitive was produced
  } tpg_stat_t;

  // ---------------- helpers ----------------

  // Signed difference a - b in TDC counts, BX difference taken modulo 2^BX_W.
  function automatic logic signed [REL_W-1:0] tdiff(tdc_t a, tdc_t b);
    logic signed [BX_W-1:0] dbx;
    logic signed [REL_W-1:0] r;
    dbx = $signed(a.bx - b.bx);
    r = REL_W'(dbx) * REL_W'(TDC_PER_BX) + REL_W'($signed({1'b0, a.fine})) - REL_W'($signed({1'b0, b.fine}));
    return r;
  endfunction

  // Signed difference a - b of two BX counter values, modulo 2^BX_W.
  function automatic logic signed [BX_W-1:0] bxdiff(logic [BX_W-1:0] a, logic [BX_W-1:0] b);
    return $signed(a - b);
  endfunction

  // a + d (d in TDC counts), carrying the fine time into the BX counter.
  function automatic tdc_t tadd(tdc_t a, logic signed [REL_W-1:0] d);
    logic signed [REL_W+1:0] s;
    logic signed [REL_W+1:0] q;
    logic signed [REL_W+1:0] r;
    tdc_t o;
    s = (REL_W+2)'($signed({1'b0, a.fine})) + (REL_W+2)'(d);
    q = s / (REL_W+2)'(TDC_PER_BX);
    r = s - q * (REL_W+2)'(TDC_PER_BX);
    if (r < 0) begin
      r = r + (REL_W+2)'(TDC_PER_BX);
      q = q - 1;
    end
    o.bx   = a.bx + BX_W'(q);
    o.fine = FINE_W'(r);
    return o;
  endfunction

  // Division n / d rounded to nearest (halves away from zero), d > 0.
  function automatic logic signed [39:0] rdiv(logic signed [39:0] n, logic signed [39:0] d);
    logic signed [39:0] a;
    a = (n < 0) ? -n : n;
    a = (a + (d >>> 1)) / d;
    return (n < 0) ? -a : a;
  endfunction

  // Centre of a macro-cell wire in drift units, from the left edge of the
  // leftmost cell of layers B and D.
  function automatic logic signed [REL_W-1:0] wire_x(logic [1:0] layer, logic [1:0] wno);
    logic [REL_W-1:0] k;
    k = REL_W'(2 * wno + 1 + ((layer == 2'd0 || layer == 2'd2) ? 1 : 0));
    return $signed(k * REL_W'(TMAX_TDC));
  endfunction

endpackage
