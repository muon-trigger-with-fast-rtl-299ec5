// tpg_macrocell: trigger primitive generator for one 4x4 drift-tube macro-cell.
//
// TDC hits stream in on N_LANES read-out lanes. The chain is
//   hit_grouping  -> window sets of hits, duplicates suppressed      (1 clk)
//   filter_ann    -> per-channel muon/noise mask                     (2 clk)
//   layer_select  -> one hit per layer, at least three layers        (0 clk)
//   disamb_ann    -> left / right / noise per hit                    (3 clk)
//   meantimer     -> crossing time t0 in full TDC precision          (2 clk)
//   track_fit     -> slope m and mid-plane position x0               (2 clk)
// Every stage accepts a new set on every clock, so the whole chain is fully
// pipelined; a primitive leaves 10 clocks (250 ns at 40 MHz) after the hit
// that closed its window reached the end of its 30-clock persistence. The
// hit times travel with the data, so the time and fit stages see the full
// TDC times while the networks see coarse BX times.
//
// Interface: one clock (the 40 MHz BX clock) and an active-low asynchronous
// reset. hit_i carries one hit per lane per clock. cfg_i writes a weight or
// bias into the filtering (sel = 0) or disambiguation (sel = 1) network;
// weights are zero after reset, which makes every hit noise until a model is
// loaded. tp_valid_o/tp_o give the trigger primitive; stat_o gives one-clock
// pulses for each event of the chain.
//
// Stage order, latencies of the two networks (2 + 3 clocks), the 30-clock
// persistence and the outputs t0, m and x0 follow the published design.
// The hit word, the run-time weight loading and the fixed-point formats are
// choices of this implementation.
module tpg_macrocell
  import tpg_pkg::*;
#(
  parameter int          N_LANES    = 2,
  parameter logic [1:0]  MC_CHAMBER = 2'd0,
  parameter int unsigned MC_WIRE0   = 0,
  parameter int          N_HID      = 20,
  parameter int          TOL        = 30
) (
  input  logic       clk,
  input  logic       rst_n,
  input  hit_t       hit_i [N_LANES],
  input  ann_cfg_t   cfg_i,
  output logic       tp_valid_o,
  output tp_t        tp_o,
  output tpg_stat_t  stat_o
);

  // ---------------- grouping ----------------
  group_t grp;
  logic   grp_v;
  logic   s_acc, s_rep, s_sent, s_dup;

  hit_grouping #(
    .N_LANES(N_LANES), .WINDOW(PERSIST), .MC_CHAMBER(MC_CHAMBER), .MC_WIRE0(MC_WIRE0)
  ) u_group (
    .clk, .rst_n, .hit_i,
    .group_o(grp), .group_valid_o(grp_v),
    .stat_accept_o(s_acc), .stat_replace_o(s_rep),
    .stat_sent_o(s_sent), .stat_dup_o(s_dup)
  );

  // ---------------- filtering ----------------
  logic             flt_v;
  logic [N_CH-1:0]  flt_mask;
  group_t           flt_grp;

  filter_ann #(.N_HID(N_HID)) u_filter (
    .clk, .rst_n,
    .cfg_we(cfg_i.we && !cfg_i.sel), .cfg_addr(cfg_i.addr), .cfg_data(cfg_i.data),
    .valid_i(grp_v), .group_i(grp),
    .valid_o(flt_v), .mask_o(flt_mask), .group_o(flt_grp)
  );

  // ---------------- one hit per layer ----------------
  quad_t      sel_q;
  logic [2:0] sel_n;
  logic       sel_ok;

  layer_select u_select (
    .group_i(flt_grp), .mask_i(flt_mask),
    .quad_o(sel_q), .nlayers_o(sel_n), .ok_o(sel_ok)
  );

  // ---------------- disambiguation ----------------
  logic                 dis_v;
  quad_t                dis_q;
  lat_e [N_LAYERS-1:0]  dis_lat;

  disamb_ann #(.N_HID(N_HID)) u_disamb (
    .clk, .rst_n,
    .cfg_we(cfg_i.we && cfg_i.sel), .cfg_addr(cfg_i.addr), .cfg_data(cfg_i.data),
    .valid_i(flt_v && sel_ok), .quad_i(sel_q),
    .valid_o(dis_v), .quad_o(dis_q), .lat_o(dis_lat)
  );

  // ---------------- time pedestal ----------------
  logic                                  mt_v, mt_short, mt_inv;
  tdc_t                                  mt_t0;
  logic signed [REL_W-1:0]               mt_t0r;
  logic signed [N_LAYERS-1:0][REL_W-1:0] mt_tau;
  logic [N_LAYERS-1:0]                   mt_use;
  lat_e [N_LAYERS-1:0]                   mt_lat;
  logic [N_LAYERS-1:0][1:0]              mt_wire;

  meantimer #(.TOL(TOL)) u_mt (
    .clk, .rst_n,
    .valid_i(dis_v), .quad_i(dis_q), .lat_i(dis_lat),
    .valid_o(mt_v), .short_o(mt_short), .invalid_o(mt_inv),
    .t0_o(mt_t0), .t0_rel_o(mt_t0r), .tau_o(mt_tau),
    .use_o(mt_use), .lat_o(mt_lat), .wire_o(mt_wire)
  );

  // ---------------- track parameters ----------------
  track_fit u_fit (
    .clk, .rst_n,
    .valid_i(mt_v), .t0_i(mt_t0), .t0_rel_i(mt_t0r), .tau_i(mt_tau),
    .use_i(mt_use), .lat_i(mt_lat), .wire_i(mt_wire),
    .valid_o(tp_valid_o), .tp_o(tp_o)
  );

  // ---------------- event pulses ----------------
  always_comb begin
    stat_o.hit_accepted  = s_acc;
    stat_o.hit_replaced  = s_rep;
    stat_o.group_sent    = s_sent;
    stat_o.group_dup     = s_dup;
    stat_o.filter_reject = flt_v && (sel_n < 3'd3);
    stat_o.disamb_reject = mt_short;
    stat_o.mt_invalid    = mt_inv;
    stat_o.tp_valid      = tp_valid_o;
  end

endmodule
