// filter_ann: noise-filtering neural network of the macro-cell.
//
// Input is a window group: for each of the 16 channels a presence bit and the
// hit time. The network sees the coarse BX time of every channel, made
// relative to the earliest hit of the group: x = 1 + (bx - bx_min), clipped
// to 31, and x = 0 for an empty channel. A 16-20-16 quantized network
// (qmlp) returns one logit per channel; a hit is kept as muon-compatible
// when its logit is positive (a sigmoid output above one half) and the
// channel holds a hit.
//
// Interface: group_i/valid_i in; mask_o (kept hits), group_o (the input group,
// delayed) and valid_o out. Weight writes go through cfg_*.
// Timing: 2 clocks of latency, one group per clock.
//
// The input choice (coarse BX per channel), the 16-20-16 shape, 6-bit weights,
// the binary mask output and the 2-clock pipelined latency follow the
// published design. The relative-time encoding, empty-channel code and the
// masking with channel presence are choices of this implementation.
module filter_ann
  import tpg_pkg::*;
#(
  parameter int N_HID = 20
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [CFG_ADDR_W-1:0]    cfg_addr,
  input  logic signed [BIAS_W-1:0] cfg_data,
  input  logic                     valid_i,
  input  group_t                   group_i,
  output logic                     valid_o,
  output logic [N_CH-1:0]          mask_o,
  output group_t                   group_o
);

  localparam int OUT_W = 24;
  localparam int XMAX  = (1 << ANN_IN_W) - 1;

  // ---------------- input encoding ----------------
  logic [N_CH-1:0][ANN_IN_W-1:0] x;
  always_comb begin
    logic [BX_W-1:0]                    anchor;
    logic signed [BX_W-1:0]  d [N_CH];
    logic signed [BX_W-1:0]  dmin;
    logic                    found;
    anchor = '0;
    found  = 1'b0;
    for (int c = 0; c < N_CH; c++)
      if (group_i.mask[c] && !found) begin
        anchor = group_i.t[c].bx;
        found  = 1'b1;
      end
    dmin = '0;
    for (int c = 0; c < N_CH; c++) begin
      d[c] = bxdiff(group_i.t[c].bx, anchor);
      if (group_i.mask[c] && d[c] < dmin) dmin = d[c];
    end
    for (int c = 0; c < N_CH; c++) begin
      logic signed [BX_W:0] r;
      r = (BX_W+1)'(d[c]) - (BX_W+1)'(dmin) + 1;
      if (!group_i.mask[c])           x[c] = '0;
      else if (r > (BX_W+1)'(XMAX))   x[c] = ANN_IN_W'(XMAX);
      else                            x[c] = r[ANN_IN_W-1:0];
    end
  end

  logic signed [N_CH-1:0][OUT_W-1:0] logit;
  group_t                            g_d;

  qmlp #(
    .N_IN(N_CH), .N_HID(N_HID), .N_OUT(N_CH), .IN_W(ANN_IN_W),
    .OUT_W(OUT_W), .SB_W($bits(group_t)), .IN_REG(0)
  ) u_mlp (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_data,
    .valid_i, .x_i(x), .sb_i(group_i),
    .valid_o, .logit_o(logit), .sb_o(g_d)
  );

  always_comb begin
    for (int c = 0; c < N_CH; c++)
      mask_o[c] = g_d.mask[c] && ($signed(logit[c]) > 0);
  end
  assign group_o = g_d;

endmodule
