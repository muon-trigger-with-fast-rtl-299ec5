// disamb_ann: laterality (left/right/noise) neural network.
//
// Input is the one-hit-per-layer set from the filtering stage. Each of the
// four layers contributes a (BX, wire) pair: BX = 1 + (bx - bx_min) over the
// present hits, clipped to 31, and wire = wire index 0..3 inside the
// macro-wno; an empty layer gives (0, 0). A 8-20-12 quantized network
// (qmlp) returns three logits per layer, in the order left, right, noise,
// and the class with the largest logit is taken. Ties go to noise first,
// then to left. A layer with no hit is always noise. Left means the muon
// passed at smaller x than the wire.
//
// Interface: quad_i/valid_i in; quad_o (delayed input), lat_o (one lat_e per
// layer) and valid_o out. Weight writes go through cfg_*.
// Timing: 3 clocks of latency (input register, hidden layer, output layer),
// one set per clock.
//
// Inputs as (BX, wire) pairs, the three classes, 20 hidden neurons, 6-bit
// weights and the 3-clock pipelined latency follow the published design. The
// input encoding, the tie rule and the fixed-point scaling are choices of
// this implementation.
module disamb_ann
  import tpg_pkg::*;
#(
  parameter int N_HID = 20
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_we,
  input  logic [CFG_ADDR_W-1:0]     cfg_addr,
  input  logic signed [BIAS_W-1:0]  cfg_data,
  input  logic                      valid_i,
  input  quad_t                     quad_i,
  output logic                      valid_o,
  output quad_t                     quad_o,
  output lat_e [N_LAYERS-1:0]       lat_o
);

  localparam int N_IN  = 2 * N_LAYERS;
  localparam int N_OUT = 3 * N_LAYERS;
  localparam int OUT_W = 24;
  localparam int XMAX  = (1 << ANN_IN_W) - 1;

  // ---------------- input encoding ----------------
  logic [N_IN-1:0][ANN_IN_W-1:0] x;
  always_comb begin
    logic [BX_W-1:0]                   anchor;
    logic                   found;
    logic signed [BX_W-1:0] d [N_LAYERS];
    logic signed [BX_W-1:0] dmin;
    anchor = '0;
    found  = 1'b0;
    for (int l = 0; l < N_LAYERS; l++)
      if (quad_i.present[l] && !found) begin
        anchor = quad_i.t[l].bx;
        found  = 1'b1;
      end
    dmin = '0;
    for (int l = 0; l < N_LAYERS; l++) begin
      d[l] = bxdiff(quad_i.t[l].bx, anchor);
      if (quad_i.present[l] && d[l] < dmin) dmin = d[l];
    end
    for (int l = 0; l < N_LAYERS; l++) begin
      logic signed [BX_W:0] r;
      r = (BX_W+1)'(d[l]) - (BX_W+1)'(dmin) + 1;
      if (!quad_i.present[l]) begin
        x[2*l]   = '0;
        x[2*l+1] = '0;
      end else begin
        x[2*l]   = (r > (BX_W+1)'(XMAX)) ? ANN_IN_W'(XMAX) : r[ANN_IN_W-1:0];
        x[2*l+1] = ANN_IN_W'(quad_i.wno[l]);
      end
    end
  end

  logic signed [N_OUT-1:0][OUT_W-1:0] logit;
  quad_t                              q_d;

  qmlp #(
    .N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .IN_W(ANN_IN_W),
    .OUT_W(OUT_W), .SB_W($bits(quad_t)), .IN_REG(1)
  ) u_mlp (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_data,
    .valid_i, .x_i(x), .sb_i(quad_i),
    .valid_o, .logit_o(logit), .sb_o(q_d)
  );

  // ---------------- arg-max per layer ----------------
  always_comb begin
    for (int l = 0; l < N_LAYERS; l++) begin
      logic signed [OUT_W-1:0] lf, rt, nz;
      lf = $signed(logit[3*l]);
      rt = $signed(logit[3*l+1]);
      nz = $signed(logit[3*l+2]);
      if (!q_d.present[l] || (nz >= lf && nz >= rt)) lat_o[l] = LAT_NOISE;
      else if (lf >= rt)                             lat_o[l] = LAT_LEFT;
      else                                           lat_o[l] = LAT_RIGHT;
    end
  end
  assign quad_o = q_d;

endmodule
