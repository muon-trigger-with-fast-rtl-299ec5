// qmlp: pipelined quantized feed-forward network with one hidden layer.
//
// out_logit[o] = b2[o] + sum_h w2[o][h] * act[h]
// act[h]       = sat_ACT_W( max(0, (b1[h] + sum_i w1[h][i] * x[i]) >>> WGT_FRAC) )
//
// Inputs x are unsigned IN_W-bit integers. Weights are WGT_W-bit signed
// integers read as fixed point with WGT_FRAC fractional bits (6-bit weights,
// so -2.0 .. +1.9375 in steps of 1/16); biases are BIAS_W-bit signed integers
// on the scale of the products. The hidden activation is ReLU, clipped to
// ACT_W unsigned bits. The output layer is linear; the caller applies the
// decision (threshold or arg-max).
//
// Weights and biases are registers written through a simple write port, so a
// newly trained model can be loaded without changing the block or its
// neighbours; pruned connections are simply zero weights. Address map:
//   w1[h][i] at h*N_IN + i, then b1[h], then w2[o][h] at o*N_HID + h, then b2[o].
// All parameters reset to zero.
//
// Timing: IN_REG input register stages (0 or 1), then the hidden layer and
// the output layer each take one clock, so the latency is IN_REG + 2 clocks
// and a new input vector is accepted on every clock. The side-band word
// sb_i travels with the data and comes out aligned with the logits.
//
// The network shape, 6-bit weights and pipelined operation follow the
// published design; the ReLU activation, the bias and activation widths, the
// fixed-point scaling and loading weights at run time are choices of this
// implementation.
module qmlp
  import tpg_pkg::*;
#(
  parameter int N_IN   = 16,
  parameter int N_HID  = 20,
  parameter int N_OUT  = 16,
  parameter int IN_W   = ANN_IN_W,
  parameter int OUT_W  = 24,
  parameter int SB_W   = 1,
  parameter int IN_REG = 0
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // weight write port
  input  logic                             cfg_we,
  input  logic [CFG_ADDR_W-1:0]            cfg_addr,
  input  logic signed [BIAS_W-1:0]         cfg_data,
  // data
  input  logic                             valid_i,
  input  logic [N_IN-1:0][IN_W-1:0]        x_i,
  input  logic [SB_W-1:0]                  sb_i,
  output logic                             valid_o,
  output logic signed [N_OUT-1:0][OUT_W-1:0] logit_o,
  output logic [SB_W-1:0]                  sb_o
);

  localparam int A_W1 = N_HID * N_IN;
  localparam int A_B1 = A_W1 + N_HID;
  localparam int A_W2 = A_B1 + N_OUT * N_HID;
  localparam int A_B2 = A_W2 + N_OUT;
  localparam int ACC_W = 24;

  // Parameters are kept as flat packed vectors, indexed like the address map.
  logic [A_W1-1:0][WGT_W-1:0]          w1;
  logic [N_HID-1:0][BIAS_W-1:0]        b1;
  logic [N_OUT*N_HID-1:0][WGT_W-1:0]   w2;
  logic [N_OUT-1:0][BIAS_W-1:0]        b2;

  // ---------------- parameter registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w1 <= '0;
      b1 <= '0;
      w2 <= '0;
      b2 <= '0;
    end else if (cfg_we) begin
      if (int'(cfg_addr) < A_W1)      w1[int'(cfg_addr)]        <= cfg_data[WGT_W-1:0];
      else if (int'(cfg_addr) < A_B1) b1[int'(cfg_addr) - A_W1] <= cfg_data;
      else if (int'(cfg_addr) < A_W2) w2[int'(cfg_addr) - A_B1] <= cfg_data[WGT_W-1:0];
      else if (int'(cfg_addr) < A_B2) b2[int'(cfg_addr) - A_W2] <= cfg_data;
    end
  end

  // ---------------- optional input register ----------------
  logic                      v0;
  logic [N_IN-1:0][IN_W-1:0] x0;
  logic [SB_W-1:0]           sb0;
  if (IN_REG != 0) begin : g_inreg
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v0 <= 1'b0; x0 <= '0; sb0 <= '0;
      end else begin
        v0 <= valid_i; x0 <= x_i; sb0 <= sb_i;
      end
    end
  end else begin : g_noreg
    assign v0  = valid_i;
    assign x0  = x_i;
    assign sb0 = sb_i;
  end

  // ---------------- hidden layer ----------------
  logic [N_HID-1:0][ACT_W-1:0] act_d, act_q;
  always_comb begin
    for (int h = 0; h < N_HID; h++) begin
      logic signed [ACC_W-1:0] acc;
      acc = ACC_W'($signed(b1[h]));
      for (int i = 0; i < N_IN; i++)
        acc += ACC_W'($signed(w1[h*N_IN + i])) * ACC_W'($signed({1'b0, x0[i]}));
      acc = acc >>> WGT_FRAC;
      if (acc < 0)                          act_d[h] = '0;
      else if (acc > ACC_W'((1 << ACT_W) - 1)) act_d[h] = '1;
      else                                  act_d[h] = acc[ACT_W-1:0];
    end
  end

  logic            v1;
  logic [SB_W-1:0] sb1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; act_q <= '0; sb1 <= '0;
    end else begin
      v1 <= v0; act_q <= act_d; sb1 <= sb0;
    end
  end

  // ---------------- output layer ----------------
  logic signed [N_OUT-1:0][OUT_W-1:0] logit_d;
  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      logic signed [OUT_W-1:0] acc;
      acc = OUT_W'($signed(b2[o]));
      for (int h = 0; h < N_HID; h++)
        acc += OUT_W'($signed(w2[o*N_HID + h])) * OUT_W'($signed({1'b0, act_q[h]}));
      logit_d[o] = acc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0; logit_o <= '0; sb_o <= '0;
    end else begin
      valid_o <= v1; logit_o <= logit_d; sb_o <= sb1;
    end
  end

  // A write must fall inside the parameter space of the network.
  assert property (@(posedge clk) cfg_we |-> (int'(cfg_addr) < A_B2));

endmodule
