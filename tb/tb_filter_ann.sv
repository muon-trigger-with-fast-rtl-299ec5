// tb_filter_ann: self-checking test of the filtering network block.
//
// Loads a random pruned 16-20-16 network, streams random window groups
// (hit spreads up to 40 BX, so the input clipping is exercised, and BX values
// near the counter wrap) one per clock, and compares the output mask with a
// reference: input code 1 + bx - bx_min (clipped to 31, 0 when empty),
// reference network, positive logit and channel present. Checks the 2-clock
// latency and that the group is passed on unchanged.
//
// The 16-20-16 shape and the 2-clock latency follow the published design;
// the input coding and the keep-if-positive rule are this design's own.
module tb_filter_ann;
  import tpg_pkg::*;
  import tb_ref_pkg::*;

  localparam int NH = 20, NV = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                     cfg_we = 0;
  logic [CFG_ADDR_W-1:0]    cfg_addr = '0;
  logic signed [BIAS_W-1:0] cfg_data = '0;
  logic                     valid_i = 0, valid_o;
  group_t                   group_i = '0, group_o;
  logic [N_CH-1:0]          mask_o;

  filter_ann dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
                  .valid_i, .group_i, .valid_o, .mask_o, .group_o);

  int checks = 0, failures = 0, cyc = 0;
  ivec_t w1, b1, w2, b2;
  group_t gq[$];
  int     cq[$];
  int     nout = 0, kept = 0, dropped = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int addr, int data);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_ADDR_W'(addr); cfg_data = BIAS_W'(data);
    @(negedge clk);
    cfg_we = 0;
  endtask

  always @(negedge clk) begin
    if (rst_n && valid_o) begin
      group_t g;
      int     c0;
      bit     pres[];
      int     bx[];
      ivec_t  x, e;
      g  = gq.pop_front();
      c0 = cq.pop_front();
      pres = new[N_CH]; bx = new[N_CH];
      for (int c = 0; c < N_CH; c++) begin pres[c] = g.mask[c]; bx[c] = int'(g.t[c].bx); end
      x = enc_bx(N_CH, pres, bx);
      e = mlp(N_CH, NH, N_CH, x, w1, b1, w2, b2);
      checks += 2;
      if (cyc - c0 != 2) begin failures++; $display("latency %0d", cyc - c0); end
      if (group_o != g) begin failures++; $display("group not passed on"); end
      for (int c = 0; c < N_CH; c++) begin
        bit exp_m;
        exp_m = pres[c] && (e[c] > 0);
        checks++;
        if (mask_o[c] != exp_m) begin
          failures++;
          if (failures < 10) $display("ch %0d: mask %0d exp %0d logit %0d", c, mask_o[c], exp_m, e[c]);
        end
        if (pres[c]) begin if (exp_m) kept++; else dropped++; end
      end
      nout++;
    end
  end

  initial begin
    w1 = new[N_CH*NH]; b1 = new[NH]; w2 = new[NH*N_CH]; b2 = new[N_CH];
    foreach (w1[i]) w1[i] = ($urandom_range(0, 9) < 6) ? 0 : int'($urandom_range(0, 63)) - 32;
    foreach (b1[i]) b1[i] = int'($urandom_range(0, 511)) - 256;
    foreach (w2[i]) w2[i] = ($urandom_range(0, 9) < 6) ? 0 : int'($urandom_range(0, 63)) - 32;
    foreach (b2[i]) b2[i] = int'($urandom_range(0, 511)) - 256;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (w1[i]) wr(i, w1[i]);
    foreach (b1[i]) wr(N_CH*NH + i, b1[i]);
    foreach (w2[i]) wr(N_CH*NH + NH + i, w2[i]);
    foreach (b2[i]) wr(N_CH*NH + NH + NH*N_CH + i, b2[i]);
    for (int k = 0; k < NV; k++) begin
      group_t g;
      int base, spread;
      base   = (k % 4 == 0) ? 4090 : int'($urandom_range(0, 4095));
      spread = int'($urandom_range(1, 40));
      g.mask = N_CH'($urandom) | N_CH'(1);
      for (int c = 0; c < N_CH; c++) begin
        g.t[c].bx   = BX_W'(base + int'($urandom_range(0, spread)));
        g.t[c].fine = FINE_W'($urandom_range(0, 29));
      end
      @(negedge clk);
      valid_i = ($urandom_range(0, 4) != 0);
      group_i = g;
      if (valid_i) begin gq.push_back(g); cq.push_back(cyc); end
    end
    @(negedge clk) valid_i = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (gq.size() != 0 || kept == 0 || dropped == 0) begin
      failures++;
      $display("left %0d kept %0d dropped %0d", gq.size(), kept, dropped);
    end
    $display("groups %0d hits kept %0d dropped %0d", nout, kept, dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
