// tb_disamb_ann: self-checking test of the laterality network block.
//
// Loads a random pruned 8-20-12 network and streams random one-hit-per-layer
// sets, one per clock. For every layer the expected class is computed here
// from the (BX, wire) input pairs, the reference network and the arg-max
// rule (noise wins ties, then left; an empty layer is noise). Checks the
// 3-clock latency and that the set is passed on unchanged, and that all
// three classes occur.
//
// The (BX, wire) inputs, left/right/noise classes and 3-clock latency follow
// the published design; the output coding and tie rule are this design's own.
module tb_disamb_ann;
  import tpg_pkg::*;
  import tb_ref_pkg::*;

  localparam int NH = 20, NI = 8, NO = 12, NV = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                     cfg_we = 0;
  logic [CFG_ADDR_W-1:0]    cfg_addr = '0;
  logic signed [BIAS_W-1:0] cfg_data = '0;
  logic                     valid_i = 0, valid_o;
  quad_t                    quad_i = '0, quad_o;
  lat_e [N_LAYERS-1:0]      lat_o;

  disamb_ann dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
                  .valid_i, .quad_i, .valid_o, .quad_o, .lat_o);

  int checks = 0, failures = 0, cyc = 0;
  ivec_t w1, b1, w2, b2;
  quad_t qq[$];
  int    cq[$];
  int    ncls[3] = '{0, 0, 0};

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
      quad_t q;
      int    c0;
      bit    pres[];
      int    bx[];
      ivec_t xb, x, e;
      q  = qq.pop_front();
      c0 = cq.pop_front();
      pres = new[4]; bx = new[4]; x = new[NI];
      for (int l = 0; l < 4; l++) begin pres[l] = q.present[l]; bx[l] = int'(q.t[l].bx); end
      xb = enc_bx(4, pres, bx);
      for (int l = 0; l < 4; l++) begin
        x[2*l]   = xb[l];
        x[2*l+1] = pres[l] ? int'(q.wno[l]) : 0;
      end
      e = mlp(NI, NH, NO, x, w1, b1, w2, b2);
      checks += 2;
      if (cyc - c0 != 3) begin failures++; $display("latency %0d", cyc - c0); end
      if (quad_o != q) begin failures++; $display("set not passed on"); end
      for (int l = 0; l < 4; l++) begin
        int ex;
        if (!pres[l] || (e[3*l+2] >= e[3*l] && e[3*l+2] >= e[3*l+1])) ex = 2;
        else if (e[3*l] >= e[3*l+1]) ex = 0;
        else ex = 1;
        ncls[ex]++;
        checks++;
        if (int'(lat_o[l]) != ex) begin
          failures++;
          if (failures < 10) $display("layer %0d: got %0d exp %0d", l, int'(lat_o[l]), ex);
        end
      end
    end
  end

  initial begin
    w1 = new[NI*NH]; b1 = new[NH]; w2 = new[NH*NO]; b2 = new[NO];
    foreach (w1[i]) w1[i] = ($urandom_range(0, 1) == 0) ? 0 : int'($urandom_range(0, 63)) - 32;
    foreach (b1[i]) b1[i] = int'($urandom_range(0, 511)) - 256;
    foreach (w2[i]) w2[i] = ($urandom_range(0, 1) == 0) ? 0 : int'($urandom_range(0, 63)) - 32;
    foreach (b2[i]) b2[i] = int'($urandom_range(0, 511)) - 256;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (w1[i]) wr(i, w1[i]);
    foreach (b1[i]) wr(NI*NH + i, b1[i]);
    foreach (w2[i]) wr(NI*NH + NH + i, w2[i]);
    foreach (b2[i]) wr(NI*NH + NH + NH*NO + i, b2[i]);
    for (int k = 0; k < NV; k++) begin
      quad_t q;
      int base;
      base = (k % 5 == 0) ? 4094 : int'($urandom_range(0, 4095));
      q.present = 4'($urandom);
      for (int l = 0; l < 4; l++) begin
        q.wno[l]    = 2'($urandom);
        q.t[l].bx   = BX_W'(base + int'($urandom_range(0, 36)));
        q.t[l].fine = FINE_W'($urandom_range(0, 29));
      end
      @(negedge clk);
      valid_i = ($urandom_range(0, 3) != 0);
      quad_i  = q;
      if (valid_i) begin qq.push_back(q); cq.push_back(cyc); end
    end
    @(negedge clk) valid_i = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (qq.size() != 0 || ncls[0] == 0 || ncls[1] == 0 || ncls[2] == 0) begin
      failures++;
      $display("left %0d classes %0d %0d %0d", qq.size(), ncls[0], ncls[1], ncls[2]);
    end
    $display("left %0d right %0d noise %0d", ncls[0], ncls[1], ncls[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
