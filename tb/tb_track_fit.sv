// tb_track_fit: self-checking test of the position and least-squares stage.
//
// Generates straight tracks through the macro-cell, turns them into hit
// times relative to an anchor with a known t0, and feeds the fit one set per
// clock with three or four used layers. The slope m (6 fractional bits) and
// mid-plane position x0 (2 fractional bits) are compared with a real-valued
// least-squares fit of the same points (within one LSB) and with the
// generated track (slope within 1/2 drift unit per layer, position within
// 2 drift units). Also checks that t0, hit count, used layers, lateralities
// and wires are carried along, and the 2-clock latency.
//
// A least-squares fit of t0-corrected positions follows the published
// design; the units, the mid-plane at z = 1.5 and the rounding are our own.
module tb_track_fit;
  import tpg_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                                  valid_i = 0, valid_o;
  tdc_t                                  t0_i = '0;
  logic signed [REL_W-1:0]               t0_rel_i = '0;
  logic signed [N_LAYERS-1:0][REL_W-1:0] tau_i = '0;
  logic [N_LAYERS-1:0]                   use_i = '0;
  lat_e [N_LAYERS-1:0]                   lat_i = '{default: LAT_NOISE};
  logic [N_LAYERS-1:0][1:0]              wire_i = '0;
  tp_t                                   tp_o;

  track_fit dut (.clk, .rst_n, .valid_i, .t0_i, .t0_rel_i, .tau_i, .use_i,
                 .lat_i, .wire_i, .valid_o, .tp_o);

  typedef struct {
    int  cyc, nh;
    real m_ls, x0_ls, m_true, x0_true;
    tp_t tp;
  } exp_t;

  exp_t eq[$];
  int checks = 0, failures = 0, cyc = 0, n3 = 0, n4 = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, bit cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  always @(negedge clk) begin
    if (rst_n && valid_o) begin
      exp_t e;
      real  m, x0;
      e  = eq.pop_front();
      m  = real'(int'(tp_o.m)) / 64.0;
      x0 = real'(int'(tp_o.x0)) / 4.0;
      chk("latency", cyc - e.cyc == 2);
      chk("m vs LS",  int'(tp_o.m)  - rnd(e.m_ls * 64.0)  <= 1 && int'(tp_o.m)  - rnd(e.m_ls * 64.0)  >= -1);
      chk("x0 vs LS", int'(tp_o.x0) - rnd(e.x0_ls * 4.0) <= 1 && int'(tp_o.x0) - rnd(e.x0_ls * 4.0) >= -1);
      chk("m vs track",  m - e.m_true <= 0.5 && m - e.m_true >= -0.5);
      chk("x0 vs track", x0 - e.x0_true <= 2.0 && x0 - e.x0_true >= -2.0);
      chk("t0",    tp_o.t0 == e.tp.t0);
      chk("nhits", int'(tp_o.nhits) == e.nh);
      chk("used",  tp_o.used == e.tp.used);
      chk("lat",   tp_o.lat == e.tp.lat);
      chk("wires", tp_o.wno == e.tp.wno);
      if (e.nh == 3) n3++; else n4++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 600; k++) begin
      bit   in_mc[4], right[4], use_[4];
      int   wn[4], dr[4], tau[4], t0r, drop;
      real  x0, m;
      exp_t e;
      do begin
        x0 = $urandom_range(0, 8 * T);
        m  = int'($urandom_range(0, 578)) - 289;
        track_hits(x0, m, in_mc, wn, right, dr);
      end while (!(in_mc[0] && in_mc[1] && in_mc[2] && in_mc[3]));
      t0r  = int'($urandom_range(0, 400)) - 450;
      drop = (k % 2 == 0) ? -1 : int'($urandom_range(0, 3));
      for (int l = 0; l < 4; l++) begin
        use_[l] = (l != drop);
        tau[l]  = dr[l] + t0r;
      end
      ls_fit(use_, wn, right, tau, t0r, e.m_ls, e.x0_ls);
      e.m_true = m; e.x0_true = x0; e.nh = (drop < 0) ? 4 : 3;
      e.tp = '0;
      e.tp.t0.bx = BX_W'($urandom); e.tp.t0.fine = FINE_W'($urandom_range(0, 29));
      for (int l = 0; l < 4; l++) begin
        e.tp.used[l] = use_[l];
        e.tp.lat[l]  = use_[l] ? (right[l] ? LAT_RIGHT : LAT_LEFT) : LAT_NOISE;
        e.tp.wno[l]  = 2'(wn[l]);
      end
      @(negedge clk);
      valid_i  = 1;
      t0_i     = e.tp.t0;
      t0_rel_i = REL_W'(t0r);
      for (int l = 0; l < 4; l++) tau_i[l] = REL_W'(tau[l]);
      use_i    = e.tp.used;
      lat_i    = e.tp.lat;
      wire_i   = e.tp.wno;
      e.cyc = cyc;
      eq.push_back(e);
      if (k % 7 == 0) @(negedge clk) valid_i = 0;
    end
    @(negedge clk) valid_i = 0;
    repeat (5) @(negedge clk);
    chk("all answered", eq.size() == 0);
    chk("both sizes", n3 > 0 && n4 > 0);
    $display("triplets %0d quadruplets %0d", n3, n4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
