// tb_tpg_sim_sample: the top at its default parameters under the conditions
// of the simulated muon sample the algorithm was evaluated on.
//
// Each event is one muon with an angle drawn flat in [-45, +45] degrees,
// crossing anywhere in the macro-cell and leaving hits in at least three
// layers. The drift distances are smeared by about 250 um (5.5 drift units),
// some four-hit muons lose one hit (cell inefficiency), and every channel has
// a 2% chance per event of an extra noise hit at a random time around the
// muon. Hits arrive on random lanes with up to 5 clocks of multiplexing delay.
// The same chain reference as the end-to-end test predicts every event pulse
// and trigger primitive to the clock, so the hardware must agree exactly with
// the reference under this load. The testbench also matches primitives to
// the generated muons and reports the efficiency and the t0 resolution, for
// all angles and for near-vertical ones.
//
// The hand-set networks are the ones of the end-to-end test. They resolve
// laterality only for near-vertical tracks, so the efficiency for inclined
// muons reflects those placeholder models, not the hardware. The pass
// criteria are the exact agreement with the reference, triplet and
// quadruplet primitives, and at least 60% efficiency for |phi| < 3 degrees.
// The angle range, smearing, noise level and three-hit fraction follow the
// published simulation; the event spacing and the arrival delays are this
// testbench's own.
module tb_tpg_sim_sample;
  import tpg_pkg::*;
  import tb_ref_pkg::*;

  localparam int NL = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  hit_t      hit_i [NL];
  ann_cfg_t  cfg_i;
  logic      tp_valid_o;
  tp_t       tp_o;
  tpg_stat_t stat_o;

  tpg_macrocell dut (.clk, .rst_n, .hit_i, .cfg_i, .tp_valid_o, .tp_o, .stat_o);

  int checks = 0, failures = 0, edge_n = 0;

  task automatic chk(string what, bit cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at edge %0d", what, edge_n);
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- network models ----------------
  ivec_t fw1, fb1, fw2, fb2, dw1, db1, dw2, db2;

  task automatic build_models();
    fw1 = new[16*20]; fb1 = new[20]; fw2 = new[20*16]; fb2 = new[16];
    dw1 = new[8*20];  db1 = new[20]; dw2 = new[20*12]; db2 = new[12];
    foreach (fw1[i]) fw1[i] = 0; foreach (fb1[i]) fb1[i] = 0;
    foreach (fw2[i]) fw2[i] = 0; foreach (fb2[i]) fb2[i] = -8;
    for (int j = 0; j < 16; j++) begin fw1[j*16 + j] = 16; fw2[j*20 + j] = 16; end
    foreach (dw1[i]) dw1[i] = 0; foreach (db1[i]) db1[i] = 0;
    foreach (dw2[i]) dw2[i] = 0; foreach (db2[i]) db2[i] = 0;
    // inputs: x[2l] = BX code, x[2l+1] = wire of layer l
    dw1[0*8 + 3] = 16;  dw1[0*8 + 1] = -16;                 // h0 = relu(wB - wA)
    dw1[1*8 + 1] = 16;  dw1[1*8 + 3] = -16; db1[1] = 16;    // h1 = relu(wA - wB + 1)
    dw1[2*8 + 7] = 16;  dw1[2*8 + 5] = -16;                 // h2 = relu(wD - wC)
    dw1[3*8 + 5] = 16;  dw1[3*8 + 7] = -16; db1[3] = 16;    // h3 = relu(wC - wD + 1)
    for (int l = 0; l < 4; l++) begin
      dw1[(4+l)*8 + 2*l] = 16; db1[4+l] = -320;             // h4+l = relu(BX_l - 20)
      db2[3*l + 2] = 8;
      dw2[(3*l + 2)*20 + 4 + l] = 31;
    end
    // outputs 3l+0 left, 3l+1 right
    dw2[0*20 + 1] = 16; dw2[1*20 + 0] = 16;     // A: left h1, right h0
    dw2[3*20 + 0] = 16; dw2[4*20 + 1] = 16;     // B: left h0, right h1
    dw2[6*20 + 3] = 16; dw2[7*20 + 2] = 16;     // C: left h3, right h2
    dw2[9*20 + 2] = 16; dw2[10*20 + 3] = 16;    // D: left h2, right h3
  endtask

  task automatic wr(bit sel, int addr, int data);
    @(negedge clk);
    cfg_i.we = 1; cfg_i.sel = sel; cfg_i.addr = CFG_ADDR_W'(addr); cfg_i.data = BIAS_W'(data);
    @(negedge clk);
    cfg_i.we = 0;
  endtask

  task automatic load_models();
    foreach (fw1[i]) wr(0, i, fw1[i]);
    foreach (fb1[i]) wr(0, 320 + i, fb1[i]);
    foreach (fw2[i]) wr(0, 340 + i, fw2[i]);
    foreach (fb2[i]) wr(0, 660 + i, fb2[i]);
    foreach (dw1[i]) wr(1, i, dw1[i]);
    foreach (db1[i]) wr(1, 160 + i, db1[i]);
    foreach (dw2[i]) wr(1, 180 + i, dw2[i]);
    foreach (db2[i]) wr(1, 420 + i, db2[i]);
  endtask

  // ---------------- reference of the chain ----------------
  typedef struct {
    bit  flt_rej, short_, inv, tp;
    tp_t p;
  } res_t;

  function automatic res_t chain(group_t g);
    res_t  r;
    bit    pres[], lpres[];
    int    bx[], lbx[];
    ivec_t x, e, xd, ed, xb;
    bit    sel_p[4], use_[4], right[4];
    int    wn[4], tabs_bx[4], tabs_f[4], tau[4], nl, anc, t0r, cnt;
    real   m, x0;
    r = '{default: 0};
    r.p = '0;
    pres = new[16]; bx = new[16];
    for (int c = 0; c < 16; c++) begin pres[c] = g.mask[c]; bx[c] = int'(g.t[c].bx); end
    x = enc_bx(16, pres, bx);
    e = mlp(16, 20, 16, x, fw1, fb1, fw2, fb2);
    nl = 0;
    for (int l = 0; l < 4; l++) begin
      sel_p[l] = 0; wn[l] = 0; tabs_bx[l] = 0; tabs_f[l] = 0;
      for (int w = 3; w >= 0; w--)
        if (pres[l*4 + w] && e[l*4 + w] > 0) begin
          sel_p[l] = 1; wn[l] = w;
          tabs_bx[l] = int'(g.t[l*4 + w].bx); tabs_f[l] = int'(g.t[l*4 + w].fine);
        end
      nl += sel_p[l];
    end
    if (nl < 3) begin r.flt_rej = 1; return r; end
    lpres = new[4]; lbx = new[4]; xd = new[8];
    for (int l = 0; l < 4; l++) begin lpres[l] = sel_p[l]; lbx[l] = tabs_bx[l]; end
    xb = enc_bx(4, lpres, lbx);
    for (int l = 0; l < 4; l++) begin xd[2*l] = xb[l]; xd[2*l+1] = sel_p[l] ? wn[l] : 0; end
    ed = mlp(8, 20, 12, xd, dw1, db1, dw2, db2);
    cnt = 0; anc = -1;
    for (int l = 0; l < 4; l++) begin
      int cls;
      if (!sel_p[l] || (ed[3*l+2] >= ed[3*l] && ed[3*l+2] >= ed[3*l+1])) cls = 2;
      else if (ed[3*l] >= ed[3*l+1]) cls = 0;
      else cls = 1;
      use_[l]  = (cls != 2);
      right[l] = (cls == 1);
      r.p.lat[l] = lat_e'(cls);
      r.p.wno[l] = 2'(wn[l]);
      if (use_[l]) begin
        cnt++;
        if (anc < 0) anc = l;
      end
    end
    if (cnt < 3) begin r.short_ = 1; return r; end
    for (int l = 0; l < 4; l++)
      tau[l] = use_[l] ? td(tabs_bx[l], tabs_f[l], tabs_bx[anc], tabs_f[anc]) : 0;
    if (!mt_exact(use_, wn, right, tau, 30, t0r)) begin r.inv = 1; return r; end
    r.tp = 1;
    begin
      int tot;
      tot = tabs_bx[anc] * 30 + tabs_f[anc] + t0r;
      tot = ((tot % (4096 * 30)) + 4096 * 30) % (4096 * 30);
      r.p.t0.bx = BX_W'(tot / 30); r.p.t0.fine = FINE_W'(tot % 30);
    end
    ls_fit(use_, wn, right, tau, t0r, m, x0);
    r.p.m  = 16'(rnd(m * 64.0));
    r.p.x0 = 16'(rnd(x0 * 4.0));
    r.p.nhits = 3'(cnt);
    for (int l = 0; l < 4; l++) r.p.used[l] = use_[l];
    return r;
  endfunction

  // ---------------- grouping reference ----------------
  bit   r_pres[N_CH];
  int   r_id[N_CH], r_ins[N_CH];
  tdc_t r_t[N_CH];
  bit   last_sent[int];
  int   next_id = 1;

  // expected events keyed by edge number
  bit  ex_sent[int], ex_dup[int], ex_acc[int], ex_rep[int];
  bit  ex_frej[int], ex_short[int], ex_inv[int];
  tp_t ex_tp[int];

  int n_sent = 0, n_dup = 0, n_rep = 0, n_frej = 0, n_short = 0, n_inv = 0;
  int n_tp = 0, n_tp3 = 0, n_tp4 = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      bit   any_exp, dup;
      bit   ins[N_CH];
      tdc_t ins_t[N_CH];
      edge_n++;
      any_exp = 0;
      for (int c = 0; c < N_CH; c++) if (r_pres[c] && edge_n - r_ins[c] == PERSIST) any_exp = 1;
      dup = 1;
      for (int c = 0; c < N_CH; c++) if (r_pres[c] && !last_sent.exists(r_id[c])) dup = 0;
      if (any_exp && !dup) begin
        group_t g;
        res_t   r;
        last_sent.delete();
        for (int c = 0; c < N_CH; c++) begin
          g.mask[c] = r_pres[c];
          g.t[c]    = r_pres[c] ? r_t[c] : '0;
          if (r_pres[c]) last_sent[r_id[c]] = 1;
        end
        ex_sent[edge_n] = 1;
        r = chain(g);
        if (r.flt_rej) ex_frej[edge_n + 2] = 1;
        if (r.short_)  ex_short[edge_n + 7] = 1;
        if (r.inv)     ex_inv[edge_n + 7] = 1;
        if (r.tp)      ex_tp[edge_n + 9] = r.p;
      end
      if (any_exp && dup) ex_dup[edge_n] = 1;
      for (int c = 0; c < N_CH; c++) ins[c] = 0;
      for (int l = 0; l < NL; l++) begin
        if (hit_i[l].valid && hit_i[l].chamber == 2'd0 && hit_i[l].wno < 4) begin
          ins[int'(hit_i[l].layer) * 4 + int'(hit_i[l].wno)]   = 1;
          ins_t[int'(hit_i[l].layer) * 4 + int'(hit_i[l].wno)] = hit_i[l].t;
        end
      end
      for (int c = 0; c < N_CH; c++) begin
        bit expiring;
        expiring = r_pres[c] && edge_n - r_ins[c] == PERSIST;
        if (ins[c]) begin
          ex_acc[edge_n] = 1;
          if (r_pres[c] && !expiring) ex_rep[edge_n] = 1;
          r_pres[c] = 1; r_id[c] = next_id++; r_ins[c] = edge_n; r_t[c] = ins_t[c];
        end else if (expiring) r_pres[c] = 0;
      end
    end
  end

  // primitives matched to generated muons (t0 within 15 counts)
  int n_match = 0;
  real sum_d2 = 0.0;

  always @(negedge clk) begin
    if (rst_n && edge_n > 0) begin
      chk("hit accepted", stat_o.hit_accepted == ex_acc.exists(edge_n));
      chk("hit replaced", stat_o.hit_replaced == ex_rep.exists(edge_n));
      chk("group sent",   stat_o.group_sent == ex_sent.exists(edge_n));
      chk("group dup",    stat_o.group_dup == ex_dup.exists(edge_n));
      chk("filter reject", stat_o.filter_reject == ex_frej.exists(edge_n));
      chk("disamb reject", stat_o.disamb_reject == ex_short.exists(edge_n));
      chk("mt invalid",   stat_o.mt_invalid == ex_inv.exists(edge_n));
      chk("tp valid",     tp_valid_o == ex_tp.exists(edge_n));
      chk("tp pulse",     stat_o.tp_valid == tp_valid_o);
      if (stat_o.group_sent) n_sent++;
      if (stat_o.group_dup) n_dup++;
      if (stat_o.hit_replaced) n_rep++;
      if (stat_o.filter_reject) n_frej++;
      if (stat_o.disamb_reject) n_short++;
      if (stat_o.mt_invalid) n_inv++;
      if (tp_valid_o && ex_tp.exists(edge_n)) begin
        tp_t p;
        int  tt;
        p = ex_tp[edge_n];
        n_tp++;
        if (p.nhits == 3) n_tp3++; else n_tp4++;
        chk("tp t0",    tp_o.t0 == p.t0);
        chk("tp m",     int'(tp_o.m) - int'(p.m) <= 1 && int'(tp_o.m) - int'(p.m) >= -1);
        chk("tp x0",    int'(tp_o.x0) - int'(p.x0) <= 1 && int'(tp_o.x0) - int'(p.x0) >= -1);
        chk("tp nhits", tp_o.nhits == p.nhits);
        chk("tp used",  tp_o.used == p.used);
        chk("tp lat",   tp_o.lat == p.lat);
        chk("tp wires", tp_o.wno == p.wno);
        tt = int'(tp_o.t0.bx) * 30 + int'(tp_o.t0.fine);
        foreach (gen[i]) begin
          int d;
          d = tt - gen[i].t0;
          if (d > 2048 * 30) d -= 4096 * 30;
          if (d < -2048 * 30) d += 4096 * 30;
          if (!gen[i].found && d >= -15 && d <= 15) begin
            gen[i].found = 1;
            n_match++;
            sum_d2 += real'(d * d);
            break;
          end
        end
      end
    end
  end

  // ---------------- stimulus ----------------
  // pending hits: arrival edge, lane-free hit word
  typedef struct { int at; hit_t h; } pend_t;
  pend_t pend[$];

  function automatic hit_t mkhit(int chamber, int layer, int w, int tabs);
    hit_t h;
    int t;
    t = ((tabs % (4096 * 30)) + 4096 * 30) % (4096 * 30);
    h.valid = 1; h.chamber = 2'(chamber); h.layer = 2'(layer); h.wno = 4'(w);
    h.t.bx = BX_W'(t / 30); h.t.fine = FINE_W'(t % 30);
    return h;
  endfunction

  // Queue the hits of one muon crossing at absolute TDC time t0abs, and the
  // noise hits of its event.
  typedef struct { int t0; real phi; bit found; } gen_t;
  gen_t gen[$];

  // about 5 drift units (250 um) of smearing
  function automatic int smear();
    return int'($urandom_range(0, 6)) + int'($urandom_range(0, 6)) + int'($urandom_range(0, 6)) - 9;
  endfunction

  task automatic event_ws(int t0abs);
    bit  in_mc[4], right[4];
    int  wn[4], dr[4], nin, drop;
    real x0, m, phi;
    do begin
      phi = (real'($urandom_range(0, 9000)) - 4500.0) / 100.0;
      m   = $tan(phi * 3.14159265 / 180.0) * 289.0;
      x0  = real'($urandom_range(T / 2, 15 * T / 2));
      track_hits(x0, m, in_mc, wn, right, dr);
      nin = int'(in_mc[0]) + int'(in_mc[1]) + int'(in_mc[2]) + int'(in_mc[3]);
    end while (nin < 3);
    drop = (nin == 4 && $urandom_range(0, 99) < 12) ? int'($urandom_range(0, 3)) : -1;
    for (int l = 0; l < 4; l++) begin
      int d;
      if (!in_mc[l] || l == drop) continue;
      d = dr[l] + smear();
      if (d < 0) d = 0;
      if (d > T) d = T;
      pend.push_back('{at: d / 30 + int'($urandom_range(0, 5)), h: mkhit(0, l, wn[l], t0abs + d)});
    end
    for (int c = 0; c < 16; c++)
      if ($urandom_range(0, 99) < 2) begin
        int d;
        d = int'($urandom_range(0, 31 * 30)) - 15 * 30;
        pend.push_back('{at: ((d < 0) ? 0 : d / 30) + int'($urandom_range(0, 5)),
                         h: mkhit(0, c / 4, c % 4, t0abs + d)});
      end
    gen.push_back('{t0: ((t0abs % (4096 * 30)) + 4096 * 30) % (4096 * 30), phi: phi, found: 0});
  endtask

  initial begin
    int cyc, next_ev;
    pend_t now_q[$];
    cfg_i = '0;
    for (int l = 0; l < NL; l++) hit_i[l] = '0;
    for (int c = 0; c < N_CH; c++) r_pres[c] = 0;
    build_models();
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_models();
    cyc = 0; next_ev = 20;
    for (int k = 0; k < 60000; k++) begin
      @(negedge clk);
      now_q.delete();
      cyc = edge_n;
      if (k == next_ev && k < 59000) begin
        pend.delete();
        event_ws((cyc + 1) * 30 + int'($urandom_range(0, 29)));
        foreach (pend[i]) now_q.push_back('{at: cyc + 1 + pend[i].at, h: pend[i].h});
        pend.delete();
        foreach (now_q[i]) sched.push_back(now_q[i]);
        next_ev = k + int'($urandom_range(35, 90));
      end
      // deliver what is due, at most one hit per lane per clock
      for (int l = 0; l < NL; l++) hit_i[l] = '0;
      begin
        int used_l;
        used_l = 0;
        for (int i = 0; i < sched.size(); ) begin
          if (sched[i].at <= cyc + 1 && used_l < NL) begin
            hit_i[used_l] = sched[i].h;
            used_l++;
            sched.delete(i);
          end else i++;
        end
      end
    end
    @(negedge clk);
    for (int l = 0; l < NL; l++) hit_i[l] = '0;
    repeat (60) @(negedge clk);
    begin
      int ng, nf, nv, nvf, n15, n15f;
      ng = 0; nf = 0; nv = 0; nvf = 0; n15 = 0; n15f = 0;
      foreach (gen[i]) begin
        real a;
        a = (gen[i].phi < 0) ? -gen[i].phi : gen[i].phi;
        ng++;
        nf += int'(gen[i].found);
        if (a < 3.0)  begin nv++;  nvf  += int'(gen[i].found); end
        if (a < 15.0) begin n15++; n15f += int'(gen[i].found); end
      end
      chk("mechanism: group sent", n_sent > 0);
      chk("mechanism: duplicate suppressed", n_dup > 0);
      chk("mechanism: triplet primitive", n_tp3 > 0);
      chk("mechanism: quadruplet primitive", n_tp4 > 0);
      chk("near-vertical efficiency", nvf * 10 >= nv * 6);
      $display("muons %0d: found %0d; |phi| < 15 deg: %0d of %0d; |phi| < 3 deg: %0d of %0d",
               ng, nf, n15f, n15, nvf, nv);
      $display("t0 rms of matched primitives %0.2f ns",
               (n_match > 0) ? $sqrt(sum_d2 / n_match) * 25.0 / 30.0 : 0.0);
      $display("groups sent %0d, duplicates %0d, filter rejects %0d, disambiguation rejects %0d, no t0 %0d",
               n_sent, n_dup, n_frej, n_short, n_inv);
      $display("primitives %0d (3 hits %0d, 4 hits %0d)", n_tp, n_tp3, n_tp4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pend_t sched[$];
endmodule
