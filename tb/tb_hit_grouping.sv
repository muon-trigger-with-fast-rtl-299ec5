// tb_hit_grouping: self-checking test of the persistence window and the
// duplicate suppression.
//
// Random hits (inside and outside the macro-cell, on both lanes, sometimes
// on an occupied channel) are driven for several thousand clocks. A
// reference kept here gives every stored hit an identity and the clock it was
// stored; a hit expires exactly PERSIST clocks later. On an expiry the window
// content is expected downstream unless every hit in it belonged to the last
// group that was sent. Each clock the group valid, mask and times and the
// sent / duplicate / accepted / replaced pulses are compared with the
// reference. A directed sequence reproduces the grouping illustration: a set
// is sent when the first hit expires, and the next expiry, with no new hit
// in between, is suppressed as a subset.
//
// The 30-clock window and the rule that a set already sent is not sent again
// come from the published design; the one-slot-per-channel replacement that
// is checked here is this design's own choice.
module tb_hit_grouping;
  import tpg_pkg::*;
  import tb_ref_pkg::*;

  localparam int NL = 2;
  localparam logic [1:0] MCC = 2'd1;
  localparam int MCW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  hit_t   hit_i [NL];
  group_t group_o;
  logic   group_valid_o, s_acc, s_rep, s_sent, s_dup;

  hit_grouping #(.N_LANES(NL), .MC_CHAMBER(MCC), .MC_WIRE0(MCW)) dut (
    .clk, .rst_n, .hit_i, .group_o, .group_valid_o,
    .stat_accept_o(s_acc), .stat_replace_o(s_rep), .stat_sent_o(s_sent), .stat_dup_o(s_dup)
  );

  // reference state
  bit   r_pres[N_CH];
  int   r_id[N_CH], r_ins[N_CH];
  tdc_t r_t[N_CH];
  bit   last_sent[int];
  int   next_id = 1, edge_n = 0;
  // expectations for the current edge
  bit     x_valid, x_dup, x_acc, x_rep;
  group_t x_group;

  int checks = 0, failures = 0;
  int n_sent = 0, n_dup = 0, n_rep = 0, n_acc = 0, n_out = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, bit cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at edge %0d", what, edge_n);
    end
  endtask

  // Reference update on every active clock edge.
  always @(posedge clk) begin
    if (rst_n) begin
      bit any_exp, dup;
      bit ins[N_CH];
      tdc_t ins_t[N_CH];
      edge_n++;
      any_exp = 0;
      for (int c = 0; c < N_CH; c++) if (r_pres[c] && edge_n - r_ins[c] == PERSIST) any_exp = 1;
      dup = 1;
      for (int c = 0; c < N_CH; c++) if (r_pres[c] && !last_sent.exists(r_id[c])) dup = 0;
      x_valid = any_exp && !dup;
      x_dup   = any_exp && dup;
      if (x_valid) begin
        last_sent.delete();
        for (int c = 0; c < N_CH; c++) begin
          x_group.mask[c] = r_pres[c];
          x_group.t[c]    = r_t[c];
          if (r_pres[c]) last_sent[r_id[c]] = 1;
        end
      end
      for (int c = 0; c < N_CH; c++) ins[c] = 0;
      for (int l = 0; l < NL; l++) begin
        int w;
        w = int'(hit_i[l].wno) - MCW;
        if (hit_i[l].valid && hit_i[l].chamber == MCC && w >= 0 && w < 4) begin
          ins[int'(hit_i[l].layer) * 4 + w]   = 1;
          ins_t[int'(hit_i[l].layer) * 4 + w] = hit_i[l].t;
        end
      end
      x_acc = 0; x_rep = 0;
      for (int c = 0; c < N_CH; c++) begin
        bit expiring;
        expiring = r_pres[c] && edge_n - r_ins[c] == PERSIST;
        if (ins[c]) begin
          x_acc = 1;
          if (r_pres[c] && !expiring) x_rep = 1;
          r_pres[c] = 1; r_id[c] = next_id++; r_ins[c] = edge_n; r_t[c] = ins_t[c];
        end else if (expiring) r_pres[c] = 0;
      end
    end
  end

  always @(negedge clk) begin
    if (rst_n && edge_n > 0) begin
      chk("group valid", group_valid_o == x_valid);
      chk("sent pulse", s_sent == x_valid);
      chk("dup pulse", s_dup == x_dup);
      chk("accept pulse", s_acc == x_acc);
      chk("replace pulse", s_rep == x_rep);
      if (x_valid) begin
        chk("group mask", group_o.mask == x_group.mask);
        for (int c = 0; c < N_CH; c++)
          if (x_group.mask[c]) chk("group time", group_o.t[c] == x_group.t[c]);
        n_out++;
      end
      if (x_valid) n_sent++;
      if (x_dup) n_dup++;
      if (x_rep) n_rep++;
      if (x_acc) n_acc++;
    end
  end

  function automatic hit_t mkhit(int chamber, int layer, int w, int bx, int fine);
    hit_t h;
    h.valid = 1; h.chamber = 2'(chamber); h.layer = 2'(layer); h.wno = 4'(w);
    h.t.bx = BX_W'(bx); h.t.fine = FINE_W'(fine);
    return h;
  endfunction

  initial begin
    int bx;
    for (int l = 0; l < NL; l++) hit_i[l] = '0;
    for (int c = 0; c < N_CH; c++) r_pres[c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Directed: four hits a few clocks apart, then silence. The first expiry
    // sends the set, the later ones are subsets and are suppressed.
    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      hit_i[0] = mkhit(MCC, k, MCW + (k % 2), 100 + k, 3 * k);
      @(negedge clk);
      hit_i[0] = '0;
    end
    repeat (40) @(negedge clk);
    chk("directed: one sent", n_sent == 1);
    chk("directed: three suppressed", n_dup == 3);
    // Random traffic.
    bx = 200;
    for (int k = 0; k < 6000; k++) begin
      @(negedge clk);
      bx++;
      for (int l = 0; l < NL; l++) begin
        if ($urandom_range(0, 99) < 12) begin
          int ch, w;
          ch = ($urandom_range(0, 9) < 8) ? MCC : int'($urandom_range(0, 3));
          w  = ($urandom_range(0, 9) < 8) ? MCW + int'($urandom_range(0, 3)) : int'($urandom_range(0, 15));
          hit_i[l] = mkhit(ch, int'($urandom_range(0, 3)), w,
                           bx - int'($urandom_range(0, 20)), int'($urandom_range(0, 29)));
        end else hit_i[l] = '0;
      end
      if ((k / 500) % 2 == 1) for (int l = 0; l < NL; l++) hit_i[l] = '0;   // quiet periods
    end
    @(negedge clk);
    for (int l = 0; l < NL; l++) hit_i[l] = '0;
    repeat (40) @(negedge clk);
    chk("mechanisms seen", n_sent > 10 && n_dup > 10 && n_rep > 0);
    $display("sent %0d duplicates %0d replaced %0d accepted %0d", n_sent, n_dup, n_rep, n_acc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
