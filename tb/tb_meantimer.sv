// tb_meantimer: self-checking test of the t0 finder.
//
// Generates straight tracks through the macro-cell (angles up to 45 degrees)
// with a random crossing time, converts them to hit times and true
// lateralities, and feeds the t0 finder one set per clock:
//   - all four hits with the true laterality,
//   - three hits (one layer dropped) with the true laterality,
//   - four hits with one laterality flipped,
//   - two hits marked as noise (too few hits).
// Each result is compared with an integer evaluation of the closed-form
// mean-timer relation (validity and t0 exactly) and, for true lateralities,
// with the generated t0 (within 2 TDC counts). The 4-6-3 example pattern
// (layers A-B-C, right-left-right) is checked against
// t0 = (t4 + 2 t6 + t3 - 2 Tmax) / 4. Checks the 2-clock latency.
//
// The 4-6-3 equation checked here is the published one; the general formula,
// the quadruplet combination and the tolerance are this design's own.
module tb_meantimer;
  import tpg_pkg::*;
  import tb_ref_pkg::*;

  localparam int NTRK = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                                  valid_i = 0;
  quad_t                                 quad_i = '0;
  lat_e [N_LAYERS-1:0]                   lat_i = '{default: LAT_NOISE};
  logic                                  valid_o, short_o, invalid_o;
  tdc_t                                  t0_o;
  logic signed [REL_W-1:0]               t0_rel_o;
  logic signed [N_LAYERS-1:0][REL_W-1:0] tau_o;
  logic [N_LAYERS-1:0]                   use_o;
  lat_e [N_LAYERS-1:0]                   lat_o;
  logic [N_LAYERS-1:0][1:0]              wire_o;

  meantimer dut (.clk, .rst_n, .valid_i, .quad_i, .lat_i,
                 .valid_o, .short_o, .invalid_o, .t0_o, .t0_rel_o,
                 .tau_o, .use_o, .lat_o, .wire_o);

  typedef struct {
    int  kind;       // 0 = true lat, 1 = flipped, 2 = short, 3 = 4-6-3 example
    int  cyc;
    int  t0_bx, t0_fine;   // generated t0
    bit  exp_valid, exp_short;
    int  exp_t0r;
    int  anc_bx, anc_fine;
    real eq1_t0r;
  } exp_t;

  exp_t eq[$];
  int checks = 0, failures = 0, cyc = 0;
  int n_valid = 0, n_inv = 0, n_short = 0, n_trip = 0, n_quad = 0;

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
    if (rst_n && (valid_o || short_o || invalid_o)) begin
      exp_t e;
      e = eq.pop_front();
      chk("latency", cyc - e.cyc == 2);
      chk("one outcome", int'(valid_o) + int'(short_o) + int'(invalid_o) == 1);
      chk("short", short_o == e.exp_short);
      if (!e.exp_short) chk("valid", valid_o == e.exp_valid);
      if (valid_o) n_valid++;
      if (invalid_o) n_inv++;
      if (short_o) n_short++;
      if (valid_o && e.exp_valid) begin
        int ta;
        chk("t0_rel exact", int'(t0_rel_o) == e.exp_t0r);
        ta = td(int'(t0_o.bx), int'(t0_o.fine), e.anc_bx, e.anc_fine);
        chk("t0 absolute", ta == e.exp_t0r && int'(t0_o.fine) < 30);
        if (e.kind == 0 || e.kind == 3) begin
          int err;
          err = td(int'(t0_o.bx), int'(t0_o.fine), e.t0_bx, e.t0_fine);
          chk("t0 vs generated", err >= -2 && err <= 2);
          if (err < -2 || err > 2) $display("  err %0d", err);
        end
        if (e.kind == 3) begin
          real d;
          d = real'(int'(t0_rel_o)) - e.eq1_t0r;
          chk("4-6-3 equation", d <= 0.5 && d >= -0.5);
        end
      end
    end
  end

  // Build one input set from per-layer data and queue its expectation.
  task automatic send(int kind, bit pres[4], int wn[4], bit right[4], bit noise[4],
                      int tabs[4], int t0abs, real eq1);
    quad_t q;
    lat_e  lt[4];
    exp_t  e;
    bit    use_[4];
    int    tau[4], cnt, anc;
    cnt = 0; anc = -1;
    for (int l = 0; l < 4; l++) begin
      use_[l] = pres[l] && !noise[l];
      if (use_[l]) cnt++;
      if (use_[l] && anc < 0) anc = tabs[l];
    end
    for (int l = 0; l < 4; l++) begin
      q.present[l] = pres[l];
      q.wno[l]     = 2'(wn[l]);
      q.t[l].bx    = BX_W'((tabs[l] / 30) % 4096);
      q.t[l].fine  = FINE_W'(tabs[l] % 30);
      lt[l]        = noise[l] ? LAT_NOISE : (right[l] ? LAT_RIGHT : LAT_LEFT);
      tau[l]       = use_[l] ? tabs[l] - anc : 0;
    end
    e.kind = kind;
    e.t0_bx = (t0abs / 30) % 4096; e.t0_fine = t0abs % 30;
    e.anc_bx = (anc / 30) % 4096;  e.anc_fine = anc % 30;
    e.exp_short = (cnt < 3);
    e.exp_valid = !e.exp_short && mt_exact(use_, wn, right, tau, 30, e.exp_t0r);
    e.eq1_t0r = eq1 - anc;
    if (cnt == 3) n_trip++;
    if (cnt == 4) n_quad++;
    @(negedge clk);
    valid_i = 1;
    quad_i  = q;
    for (int l = 0; l < 4; l++) lat_i[l] = lt[l];
    e.cyc = cyc;
    eq.push_back(e);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Example 4-6-3 of the mean-timer description: A wire 0 right, B wire 1
    // left, C wire 0 right, track through the middle of the cells.
    begin
      bit in_mc[4], right[4], pres[4], noise[4];
      int wn[4], dr[4], tabs[4], t0abs;
      real eq1;
      track_hits(2.0 * T + 200.0, 60.0, in_mc, wn, right, dr);
      t0abs = 1234 * 30 + 7;
      for (int l = 0; l < 4; l++) begin
        tabs[l] = t0abs + dr[l]; pres[l] = (l < 3); noise[l] = 0;
      end
      eq1 = (tabs[0] + 2.0 * tabs[1] + tabs[2] - 2.0 * T) / 4.0;
      chk("example pattern", wn[0] == 0 && wn[1] == 1 && wn[2] == 0 && right[0] && !right[1] && right[2]);
      send(3, pres, wn, right, noise, tabs, t0abs, eq1);
    end
    for (int k = 0; k < NTRK; k++) begin
      bit in_mc[4], right[4], pres[4], noise[4], fl[4];
      int wn[4], dr[4], tabs[4], t0abs;
      real x0, m;
      do begin
        x0 = $urandom_range(0, 8 * T);
        m  = int'($urandom_range(0, 578)) - 289;
        track_hits(x0, m, in_mc, wn, right, dr);
      end while (!(in_mc[0] && in_mc[1] && in_mc[2] && in_mc[3]));
      t0abs = int'($urandom_range(100, 4000)) * 30 + int'($urandom_range(0, 29));
      for (int l = 0; l < 4; l++) begin
        tabs[l] = t0abs + dr[l]; pres[l] = 1; noise[l] = 0;
      end
      send(0, pres, wn, right, noise, tabs, t0abs, 0.0);
      pres[$urandom_range(0, 3)] = 0;
      send(0, pres, wn, right, noise, tabs, t0abs, 0.0);
      for (int l = 0; l < 4; l++) begin pres[l] = 1; fl[l] = right[l]; end
      fl[$urandom_range(0, 3)] ^= 1;
      send(1, pres, wn, fl, noise, tabs, t0abs, 0.0);
      noise[0] = 1; noise[2 + $urandom_range(0, 1)] = 1;
      send(2, pres, wn, right, noise, tabs, t0abs, 0.0);
      if ($urandom_range(0, 3) == 0) begin
        @(negedge clk) valid_i = 0;
      end
    end
    @(negedge clk) valid_i = 0;
    repeat (5) @(negedge clk);
    chk("all answered", eq.size() == 0);
    chk("every outcome seen", n_valid > 0 && n_inv > 0 && n_short > 0 && n_trip > 0 && n_quad > 0);
    $display("valid %0d invalid %0d short %0d triplets %0d quadruplets %0d", n_valid, n_inv, n_short, n_trip, n_quad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
