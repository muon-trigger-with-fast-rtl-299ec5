// tb_layer_select: self-checking test of the one-hit-per-layer reduction.
//
// Applies random window groups and filter masks (plus the all-empty and
// all-full cases), and compares the selected hit of each layer, the layer
// count and the at-least-three-layers decision with values worked out here:
// the kept hit of a layer is the one on the lowest wire among the channels
// of that layer that are both present in the group and kept by the mask.
//
// The at-least-three-layers rule follows the published design; taking the
// lowest wire when a layer holds several kept hits is this design's own.
module tb_layer_select;
  import tpg_pkg::*;

  group_t           g;
  logic [N_CH-1:0]  mask;
  quad_t            q;
  logic [2:0]       nl;
  logic             ok;

  layer_select dut (.group_i(g), .mask_i(mask), .quad_o(q), .nlayers_o(nl), .ok_o(ok));

  int checks = 0, failures = 0;
  int n_ok = 0, n_rej = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d (mask %h)", what, got, exp, mask);
    end
  endtask

  initial begin
    for (int k = 0; k < 2000; k++) begin
      int en;
      g = '0;
      for (int c = 0; c < N_CH; c++) begin
        g.t[c].bx   = BX_W'($urandom);
        g.t[c].fine = FINE_W'($urandom_range(0, 29));
      end
      g.mask = N_CH'($urandom);
      mask   = N_CH'($urandom) & N_CH'($urandom);
      if (k == 0) mask = '0;
      if (k == 1) begin mask = '1; g.mask = '1; end
      #1;
      en = 0;
      for (int l = 0; l < N_LAYERS; l++) begin
        int sel;
        sel = -1;
        for (int w = 0; w < N_WIRES; w++)
          if (g.mask[l*4 + w] && mask[l*4 + w] && sel < 0) sel = w;
        chk("present", int'(q.present[l]), int'(sel >= 0));
        if (sel >= 0) begin
          en++;
          chk("wire", int'(q.wno[l]), sel);
          chk("time", int'(q.t[l]), int'(g.t[l*4 + sel]));
        end
      end
      chk("nlayers", int'(nl), en);
      chk("ok", int'(ok), int'(en >= 3));
      if (en >= 3) n_ok++; else n_rej++;
      #1;
    end
    checks++;
    if (n_ok == 0 || n_rej == 0) failures++;
    $display("accepted %0d rejected %0d", n_ok, n_rej);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
