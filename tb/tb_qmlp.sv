// tb_qmlp: self-checking test of the quantized network core.
//
// Loads random 6-bit weights (about half of them pruned to zero) and random
// biases through the write port, then streams random input vectors, one per
// clock, and compares every logit with the reference network of tb_ref_pkg.
// Checks the 2-clock latency (IN_REG = 0) and one-vector-per-clock
// throughput, and that the side-band word stays aligned with its data.
//
// The network shape and 6-bit weights follow the published design; the
// ReLU, the fixed-point scaling and the address map are this design's own.
module tb_qmlp;
  import tpg_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = 16, NH = 20, NO = 16, NV = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                            cfg_we = 0;
  logic [CFG_ADDR_W-1:0]           cfg_addr = '0;
  logic signed [BIAS_W-1:0]        cfg_data = '0;
  logic                            valid_i = 0, valid_o;
  logic [NI-1:0][ANN_IN_W-1:0]     x_i = '0;
  logic [15:0]                     sb_i = '0, sb_o;
  logic signed [NO-1:0][23:0]      logit_o;

  qmlp #(.N_IN(NI), .N_HID(NH), .N_OUT(NO), .OUT_W(24), .SB_W(16), .IN_REG(0)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .valid_i, .x_i, .sb_i, .valid_o, .logit_o, .sb_o
  );

  int checks = 0, failures = 0;
  ivec_t w1, b1, w2, b2;
  ivec_t xs[NV];
  int    cyc = 0, in_cyc[NV];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic wr(int addr, int data);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_ADDR_W'(addr); cfg_data = BIAS_W'(data);
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic int rw();
    int v = int'($urandom_range(0, 63)) - 32;
    return ($urandom_range(0, 1) == 0) ? 0 : v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  int nout = 0;
  always @(negedge clk) begin
    if (rst_n && valid_o) begin
      ivec_t e;
      int k;
      k = int'(sb_o);
      e = mlp(NI, NH, NO, xs[k], w1, b1, w2, b2);
      checks++;
      if (cyc - in_cyc[k] != 2) begin
        failures++;
        $display("latency %0d for vector %0d", cyc - in_cyc[k], k);
      end
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (int'($signed(logit_o[o])) != e[o]) begin
          failures++;
          if (failures < 10) $display("vec %0d out %0d: got %0d exp %0d", k, o, int'($signed(logit_o[o])), e[o]);
        end
      end
      nout++;
    end
  end

  initial begin
    w1 = new[NI*NH]; b1 = new[NH]; w2 = new[NH*NO]; b2 = new[NO];
    foreach (w1[i]) w1[i] = rw();
    foreach (b1[i]) b1[i] = int'($urandom_range(0, 1023)) - 512;
    foreach (w2[i]) w2[i] = rw();
    foreach (b2[i]) b2[i] = int'($urandom_range(0, 1023)) - 512;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (w1[i]) wr(i, w1[i]);
    foreach (b1[i]) wr(NI*NH + i, b1[i]);
    foreach (w2[i]) wr(NI*NH + NH + i, w2[i]);
    foreach (b2[i]) wr(NI*NH + NH + NH*NO + i, b2[i]);
    for (int k = 0; k < NV; k++) begin
      xs[k] = new[NI];
      foreach (xs[k][i]) xs[k][i] = ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(1, 31));
      if (k % 50 == 0) foreach (xs[k][i]) xs[k][i] = 31;   // saturating activations
      @(negedge clk);
      valid_i = 1; sb_i = 16'(k);
      for (int i = 0; i < NI; i++) x_i[i] = ANN_IN_W'(xs[k][i]);
      in_cyc[k] = cyc;
    end
    @(negedge clk) valid_i = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("outputs %0d of %0d", nout, NV); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
