// tb_merkle_tree_pe: streams of projected vectors for two experts built as
// A, A + d, A + 2d, A + d and fresh random vectors, plus random mixtures.
// A behavioural model of the decision rules (reference trees per expert,
// History-LUT per level with the same replacement rule) predicts decision,
// level, result index, delta-H and root; the latency must be 3 + level
// cycles. Early-Skip, Diff-Reuse and Full-Compute must all occur.
module tb_merkle_tree_pe;
  import dspe_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [23:0] vlow [8];
  logic [15:0] cos;
  logic [2:0] expert;
  logic [9:0] tag;
  logic [18:0] t_zero, s_th;
  logic busy, done, root_valid;
  mips_dec_e decision;
  logic [1:0] level;
  logic [9:0] result_idx;
  logic [18:0] delta_h;
  logic [15:0] root;
  int checks = 0, failures = 0, cnt [4];

  merkle_tree_pe #(.LEAVES(8), .HW(16), .VW(24), .EXPERTS(8), .IW(10), .LUT_N(8)) dut (.*);

  always #5 clk = ~clk;

  // model state
  bit  refv [8];
  int  reft [8][15];
  int  refix [8];
  bit  lv [4][8];
  int  le [4][8], ld [4][8], li [4][8];
  int  lwp [4];

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int v [8], int c, int e, int tg);
    int nd [15], dhl [4], dh, off, cntl, dec, lvl, ridx, cyc, hitl;
    bit found, f;
    int pos;
    for (int i = 0; i < 8; i++) nd[i] = ((v[i] >>> 8) + (c >> 8)) & 16'hFFFF;
    // level offsets 0, 8, 12, 14
    for (int n = 0; n < 4; n++) nd[8 + n]  = (nd[2*n] + nd[2*n+1]) & 16'hFFFF;
    for (int n = 0; n < 2; n++) nd[12 + n] = (nd[8 + 2*n] + nd[8 + 2*n+1]) & 16'hFFFF;
    nd[14] = (nd[12] + nd[13]) & 16'hFFFF;
    dec = 3; lvl = 3; ridx = tg;
    for (int l = 0; l < 4; l++) begin
      int o [4];
      o = '{0, 8, 12, 14};
      dh = 0;
      for (int n = 0; n < (8 >> l); n++) begin
        int a, b;
        a = nd[o[l] + n]; b = reft[e][o[l] + n];
        dh += (a >= b) ? a - b : b - a;
      end
      dhl[l] = dh;
      if (refv[e] && dh <= int'(t_zero)) begin dec = 1; lvl = l; ridx = refix[e]; break; end
      found = 0; hitl = 0;
      for (int k = 0; k < 8; k++) if (!found && lv[l][k] && le[l][k] == e && ld[l][k] == dh) begin found = 1; hitl = li[l][k]; end
      if (refv[e] && dh <= int'(s_th) && found) begin dec = 2; lvl = l; ridx = hitl; break; end
    end
    // drive DUT
    for (int i = 0; i < 8; i++) vlow[i] = 24'(v[i]);
    cos = 16'(c); expert = 3'(e); tag = 10'(tg);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (int'(decision) != dec || int'(level) != lvl || int'(result_idx) != ridx ||
        int'(delta_h) != dhl[lvl] || cyc != 3 + lvl ||
        root_valid != (dec == 3) || (dec == 3 && int'(root) != nd[14])) begin
      failures++;
      if (failures < 10) $display("tag %0d: dec %0d/%0d lvl %0d/%0d idx %0d/%0d cyc %0d", tg, decision, dec, level, lvl, result_idx, ridx, cyc);
    end
    cnt[dec]++;
    if (dec == 3) begin
      if (refv[e])
        for (int l = 0; l < 4; l++) begin
          f = 0; pos = lwp[l];
          for (int k = 0; k < 8; k++) if (!f && lv[l][k] && le[l][k] == e && ld[l][k] == dhl[l]) begin f = 1; pos = k; end
          lv[l][pos] = 1; le[l][pos] = e; ld[l][pos] = dhl[l]; li[l][pos] = tg;
          if (!f) lwp[l] = (lwp[l] + 1) % 8;
        end
      refv[e] = 1; refix[e] = tg;
      for (int n = 0; n < 15; n++) reft[e][n] = nd[n];
    end
    @(negedge clk);
  endtask

  initial begin
    int a [8], d [8], v [8], tg;
    t_zero = 19'd4; s_th = 19'd64;
    for (int e = 0; e < 8; e++) refv[e] = 0;
    for (int l = 0; l < 4; l++) begin lwp[l] = 0; for (int k = 0; k < 8; k++) lv[l][k] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    tg = 0;
    for (int r = 0; r < 60; r++) begin
      int e;
      e = r % 2;
      for (int i = 0; i < 8; i++) begin
        a[i] = $signed($urandom_range(0, 1 << 20)) - (1 << 19);
        d[i] = 256 * $urandom_range(0, 3);
      end
      run(a, 16'h4000, e, tg++);
      for (int i = 0; i < 8; i++) v[i] = a[i] + d[i];
      run(v, 16'h4000, e, tg++);
      for (int i = 0; i < 8; i++) v[i] = a[i] + 2 * d[i];
      run(v, 16'h4000, e, tg++);
      for (int i = 0; i < 8; i++) v[i] = a[i] + d[i] + ((r % 3 == 0) ? 256 * ($urandom_range(0, 2) - 1) : 0);
      run(v, 16'h4000 + 16'(256 * (r % 2)), e, tg++);
    end
    $display("early %0d, diff %0d, full %0d", cnt[1], cnt[2], cnt[3]);
    checks++;
    if (cnt[1] == 0 || cnt[2] == 0 || cnt[3] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
