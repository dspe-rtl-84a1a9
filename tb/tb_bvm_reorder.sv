// tb_bvm_reorder: random batches on both paths. The testbench recomputes
// every VST entry from the Booth windows, checks that the chosen order is a
// permutation, that its summed adjacent BV equals the reported total and is
// never worse than the arrival order, and that done arrives N_OPD + 2 cycles
// after start.
module tb_bvm_reorder;
  logic clk = 0, rst_n = 0, start = 0, radix8 = 0;
  logic [7:0] opd [8];
  logic busy, done, use_r2;
  logic [2:0] order [8];
  logic [7:0] tot_r1, tot_r2;
  logic [3:0] bv [8][8];
  int checks = 0, failures = 0, n_re = 0;

  bvm_reorder #(.N_OPD(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wbits(int a, int j, bit r8);
    int x, c, t;
    x = (a & 255) << 1;
    c = 0;
    t = x ^ ((j & 255) << 1);
    if (r8) begin
      for (int b = 0; b < 9; b++) c += (t >> b) & 1;
    end else begin
      for (int k = 0; k < 4; k++) for (int b = 0; b < 3; b++) c += (t >> (2*k + b)) & 1;
    end
    return c;
  endfunction

  initial begin
    int cyc, s_r1, s_ch, seen;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < 8; i++) opd[i] = (n % 2) ? 8'($urandom) : 8'($urandom_range(0, 3) << (2 * (i % 3)));
      radix8 = 1'(n / 2);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 10) failures++;
      seen = 0; s_r1 = 0; s_ch = 0;
      for (int i = 0; i < 8; i++) begin
        seen |= 1 << order[i];
        for (int j = i + 1; j < 8; j++) begin
          checks++;
          if (int'(bv[i][j]) != wbits(int'(opd[i]), int'(opd[j]), radix8) || bv[i][j] != bv[j][i]) failures++;
        end
      end
      for (int i = 1; i < 8; i++) begin
        s_r1 += wbits(int'(opd[i-1]), int'(opd[i]), radix8);
        s_ch += wbits(int'(opd[order[i-1]]), int'(opd[order[i]]), radix8);
      end
      checks++;
      if (seen != 255 || s_ch > s_r1 || int'(tot_r1) != s_r1 || (use_r2 && int'(tot_r2) != s_ch)) failures++;
      if (use_r2) n_re++;
    end
    checks++;
    if (n_re == 0) failures++;
    $display("reordered %0d of 300", n_re);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
