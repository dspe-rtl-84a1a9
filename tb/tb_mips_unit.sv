// tb_mips_unit: scripted vector stream through Lite-MAC, Cos-SRAM and
// MerkleTree PE. The projection sums groups of four elements (weight 64), so
// adding 4 to one element of every group moves every leaf by one. The
// stream V0, V0+d, V0+2d, V0+d, V0+40 for expert 0 must give Full, Full,
// Diff-Reuse (index 1), Early-Skip (index 1), Full; V0 for expert 1 must give
// Full (no reference yet), after which V0+40 for expert 0 is still an
// Early-Skip against that expert's own reference; V0+d with a cosine score raised by 2/128 moves
// every leaf by 2 and must not be an Early-Skip. The decision counters and
// the latency after the last row (4 + level cycles) are checked too.
module tb_mips_unit;
  import dspe_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cos_we = 0, start = 0, row_valid = 0, row_ready;
  logic [7:0] cos_addr;
  logic [15:0] cos_wdata;
  logic [511:0] vec, row_data;
  logic [2:0] expert;
  logic [9:0] index, result_idx;
  logic [18:0] t_zero, s_th, delta_h;
  logic busy, done, root_valid;
  mips_dec_e decision;
  logic [1:0] level;
  logic [15:0] root, n_early, n_diff, n_full;
  int checks = 0, failures = 0;
  int v0 [64];

  mips_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(int shift, int big, int e, int idx, int want_dec, int want_idx);
    int cyc;
    for (int i = 0; i < 64; i++) vec[8*i +: 8] = 8'(v0[i] + ((i % 4 == 0) ? 4 * shift : 0) + big);
    expert = 3'(e); index = 10'(idx);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int k = 0; k < 8; k++) begin
      row_data = '0;
      for (int j = 0; j < 4; j++) row_data[8*(4*k + j) +: 8] = 8'd64;
      row_valid = 1;
      @(posedge clk);
      if (!row_ready) begin failures++; $display("row not ready"); end
      @(negedge clk);
    end
    row_valid = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if ((want_dec >= 0 && int'(decision) != want_dec) || (want_dec == -1 && decision == DEC_EARLY) ||
        (want_idx >= 0 && int'(result_idx) != want_idx) || cyc != 4 + int'(level)) begin
      failures++;
      $display("vector %0d: decision %0d idx %0d level %0d cyc %0d", idx, decision, result_idx, level, cyc);
    end
  endtask

  initial begin
    t_zero = 19'd4; s_th = 19'd64;
    for (int i = 0; i < 64; i++) v0[i] = $signed($urandom_range(0, 60)) - 30;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); cos_we = 1; cos_addr = 8'(i); cos_wdata = (i == 6) ? 16'h4200 : 16'h4000;
    end
    @(negedge clk); cos_we = 0;
    step(0, 0, 0, 0, 3, 0);
    step(1, 0, 0, 1, 3, 1);
    step(2, 0, 0, 2, 2, 1);
    step(1, 0, 0, 3, 1, 1);
    step(0, 40, 0, 4, 3, 4);
    step(0, 0, 1, 5, 3, 5);
    step(0, 40, 0, 7, 1, 4);
    step(1, 0, 0, 6, -1, -1);
    @(negedge clk);
    checks++;
    if (n_full != 5 || n_diff != 1 || n_early != 2) failures++;
    $display("early %0d diff %0d full %0d", n_early, n_diff, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
