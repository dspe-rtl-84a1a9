// tb_mblm_unit: batches of 8 activations times one weight, drawn to hit
// near-zero operands, exact repeats and smooth sequences. With t_match = 0
// every product must be exact (a * w, or 0 for an invalid pair); the path
// choice must match the reference score; the invalid count must match the
// thresholds; start-to-done must take 19 cycles. Each mechanism (invalid
// skip, repetition skip, radix-4, radix-8, reorder, Booth-LUT hit) must occur.
module tb_mblm_unit;
  import dspe_pkg::*;
  import tb_mblm_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [7:0] act [8];
  logic signed [7:0] wgt;
  dspe_cfg_t cfg;
  logic busy, done, radix8, reordered;
  logic signed [15:0] prod [8];
  logic [7:0] score;
  logic [3:0] n_invalid, n_skip, n_mult;
  logic [15:0] lut_hits;
  int checks = 0, failures = 0;
  int c_inv = 0, c_skip = 0, c_r8 = 0, c_r4 = 0, c_re = 0;

  mblm_unit #(.N_OPD(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, ninv, s;
    logic [7:0] au [8];
    cfg = CFG_DEFAULT;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      wgt = (n % 37 == 0) ? 8'sd0 : 8'($urandom);
      act[0] = 8'($urandom);
      for (int i = 1; i < 8; i++)
        case (n % 4)
          0: act[i] = 8'($urandom);
          1: act[i] = ($urandom_range(0, 2) == 0) ? 8'($urandom) : act[i-1];
          2: act[i] = 8'($signed($urandom_range(0, 6)) - 3);
          default: act[i] = act[i-1] ^ 8'(1 << $urandom_range(0, 2));
        endcase
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 19) begin failures++; $display("latency %0d", cyc); end
      ninv = 0;
      for (int i = 0; i < 8; i++) begin
        logic inv;
        inv = ((int'(act[i]) < 0 ? -int'(act[i]) : int'(act[i])) < int'(cfg.r_zero_act)) ||
              ((int'(wgt) < 0 ? -int'(wgt) : int'(wgt)) < int'(cfg.r_zero_wgt));
        if (inv) ninv++;
        checks++;
        if (int'(prod[i]) != (inv ? 0 : int'(act[i]) * int'(wgt))) begin
          failures++;
          if (failures < 10) $display("batch %0d op %0d: %0d*%0d -> %0d", n, i, act[i], wgt, prod[i]);
        end
        au[i] = act[i];
      end
      s = ref_score(au, cfg);
      checks++;
      if (radix8 != (s > 205) || int'(n_invalid) != ninv || int'(n_invalid + n_skip + n_mult) != 8) failures++;
      c_inv  += int'(n_invalid);
      c_skip += int'(n_skip);
      if (radix8) c_r8++; else c_r4++;
      if (reordered) c_re++;
    end
    $display("invalid %0d, repetition skips %0d, radix-8 %0d, radix-4 %0d, reordered %0d, LUT hits %0d",
             c_inv, c_skip, c_r8, c_r4, c_re, lut_hits);
    checks++;
    if (c_inv == 0 || c_skip == 0 || c_r8 == 0 || c_r4 == 0 || c_re == 0 || lut_hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
