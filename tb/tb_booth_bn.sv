// tb_booth_bn: random batches (uniform, near-identical and with repeats);
// the score and the radix-8 choice are compared with the integer reference
// of tb_mblm_ref_pkg, and both paths must be taken.
module tb_booth_bn;
  import dspe_pkg::*;
  import tb_mblm_ref_pkg::*;
  logic [7:0] opd [8];
  dspe_cfg_t cfg;
  logic [5:0] bs_sum;
  logic [3:0] re_length;
  logic [7:0] p_low, p_high, score;
  logic radix8;
  int checks = 0, failures = 0, n8 = 0, n4 = 0;

  booth_bn #(.N_OPD(8)) dut (.opd(opd), .bs_th(cfg.bs_th), .rl_th(cfg.rl_th), .bn_phigh(cfg.bn_phigh),
    .r_low(cfg.r_low), .r_high(cfg.r_high), .bs_sum(bs_sum), .re_length(re_length),
    .p_low(p_low), .p_high(p_high), .score(score), .radix8(radix8));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    cfg = CFG_DEFAULT;
    for (int n = 0; n < 3000; n++) begin
      opd[0] = 8'($urandom);
      for (int i = 1; i < 8; i++)
        case (n % 3)
          0: opd[i] = 8'($urandom);
          1: opd[i] = opd[i-1] ^ (8'd1 << $urandom_range(0, 7)) & {8{1'($urandom)}};
          default: opd[i] = ($urandom_range(0, 3) == 0) ? 8'($urandom) : opd[i-1];
        endcase
      #1;
      s = ref_score(opd, cfg);
      checks++;
      if (int'(score) != s || radix8 != (s > 205)) begin
        failures++;
        if (failures < 10) $display("score %0d want %0d", score, s);
      end
      if (radix8) n8++; else n4++;
    end
    checks++;
    if (n8 == 0 || n4 == 0) failures++;
    $display("radix-8 %0d, radix-4 %0d", n8, n4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
