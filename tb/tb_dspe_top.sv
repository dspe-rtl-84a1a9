// tb_dspe_top: end-to-end test of the DSPE at its default parameters.
//
// The host loads the buffers, then runs:
//  1. CMD_POSIT on all four cores: 4 x 64 DA-Posit products with one
//     broadcast weight word; every lane is checked against the exact real
//     product rounded by the posit rules (tb_posit_pkg).
//  2. CMD_MBLM on all four cores: four batches of 8 INT8 activations (random,
//     repeated, near-zero, smooth) times one shared weight; every product is
//     checked against a * w (0 for pairs under the zero thresholds).
//  3. CMD_COS_WR and a scripted CMD_MIPS sequence on core 0 built so that the
//     decisions must be Full, Full, Diff-Reuse, Early-Skip, Full; the decision,
//     result index and the Value SRAM row copied next to it are checked.
//  4. CMD_MIPS on all four cores from the Key SRAM (first vectors of a new
//     expert: Full-Compute everywhere).
// It counts how often each mechanism occurred (DAPPM modes 0/1/2, MBLM
// invalid skip, repetition skip, Ranking2 reordering, radix-4 and radix-8 paths, MIPS Early-Skip,
// Diff-Reuse and Full-Compute, multi-core commands) and fails any that never
// did.
module tb_dspe_top;
  import dspe_pkg::*;
  import tb_posit_pkg::*;

  logic clk = 0, rst_n = 0;
  dspe_cfg_t cfg;
  logic cmd_valid = 0, cmd_ready, cmd_done;
  dspe_cmd_t cmd;
  logic host_en = 0, host_we = 0;
  mem_sel_e host_sel;
  logic [9:0] host_addr;
  logic [511:0] host_wdata, host_rdata;
  logic [15:0] stat_early [4], stat_diff [4], stat_full [4];
  logic [31:0] stat_mode [4][3];
  logic [15:0] stat_mblm_skip [4], stat_mblm_invalid [4], stat_mblm_r8 [4];
  int checks = 0, failures = 0;

  dspe_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hwrite(mem_sel_e s, int a, logic [511:0] d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_sel = s; host_addr = 10'(a); host_wdata = d;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic hread(mem_sel_e s, int a, output logic [511:0] d);
    @(negedge clk);
    host_en = 1; host_we = 0; host_sel = s; host_addr = 10'(a);
    @(negedge clk);
    host_en = 0;
    d = host_rdata;
  endtask

  task automatic run(cmd_op_e op, int mask, int sa, int sb, int dst, int ex, int idx, int cs, output int cyc);
    @(negedge clk);
    cmd = '0;
    cmd.op = op; cmd.core_mask = 4'(mask); cmd.src_a = 10'(sa); cmd.src_b = 10'(sb);
    cmd.dst = 10'(dst); cmd.expert = 3'(ex); cmd.index = 10'(idx); cmd.cos = 16'(cs);
    cmd.qk_sel = (sa >= 100);
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    while (!cmd_done) begin @(negedge clk); cyc++; end
  endtask

  function automatic logic [7:0] rand_posit(int lane);
    logic [7:0] p;
    case (lane % 5)
      0: p = 8'($urandom);
      1: p = 8'($urandom) & 8'hFC;       // low bits zero -> compressible
      2: p = 8'($urandom) & 8'hFE;
      3: p = (lane % 17 == 0) ? 8'h00 : 8'($urandom);
      default: p = 8'($urandom) | 8'h01;
    endcase
    return p;
  endfunction

  initial begin
    logic [511:0] w, d, q;
    logic [511:0] acts [4];
    int cyc, v0 [64];
    int mode_tot [3];
    int n_r4, n_r8, n_skip, n_inv, n_reord;
    cfg = CFG_DEFAULT;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- 1. DAPPM ----------------
    for (int i = 0; i < 64; i++) w[8*i +: 8] = rand_posit(i + 3);
    hwrite(MEM_WEIGHT, 0, w);
    for (int c = 0; c < 4; c++) begin
      for (int i = 0; i < 64; i++) acts[c][8*i +: 8] = rand_posit(i + c);
      hwrite(MEM_INPUT, c, acts[c]);
    end
    run(CMD_POSIT, 4'hF, 0, 0, 0, 0, 0, 0, cyc);
    $display("POSIT command, 4 cores x 64 lanes: %0d cycles", cyc);
    for (int c = 0; c < 4; c++) begin
      hread(MEM_OUTPUT, c, q);
      for (int i = 0; i < 64; i++) begin
        logic [7:0] a, b, y;
        a = acts[c][8*i +: 8]; b = w[8*i +: 8]; y = q[8*i +: 8];
        checks++;
        if (a == 8'h80 || b == 8'h80) begin
          if (y != 8'h80) failures++;
        end else if (a == 0 || b == 0) begin
          if (y != 0) failures++;
        end else if (!check_round(posit_val(a) * posit_val(b), y)) begin
          failures++;
          $display("core %0d lane %0d: %h * %h -> %h", c, i, a, b, y);
        end
      end
    end
    for (int m = 0; m < 3; m++) begin
      mode_tot[m] = 0;
      for (int c = 0; c < 4; c++) mode_tot[m] += int'(stat_mode[c][m]);
    end
    $display("DAPPM lane products: mode0 (16 PE) %0d, mode1 (9 PE) %0d, mode2 (4 PE) %0d",
             mode_tot[0], mode_tot[1], mode_tot[2]);

    // ---------------- 2. MBLM ----------------
    w = '0;
    w[7:0] = 8'sd57;
    hwrite(MEM_WEIGHT, 1, w);
    for (int c = 0; c < 4; c++) begin
      acts[c] = '0;
      acts[c][7:0] = 8'($urandom);
      for (int i = 1; i < 8; i++)
        case (c)
          0: acts[c][8*i +: 8] = 8'($urandom);
          1: acts[c][8*i +: 8] = (i % 3 == 0) ? 8'($urandom) : acts[c][8*(i-1) +: 8];
          2: acts[c][8*i +: 8] = 8'($signed($urandom_range(0, 6)) - 3);
          default: acts[c][8*i +: 8] = acts[c][8*(i-1) +: 8] ^ 8'(1 << $urandom_range(0, 1));
        endcase
      hwrite(MEM_INPUT, 8 + c, acts[c]);
    end
    run(CMD_MBLM, 4'hF, 8, 1, 16, 0, 0, 0, cyc);
    $display("MBLM command, 4 cores x 8 products: %0d cycles", cyc);
    n_r4 = 0; n_r8 = 0; n_skip = 0; n_inv = 0; n_reord = 0;
    for (int c = 0; c < 4; c++) begin
      hread(MEM_OUTPUT, 16 + c, q);
      for (int i = 0; i < 8; i++) begin
        int a, want;
        a = int'($signed(acts[c][8*i +: 8]));
        want = ((a < 0 ? -a : a) < int'(cfg.r_zero_act)) ? 0 : a * 57;
        checks++;
        if (int'($signed(q[16*i +: 16])) != want) begin
          failures++;
          $display("MBLM core %0d op %0d: %0d*57 -> %0d", c, i, a, $signed(q[16*i +: 16]));
        end
      end
      if (q[128]) n_r8++; else n_r4++;
      if (q[129]) n_reord++;
      n_inv  += int'(q[133:130]);
      n_skip += int'(q[137:134]);
    end
    $display("MBLM: radix-4 batches %0d, radix-8 batches %0d, invalid pairs %0d, repetition skips %0d",
             n_r4, n_r8, n_inv, n_skip);

    // ---------------- 3. MIPS, core 0 ----------------
    for (int k = 0; k < 8; k++) begin
      d = '0;
      for (int j = 0; j < 4; j++) d[8*(4*k + j) +: 8] = 8'd64;
      hwrite(MEM_PARAM, k, d);
    end
    for (int i = 0; i < 8; i++) begin
      d = '0;
      for (int j = 0; j < 16; j++) d[32*j +: 32] = 32'(1000 * i + j);
      hwrite(MEM_VALUE, i, d);
    end
    for (int i = 0; i < 8; i++) run(CMD_COS_WR, 4'hF, 0, 0, 0, 0, i, 16'h4000, cyc);
    for (int i = 0; i < 64; i++) v0[i] = $signed($urandom_range(0, 80)) - 40;
    for (int s = 0; s < 5; s++) begin
      d = '0;
      for (int i = 0; i < 64; i++) begin
        int x;
        x = v0[i];
        if (s == 1 || s == 3) x += (i % 4 == 0) ? 4 : 0;
        if (s == 2)           x += (i % 4 == 0) ? 8 : 0;
        if (s == 4)           x += 40;
        d[8*i +: 8] = 8'(x);
      end
      hwrite(MEM_QUERY, s, d);
    end
    begin
      int exp_dec [5], exp_idx [5];
      exp_dec = '{3, 3, 2, 1, 3};
      exp_idx = '{0, 1, 1, 1, 4};
      for (int s = 0; s < 5; s++) begin
        run(CMD_MIPS, 4'h1, s, 0, 32 + 2 * s, 0, s, 0, cyc);
        hread(MEM_OUTPUT, 32 + 2 * s, q);
        hread(MEM_OUTPUT, 33 + 2 * s, d);
        checks++;
        if (int'(q[1:0]) != exp_dec[s] || int'(q[13:4]) != exp_idx[s] ||
            int'(d[31:0]) != 1000 * exp_idx[s]) begin
          failures++;
          $display("MIPS step %0d: decision %0d idx %0d, want %0d idx %0d", s, q[1:0], q[13:4], exp_dec[s], exp_idx[s]);
        end
        $display("MIPS vector %0d: decision %0d at level %0d, result index %0d, %0d cycles",
                 s, q[1:0], q[3:2], q[13:4], cyc);
      end
    end

    // ---------------- 4. MIPS on all cores (Key SRAM) ----------------
    for (int c = 0; c < 4; c++) begin
      d = '0;
      for (int i = 0; i < 64; i++) d[8*i +: 8] = 8'($urandom);
      hwrite(MEM_KEY, 100 + c, d);
    end
    run(CMD_MIPS, 4'hF, 100, 0, 48, 1, 0, 0, cyc);
    $display("MIPS command on 4 cores: %0d cycles", cyc);
    for (int c = 0; c < 4; c++) begin
      hread(MEM_OUTPUT, 48 + 2 * c, q);
      checks++;
      if (int'(q[1:0]) != 3 || int'(q[13:4]) != c || !q[49]) failures++;
    end

    // ---------------- mechanism coverage ----------------
    begin
      int e, df, fu;
      e = 0; df = 0; fu = 0;
      for (int c = 0; c < 4; c++) begin
        e += int'(stat_early[c]); df += int'(stat_diff[c]); fu += int'(stat_full[c]);
      end
      $display("MIPS decisions: Early-Skip %0d, Diff-Reuse %0d, Full-Compute %0d", e, df, fu);
      checks += 11;
      $display("MBLM groups run in Ranking2 order: %0d", n_reord);
      if (n_reord == 0) failures++;
      if (mode_tot[0] == 0) failures++;
      if (mode_tot[1] == 0) failures++;
      if (mode_tot[2] == 0) failures++;
      if (n_r4 == 0) failures++;
      if (n_r8 == 0) failures++;
      if (n_inv == 0) failures++;
      if (n_skip == 0) failures++;
      if (e == 0) failures++;
      if (df == 0) failures++;
      if (fu != 7) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
