// tb_dappm_mult: exhaustive check of the DA-Posit multiplier PE core.
// All 65536 operand pairs are applied. The product is compared with the
// exact real product rounded by the rules in tb_posit_pkg; the pair mode and
// PE count are compared with values derived from the operands' real values.
module tb_dappm_mult;
  import tb_posit_pkg::*;

  logic [7:0] act, wgt, prod;
  logic [1:0] mode;
  logic [4:0] active_pes;
  int checks = 0, failures = 0;
  int mode_seen [3];

  dappm_mult dut (.act(act), .wgt(wgt), .prod(prod), .mode(mode), .active_pes(active_pes));

  function automatic int tz_mode(logic [7:0] x);
    real v, s;
    int f3;
    if (x == 8'h00 || x == 8'h80) return 2;
    v  = posit_val(x);
    if (v < 0.0) v = -v;
    s  = v / pow2(floor_log2(v));          // 1.fff
    f3 = int'((s - 1.0) * 8.0);
    if ((f3 % 4) == 0) return 2;
    if ((f3 % 2) == 0) return 1;
    return 0;
  endfunction

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int em, ma, mw;
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        act = 8'(i);
        wgt = 8'(j);
        #1;
        checks++;
        if (act == 8'h80 || wgt == 8'h80) begin
          if (prod != 8'h80) failures++;
        end else if (act == 8'h00 || wgt == 8'h00) begin
          if (prod != 8'h00) failures++;
        end else if (!check_round(posit_val(act) * posit_val(wgt), prod)) begin
          failures++;
          if (failures < 10) $display("mismatch %h * %h -> %h", act, wgt, prod);
        end
        ma = tz_mode(act);
        mw = tz_mode(wgt);
        em = (ma < mw) ? ma : mw;
        checks++;
        if (int'(mode) != em || int'(active_pes) != (4 - em) * (4 - em)) begin
          failures++;
          if (failures < 10) $display("mode %h * %h -> %0d/%0d want %0d", act, wgt, mode, active_pes, em);
        end
        mode_seen[mode]++;
      end
    end
    for (int m = 0; m < 3; m++) begin
      checks++;
      if (mode_seen[m] == 0) failures++;
    end
    $display("modes used: 16 PEs %0d, 9 PEs %0d, 4 PEs %0d", mode_seen[0], mode_seen[1], mode_seen[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
