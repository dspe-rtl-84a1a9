// tb_da_posit_encoder: random (sign, k, e, fraction) tuples, including ones
// beyond the posit range, are encoded; the code must be an acceptable
// rounding of the exact value (-1)^s * 2^(4k+e) * (1 + frac/128). Zero and
// NaR flags are checked too.
module tb_da_posit_encoder;
  import tb_posit_pkg::*;
  logic sign, zero, nar;
  logic signed [5:0] k;
  logic [1:0] e;
  logic [6:0] frac;
  logic [7:0] y;
  int checks = 0, failures = 0;

  da_posit_encoder dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v;
    zero = 0; nar = 0;
    for (int i = 0; i < 4000; i++) begin
      sign = 1'($urandom);
      k    = 6'($signed($urandom_range(0, 19)) - 9);
      e    = 2'($urandom);
      frac = 7'($urandom);
      #1;
      v = (sign ? -1.0 : 1.0) * pow2(4 * int'(k) + int'(e)) * (1.0 + real'(frac) / 128.0);
      checks++;
      if (!check_round(v, y)) begin
        failures++;
        if (failures < 10) $display("encode s=%0d k=%0d e=%0d f=%h -> %h", sign, k, e, frac, y);
      end
    end
    zero = 1; #1; checks++; if (y != 8'h00) failures++;
    nar = 1;  #1; checks++; if (y != 8'h80) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
