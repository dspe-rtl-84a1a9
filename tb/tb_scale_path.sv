// tb_scale_path: every significand product in [1, 4) with random exponents;
// the normalised value 2^(E_out) * (1 + frac/128) must equal
// 2^(E_act + E_wgt) * p / 64, dE must be set exactly when p >= 2, and k*/e*
// must split E_out as 4k* + e*.
module tb_scale_path;
  import tb_posit_pkg::*;
  logic [7:0] p;
  logic signed [6:0] e_act, e_wgt;
  logic [6:0] frac;
  logic de;
  logic signed [7:0] e_out;
  logic signed [5:0] k_out;
  logic [1:0] e_low;
  int checks = 0, failures = 0;

  scale_path dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real want, got;
    for (int i = 64; i < 256; i++) begin
      for (int r = 0; r < 8; r++) begin
        p     = 8'(i);
        e_act = 7'($signed($urandom_range(0, 48)) - 24);
        e_wgt = 7'($signed($urandom_range(0, 48)) - 24);
        #1;
        want = pow2(int'(e_act) + int'(e_wgt)) * real'(p) / 64.0;
        got  = pow2(int'(e_out)) * (1.0 + real'(frac) / 128.0);
        checks++;
        if (want != got || de != (i >= 128) || int'(e_out) != 4 * int'(k_out) + int'(e_low)) begin
          failures++;
          if (failures < 10) $display("p=%h ea=%0d ew=%0d -> eo=%0d f=%h", p, e_act, e_wgt, e_out, frac);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
