// tb_da_posit_decoder: all 256 codes are decoded and the fields are
// recombined as (-1)^s * 2^E * sig/8, which must equal the value of the code
// computed bit by bit in tb_posit_pkg. E must equal 4k + e, and the mode and
// Dyn-field width must match the trailing zeros of the significand.
module tb_da_posit_decoder;
  import tb_posit_pkg::*;
  logic [7:0] x;
  logic is_zero, is_nar, sign;
  logic signed [4:0] k;
  logic [1:0] e, mode;
  logic signed [6:0] big_e;
  logic [3:0] sig;
  logic [2:0] dyn_w;
  int checks = 0, failures = 0;

  da_posit_decoder dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v;
    int em;
    for (int i = 0; i < 256; i++) begin
      x = 8'(i);
      #1;
      checks++;
      if (i == 0) begin
        if (!is_zero || is_nar) failures++;
      end else if (i == 128) begin
        if (!is_nar || is_zero) failures++;
      end else begin
        v = (sign ? -1.0 : 1.0) * pow2(int'(big_e)) * real'(sig) / 8.0;
        if (v != posit_val(x) || is_zero || is_nar || int'(big_e) != 4 * int'(k) + int'(e)) begin
          failures++;
          $display("decode %h: s=%0d k=%0d e=%0d sig=%h", x, sign, k, e, sig);
        end
        checks++;
        em = (sig[1:0] == 0) ? 2 : (sig[0] == 0) ? 1 : 0;
        if (int'(mode) != em || int'(dyn_w) != 4 - em) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
