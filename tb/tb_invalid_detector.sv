// tb_invalid_detector: random signed operands and thresholds, with values
// near zero and -128 favoured; every flag is compared with |a| < R_act or
// |w| < R_wgt evaluated on integers.
module tb_invalid_detector;
  logic signed [7:0] act [8];
  logic signed [7:0] wgt;
  logic [7:0] r_zero_act, r_zero_wgt;
  logic [7:0] invalid;
  int checks = 0, failures = 0, n_inv = 0;

  invalid_detector #(.N_OPD(8)) dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [7:0] pick();
    case ($urandom_range(0, 3))
      0: return 8'($signed($urandom_range(0, 8)) - 4);
      1: return 8'sh80;
      default: return 8'($urandom);
    endcase
  endfunction

  initial begin
    int aa, wa;
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 8; i++) act[i] = pick();
      wgt = pick();
      r_zero_act = 8'($urandom_range(0, 5));
      r_zero_wgt = (n % 50 == 0) ? 8'd200 : 8'($urandom_range(0, 3));
      #1;
      wa = (int'(wgt) < 0) ? -int'(wgt) : int'(wgt);
      for (int i = 0; i < 8; i++) begin
        aa = (int'(act[i]) < 0) ? -int'(act[i]) : int'(act[i]);
        checks++;
        if (invalid[i] != ((aa < int'(r_zero_act)) || (wa < int'(r_zero_wgt)))) failures++;
        if (invalid[i]) n_inv++;
      end
    end
    checks++;
    if (n_inv == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
