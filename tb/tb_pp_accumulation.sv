// tb_pp_accumulation: random sets of 16 partial products; the CSA/CPA result
// must equal their arithmetic sum modulo 2^8.
module tb_pp_accumulation;
  logic [7:0] pp [16];
  logic [7:0] sum;
  int checks = 0, failures = 0;

  pp_accumulation #(.N_PP(16), .W(8)) dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    for (int i = 0; i < 3000; i++) begin
      s = 0;
      for (int p = 0; p < 16; p++) begin
        pp[p] = (i < 1000) ? 8'($urandom_range(0, 15)) : 8'($urandom);
        s += int'(pp[p]);
      end
      #1;
      checks++;
      if (int'(sum) != (s % 256)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
