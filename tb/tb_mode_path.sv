// tb_mode_path: for random significands and operand modes, the sum of the
// weighted partial-product bits must equal the product of the two
// significands with their low 'mode' bits cleared, the pair mode must be the
// smaller operand mode, and the active PE count must be 16, 9 or 4.
module tb_mode_path;
  logic [3:0] sig_a, sig_w;
  logic [1:0] mode_a, mode_w, mode;
  logic [7:0] pp [16];
  logic [4:0] active_pes;
  int checks = 0, failures = 0;

  mode_path #(.FB(4)) dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, em, ma, mw, pes [3];
    pes = '{16, 9, 4};
    for (int i = 0; i < 3000; i++) begin
      sig_a  = 4'($urandom);
      sig_w  = 4'($urandom);
      mode_a = 2'($urandom_range(0, 2));
      mode_w = 2'($urandom_range(0, 2));
      #1;
      em = (mode_a < mode_w) ? int'(mode_a) : int'(mode_w);
      ma = (int'(sig_a) >> em) << em;
      mw = (int'(sig_w) >> em) << em;
      s = 0;
      for (int p = 0; p < 16; p++) s += int'(pp[p]);
      checks++;
      if (s != ma * mw || int'(mode) != em || int'(active_pes) != pes[em]) begin
        failures++;
        if (failures < 10) $display("a=%h w=%h m=%0d sum=%0d", sig_a, sig_w, em, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
