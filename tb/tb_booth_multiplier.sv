// tb_booth_multiplier: all 65536 signed operand pairs on both radices; the
// product must equal a * w, and radix-8 must never use more than 3 partial
// products (radix-4 at most 4).
module tb_booth_multiplier;
  logic signed [7:0] a, w;
  logic radix8;
  logic signed [15:0] p;
  logic [2:0] n_pp;
  int checks = 0, failures = 0;

  booth_multiplier dut (.*);

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 2; r++)
      for (int i = -128; i < 128; i++)
        for (int j = -128; j < 128; j++) begin
          a = 8'(i); w = 8'(j); radix8 = 1'(r);
          #1;
          checks++;
          if (int'(p) != i * j || int'(n_pp) > 4 - r) begin
            failures++;
            if (failures < 10) $display("r%0d %0d*%0d=%0d", r, i, j, p);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
