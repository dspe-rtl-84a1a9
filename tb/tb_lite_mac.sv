// tb_lite_mac: random INT8 vectors and projection rows, rows offered with
// random gaps; each vlow[k] must equal the integer dot product, and done
// must come one cycle after the last accepted row.
module tb_lite_mac;
  logic clk = 0, rst_n = 0, start = 0, row_valid = 0, row_ready, done;
  logic [511:0] vec, row_data;
  logic signed [23:0] vlow [8];
  int checks = 0, failures = 0;
  int rows [8][64];

  lite_mac #(.DIM(64), .LOW(8), .OW(24)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int want, v [64], k, cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      for (int i = 0; i < 64; i++) begin
        v[i] = (n == 0) ? -128 : $signed($urandom_range(0, 255)) - 128;
        vec[8*i +: 8] = 8'(v[i]);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      k = 0;
      while (k < 8) begin
        row_valid = ($urandom_range(0, 2) != 0);
        for (int i = 0; i < 64; i++) begin
          rows[k][i] = (n == 0) ? -128 : $signed($urandom_range(0, 255)) - 128;
          row_data[8*i +: 8] = 8'(rows[k][i]);
        end
        @(posedge clk);
        if (row_valid && row_ready) k++;
        @(negedge clk);
        row_valid = 0;
        if (k == 8) begin
          checks++;
          if (!done) failures++;
        end
      end
      for (int r = 0; r < 8; r++) begin
        want = 0;
        for (int i = 0; i < 64; i++) want += v[i] * rows[r][i];
        checks++;
        if (int'(vlow[r]) != want) begin
          failures++;
          $display("row %0d: %0d want %0d", r, vlow[r], want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
