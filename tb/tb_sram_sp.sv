// tb_sram_sp: random reads and writes against an associative-array model at
// the Value SRAM size (768 x 512 bit); read data must arrive one cycle after
// the read and stay unchanged across writes and idle cycles.
module tb_sram_sp;
  logic clk = 0, en = 0, we = 0;
  logic [9:0] addr;
  logic [511:0] wdata, rdata;
  logic [511:0] model [int];
  int checks = 0, failures = 0;

  sram_sp #(.DEPTH(768), .WIDTH(512)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [511:0] rnd();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    logic [511:0] last;
    bit have_last = 0;   // rdata is undefined until the first read
    for (int a = 0; a < 768; a += 37) begin
      @(negedge clk); en = 1; we = 1; addr = 10'(a); wdata = rnd(); model[a] = wdata;
    end
    @(negedge clk); en = 0; we = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      addr = 10'($urandom_range(0, 20) * 37);
      en   = ($urandom_range(0, 3) != 0);
      we   = en && ($urandom_range(0, 2) == 0);
      wdata = rnd();
      @(posedge clk);
      #1;
      if (en && we) model[int'(addr)] = wdata;
      if (en && !we) begin
        checks++;
        if (rdata != model[int'(addr)]) failures++;
        last = rdata;
        have_last = 1;
      end else if (have_last) begin
        checks++;
        if (rdata != last) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
