// tb_orouter: the three units report results at random times (only while
// their free line is high), the consumer accepts at random. Every result
// must come out exactly once, tagged with its unit, in per-unit order, and
// MIPS must win over MBLM and DAPPM when several are held.
module tb_orouter;
  import dspe_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mips_done = 0, mblm_done = 0, posit_done = 0;
  logic [511:0] mips_word, mblm_word, posit_word;
  logic mips_free, mblm_free, posit_free, rsp_valid, rsp_ready = 0;
  core_rsp_t rsp;
  logic [511:0] q [3][$];
  int checks = 0, failures = 0, nin = 0, nout = 0;

  orouter dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (rsp_valid && rsp_ready) begin
      logic [511:0] e;
      checks++;
      nout++;
      if (q[rsp.op].size() == 0) failures++;
      else begin
        e = q[rsp.op].pop_front();
        if (rsp.data != e) failures++;
      end
      if (rsp.op != OP_MIPS && !mips_free) failures++;
    end
    if (mips_done)  begin q[0].push_back(mips_word);  nin++; end
    if (mblm_done)  begin q[1].push_back(mblm_word);  nin++; end
    if (posit_done) begin q[2].push_back(posit_word); nin++; end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      mips_done  = mips_free  && ($urandom_range(0, 3) == 0);
      mblm_done  = mblm_free  && ($urandom_range(0, 3) == 0);
      posit_done = posit_free && ($urandom_range(0, 3) == 0);
      mips_word  = {16{$urandom}};
      mblm_word  = {16{$urandom}};
      posit_word = {16{$urandom}};
      rsp_ready  = 1'($urandom);
    end
    @(negedge clk); mips_done = 0; mblm_done = 0; posit_done = 0; rsp_ready = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (nin != nout || nin < 100) failures++;
    $display("results in %0d out %0d", nin, nout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
