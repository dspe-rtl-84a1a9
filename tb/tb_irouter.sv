// tb_irouter: random requests for the three units while the units' free
// signals toggle at random. Every accepted request must leave exactly once,
// on the go line of the unit its tag names, only while that unit is free,
// with its payload intact and in order.
module tb_irouter;
  import dspe_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready;
  core_req_t req, out;
  logic mips_free, mblm_free, posit_free, mips_go, mblm_go, posit_go;
  int checks = 0, failures = 0;
  core_req_t q [$];
  int sent = 0, got = 0;

  irouter dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    mips_free  <= 1'($urandom);
    mblm_free  <= 1'($urandom);
    posit_free <= 1'($urandom);
  end

  always @(posedge clk) if (rst_n) begin
    if (mips_go || mblm_go || posit_go) begin
      core_req_t e;
      checks++;
      e = q.pop_front();
      got++;
      if ((int'(mips_go) + int'(mblm_go) + int'(posit_go)) != 1 || out != e ||
          (mips_go && (e.op != OP_MIPS || !mips_free)) ||
          (mblm_go && (e.op != OP_MBLM || !mblm_free)) ||
          (posit_go && (e.op != OP_POSIT || !posit_free))) failures++;
    end
    if (req_valid && req_ready) begin q.push_back(req); sent++; end
  end

  initial begin
    mips_free = 0; mblm_free = 0; posit_free = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      req_valid = 1'($urandom);
      req.op    = core_op_e'($urandom_range(0, 2));
      req.data  = {16{$urandom}};
      req.wgt   = {16{$urandom}};
      req.expert = 3'($urandom);
      req.index = 10'($urandom);
    end
    @(negedge clk); req_valid = 0;
    repeat (50) @(negedge clk);
    checks++;
    if (sent != got || sent < 100) failures++;
    $display("requests %0d routed %0d", sent, got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
