// tb_attention_core: one Attention Core driven directly. A POSIT request (64
// lanes), an MBLM request and a MIPS request with its eight projection rows
// are sent back to back, so the units run at the same time and the oRouter
// must return all three results, each checked against an independent
// reference (real-valued posit product, integer products, decision rules).
// A second MIPS request with the same vector must be an Early-Skip.
module tb_attention_core;
  import dspe_pkg::*;
  import tb_posit_pkg::*;
  logic clk = 0, rst_n = 0;
  dspe_cfg_t cfg;
  logic req_valid = 0, req_ready, row_valid = 0, row_ready, cos_we = 0;
  core_req_t req;
  logic [511:0] row_data;
  logic [7:0] cos_addr;
  logic [15:0] cos_wdata;
  logic rsp_valid, rsp_ready = 0;
  core_rsp_t rsp;
  logic [15:0] n_early, n_diff, n_full, n_mblm_skip, n_mblm_invalid, n_mblm_r8;
  logic [31:0] n_mode [3];
  int checks = 0, failures = 0;

  attention_core #(.NUM_PE(64)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(core_req_t r);
    @(negedge clk); req = r; req_valid = 1;
    @(posedge clk); while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
  endtask

  task automatic rows();
    for (int k = 0; k < 8; k++) begin
      @(negedge clk);
      row_data = '0;
      for (int j = 0; j < 8; j++) row_data[8*(8*k + j) +: 8] = 8'd32;
      row_valid = 1;
      @(posedge clk); while (!row_ready) @(posedge clk);
    end
    @(negedge clk); row_valid = 0;
  endtask

  initial begin
    core_req_t rp, rm, rv;
    int seen [3];
    cfg = CFG_DEFAULT;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); cos_we = 1; cos_addr = 8'd5; cos_wdata = 16'h3000;
    @(negedge clk); cos_addr = 8'd9;
    @(negedge clk); cos_we = 0;
    rp = '0; rp.op = OP_POSIT;
    for (int i = 0; i < 64; i++) begin
      rp.data[8*i +: 8] = 8'($urandom);
      rp.wgt[8*i +: 8]  = 8'($urandom) & ((i % 3 == 0) ? 8'hFC : 8'hFF);
    end
    rm = '0; rm.op = OP_MBLM;
    for (int i = 0; i < 8; i++) rm.data[8*i +: 8] = (i < 4) ? 8'sd17 : 8'($urandom);
    rm.wgt[7:0] = 8'hD3;                       // -45
    rv = '0; rv.op = OP_MIPS; rv.expert = 3'd2; rv.index = 10'd5;
    for (int i = 0; i < 64; i++) rv.data[8*i +: 8] = 8'($urandom);
    send(rm);
    send(rp);
    send(rv);
    rows();
    seen = '{0, 0, 0};
    rsp_ready = 1;
    while (seen[0] + seen[1] + seen[2] < 3) begin
      @(posedge clk);
      if (rsp_valid) begin
        seen[rsp.op]++;
        checks++;
        case (rsp.op)
          OP_POSIT: for (int i = 0; i < 64; i++) begin
            logic [7:0] a, b, y;
            checks++;
            a = rp.data[8*i +: 8]; b = rp.wgt[8*i +: 8]; y = rsp.data[8*i +: 8];
            if (a == 8'h80 || b == 8'h80) begin if (y != 8'h80) failures++; end
            else if (a == 0 || b == 0) begin if (y != 0) failures++; end
            else if (!check_round(posit_val(a) * posit_val(b), y)) failures++;
          end
          OP_MBLM: for (int i = 0; i < 8; i++) begin
            int a, want;
            checks++;
            a = int'($signed(rm.data[8*i +: 8]));
            want = ((a < 0 ? -a : a) < 2) ? 0 : a * -45;
            if (int'($signed(rsp.data[16*i +: 16])) != want) begin failures++; $display("MBLM %0d: %0d want %0d", i, $signed(rsp.data[16*i +: 16]), want); end
          end
          default: if (rsp.data[1:0] != 2'd3 || rsp.data[13:4] != 10'd5 || !rsp.data[49]) begin failures++; $display("MIPS %h", rsp.data[49:0]); end
        endcase
      end
    end
    @(negedge clk); rsp_ready = 0;
    // same vector again: Early-Skip with the first result index
    rv.index = 10'd9;
    send(rv);
    rows();
    rsp_ready = 1;
    @(posedge clk); while (!rsp_valid) @(posedge clk);
    checks++;
    if (rsp.op != OP_MIPS || rsp.data[1:0] != 2'd1 || rsp.data[13:4] != 10'd5) failures++;
    @(negedge clk); rsp_ready = 0;
    checks++;
    if (n_early != 1 || n_full != 1 || n_mblm_skip == 0 || n_mode[0] + n_mode[1] + n_mode[2] != 64) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
