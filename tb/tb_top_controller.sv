// tb_top_controller: the Top Controller with the seven real memories and four
// behavioural core stand-ins (tb_core_stub). Runs CMD_POSIT, CMD_MBLM and
// CMD_MIPS with different core masks plus CMD_COS_WR, then reads the Output
// Buffer through the host port and checks every word: broadcast weight,
// per-core activation addresses, MIPS row delivery, the Value SRAM row copied
// at the returned index, and the Cos-SRAM writes.
module tb_top_controller;
  import dspe_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_done;
  dspe_cmd_t cmd;
  logic host_en = 0, host_we = 0;
  mem_sel_e host_sel;
  logic [9:0] host_addr;
  logic [511:0] host_wdata, host_rdata;
  logic mem_en [7], mem_we [7];
  logic [9:0] mem_addr [7];
  logic [511:0] mem_wdata, mem_rdata [7];
  logic req_valid [4], req_ready [4], row_valid [4], row_ready [4], cos_we [4];
  logic rsp_valid [4], rsp_ready [4];
  core_req_t req;
  core_rsp_t rsp [4];
  logic [511:0] row_data;
  logic [7:0] cos_addr;
  logic [15:0] cos_wdata;
  int checks = 0, failures = 0;

  top_controller #(.NUM_CORES(4), .LOW(8), .NUM_MEMS(7)) dut (.*);

  for (genvar m = 0; m < 7; m++) begin : g_mem
    sram_sp #(.DEPTH(768), .WIDTH(512)) u_mem (.clk(clk), .en(mem_en[m]), .we(mem_we[m]),
      .addr(mem_addr[m]), .wdata(mem_wdata), .rdata(mem_rdata[m]));
  end
  for (genvar c = 0; c < 4; c++) begin : g_core
    tb_core_stub u_core (.clk(clk), .rst_n(rst_n), .req_valid(req_valid[c]), .req_ready(req_ready[c]),
      .req(req), .row_valid(row_valid[c]), .row_data(row_data), .row_ready(row_ready[c]),
      .cos_we(cos_we[c]), .cos_addr(cos_addr), .cos_wdata(cos_wdata),
      .rsp_valid(rsp_valid[c]), .rsp_ready(rsp_ready[c]), .rsp(rsp[c]));
  end

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [511:0] pat(int s, int a);
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = 32'(s * 7919 + a * 104729 + i * 13);
    return v;
  endfunction

  task automatic hwrite(mem_sel_e s, int a, logic [511:0] d);
    @(negedge clk); host_en = 1; host_we = 1; host_sel = s; host_addr = 10'(a); host_wdata = d;
    @(negedge clk); host_en = 0; host_we = 0;
  endtask
  task automatic hread(mem_sel_e s, int a, output logic [511:0] d);
    @(negedge clk); host_en = 1; host_we = 0; host_sel = s; host_addr = 10'(a);
    @(negedge clk); host_en = 0; d = host_rdata;
  endtask
  task automatic run(cmd_op_e op, int mask, int sa, int sb, int dst, int idx, bit qk);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.core_mask = 4'(mask); cmd.src_a = 10'(sa); cmd.src_b = 10'(sb);
    cmd.dst = 10'(dst); cmd.index = 10'(idx); cmd.qk_sel = qk; cmd.cos = 16'hBEEF;
    cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
  endtask

  initial begin
    logic [511:0] q, rows_x;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 12; a++)
      for (int m = 0; m < 6; m++) hwrite(mem_sel_e'(m), a, pat(m, a));
    // POSIT on cores 0, 2, 3
    run(CMD_POSIT, 4'b1101, 2, 5, 20, 0, 0);
    for (int c = 0; c < 4; c++) if (c != 1) begin
      hread(MEM_OUTPUT, 20 + c, q);
      checks++;
      if (q != (pat(MEM_INPUT, 2 + c) ^ pat(MEM_WEIGHT, 5))) failures++;
    end
    // MBLM on core 1
    run(CMD_MBLM, 4'b0010, 7, 3, 30, 0, 0);
    hread(MEM_OUTPUT, 31, q);
    checks++;
    if (q != (pat(MEM_INPUT, 8) ^ pat(MEM_WEIGHT, 3))) failures++;
    // MIPS on all cores, Key SRAM, rows from Param[1..8]
    rows_x = '0;
    for (int k = 0; k < 8; k++) rows_x ^= pat(MEM_PARAM, 1 + k);
    run(CMD_MIPS, 4'hF, 0, 1, 40, 0, 1);
    for (int c = 0; c < 4; c++) begin
      hread(MEM_OUTPUT, 40 + 2 * c, q);
      checks++;
      if (q[511:64] != rows_x[511:64] || q[13:4] != 10'(c ^ 3)) failures++;
      hread(MEM_OUTPUT, 41 + 2 * c, q);
      checks++;
      if (q != pat(MEM_VALUE, c ^ 3)) failures++;
    end
    // Cos-SRAM write to cores 1 and 3
    run(CMD_COS_WR, 4'b1010, 0, 0, 0, 17, 0);
    checks++;
    if (g_core[1].u_core.cos_mem[17] != 16'hBEEF || g_core[3].u_core.cos_mem[17] != 16'hBEEF) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
