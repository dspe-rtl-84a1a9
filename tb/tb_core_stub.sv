// tb_core_stub: behavioural stand-in for an Attention Core, used only to
// test the Top Controller. It accepts one request, takes eight parameter rows
// for MIPS requests, waits a random number of cycles and answers:
//   POSIT / MBLM: data ^ wgt
//   MIPS        : [1:0] = 3, [13:4] = index ^ 3, [511:64] = XOR of the rows
// Cos-SRAM writes are stored in cos_mem for the testbench to inspect.
module tb_core_stub
  import dspe_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  core_req_t            req,
  input  logic                 row_valid,
  input  logic [WORD_BITS-1:0] row_data,
  output logic                 row_ready,
  input  logic                 cos_we,
  input  logic [7:0]           cos_addr,
  input  logic [15:0]          cos_wdata,
  output logic                 rsp_valid,
  input  logic                 rsp_ready,
  output core_rsp_t            rsp
);
  logic [15:0] cos_mem [256];
  core_req_t   r;
  int          rows_left, delay;
  logic        full;
  logic [WORD_BITS-1:0] rx;

  assign req_ready = !full;
  assign row_ready = full && (rows_left > 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= 0; rsp_valid <= 0; rows_left <= 0; delay <= 0; rx <= '0; r <= '0; rsp <= '0;
    end else begin
      if (cos_we) cos_mem[cos_addr] <= cos_wdata;
      if (!full && req_valid) begin
        full <= 1; r <= req; rx <= '0;
        rows_left <= (req.op == OP_MIPS) ? 8 : 0;
        delay <= $urandom_range(1, 6);
      end else if (full && !rsp_valid) begin
        if (rows_left > 0) begin
          if (row_valid) begin rx <= rx ^ row_data; rows_left <= rows_left - 1; end
        end else if (delay > 0) delay <= delay - 1;
        else begin
          rsp_valid <= 1;
          rsp.op <= r.op;
          if (r.op == OP_MIPS) begin
            rsp.data <= {rx[511:64], 50'b0, r.index ^ 10'd3, 2'b0, 2'd3};
          end else rsp.data <= r.data ^ r.wgt;
        end
      end else if (rsp_valid && rsp_ready) begin
        rsp_valid <= 0; full <= 0;
      end
    end
  end
endmodule
