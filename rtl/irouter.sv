// irouter: input router of an Attention Core.
//
// Holds one request (operation tag, activation word, weight word, expert,
// index) in a single-entry buffer and forwards it to the unit the tag names:
// the MIPS, the MBLM or the DAPPM PE array. The entry is released in the
// cycle the target unit is free (its *_free input high), with a one-cycle
// *_go pulse; requests for a busy unit wait while the others keep running.
// For the MBLM the activations are bytes 0..7 of the data word and the
// shared weight is byte 0 of the weight word. Handshake: req is taken when
// req_valid and req_ready are both high; req_ready is high when the buffer is
// empty. The paper says only that the iRouter distributes activations and
// weights to the target PEs; the buffer and tags are this design's.
module irouter
  import dspe_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  core_req_t         req,
  input  logic              mips_free,
  input  logic              mblm_free,
  input  logic              posit_free,
  output logic              mips_go,
  output logic              mblm_go,
  output logic              posit_go,
  output core_req_t         out
);

  logic      full;
  core_req_t buf_q;
  logic      fire;

  assign req_ready = !full;
  assign out       = buf_q;
  assign mips_go   = full && (buf_q.op == OP_MIPS)  && mips_free;
  assign mblm_go   = full && (buf_q.op == OP_MBLM)  && mblm_free;
  assign posit_go  = full && (buf_q.op == OP_POSIT) && posit_free;
  assign fire      = mips_go || mblm_go || posit_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full  <= 1'b0;
      buf_q <= '0;
    end else begin
      if (req_valid && !full) begin
        buf_q <= req;
        full  <= 1'b1;
      end else if (fire) begin
        full  <= 1'b0;
      end
    end
  end

  // a request must name one of the three units
  a_op_known: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && req_ready) |-> (req.op != 2'd3));

endmodule
