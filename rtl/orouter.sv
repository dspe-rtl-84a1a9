// orouter: output router of an Attention Core.
//
// Each of the three units pulses its done signal once per operation; the
// oRouter captures the result word of each unit in its own holding register
// and offers the held results on one rsp_valid / rsp_ready stream, MIPS
// first, then MBLM, then DAPPM. A unit is reported free (*_free) only while
// its holding register is empty, so no result can be overwritten. Result
// word layouts (this design's):
//   MIPS : [1:0] decision, [3:2] level, [13:4] result index,
//          [32:14] delta-H, [48:33] root hash, [49] root valid
//   MBLM : [16*i +: 16] product i (i = 0..7), [128] radix-8 path,
//          [129] reordered, [133:130] invalid, [137:134] skipped,
//          [141:138] multiplied
//   DAPPM: [8*i +: 8] DA-Posit product of lane i (i = 0..63)
// The paper only names the oRouter.
module orouter
  import dspe_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 mips_done,
  input  logic [WORD_BITS-1:0] mips_word,
  input  logic                 mblm_done,
  input  logic [WORD_BITS-1:0] mblm_word,
  input  logic                 posit_done,
  input  logic [WORD_BITS-1:0] posit_word,
  output logic                 mips_free,
  output logic                 mblm_free,
  output logic                 posit_free,
  output logic                 rsp_valid,
  input  logic                 rsp_ready,
  output core_rsp_t            rsp
);

  logic [2:0]           held;
  logic [WORD_BITS-1:0] hold [3];
  logic [1:0]           sel;

  always_comb begin
    sel = held[0] ? 2'd0 : held[1] ? 2'd1 : 2'd2;
    rsp_valid = |held;
    rsp.op    = core_op_e'(sel);
    rsp.data  = hold[sel];
  end

  assign mips_free  = !held[0];
  assign mblm_free  = !held[1];
  assign posit_free = !held[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held <= '0;
      for (int i = 0; i < 3; i++) hold[i] <= '0;
    end else begin
      if (rsp_valid && rsp_ready) held[sel] <= 1'b0;
      if (mips_done)  begin held[0] <= 1'b1; hold[0] <= mips_word;  end
      if (mblm_done)  begin held[1] <= 1'b1; hold[1] <= mblm_word;  end
      if (posit_done) begin held[2] <= 1'b1; hold[2] <= posit_word; end
    end
  end

  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    !(mips_done && held[0] && !(rsp_valid && rsp_ready && sel == 2'd0)));

endmodule
