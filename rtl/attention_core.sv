// attention_core: one of the four Attention Cores of the DSPE.
//
// Data path: iRouter -> {MIPS unit, MBLM unit, DAPPM PE array} -> oRouter.
// The DAPPM array has NUM_PE DA-Posit multiplier PE cores (64, the paper's PE
// count per core); one POSIT request multiplies 64 activation/weight pairs
// lane by lane, registered once, so its result is ready the cycle after the
// request leaves the iRouter. The MIPS unit takes its projection rows on the
// row_* port straight from the Parameter Buffer path, and its Cos-SRAM is
// written on the cos_* port. A unit counts as free only when it is idle and
// its oRouter holding register is empty.
//
// Statistics: the MIPS decision counters and, for the DAPPM, the number of
// lane products done in each mode (16 / 9 / 4 PEs).
//
// Lint note: the operation tag bits of the registered request, the MBLM
// redundancy score and Booth-LUT hit counter, and the per-lane active-PE
// count are not part of the result words and are left unused.
module attention_core
  import dspe_pkg::*;
#(
  parameter int unsigned NUM_PE = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  dspe_cfg_t            cfg,
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
  output core_rsp_t            rsp,
  output logic [15:0]          n_early,
  output logic [15:0]          n_diff,
  output logic [15:0]          n_full,
  output logic [31:0]          n_mode [3],
  output logic [15:0]          n_mblm_skip,
  output logic [15:0]          n_mblm_invalid,
  output logic [15:0]          n_mblm_r8
);

  core_req_t r;
  logic mips_go, mblm_go, posit_go;
  logic mips_free, mblm_free, posit_free;
  logic o_mips_free, o_mblm_free, o_posit_free;

  // MIPS
  logic        mips_busy, mips_done, root_valid;
  mips_dec_e   decision;
  logic [1:0]  level;
  logic [9:0]  result_idx;
  logic [18:0] delta_h;
  logic [15:0] root;

  // MBLM
  logic signed [7:0]  mb_act [8];
  logic               mblm_busy, mblm_done, radix8, reordered;
  logic signed [15:0] mb_prod [8];
  logic [7:0]         mb_score;
  logic [3:0]         mb_inv, mb_skip, mb_mult;
  logic [15:0]        mb_lut_hits;

  // DAPPM
  logic [WORD_BITS-1:0] p_act, p_wgt, p_prod;
  logic                 posit_done;
  logic [1:0]           lane_mode [NUM_PE];
  logic [4:0]           lane_pes  [NUM_PE];

  irouter u_irouter (
    .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready), .req(req),
    .mips_free(mips_free), .mblm_free(mblm_free), .posit_free(posit_free),
    .mips_go(mips_go), .mblm_go(mblm_go), .posit_go(posit_go), .out(r));

  assign mips_free  = !mips_busy && o_mips_free;
  assign mblm_free  = !mblm_busy && o_mblm_free;
  assign posit_free = !posit_done && o_posit_free;

  mips_unit u_mips (
    .clk(clk), .rst_n(rst_n), .cos_we(cos_we), .cos_addr(cos_addr), .cos_wdata(cos_wdata),
    .start(mips_go), .vec(r.data), .expert(r.expert), .index(r.index),
    .row_valid(row_valid), .row_data(row_data), .row_ready(row_ready),
    .t_zero(cfg.t_zero), .s_th(cfg.s_th), .busy(mips_busy), .done(mips_done),
    .decision(decision), .level(level), .result_idx(result_idx), .delta_h(delta_h),
    .root(root), .root_valid(root_valid), .n_early(n_early), .n_diff(n_diff), .n_full(n_full));

  always_comb for (int i = 0; i < 8; i++) mb_act[i] = r.data[8*i +: 8];

  mblm_unit u_mblm (
    .clk(clk), .rst_n(rst_n), .start(mblm_go), .act(mb_act), .wgt(r.wgt[7:0]), .cfg(cfg),
    .busy(mblm_busy), .done(mblm_done), .prod(mb_prod), .radix8(radix8), .score(mb_score),
    .reordered(reordered), .n_invalid(mb_inv), .n_skip(mb_skip), .n_mult(mb_mult),
    .lut_hits(mb_lut_hits));

  // DAPPM PE array
  for (genvar i = 0; i < NUM_PE; i++) begin : g_pe
    dappm_mult u_pe (.act(p_act[8*i +: 8]), .wgt(p_wgt[8*i +: 8]), .prod(p_prod[8*i +: 8]),
                     .mode(lane_mode[i]), .active_pes(lane_pes[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_act          <= '0;
      p_wgt          <= '0;
      posit_done     <= 1'b0;
      n_mode         <= '{default: '0};
      n_mblm_skip    <= '0;
      n_mblm_invalid <= '0;
      n_mblm_r8      <= '0;
    end else begin
      posit_done <= posit_go;
      if (posit_go) begin
        p_act <= r.data;
        p_wgt <= r.wgt;
      end
      if (posit_done) begin
        logic [31:0] c [3];
        c = n_mode;
        for (int i = 0; i < NUM_PE; i++) c[lane_mode[i]] = c[lane_mode[i]] + 32'd1;
        n_mode <= c;
      end
      if (mblm_done) begin
        n_mblm_skip    <= n_mblm_skip + 16'(mb_skip);
        n_mblm_invalid <= n_mblm_invalid + 16'(mb_inv);
        n_mblm_r8      <= n_mblm_r8 + 16'(radix8);
      end
    end
  end

  logic [WORD_BITS-1:0] mips_word, mblm_word;
  always_comb begin
    mips_word = '0;
    mips_word[49:0] = {root_valid, root, delta_h, result_idx, level, decision};
    mblm_word = '0;
    for (int i = 0; i < 8; i++) mblm_word[16*i +: 16] = mb_prod[i];
    mblm_word[141:128] = {mb_mult, mb_skip, mb_inv, reordered, radix8};
  end

  orouter u_orouter (
    .clk(clk), .rst_n(rst_n),
    .mips_done(mips_done), .mips_word(mips_word),
    .mblm_done(mblm_done), .mblm_word(mblm_word),
    .posit_done(posit_done), .posit_word(p_prod),
    .mips_free(o_mips_free), .mblm_free(o_mblm_free), .posit_free(o_posit_free),
    .rsp_valid(rsp_valid), .rsp_ready(rsp_ready), .rsp(rsp));

endmodule
