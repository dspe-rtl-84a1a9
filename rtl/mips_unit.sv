// mips_unit: MerkleTree-based Incremental Pruning Scheme of one Attention
// Core.
//
// A Q/K vector (already reordered by the host-side Sequential Incremental
// Sorter) arrives with its sequence index and its expert. The Lite-MAC
// projects it with LOW parameter rows streamed from the Parameter Buffer; in
// parallel the Cos-SRAM is read at the vector's index to fetch the cosine
// score the sorter cached there. The MerkleTree PE then builds the tree and
// takes the Early-Skip / Diff-Reuse / Full-Compute decision. The statistics
// interface the paper reserves for offline checking is the three decision
// counters plus the root hash of each Full-Compute.
//
// Interface: cos_we/cos_addr/cos_wdata write the Cos-SRAM while the unit is
// idle. start (while idle) takes vec, expert and index; rows are then
// accepted on row_valid while row_ready is high. done pulses once with the
// decision; it comes 4 + level cycles after the cycle that accepts the last
// row (level = tree level where the decision fell).
//
// Lint note: the tree's busy flag is not needed because the unit's own state
// already covers the tree phase.
module mips_unit
  import dspe_pkg::*;
#(
  parameter int unsigned DIM     = 64,
  parameter int unsigned LOW     = 8,
  parameter int unsigned HW      = 16,
  parameter int unsigned EXPERTS = 8,
  parameter int unsigned IW      = 10,
  parameter int unsigned COS_DEPTH = 256,
  localparam int unsigned EW     = $clog2(EXPERTS),
  localparam int unsigned DW     = HW + $clog2(LOW),
  localparam int unsigned LEVELS = $clog2(LOW) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cos_we,
  input  logic [$clog2(COS_DEPTH)-1:0] cos_addr,
  input  logic [15:0]           cos_wdata,
  input  logic                  start,
  input  logic [8*DIM-1:0]      vec,
  input  logic [EW-1:0]         expert,
  input  logic [IW-1:0]         index,
  input  logic                  row_valid,
  input  logic [8*DIM-1:0]      row_data,
  output logic                  row_ready,
  input  logic [DW-1:0]         t_zero,
  input  logic [DW-1:0]         s_th,
  output logic                  busy,
  output logic                  done,
  output mips_dec_e             decision,
  output logic [$clog2(LEVELS)-1:0] level,
  output logic [IW-1:0]         result_idx,
  output logic [DW-1:0]         delta_h,
  output logic [HW-1:0]         root,
  output logic                  root_valid,
  output logic [15:0]           n_early,
  output logic [15:0]           n_diff,
  output logic [15:0]           n_full
);

  logic               active;
  logic               mac_done, tree_busy;
  logic signed [23:0] vlow [LOW];
  logic [15:0]        cos_q;
  logic [EW-1:0]      exp_r;
  logic [IW-1:0]      idx_r;

  sram_sp #(.DEPTH(COS_DEPTH), .WIDTH(16)) u_cos_sram (
    .clk(clk), .en((start && !active) || (cos_we && !active)), .we(!(start && !active)),
    .addr((start && !active) ? index[$clog2(COS_DEPTH)-1:0] : cos_addr),
    .wdata(cos_wdata), .rdata(cos_q));

  lite_mac #(.DIM(DIM), .LOW(LOW), .OW(24)) u_mac (
    .clk(clk), .rst_n(rst_n), .start(start && !active), .vec(vec),
    .row_valid(row_valid), .row_data(row_data), .row_ready(row_ready),
    .done(mac_done), .vlow(vlow));

  merkle_tree_pe #(.LEAVES(LOW), .HW(HW), .VW(24), .EXPERTS(EXPERTS), .IW(IW)) u_tree (
    .clk(clk), .rst_n(rst_n), .start(mac_done), .vlow(vlow), .cos(cos_q),
    .expert(exp_r), .tag(idx_r), .t_zero(t_zero), .s_th(s_th),
    .busy(tree_busy), .done(done), .decision(decision), .level(level),
    .result_idx(result_idx), .delta_h(delta_h), .root(root), .root_valid(root_valid));

  assign busy = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      exp_r   <= '0;
      idx_r   <= '0;
      n_early <= '0;
      n_diff  <= '0;
      n_full  <= '0;
    end else begin
      if (start && !active) begin
        active <= 1'b1;
        exp_r  <= expert;
        idx_r  <= index;
      end
      if (done) begin
        active <= 1'b0;
        case (decision)
          DEC_EARLY: n_early <= n_early + 16'd1;
          DEC_DIFF:  n_diff  <= n_diff + 16'd1;
          DEC_FULL:  n_full  <= n_full + 16'd1;
          default: ;
        endcase
      end
    end
  end

endmodule
