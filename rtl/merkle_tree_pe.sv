// merkle_tree_pe: MerkleTree PE of the MIPS (leaf compute, multi-branch
// up-layer compute, MerkleTree early decision, History-LUTs).
//
// Leaf compute: leaf i = (V_low[i] >>> LSH_SHIFT) + (cos >> 8), a grid
// (quantising) locality-sensitive hash of the projected component, offset by
// the cached cosine score of the vector. Up-layer compute: each node is
// Hash(Concat(left, right)) of its two children; here the hash is the
// modular sum of the children, chosen because the paper thresholds the
// numeric distance |H_cur - H_ref|, which is only meaningful for a hash that
// preserves locality. The tree has LEAVES leaves and log2(LEAVES) upper
// levels (8-4-2-1, as in the paper's Merkle-tree figure).
//
// Early decision, one tree level per cycle from the leaves up: at level i the
// level's delta-H is the sum over its nodes of |H_cur - H_ref,j| against the
// stored tree of the last Full-Compute of the same expert j. Then
//   delta-H <= T_zero                          -> Early-Skip, reuse the
//                                                 reference's result index;
//   T_zero < delta-H <= S_th and History-LUT_i hit -> Diff-Reuse, reuse the
//                                                 LUT's result index and stop
//                                                 building the tree;
//   otherwise continue; after the root        -> Full-Compute: the vector's
//                                                 own index is the result, the
//                                                 tree becomes expert j's
//                                                 reference, and (expert,
//                                                 delta-H(i), index) is written
//                                                 to every History-LUT_i.
// An expert without a reference always ends in Full-Compute. The decision
// rules are the paper's; the per-level sum of differences, the leaf and node
// hashes and the table sizes are this design's.
//
// Timing: start is sampled while idle; done pulses 3 + level cycles after
// the start cycle, where level (0 = leaves .. LEVELS-1 = root) is where the
// decision fell (6 cycles for a Full-Compute with 8 leaves). Outputs hold until the next
// start. root / root_valid give the complete root hash for offline checking;
// root_valid is low when the decision came before the root.
module merkle_tree_pe
  import dspe_pkg::*;
#(
  parameter int unsigned LEAVES    = 8,
  parameter int unsigned HW        = 16,
  parameter int unsigned VW        = 24,
  parameter int unsigned EXPERTS   = 8,
  parameter int unsigned IW        = 10,
  parameter int unsigned LUT_N     = 8,
  parameter int unsigned LSH_SHIFT = 8,
  localparam int unsigned LEVELS   = $clog2(LEAVES) + 1,
  localparam int unsigned NODES    = 2 * LEAVES - 1,
  localparam int unsigned EW       = $clog2(EXPERTS),
  localparam int unsigned DW       = HW + $clog2(LEAVES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [VW-1:0] vlow [LEAVES],
  input  logic [15:0]          cos,
  input  logic [EW-1:0]        expert,
  input  logic [IW-1:0]        tag,
  input  logic [DW-1:0]        t_zero,
  input  logic [DW-1:0]        s_th,
  output logic                 busy,
  output logic                 done,
  output mips_dec_e            decision,
  output logic [$clog2(LEVELS)-1:0] level,
  output logic [IW-1:0]        result_idx,
  output logic [DW-1:0]        delta_h,
  output logic [HW-1:0]        root,
  output logic                 root_valid
);

  typedef enum logic [1:0] {S_IDLE, S_LEAF, S_LEVEL} state_e;
  state_e state;

  logic [HW-1:0] node   [NODES];
  logic [HW-1:0] ref_t  [EXPERTS][NODES];
  logic          ref_v  [EXPERTS];
  logic [IW-1:0] ref_ix [EXPERTS];
  logic [DW-1:0] dh_l   [LEVELS];
  logic signed [VW-1:0] vlow_r [LEAVES];
  logic [15:0]   cos_r;
  logic [EW-1:0] exp_r;
  logic [IW-1:0] tag_r;
  logic [$clog2(LEVELS)-1:0] lvl;
  int unsigned   lvl_i;                 // lvl widened for the index arithmetic
  assign lvl_i = 32'(lvl);
  logic [DW-1:0] dh;
  logic          lut_hit [LEVELS];
  logic [IW-1:0] lut_idx [LEVELS];
  logic          lut_we;

  function automatic int unsigned level_off(int unsigned l);
    int unsigned o;
    o = 0;
    for (int unsigned m = 0; m < LEVELS; m++) if (m < l) o += LEAVES >> m;
    return o;
  endfunction

  function automatic int unsigned level_cnt(int unsigned l);
    return LEAVES >> l;
  endfunction

  // delta-H of the current level against the reference of the same expert
  always_comb begin
    dh = '0;
    for (int unsigned n = 0; n < LEAVES; n++) begin
      if (n < level_cnt(lvl_i)) begin
        if (node[level_off(lvl_i) + n] >= ref_t[exp_r][level_off(lvl_i) + n])
          dh = dh + DW'(node[level_off(lvl_i) + n] - ref_t[exp_r][level_off(lvl_i) + n]);
        else
          dh = dh + DW'(ref_t[exp_r][level_off(lvl_i) + n] - node[level_off(lvl_i) + n]);
      end
    end
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_lut
    history_lut #(.ENTRIES(LUT_N), .EW(EW), .DW(DW), .IW(IW)) u_lut (
      .clk(clk), .rst_n(rst_n),
      .q_expert(exp_r), .q_dh(dh), .hit(lut_hit[l]), .idx(lut_idx[l]),
      .we(lut_we), .w_expert(exp_r), .w_dh(dh_l[l]), .w_idx(tag_r));
  end

  logic last_level, is_full;
  assign last_level = (lvl == ($clog2(LEVELS))'(LEVELS - 1));
  // Full-Compute resolves in this cycle: no earlier exit taken at the root
  assign is_full = (state == S_LEVEL) && last_level &&
                   !(ref_v[exp_r] && (dh <= t_zero)) &&
                   !(ref_v[exp_r] && (dh > t_zero) && (dh <= s_th) && lut_hit[lvl]);
  // write the LUTs one cycle later, once dh_l[] holds the root level too
  logic lut_we_q;
  assign lut_we = lut_we_q;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      decision   <= DEC_NONE;
      level      <= '0;
      result_idx <= '0;
      delta_h    <= '0;
      root       <= '0;
      root_valid <= 1'b0;
      lvl        <= '0;
      cos_r      <= '0;
      exp_r      <= '0;
      tag_r      <= '0;
      lut_we_q   <= 1'b0;
      for (int n = 0; n < NODES; n++) node[n] <= '0;
      for (int l = 0; l < LEVELS; l++) dh_l[l] <= '0;
      for (int i = 0; i < LEAVES; i++) vlow_r[i] <= '0;
      for (int x = 0; x < EXPERTS; x++) begin
        ref_v[x]  <= 1'b0;
        ref_ix[x] <= '0;
        for (int n = 0; n < NODES; n++) ref_t[x][n] <= '0;
      end
    end else begin
      done     <= 1'b0;
      lut_we_q <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < LEAVES; i++) vlow_r[i] <= vlow[i];
          cos_r      <= cos;
          exp_r      <= expert;
          tag_r      <= tag;
          root_valid <= 1'b0;
          state      <= S_LEAF;
        end
        S_LEAF: begin                                // MerkleTree leaf compute
          for (int i = 0; i < LEAVES; i++)
            node[i] <= HW'(vlow_r[i] >>> LSH_SHIFT) + HW'(cos_r >> 8);
          lvl   <= '0;
          state <= S_LEVEL;
        end
        default: begin                               // S_LEVEL: early decision at lvl
          dh_l[lvl] <= dh;
          if (ref_v[exp_r] && (dh <= t_zero)) begin
            decision   <= DEC_EARLY;
            result_idx <= ref_ix[exp_r];
            level      <= lvl;
            delta_h    <= dh;
            done       <= 1'b1;
            state      <= S_IDLE;
          end else if (ref_v[exp_r] && (dh <= s_th) && lut_hit[lvl]) begin
            decision   <= DEC_DIFF;
            result_idx <= lut_idx[lvl];
            level      <= lvl;
            delta_h    <= dh;
            done       <= 1'b1;
            state      <= S_IDLE;
          end else if (is_full) begin
            decision   <= DEC_FULL;
            result_idx <= tag_r;
            level      <= lvl;
            delta_h    <= dh;
            root       <= node[NODES-1];
            root_valid <= 1'b1;
            lut_we_q   <= ref_v[exp_r];
            ref_v[exp_r]  <= 1'b1;
            ref_ix[exp_r] <= tag_r;
            for (int n = 0; n < NODES; n++) ref_t[exp_r][n] <= node[n];
            done       <= 1'b1;
            state      <= S_IDLE;
          end else begin
            // multi-branch up-layer compute: Hash(Concat(left, right))
            for (int unsigned n = 0; n < LEAVES / 2; n++)
              if (n < level_cnt(lvl_i) / 2)
                node[level_off(lvl_i + 1) + n] <= node[level_off(lvl_i) + 2*n] +
                                                node[level_off(lvl_i) + 2*n + 1];
            lvl <= lvl + 1'b1;
          end
        end
      endcase
    end
  end

endmodule
