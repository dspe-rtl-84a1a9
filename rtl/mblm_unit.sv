// mblm_unit: Multi-Stage Boothing Lookup Method, one batch of N_OPD INT8
// activations multiplied by one shared INT8 weight.
//
// Stages (paper Sec. 3.2 and its MBLM figure):
//  1. Invalid computation detector: pairs with |a| < R_zero_act or
//     |w| < R_zero_wgt are marked invalid; their product is 0 and no
//     multiplier work is done.
//  2. Sequence detector with the Booth BN: bit similarity and repeat length
//     give P_low / P_high and the redundancy score; score > 0.8 selects the
//     radix-8 extended path, otherwise the radix-4 regular path.
//  3. BVM / VST / Reorder of the selected path, then the comparator that picks
//     Ranking2 (Ranking2_R8) or Ranking1 as the execution order.
//  4. Execution in that order, one operand per cycle. Repetition detection:
//     the pair (previous executed operand, current operand) maps to one VST
//     entry; if its BV is at most t_match ("complete match" threshold) the
//     Booth encoding and partial products are skipped and the previous
//     product is reused. With t_match = 0 this is exact. The Booth-LUT holds,
//     per VST entry, the flip pattern and sequence index of the last
//     execution that used it; lut_hits counts pairs whose flip pattern
//     repeats the stored one.
//
// Timing: start is sampled while idle; done pulses 2 * N_OPD + 3 cycles later
// (19 cycles for N_OPD = 8: sorting N_OPD + 3, execution N_OPD). prod[] holds
// the products in the original operand positions until the next start.
//
// Lint note: the Booth BN features and probabilities (bs_sum, re_len, p_low,
// p_high), the comparator totals (tot1, tot2), the sorter busy flag, the
// per-product partial-product count and the stored Booth-LUT index are
// produced by the sub-blocks for observation but not needed by this unit's
// control, and cfg fields that belong to MIPS are not read here. They are
// left unconnected on purpose.
module mblm_unit #(
  parameter int unsigned N_OPD = 8,
  localparam int unsigned IW   = $clog2(N_OPD)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [7:0]   act [N_OPD],
  input  logic signed [7:0]   wgt,
  input  dspe_pkg::dspe_cfg_t cfg,
  output logic                busy,
  output logic                done,
  output logic signed [15:0]  prod [N_OPD],
  output logic                radix8,
  output logic [7:0]          score,
  output logic                reordered,
  output logic [3:0]          n_invalid,
  output logic [3:0]          n_skip,
  output logic [3:0]          n_mult,
  output logic [15:0]         lut_hits
);

  typedef enum logic [1:0] {S_IDLE, S_SORT, S_EXEC} state_e;
  state_e state;

  localparam int unsigned NPAIR = N_OPD * N_OPD;

  logic signed [7:0] act_r [N_OPD];
  logic signed [7:0] wgt_r;
  logic [N_OPD-1:0]  inv_c, inv_r;
  logic [7:0]        opd_u [N_OPD];
  logic [5:0]        bs_sum;
  logic [3:0]        re_len;
  logic [7:0]        p_low, p_high, score_c;
  logic              r8_c;
  logic              sort_busy, sort_done, use_r2;
  logic [IW-1:0]     order [N_OPD];
  logic [7:0]        tot1, tot2;
  logic [3:0]        bv [N_OPD][N_OPD];
  logic [IW:0]       t;
  logic [IW-1:0]     o, prv;
  logic              have_prv;
  logic signed [15:0] p_c;
  logic [2:0]        npp;

  // Booth-LUT: one entry per VST position (only i < j used)
  logic              lut_v   [NPAIR];
  logic [11:0]       lut_pat [NPAIR];
  logic [IW-1:0]     lut_idx [NPAIR];

  always_comb for (int i = 0; i < N_OPD; i++) opd_u[i] = act[i];

  invalid_detector #(.N_OPD(N_OPD)) u_det (
    .act(act), .wgt(wgt), .r_zero_act(cfg.r_zero_act), .r_zero_wgt(cfg.r_zero_wgt), .invalid(inv_c));

  booth_bn #(.N_OPD(N_OPD)) u_bn (
    .opd(opd_u), .bs_th(cfg.bs_th), .rl_th(cfg.rl_th), .bn_phigh(cfg.bn_phigh),
    .r_low(cfg.r_low), .r_high(cfg.r_high), .bs_sum(bs_sum), .re_length(re_len),
    .p_low(p_low), .p_high(p_high), .score(score_c), .radix8(r8_c));

  bvm_reorder #(.N_OPD(N_OPD)) u_sort (
    .clk(clk), .rst_n(rst_n), .start(start && state == S_IDLE), .opd(opd_u), .radix8(r8_c),
    .busy(sort_busy), .done(sort_done), .order(order), .use_r2(use_r2),
    .tot_r1(tot1), .tot_r2(tot2), .bv(bv));

  booth_multiplier u_mul (.a(act_r[o]), .w(wgt_r), .radix8(radix8), .p(p_c), .n_pp(npp));

  function automatic logic [11:0] windows(logic [7:0] v, logic r8);
    logic [8:0] x;
    x = {v, 1'b0};
    if (r8) return {3'b000, x};
    return {x[8:6], x[6:4], x[4:2], x[2:0]};
  endfunction

  function automatic int unsigned pair_idx(logic [IW-1:0] i, logic [IW-1:0] j);
    return (i < j) ? int'(i) * N_OPD + int'(j) : int'(j) * N_OPD + int'(i);
  endfunction

  assign o    = order[t[IW-1:0]];
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      radix8    <= 1'b0;
      score     <= '0;
      reordered <= 1'b0;
      inv_r     <= '0;
      wgt_r     <= '0;
      t         <= '0;
      prv       <= '0;
      have_prv  <= 1'b0;
      n_invalid <= '0;
      n_skip    <= '0;
      n_mult    <= '0;
      lut_hits  <= '0;
      for (int i = 0; i < N_OPD; i++) begin
        act_r[i] <= '0;
        prod[i]  <= '0;
      end
      for (int i = 0; i < NPAIR; i++) begin
        lut_v[i]   <= 1'b0;
        lut_pat[i] <= '0;
        lut_idx[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < N_OPD; i++) act_r[i] <= act[i];
          wgt_r     <= wgt;
          inv_r     <= inv_c;
          radix8    <= r8_c;
          score     <= score_c;
          n_invalid <= '0;
          n_skip    <= '0;
          n_mult    <= '0;
          state     <= S_SORT;
        end
        S_SORT: if (sort_done) begin
          reordered <= use_r2;
          t         <= '0;
          have_prv  <= 1'b0;
          state     <= S_EXEC;
        end
        default: begin                       // S_EXEC, one operand per cycle
          if (inv_r[o]) begin
            prod[o]   <= '0;
            n_invalid <= n_invalid + 4'd1;
          end else begin
            if (have_prv && (bv[prv][o] <= cfg.t_match)) begin
              prod[o] <= prod[prv];
              n_skip  <= n_skip + 4'd1;
            end else begin
              prod[o] <= p_c;
              n_mult  <= n_mult + 4'd1;
            end
            if (have_prv) begin
              if (lut_v[pair_idx(prv, o)] &&
                  lut_pat[pair_idx(prv, o)] == (windows(act_r[prv], radix8) ^ windows(act_r[o], radix8)))
                lut_hits <= lut_hits + 16'd1;
              lut_v[pair_idx(prv, o)]   <= 1'b1;
              lut_pat[pair_idx(prv, o)] <= windows(act_r[prv], radix8) ^ windows(act_r[o], radix8);
              lut_idx[pair_idx(prv, o)] <= t[IW-1:0];
            end
            prv      <= o;
            have_prv <= 1'b1;
          end
          t <= t + 1'b1;
          if (t == (IW+1)'(N_OPD - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
      endcase
    end
  end

endmodule
