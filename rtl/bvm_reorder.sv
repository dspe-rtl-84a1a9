// bvm_reorder: Bit-Variation Matrix, Variation Simplified Triangle and
// operand reorder of one MBLM Boothing path.
//
// Every operand is cut into the Booth windows of the selected path: radix-4
// uses 3-bit windows with stride 2 over {a, 0} (4 windows, 12 bits), radix-8
// 3-bit windows with stride 3 (3 windows, 9 bits), as printed in the paper's
// MBLM figure. BV(i, j) is the number of differing window bits between
// operands i and j. Only the entries with i < j are stored: the diagonal
// ("A and A") and the mirrored half ("B and A") are the two redundancies the
// paper removes, leaving the VST (28 entries for 8 operands).
// Reorder: starting from O0, the next operand is the unvisited one with the
// smallest BV to the current one (lowest index on ties), one step per cycle,
// giving Ranking2 (Ranking2_R8 on the radix-8 path). The final comparator
// keeps Ranking2 if its summed adjacent BV is smaller than that of Ranking1
// (the arrival order), otherwise Ranking1. The greedy search is this design's
// choice; the paper does not give the reorder algorithm.
//
// Timing: start is sampled in S_IDLE; done pulses N_OPD + 2 cycles after
// start, with order, totals and the VST valid from then until the next start.
module bvm_reorder #(
  parameter int unsigned N_OPD = 8,
  localparam int unsigned IW   = $clog2(N_OPD)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [7:0]           opd [N_OPD],
  input  logic                 radix8,
  output logic                 busy,
  output logic                 done,
  output logic [IW-1:0]        order [N_OPD],
  output logic                 use_r2,
  output logic [7:0]           tot_r1,
  output logic [7:0]           tot_r2,
  output logic [3:0]           bv [N_OPD][N_OPD]   // symmetric view of the VST
);

  typedef enum logic [1:0] {S_IDLE, S_BVM, S_STEP, S_CMP} state_e;
  state_e state;

  logic [7:0]    opd_r [N_OPD];
  logic          r8_r;
  logic [3:0]    vst   [N_OPD][N_OPD];     // only [i][j], i < j, is written
  logic [N_OPD-1:0] visited;
  logic [IW-1:0] cur;
  logic [IW-1:0] ord2 [N_OPD];
  logic [IW:0]   step;
  logic [IW-1:0] best;
  logic [3:0]    best_bv;

  function automatic logic [11:0] windows(logic [7:0] v, logic r8);
    logic [8:0] x;
    x = {v, 1'b0};
    if (r8) return {3'b000, x};
    return {x[8:6], x[6:4], x[4:2], x[2:0]};
  endfunction

  always_comb begin
    for (int i = 0; i < N_OPD; i++)
      for (int j = 0; j < N_OPD; j++)
        if (i < j)      bv[i][j] = vst[i][j];
        else if (i > j) bv[i][j] = vst[j][i];
        else            bv[i][j] = '0;
  end

  always_comb begin
    best    = '0;
    best_bv = 4'hF;
    for (int j = N_OPD - 1; j >= 0; j--) begin
      if (!visited[j] && (bv[cur][j] <= best_bv)) begin
        best    = IW'(j);
        best_bv = bv[cur][j];
      end
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      use_r2  <= 1'b0;
      tot_r1  <= '0;
      tot_r2  <= '0;
      visited <= '0;
      cur     <= '0;
      step    <= '0;
      r8_r    <= 1'b0;
      for (int i = 0; i < N_OPD; i++) begin
        opd_r[i] <= '0;
        ord2[i]  <= '0;
        order[i] <= IW'(i);
        for (int j = 0; j < N_OPD; j++) vst[i][j] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < N_OPD; i++) opd_r[i] <= opd[i];
          r8_r  <= radix8;
          state <= S_BVM;
        end
        S_BVM: begin
          for (int i = 0; i < N_OPD; i++)
            for (int j = i + 1; j < N_OPD; j++)
              vst[i][j] <= 4'($countones(windows(opd_r[i], r8_r) ^ windows(opd_r[j], r8_r)));
          visited <= {{(N_OPD-1){1'b0}}, 1'b1};
          ord2[0] <= '0;
          cur     <= '0;
          step    <= 1;
          tot_r2  <= '0;
          state   <= S_STEP;
        end
        S_STEP: begin
          ord2[step[IW-1:0]] <= best;
          visited[best]      <= 1'b1;
          cur                <= best;
          tot_r2             <= tot_r2 + 8'(best_bv);
          step               <= step + 1'b1;
          if (step == (IW+1)'(N_OPD - 1)) state <= S_CMP;
        end
        default: begin                       // S_CMP
          logic [7:0] t1;
          t1 = '0;
          for (int i = 1; i < N_OPD; i++) t1 = t1 + 8'(bv[i-1][i]);
          tot_r1 <= t1;
          use_r2 <= (tot_r2 < t1);
          for (int i = 0; i < N_OPD; i++) order[i] <= (tot_r2 < t1) ? ord2[i] : IW'(i);
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

endmodule
