// pp_accumulation: carry-save adder tree plus carry-propagate adder that sums
// the partial products of the mode path (PP0..PP15 in the paper's figure).
//
// Each tree level groups the remaining operands in threes and replaces every
// group with a sum word and a shifted carry word (3:2 compressor); leftovers
// pass to the next level. When two words remain, one CPA adds them. For 16
// inputs this gives 6 CSA levels. The structure follows the figure ("CSA ...
// CSA ... CPA"); the grouping order is this design's. Combinational.
module pp_accumulation #(
  parameter int unsigned N_PP = 16,
  parameter int unsigned W    = 8
) (
  input  logic [W-1:0] pp [N_PP],
  output logic [W-1:0] sum
);

  localparam int unsigned MAX_LEVELS = 16;

  always_comb begin
    logic [W-1:0] cur [N_PP];
    logic [W-1:0] nxt [N_PP];
    int n, g, m;
    for (int i = 0; i < N_PP; i++) cur[i] = pp[i];
    n = N_PP;
    for (int lvl = 0; lvl < MAX_LEVELS; lvl++) begin
      if (n > 2) begin
        for (int i = 0; i < N_PP; i++) nxt[i] = '0;
        g = n / 3;
        m = 0;
        for (int t = 0; t < N_PP / 3; t++) begin
          if (t < g) begin
            nxt[m]   = cur[3*t] ^ cur[3*t+1] ^ cur[3*t+2];
            nxt[m+1] = ((cur[3*t] & cur[3*t+1]) | (cur[3*t] & cur[3*t+2]) |
                        (cur[3*t+1] & cur[3*t+2])) << 1;
            m = m + 2;
          end
        end
        for (int r = 0; r < N_PP; r++) begin
          if ((r >= 3*g) && (r < n)) begin
            nxt[m] = cur[r];
            m = m + 1;
          end
        end
        n = m;
        for (int i = 0; i < N_PP; i++) cur[i] = nxt[i];
      end
    end
    sum = (n > 1) ? (cur[0] + cur[1]) : cur[0];
  end

endmodule
