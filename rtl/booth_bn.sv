// booth_bn: MBLM sequence detector with the Booth Bayesian-network classifier.
//
// Features (paper Sec. 3.2): for each pair of adjacent operands the bit
// variation BV = popcount(a[i] ^ a[i-1]) gives the bit similarity
// BS = 1 - BV/8 (Eq. 4); the sum of 8 - BV over the 7 pairs (8 * sum of BS)
// is compared with bs_th, and the repeat length (longest run of identical
// adjacent operands) with rl_th. These two binary observations index a
// four-entry table of P(R = High), which is the inference result of the
// network for that evidence; P(R = Low) = 1 - P(R = High). The redundancy
// score of Eq. 5, r_L * P_low + r_H * P_high, is formed in Q0.8 and compared
// with 0.8 (205/256): above it the radix-8 extended path is chosen, otherwise
// the radix-4 regular path. The network's structure and tables are not in the
// paper; the binary discretisation and the programmable table are this
// design's. Combinational.
//
// Lint note: the low byte of the Q0.16 score product is dropped by the >> 8
// rescale, so it is unused.
module booth_bn #(
  parameter int unsigned N_OPD    = 8,
  parameter logic [7:0]  SCORE_TH = 8'd205   // 0.8 in Q0.8
) (
  input  logic [7:0]       opd [N_OPD],
  input  logic [5:0]       bs_th,
  input  logic [3:0]       rl_th,
  input  logic [3:0][7:0]  bn_phigh,
  input  logic [7:0]       r_low,
  input  logic [7:0]       r_high,
  output logic [5:0]       bs_sum,     // sum of (8 - BV) over adjacent pairs
  output logic [3:0]       re_length,
  output logic [7:0]       p_low,
  output logic [7:0]       p_high,
  output logic [7:0]       score,
  output logic             radix8
);

  logic [3:0] run;
  logic [1:0] idx;
  logic [16:0] acc;

  always_comb begin
    bs_sum    = '0;
    run       = 4'd1;
    re_length = 4'd1;
    for (int i = 1; i < N_OPD; i++) begin
      bs_sum = bs_sum + 6'(4'd8 - 4'($countones(opd[i] ^ opd[i-1])));
      if (opd[i] == opd[i-1]) run = run + 4'd1;
      else                    run = 4'd1;
      if (run > re_length) re_length = run;
    end
    idx    = {bs_sum >= bs_th, re_length >= rl_th};
    p_high = bn_phigh[idx];
    p_low  = 8'd255 - p_high;
    acc    = 17'(r_low) * 17'(p_low) + 17'(r_high) * 17'(p_high);
    score  = (acc[16:8] > 9'd255) ? 8'd255 : acc[15:8];
    radix8 = score > SCORE_TH;
  end

endmodule
