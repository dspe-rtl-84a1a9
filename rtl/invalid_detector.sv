// invalid_detector: MBLM invalid computation detector.
//
// For each of the N_OPD (activation, shared weight) pairs the MSB decision
// takes the sign bit, the bits-negation stage forms the magnitude of negative
// values (two's complement), and two comparators test |a| < R_zero_act and
// |w| < R_zero_wgt. A pair that meets either test is flagged invalid and is
// skipped downstream (paper Sec. 3.2). Signed INT8 operands are assumed.
// Combinational.
module invalid_detector #(
  parameter int unsigned N_OPD = 8
) (
  input  logic signed [7:0] act [N_OPD],
  input  logic signed [7:0] wgt,
  input  logic        [7:0] r_zero_act,
  input  logic        [7:0] r_zero_wgt,
  output logic [N_OPD-1:0]  invalid
);

  function automatic logic [8:0] magnitude(logic signed [7:0] v);
    logic [8:0] ext;
    ext = {v[7], v};
    return v[7] ? (~ext + 9'd1) : ext;     // MSB decision, then bits negation
  endfunction

  logic wgt_small;

  always_comb begin
    wgt_small = magnitude(wgt) < {1'b0, r_zero_wgt};
    for (int i = 0; i < N_OPD; i++)
      invalid[i] = wgt_small || (magnitude(act[i]) < {1'b0, r_zero_act});
  end

endmodule
