// mode_path: path selector and array-multiplier PEs of the DAPPM mode path.
//
// The pair mode is the smaller of the two operand modes (a fraction bit may be
// dropped only if it is zero in both operands). Mode 0 enables all 4x4 = 16
// one-bit array-multiplier PEs, mode 1 the 3x3 = 9 PEs that exclude the LSB
// row and column, mode 2 the 2x2 = 4 PEs that exclude both low bits, as in the
// paper's mode-path figure. Each PE forms one partial-product bit
// f_act[i] & f_wgt[j]; the bit is placed at weight 2^(i+j) in pp[4*i + j].
// Disabled PEs output zero (in silicon they are gated). active_pes reports
// how many PEs worked. Combinational.
//
// Each pp[] word carries a single live bit at its 2^(i+j) position; the other
// bits are constant zero so that the accumulation tree can add full-width words.
module mode_path #(
  parameter int unsigned FB = 4   // significand bits including the hidden one
) (
  input  logic [FB-1:0]     sig_a,
  input  logic [FB-1:0]     sig_w,
  input  logic [1:0]        mode_a,
  input  logic [1:0]        mode_w,
  output logic [1:0]        mode,
  output logic [2*FB-1:0]   pp [FB*FB],
  output logic [4:0]        active_pes
);

  always_comb begin
    mode = (mode_a < mode_w) ? mode_a : mode_w;
    if (mode == 2'd3) mode = 2'd2;
    active_pes = 5'((FB - int'(mode)) * (FB - int'(mode)));
    for (int i = 0; i < FB; i++) begin
      for (int j = 0; j < FB; j++) begin
        pp[FB*i + j] = '0;
        if ((i >= int'(mode)) && (j >= int'(mode)))
          pp[FB*i + j][i+j] = sig_a[i] & sig_w[j];
      end
    end
  end

endmodule
