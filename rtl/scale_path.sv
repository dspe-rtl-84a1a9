// scale_path: normalisation and exponent compensation of the DAPPM.
//
// The significand product p of two 1.fff operands lies in [1, 4) and is given
// as Q2.6. The comparator tests p against 2 (the paper's range check): below
// 2 the product is already normalised and dE = 0; otherwise it is shifted
// right by one (f >> 1) and dE = 1. The compensator adds the composite
// exponents, E_out = E_act + E_wgt + dE, and the split step returns
// k* = floor(E_out / 4) and e* = E_out mod 4 for the encoder. The fraction
// after the hidden one keeps all 7 bits, so the shift loses nothing.
// Combinational.
module scale_path (
  input  logic        [7:0] p,        // Q2.6 significand product
  input  logic signed [6:0] e_act,
  input  logic signed [6:0] e_wgt,
  output logic        [6:0] frac,     // bits after the hidden one
  output logic              de,
  output logic signed [7:0] e_out,
  output logic signed [5:0] k_out,
  output logic        [1:0] e_low
);

  always_comb begin
    de    = p[7];                       // p >= 2
    frac  = de ? p[6:0] : {p[5:0], 1'b0};
    e_out = 8'(e_act) + 8'(e_wgt) + 8'(signed'({1'b0, de}));
    k_out = 6'(e_out >>> 2);
    e_low = e_out[1:0];
  end

endmodule
