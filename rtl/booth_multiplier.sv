// booth_multiplier: signed 8 x 8 bit Booth multiplier with selectable radix.
//
// The activation a is Booth-recoded and the shared weight w is the
// multiplicand. Radix-4: four digits in {-2..2} from overlapping 3-bit
// windows of {a, 0} (stride 2). Radix-8: three digits in {-4..4} from 4-bit
// windows (stride 3) of the sign-extended {a, 0}; this needs the precomputed
// 3w, which the shared weight makes cheap, and gives one partial product
// fewer. The digits are returned so that callers can count Booth bit
// activity. Combinational; the partial products are summed with one adder
// chain.
module booth_multiplier (
  input  logic signed [7:0]  a,
  input  logic signed [7:0]  w,
  input  logic               radix8,
  output logic signed [15:0] p,
  output logic [2:0]         n_pp      // non-zero partial products
);

  logic        [9:0]  x;       // {sign, a, 0}
  logic signed [15:0] wx, w3;
  int                 d;

  always_comb begin
    x    = {a[7], a, 1'b0};
    wx   = 16'(w);
    w3   = wx + (wx <<< 1);
    p    = '0;
    n_pp = '0;
    if (!radix8) begin
      for (int k = 0; k < 4; k++) begin
        d = -2 * int'(x[2*k+2]) + int'(x[2*k+1]) + int'(x[2*k]);
        case (d)
          1:       p = p + (wx <<< (2*k));
          2:       p = p + (wx <<< (2*k+1));
          -1:      p = p - (wx <<< (2*k));
          -2:      p = p - (wx <<< (2*k+1));
          default: ;
        endcase
        if (d != 0) n_pp = n_pp + 3'd1;
      end
    end else begin
      for (int k = 0; k < 3; k++) begin
        d = -4 * int'(x[3*k+3]) + 2 * int'(x[3*k+2]) + int'(x[3*k+1]) + int'(x[3*k]);
        case (d)
          1:       p = p + (wx <<< (3*k));
          2:       p = p + (wx <<< (3*k+1));
          3:       p = p + (w3 <<< (3*k));
          4:       p = p + (wx <<< (3*k+2));
          -1:      p = p - (wx <<< (3*k));
          -2:      p = p - (wx <<< (3*k+1));
          -3:      p = p - (w3 <<< (3*k));
          -4:      p = p - (wx <<< (3*k+2));
          default: ;
        endcase
        if (d != 0) n_pp = n_pp + 3'd1;
      end
    end
  end

endmodule
