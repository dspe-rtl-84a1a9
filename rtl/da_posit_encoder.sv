// da_posit_encoder: packs sign, k*, e* and a 7-bit fraction into an 8-bit
// DA-Posit (es = 2).
//
// The regime (k+1 ones and a zero for k >= 0, -k zeros and a one for k < 0),
// the two exponent bits and the fraction are laid out in one bit string; the
// top seven bits become the magnitude and the rest are rounded to nearest,
// ties to the even encoding, as posits do. Magnitudes beyond maxpos saturate
// to maxpos (0x7F) and below minpos to minpos (0x01): a posit never rounds
// to zero. Negative results are two's-complemented. The rounding and
// saturation rules follow the posit convention; the paper gives none.
// Combinational.
module da_posit_encoder (
  input  logic              sign,
  input  logic signed [5:0] k,
  input  logic        [1:0] e,
  input  logic        [6:0] frac,
  input  logic              zero,
  input  logic              nar,
  output logic        [7:0] y
);

  logic [31:0] body;
  logic [6:0]  mag;
  logic [7:0]  mag_r;
  int          rl;
  logic        guard, sticky;

  always_comb begin
    body   = '0;
    rl     = 0;
    mag    = '0;
    mag_r  = '0;
    guard  = 1'b0;
    sticky = 1'b0;
    if (k > 6'sd6) begin
      mag = 7'h7F;
    end else if (k < -6'sd6) begin
      mag = 7'h01;
    end else begin
      if (k >= 0) begin
        rl   = int'(k) + 2;
        body = ~(32'hFFFF_FFFF >> (int'(k) + 1));     // k+1 ones, then zero
      end else begin
        rl   = 1 - int'(k);
        body = 32'h8000_0000 >> (-int'(k));           // -k zeros, then one
      end
      body   = body | ({23'b0, e, frac} << (32 - rl - 9));
      guard  = body[24];
      sticky = |body[23:0];
      mag_r  = {1'b0, body[31:25]} + {7'b0, guard & (sticky | body[25])};
      if (mag_r[7])           mag = 7'h7F;
      else if (mag_r == 8'h0) mag = 7'h01;
      else                    mag = mag_r[6:0];
    end
    if (nar)       y = 8'h80;
    else if (zero) y = 8'h00;
    else           y = sign ? (~{1'b0, mag} + 8'd1) : {1'b0, mag};
  end

endmodule
