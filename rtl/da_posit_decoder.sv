// da_posit_decoder: DA-Posit (n = 8, es = 2) decode unit of the DAPPM.
//
// Splits a word into sign, regime run value k, exponent e and the fraction
// (Dyn-field), and forms the composite exponent E = k * 2^es + e (paper Eq. 6).
// The significand is returned with its hidden one as a 4-bit value 1.fff, which
// is the "fraction bit = 4" operand of the mode path. Negative words are
// two's-complemented first, as in standard posits. 0x00 is zero and 0x80 is
// NaR.
//
// Mode (this design's concrete rule): the paper folds low-order bits that
// carry no information and signals "no / 1-bit / 2-bit compression" through the
// regime, without giving the code table. Here the mode is derived from the
// word itself: mode 2 when the two least significant significand bits are
// zero, mode 1 when only the last one is, else mode 0. Folding those bits is
// then lossless, and a multiplier that ignores them gives the exact product.
// dyn_w = 4 - mode is the "sub" output of the decoder figure (significand bits
// that still carry information).
//
// Purely combinational.
//
// Lint note: the magnitude's top bit is always 0 after negation of a
// non-NaR input, and the last two bits of the shifted field lie below the
// exponent, so both are unused by construction.
module da_posit_decoder (
  input  logic        [7:0] x,
  output logic              is_zero,
  output logic              is_nar,
  output logic              sign,
  output logic signed [4:0] k,       // -7 .. 6
  output logic        [1:0] e,
  output logic signed [6:0] big_e,   // composite exponent E = 4k + e
  output logic        [3:0] sig,     // 1.fff
  output logic        [1:0] mode,
  output logic        [2:0] dyn_w
);

  logic [7:0] mag;
  logic [6:0] body, rest;
  logic       r0;
  logic [3:0] run;
  logic       running;

  always_comb begin
    is_zero = (x == 8'h00);
    is_nar  = (x == 8'h80);
    sign    = x[7];
    mag     = x[7] ? (~x + 8'd1) : x;
    body    = mag[6:0];
    r0      = body[6];
    // length of the regime run starting at bit 6
    run     = 4'd1;
    running = 1'b1;
    for (int i = 5; i >= 0; i--) begin
      if (running && (body[i] == r0)) run = run + 4'd1;
      else                            running = 1'b0;
    end
    k    = r0 ? 5'(signed'({1'b0, run}) - 5'sd1) : -5'(signed'({1'b0, run}));
    // drop regime run and its terminating bit
    rest = body << (run + 4'd1);
    e    = rest[6:5];
    sig  = {1'b1, rest[4:2]};
    big_e = 7'(k) * 7'sd4 + 7'(signed'({1'b0, e}));
    if (is_zero || is_nar) begin
      k     = '0;
      e     = '0;
      sig   = '0;
      big_e = '0;
      mode  = 2'd2;
    end else if (sig[1:0] == 2'b00) begin
      mode  = 2'd2;
    end else if (sig[0] == 1'b0) begin
      mode  = 2'd1;
    end else begin
      mode  = 2'd0;
    end
    dyn_w = 3'd4 - {1'b0, mode};
  end

endmodule
