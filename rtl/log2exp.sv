// log2exp: the Log2Exp quantiser of the ExpMul operator, L = -round(-x*log2 e).
//
// Following the paper, the floating-point argument x (always <= 0 in
// FlashAttention-2) is clipped to [-15, 0] and converted to the 16-bit fixed
// point value Xf with 6 integer and 10 fraction bits; the product with log2(e)
// is approximated by the shift-and-add Xf + (Xf >> 1) - (Xf >> 4), i.e. a factor
// of 1.4375, and the negated result is rounded to the integer L in [0, 22].
// e^x is then approximated by 2^-L.
// This design's own choices, where the paper is silent: the float-to-fixed
// conversion truncates the magnitude; the shifts are arithmetic (floor); the
// final rounding sends ties to the larger L; a positive x clips to 0 and a
// zero or subnormal x reads as 0; x with an all-ones exponent (infinity) clips
// to -15. Output xf exposes the fixed-point value for inspection.
// Timing: purely combinational.
module log2exp
  import fa_pkg::*;
#(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  localparam int unsigned W    = 1 + EXP_W + MAN_W
) (
  input  logic [W-1:0]            x,
  output logic signed [FIX_W-1:0] xf,   // Fixed(Clip(x, -15, 0))
  output logic [L_W-1:0]          l     // Log2Exp(x)
);
  localparam int signed   BIAS = (1 << (EXP_W - 1)) - 1;
  localparam int unsigned TW   = MAN_W + 1 + 16;   // wide enough for |x| < 16
  localparam logic [FIX_W-1:0] CLIP_FIX = FIX_W'(CLIP_MAG << FIX_FRAC);

  logic [EXP_W-1:0]        ex;
  logic signed [EXP_W+1:0] sh;        // shift that takes 1.M to Q.10
  logic [TW-1:0]           mag_w;
  logic [FIX_W-1:0]        mag;
  logic signed [FIX_W-1:0] y;
  logic [FIX_W-1:0]        ny;

  always_comb begin
    ex    = x[W-2 -: EXP_W];
    mag_w = '0;
    sh = (EXP_W+2)'(signed'({1'b0, ex})) - (EXP_W+2)'(BIAS) + (EXP_W+2)'(FIX_FRAC) - (EXP_W+2)'(MAN_W);
    if (ex == '0 || !x[W-1]) begin
      mag = '0;                                        // zero or positive: clip to 0
    end else if (ex == '1 || sh > signed'((EXP_W+2)'(FIX_FRAC + 4 - MAN_W))) begin
      mag = CLIP_FIX;                                  // |x| >= 16 (or infinity)
    end else begin
      if (sh >= 0) mag_w = TW'({1'b1, x[MAN_W-1:0]}) << sh;
      else         mag_w = TW'({1'b1, x[MAN_W-1:0]}) >> (-sh);
      mag = (mag_w > TW'(CLIP_FIX)) ? CLIP_FIX : mag_w[FIX_W-1:0];
    end
    xf = -signed'(mag);
    // Xf * log2(e) ~= Xf + Xf/2 - Xf/16
    y  = xf + (xf >>> 1) - (xf >>> 4);
    ny = FIX_W'(-y) + FIX_W'(1 << (FIX_FRAC - 1));     // -y + 0.5
    l  = ny[FIX_FRAC +: L_W];
  end
endmodule
