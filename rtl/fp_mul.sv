// fp_mul: combinational floating-point multiplier, one of the d multipliers of
// the dot-product unit.
//
// Format: 1 sign bit, EXP_W exponent bits (bias 2^(EXP_W-1)-1), MAN_W mantissa
// bits; the default (8, 7) is BFloat16, (8, 23) gives FP32, the two formats the
// kernel is evaluated with. The paper only names the multiplier, so the
// arithmetic conventions here are this design's own: round to nearest, ties to
// even; an exponent field of 0 reads as zero (no subnormals) and a result below
// the smallest normal number becomes +0; a result above the largest finite
// number becomes infinity; every zero result is +0. NaN and infinity inputs get
// no special treatment (the kernel never produces them from finite data).
// MAN_W must be at least 2. Timing: purely combinational.
module fp_mul #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  localparam int unsigned W    = 1 + EXP_W + MAN_W
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);
  localparam int unsigned P    = 2 * (MAN_W + 1);
  localparam int signed   BIAS = (1 << (EXP_W - 1)) - 1;
  localparam int signed   EMAX = (1 << EXP_W) - 1;

  logic              sy;
  logic [EXP_W-1:0]  ea, eb;
  logic [P-1:0]      prod;
  logic [MAN_W-1:0]  mant;
  logic              g, st, rnd_up;
  logic [MAN_W:0]    mant_r;
  logic signed [EXP_W+2:0] e;

  always_comb begin
    sy   = a[W-1] ^ b[W-1];
    ea   = a[W-2 -: EXP_W];
    eb   = b[W-2 -: EXP_W];
    prod = P'({1'b1, a[MAN_W-1:0]}) * P'({1'b1, b[MAN_W-1:0]});
    e    = (EXP_W+3)'(signed'({1'b0, ea})) + (EXP_W+3)'(signed'({1'b0, eb})) - (EXP_W+3)'(BIAS);
    if (prod[P-1]) begin
      mant = prod[P-2 -: MAN_W];
      g    = prod[P-2-MAN_W];
      st   = |prod[P-3-MAN_W:0];
      e    = e + 1'b1;
    end else begin
      mant = prod[P-3 -: MAN_W];
      g    = prod[P-3-MAN_W];
      st   = |prod[P-4-MAN_W:0];
    end
    rnd_up = g & (st | mant[0]);
    mant_r = {1'b0, mant} + (MAN_W+1)'(rnd_up);
    if (mant_r[MAN_W]) e = e + 1'b1;
    if (ea == '0 || eb == '0 || e <= 0)
      y = '0;
    else if (e >= (EXP_W+3)'(EMAX))
      y = {sy, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    else
      y = {sy, e[EXP_W-1:0], mant_r[MAN_W-1:0]};
  end
endmodule
