// fp_add: combinational floating-point adder. It serves as the adder tree of
// the dot-product unit, as the two subtractors of the max/subtract unit (the
// caller flips the sign of b) and as the adders of the output-update unit.
//
// The paper only names these adders; the implementation is the textbook one:
// order the operands by magnitude, align the smaller with guard, round and
// sticky bits, add or subtract, normalise with a leading-zero count and round
// to nearest, ties to even. Conventions are those of fp_mul: exponent field 0
// reads as zero, results below the smallest normal flush to +0, overflow gives
// infinity, an exact zero is +0, no NaN/infinity handling on the inputs.
// Timing: purely combinational.
module fp_add #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  localparam int unsigned W    = 1 + EXP_W + MAN_W
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);
  // sum register layout: [SW-1] carry, [SW-2] hidden one, MAN_W mantissa bits,
  // then guard, round and sticky
  localparam int unsigned SW   = MAN_W + 5;
  localparam int signed   EMAX = (1 << EXP_W) - 1;

  logic [W-1:0]      larger, lesser;
  logic [EXP_W-1:0]  eb, es;
  logic [EXP_W:0]    diff;
  logic [SW-1:0]     mb, ms, ms_sh, sum, norm;
  logic              sticky;
  logic [$clog2(SW+1)-1:0] lz;
  logic [MAN_W-1:0]  mant;
  logic              g, rs, rnd_up;
  logic [MAN_W:0]    mant_r;
  logic signed [EXP_W+2:0] e;

  always_comb begin
    if (a[W-2:0] >= b[W-2:0]) begin
      larger = a; lesser = b;
    end else begin
      larger = b; lesser = a;
    end
    eb   = larger[W-2 -: EXP_W];
    es   = lesser[W-2 -: EXP_W];
    diff = {1'b0, eb} - {1'b0, es};
    mb   = {2'b01, larger[MAN_W-1:0], 3'b000};
    ms   = {2'b01, lesser[MAN_W-1:0], 3'b000};
    // align the smaller operand; shifted-out bits collapse into the sticky bit
    if (diff >= (EXP_W+1)'(SW)) begin
      ms_sh  = '0;
      sticky = 1'b1;
    end else begin
      ms_sh  = ms >> diff;
      sticky = |(ms & ~(SW'('1) << diff));
    end
    ms_sh[0] = ms_sh[0] | sticky;
    if (larger[W-1] == lesser[W-1]) sum = mb + ms_sh;
    else                        sum = mb - ms_sh;
    // normalise
    lz = '0;
    for (int i = 0; i <= SW - 2; i++) begin
      if (sum[i]) lz = ($clog2(SW+1))'(SW - 2 - i);
    end
    e = (EXP_W+3)'(signed'({1'b0, eb}));
    if (sum[SW-1]) begin
      norm = {1'b0, sum[SW-1:2], sum[1] | sum[0]};
      e    = e + 1'b1;
    end else begin
      norm = sum << lz;
      e    = e - (EXP_W+3)'(lz);
    end
    mant   = norm[SW-3 -: MAN_W];
    g      = norm[2];
    rs     = norm[1] | norm[0];
    rnd_up = g & (rs | mant[0]);
    mant_r = {1'b0, mant} + (MAN_W+1)'(rnd_up);
    if (mant_r[MAN_W]) e = e + 1'b1;
    if (es == '0)                      // smaller operand is zero
      y = (eb == '0) ? '0 : larger;
    else if (sum == '0 || e <= 0)
      y = '0;
    else if (e >= (EXP_W+3)'(EMAX))
      y = {larger[W-1], {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    else
      y = {larger[W-1], e[EXP_W-1:0], mant_r[MAN_W-1:0]};
  end
endmodule
