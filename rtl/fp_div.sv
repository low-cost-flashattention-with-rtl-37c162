// fp_div: combinational floating-point divider y = a / b, the arithmetic core of
// the final division attn = o_N / l_N.
//
// The paper only names the divider. Here the two significands are divided as
// integers, (1.Ma << (MAN_W+3)) / 1.Mb, which yields the quotient with two or
// three extra bits; the remainder feeds the sticky bit and the result is
// rounded to nearest, ties to even. Conventions are those of fp_mul: zero
// dividend or underflow gives +0, a zero divisor or overflow gives infinity.
// Timing: purely combinational.
module fp_div #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  localparam int unsigned W    = 1 + EXP_W + MAN_W
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);
  localparam int unsigned NW   = 2 * MAN_W + 4;   // dividend width
  localparam int signed   BIAS = (1 << (EXP_W - 1)) - 1;
  localparam int signed   EMAX = (1 << EXP_W) - 1;

  logic              sy;
  logic [EXP_W-1:0]  ea, eb;
  logic [NW-1:0]     num, den, q, r;
  logic [MAN_W-1:0]  mant;
  logic              g, st, rnd_up;
  logic [MAN_W:0]    mant_r;
  logic signed [EXP_W+2:0] e;

  always_comb begin
    sy  = a[W-1] ^ b[W-1];
    ea  = a[W-2 -: EXP_W];
    eb  = b[W-2 -: EXP_W];
    num = NW'({1'b1, a[MAN_W-1:0]}) << (MAN_W + 3);
    den = NW'({1'b1, b[MAN_W-1:0]});
    q   = num / den;
    r   = num % den;
    e   = (EXP_W+3)'(signed'({1'b0, ea})) - (EXP_W+3)'(signed'({1'b0, eb})) + (EXP_W+3)'(BIAS);
    if (q[MAN_W+3]) begin               // quotient in [1, 2)
      mant = q[MAN_W+2 -: MAN_W];
      g    = q[2];
      st   = q[1] | q[0] | (r != '0);
    end else begin                      // quotient in [0.5, 1)
      mant = q[MAN_W+1 -: MAN_W];
      g    = q[1];
      st   = q[0] | (r != '0);
      e    = e - 1'b1;
    end
    rnd_up = g & (st | mant[0]);
    mant_r = {1'b0, mant} + (MAN_W+1)'(rnd_up);
    if (mant_r[MAN_W]) e = e + 1'b1;
    if (ea == '0)
      y = '0;
    else if (eb == '0 || e >= (EXP_W+3)'(EMAX))
      y = {sy, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    else if (e <= 0)
      y = '0;
    else
      y = {sy, e[EXP_W-1:0], mant_r[MAN_W-1:0]};
  end
endmodule
