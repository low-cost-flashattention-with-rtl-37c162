// expmul: the fused ExpMul operator, out = e^x * v for a whole vector v.
//
// As described in the paper, e^x is never formed: Log2Exp quantises x to an
// integer L with e^x ~= 2^-L, and multiplying a floating-point element by 2^-L
// is a subtraction of L from its exponent field, so the result is produced
// directly in floating-point form. An element whose exponent would drop to 0 or
// below is set to zero, and a zero element stays zero. One Log2Exp unit is
// shared by the LEN exponent subtractors, since x is the same for every element
// (the paper notes that the output update then needs only d exponent
// subtractions). Interface: x is a scalar float, v and out are packed vectors of
// LEN floats, element j at bits [j*W +: W]. Timing: purely combinational.
module expmul
  import fa_pkg::*;
#(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  parameter int unsigned LEN   = 65,
  localparam int unsigned W    = 1 + EXP_W + MAN_W
) (
  input  logic [W-1:0]         x,
  input  logic [LEN-1:0][W-1:0] v,
  output logic [LEN-1:0][W-1:0] out,
  output logic [L_W-1:0]        l      // shared shift amount, for inspection
);
  logic signed [FIX_W-1:0] xf_unused;

  log2exp #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_log2exp (
    .x (x),
    .xf(xf_unused),
    .l (l)
  );

  always_comb begin
    for (int j = 0; j < LEN; j++) begin
      logic [EXP_W-1:0] ev;
      ev = v[j][W-2 -: EXP_W];
      if (ev == '0 || {1'b0, ev} <= (EXP_W+1)'(l))
        out[j] = '0;
      else
        out[j] = {v[j][W-1], ev - EXP_W'(l), v[j][MAN_W-1:0]};
    end
  end
endmodule
