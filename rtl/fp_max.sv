// fp_max: combinational maximum of two floating-point numbers, the "max" box of
// the running-maximum loop. Sign-magnitude comparison: for two non-negative
// numbers the larger exponent/mantissa field wins, for two negative numbers the
// smaller one, and a non-negative number beats a negative one. Zeros of either
// sign compare equal (the first operand is returned on a tie). Combinational.
module fp_max #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  localparam int unsigned W    = 1 + EXP_W + MAN_W
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);
  logic a_zero, b_zero, b_gt_a;

  always_comb begin
    a_zero = (a[W-2 -: EXP_W] == '0);
    b_zero = (b[W-2 -: EXP_W] == '0);
    if (a_zero && b_zero)                 b_gt_a = 1'b0;
    else if (a_zero)                      b_gt_a = !b[W-1];
    else if (b_zero)                      b_gt_a = a[W-1];
    else if (a[W-1] != b[W-1])            b_gt_a = a[W-1];
    else if (!a[W-1])                     b_gt_a = b[W-2:0] > a[W-2:0];
    else                                  b_gt_a = b[W-2:0] < a[W-2:0];
    y = b_gt_a ? b : a;
  end
endmodule
