// output_update: the merged output/sum-of-exponents accumulator of one query,
// o*_i = ExpMul(m_{i-1} - m_i, o*_{i-1}) + ExpMul(s_i - m_i, v*_i).
//
// Following the paper, the running sum l_i is carried as element 0 of an
// extended output vector o* = [l, o_1 .. o_D] and the value vector is extended
// to v* = [1, v_1 .. v_D], so one pair of ExpMul operators and D+1
// floating-point adders update both. The o* register (D+1 floats) closes the
// loop in one cycle, which keeps the initiation interval at 1. On tag.first
// the previous o* is taken as zero (start of a new sequence). One cycle after
// the step marked tag.last, final_valid pulses and l / o hold l_N and o_N.
// v must arrive in the same cycle as the x_new / x_old it belongs to.
module output_update
  import fa_pkg::*;
#(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  parameter int unsigned D     = 64,
  localparam int unsigned W    = 1 + EXP_W + MAN_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [W-1:0]         x_new,    // s_i - m_i
  input  logic [W-1:0]         x_old,    // m_{i-1} - m_i
  input  logic [D-1:0][W-1:0]  v,
  input  tag_t                 tag_in,
  output logic [W-1:0]         l,        // l_i (sum of exponentials)
  output logic [D-1:0][W-1:0]  o,        // o_i
  output logic                 final_valid,
  output logic [L_W-1:0]       l_new,    // shift amounts, for inspection
  output logic [L_W-1:0]       l_old
);
  localparam logic [W-1:0] ONE = {1'b0, 1'b0, {(EXP_W-1){1'b1}}, {MAN_W{1'b0}}};

  logic [D:0][W-1:0] o_star, o_prev, v_star, scaled_old, scaled_new, sum;

  assign v_star = {v, ONE};
  assign o_prev = tag_in.first ? '0 : o_star;

  expmul #(.EXP_W(EXP_W), .MAN_W(MAN_W), .LEN(D+1)) u_expmul_old (
    .x(x_old), .v(o_prev), .out(scaled_old), .l(l_old));
  expmul #(.EXP_W(EXP_W), .MAN_W(MAN_W), .LEN(D+1)) u_expmul_new (
    .x(x_new), .v(v_star), .out(scaled_new), .l(l_new));

  for (genvar j = 0; j <= D; j++) begin : g_add
    fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_add (
      .a(scaled_old[j]), .b(scaled_new[j]), .y(sum[j]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_star      <= '0;
      final_valid <= 1'b0;
    end else begin
      if (tag_in.valid) o_star <= sum;
      final_valid <= tag_in.valid && tag_in.last;
    end
  end

  assign l = o_star[0];
  assign o = o_star[D:1];
endmodule
