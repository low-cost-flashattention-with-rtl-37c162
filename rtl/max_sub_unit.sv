// max_sub_unit: the running-maximum loop of FlashAttention-2 and the two
// subtractors that form the arguments of the two ExpMul operators.
//
// As drawn in the paper's kernel diagram: m_i = max(m_{i-1}, s_i) is kept in a
// register that feeds back into the max unit, and two subtractors produce
// x_new = s_i - m_i and x_old = m_{i-1} - m_i, both <= 0. This design registers
// both differences (one pipeline stage, the register of m updates in the same
// edge) together with the sideband tag. On the first key of a sequence
// (tag.first) the stored maximum is ignored and m_{i-1} is taken equal to s_1,
// which makes x_old = 0; the accumulator it scales is cleared at that point
// anyway. Output new_max flags a step where the maximum moved (m_i > m_{i-1}).
module max_sub_unit
  import fa_pkg::*;
#(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  localparam int unsigned W    = 1 + EXP_W + MAN_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [W-1:0]  s,
  input  tag_t          tag_in,
  output logic [W-1:0]  x_new,     // s_i - m_i
  output logic [W-1:0]  x_old,     // m_{i-1} - m_i
  output logic [W-1:0]  m,         // current maximum m_i
  output logic          new_max,   // m_i > m_{i-1} on this step
  output tag_t          tag_out
);
  logic [W-1:0] m_prev, m_new, d_new, d_old;

  assign m_prev = tag_in.first ? s : m;

  fp_max #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_max (.a(m_prev), .b(s), .y(m_new));
  fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_sub_new (
    .a(s), .b({~m_new[W-1], m_new[W-2:0]}), .y(d_new));
  fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_sub_old (
    .a(m_prev), .b({~m_new[W-1], m_new[W-2:0]}), .y(d_old));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m       <= '0;
      x_new   <= '0;
      x_old   <= '0;
      new_max <= 1'b0;
      tag_out <= '0;
    end else begin
      tag_out <= tag_in;
      if (tag_in.valid) begin
        m       <= m_new;
        x_new   <= d_new;
        x_old   <= d_old;
        new_max <= !tag_in.first && (m_new != m_prev);
      end else begin
        new_max <= 1'b0;
      end
    end
  end
endmodule
