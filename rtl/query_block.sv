// query_block: one lane of the block-parallel FlashAttention-2 kernel with
// ExpMul operators, serving one preloaded query vector.
//
// The lane follows the paper's kernel diagram: the dot-product unit forms s_i
// from the query and the broadcast key, the max/subtract unit keeps m_i and
// forms the two ExpMul arguments, the output-update unit accumulates
// o* = [l, o], and the divider finishes attn = o_N / l_N.
// Interface: q_we loads q_in into the query register (this design's loading
// port). k and tag arrive together every cycle; v must arrive VLAT = 2 +
// log2(D) cycles after its key (the caller delays the broadcast value vector),
// so that it meets the differences computed from that key. attn_done pulses
// when attn holds the result; about D + VLAT + 2 cycles after the last key.
module query_block
  import fa_pkg::*;
#(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  parameter int unsigned D     = 64,
  localparam int unsigned W    = 1 + EXP_W + MAN_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 q_we,
  input  logic [D-1:0][W-1:0]  q_in,
  input  logic [D-1:0][W-1:0]  k,
  input  tag_t                 tag_in,
  input  logic [D-1:0][W-1:0]  v,
  output logic [D-1:0][W-1:0]  attn,
  output logic                 attn_done,
  output logic                 div_busy,
  // observation of internal events
  output logic                 new_max,
  output logic [L_W-1:0]       l_new,
  output logic [L_W-1:0]       l_old,
  output tag_t                 upd_tag
);
  logic [D-1:0][W-1:0] q_reg;
  logic [W-1:0]        s, x_new, x_old, m, l_acc;
  logic [D-1:0][W-1:0] o_acc;
  tag_t                tag_dot, tag_ms;
  logic                final_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q_reg <= '0;
    else if (q_we) q_reg <= q_in;
  end

  dot_unit #(.EXP_W(EXP_W), .MAN_W(MAN_W), .D(D)) u_dot (
    .clk, .rst_n, .q(q_reg), .k(k), .tag_in(tag_in), .s(s), .tag_out(tag_dot));

  max_sub_unit #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_max_sub (
    .clk, .rst_n, .s(s), .tag_in(tag_dot), .x_new(x_new), .x_old(x_old), .m(m),
    .new_max(new_max), .tag_out(tag_ms));

  output_update #(.EXP_W(EXP_W), .MAN_W(MAN_W), .D(D)) u_update (
    .clk, .rst_n, .x_new(x_new), .x_old(x_old), .v(v), .tag_in(tag_ms),
    .l(l_acc), .o(o_acc), .final_valid(final_valid), .l_new(l_new), .l_old(l_old));

  divide_unit #(.EXP_W(EXP_W), .MAN_W(MAN_W), .D(D)) u_div (
    .clk, .rst_n, .start(final_valid), .l(l_acc), .o(o_acc), .attn(attn),
    .busy(div_busy), .done(attn_done));

  assign upd_tag = tag_ms;
endmodule
