// divide_unit: the final division attn(q, K, V) = o_N / l_N of one query lane.
//
// The paper places one divider per query after the accumulator and says only
// that the attention is finished by this division. Here a single fp_div is
// reused over the D elements, one element per cycle: start latches l_N and o_N,
// the unit is busy for D cycles and writes attn[j] in cycle j, then done pulses
// for one cycle with the whole vector valid in attn (which holds until the next
// start). The division happens once per sequence of N keys, so D cycles of it
// are small next to the N-cycle stream when N >= D. start while busy is not
// allowed (assertion).
module divide_unit #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  parameter int unsigned D     = 64,
  localparam int unsigned W    = 1 + EXP_W + MAN_W,
  localparam int unsigned IW   = (D > 1) ? $clog2(D) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [W-1:0]         l,
  input  logic [D-1:0][W-1:0]  o,
  output logic [D-1:0][W-1:0]  attn,
  output logic                 busy,
  output logic                 done
);
  logic [W-1:0]        l_q;
  logic [D-1:0][W-1:0] o_q;
  logic [IW-1:0]       idx;
  logic [W-1:0]        quot;

  fp_div #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_div (.a(o_q[idx]), .b(l_q), .y(quot));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_q  <= '0;
      o_q  <= '0;
      idx  <= '0;
      attn <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        l_q  <= l;
        o_q  <= o;
        idx  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        attn[idx] <= quot;
        if (idx == IW'(D - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy));
endmodule
