// dot_unit: pipelined floating-point dot product s = dot(q, k) of one query
// lane, with D multipliers and a binary adder tree.
//
// The paper gives the structure (d multipliers whose products are summed) and
// states that the kernel is pipelined with an initiation interval of 1; the
// placement of the pipeline registers is this design's own: one register stage
// after the multipliers and one after every level of the adder tree, so a new
// key can enter every cycle and s leaves LAT = 1 + log2(D) cycles later. The
// sideband tag (valid/first/last) travels alongside. D must be a power of two.
// q is held by the caller (the preloaded query) and k is the broadcast key.
module dot_unit
  import fa_pkg::*;
#(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  parameter int unsigned D     = 64,
  localparam int unsigned W    = 1 + EXP_W + MAN_W,
  localparam int unsigned LOGD = $clog2(D),
  localparam int unsigned LAT  = 1 + LOGD
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [D-1:0][W-1:0]  q,
  input  logic [D-1:0][W-1:0]  k,
  input  tag_t                 tag_in,
  output logic [W-1:0]         s,
  output tag_t                 tag_out
);
  // level l of the tree holds D >> l partial sums
  logic [D-1:0][W-1:0] lvl  [LOGD+1];
  logic [D-1:0][W-1:0] prod;
  tag_t                tags [LOGD+1];

  for (genvar j = 0; j < D; j++) begin : g_mul
    fp_mul #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_mul (.a(q[j]), .b(k[j]), .y(prod[j]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lvl[0]  <= '0;
      tags[0] <= '0;
    end else begin
      lvl[0]  <= prod;
      tags[0] <= tag_in;
    end
  end

  for (genvar l = 1; l <= LOGD; l++) begin : g_lvl
    logic [D-1:0][W-1:0] sums;
    for (genvar j = 0; j < (D >> l); j++) begin : g_add
      fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_add (
        .a(lvl[l-1][2*j]), .b(lvl[l-1][2*j+1]), .y(sums[j]));
    end
    for (genvar j = (D >> l); j < D; j++) begin : g_pad
      assign sums[j] = '0;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        lvl[l]  <= '0;
        tags[l] <= '0;
      end else begin
        lvl[l]  <= sums;
        tags[l] <= tags[l-1];
      end
    end
  end

  assign s       = lvl[LOGD][0];
  assign tag_out = tags[LOGD];
endmodule
