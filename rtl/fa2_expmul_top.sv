// fa2_expmul_top: block-parallel FlashAttention-2 kernel built with fused
// exponential-multiplication (ExpMul) operators.
//
// NQ query lanes (query_block) each hold one preloaded query vector. The
// controller reads one key and one value vector per cycle from the local
// key/value buffer and broadcasts them to all lanes, so every lane consumes the
// same stream of N keys and values and updates its own running maximum, sum of
// exponentials and output vector, as in the paper's architecture. The value
// vector is delayed by VLAT = 2 + log2(D) cycles on its way to the lanes, the
// depth of the dot-product and max/subtract pipeline, so each value meets the
// ExpMul arguments of its key. After the last key each lane divides o_N by l_N;
// when all lanes are done, done pulses and attn holds one attention vector
// per query.
//
// Usage: load queries with q_we/q_sel/q_data, keys and values with
// kv_we/kv_addr/k_data/v_data (key i and value i at address i), then pulse
// start with seq_len = N. A key enters the kernel every cycle (initiation
// interval 1); the o* accumulator of a key is written log2(D) + 4 cycles after
// its read address is issued (10 cycles at D = 64), and done follows the last
// key after about D + log2(D) + 6 cycles of drain and division.
// Element j of a vector sits at bits [j*W +: W]; floats are 1/EXP_W/MAN_W,
// BFloat16 by default. D = 64 is one of the paper's hidden dimensions; NQ and
// DEPTH are this design's choices.
module fa2_expmul_top
  import fa_pkg::*;
#(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  parameter int unsigned D     = 64,
  parameter int unsigned NQ    = 4,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned W    = 1 + EXP_W + MAN_W,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned NW   = $clog2(DEPTH + 1),
  localparam int unsigned QW   = (NQ > 1) ? $clog2(NQ) : 1,
  localparam int unsigned VLAT = 2 + $clog2(D)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // query preload
  input  logic                         q_we,
  input  logic [QW-1:0]                q_sel,
  input  logic [D-1:0][W-1:0]          q_data,
  // key/value buffer fill
  input  logic                         kv_we,
  input  logic [AW-1:0]                kv_addr,
  input  logic [D-1:0][W-1:0]          k_data,
  input  logic [D-1:0][W-1:0]          v_data,
  // run control
  input  logic                         start,
  input  logic [NW-1:0]                seq_len,
  output logic                         busy,
  output logic                         done,
  // result: one attention vector per query lane
  output logic [NQ-1:0][D-1:0][W-1:0]  attn
);
  logic                 rd_en;
  logic [AW-1:0]        rd_addr;
  tag_t                 tag;
  logic [D-1:0][W-1:0]  k_bc, v_rd;
  logic [D-1:0][W-1:0]  v_dly [VLAT];
  logic [NQ-1:0]        lane_done, lane_done_q;
  logic                 lanes_done;

  kv_buffer #(.EXP_W(EXP_W), .MAN_W(MAN_W), .D(D), .DEPTH(DEPTH)) u_kv (
    .clk, .wr_en(kv_we), .wr_addr(kv_addr), .wr_k(k_data), .wr_v(v_data),
    .rd_en(rd_en), .rd_addr(rd_addr), .rd_k(k_bc), .rd_v(v_rd));

  fa2_ctrl #(.DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .seq_len, .lanes_done, .rd_en, .rd_addr, .tag, .busy, .done);

  // value delay line: aligns v_i with the ExpMul arguments computed from k_i
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < VLAT; i++) v_dly[i] <= '0;
    end else begin
      v_dly[0] <= v_rd;
      for (int i = 1; i < VLAT; i++) v_dly[i] <= v_dly[i-1];
    end
  end

  for (genvar n = 0; n < NQ; n++) begin : g_lane
    logic                new_max_unused, div_busy_unused;
    logic [L_W-1:0]      l_new_unused, l_old_unused;
    tag_t                upd_tag_unused;
    query_block #(.EXP_W(EXP_W), .MAN_W(MAN_W), .D(D)) u_lane (
      .clk, .rst_n,
      .q_we     (q_we && q_sel == QW'(n)),
      .q_in     (q_data),
      .k        (k_bc),
      .tag_in   (tag),
      .v        (v_dly[VLAT-1]),
      .attn     (attn[n]),
      .attn_done(lane_done[n]),
      .div_busy (div_busy_unused),
      .new_max  (new_max_unused),
      .l_new    (l_new_unused),
      .l_old    (l_old_unused),
      .upd_tag  (upd_tag_unused));
  end

  // each lane reports once per run; collect until all have finished
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                lane_done_q <= '0;
    else if (start && !busy)   lane_done_q <= '0;
    else if (done)             lane_done_q <= '0;
    else                       lane_done_q <= lane_done_q | lane_done;
  end
  assign lanes_done = &(lane_done_q | lane_done);
endmodule
