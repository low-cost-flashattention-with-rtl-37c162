// kv_buffer: the local key and value memories of the kernel.
//
// The paper assumes that one key and one value vector of d elements each can be
// read from local memory every cycle; this is that memory, written here as two
// arrays of DEPTH words of D floats (a synthesis flow would map them to SRAM
// macros). Key i and value i share address i. One write port (wr_en, wr_addr,
// wr_k, wr_v) fills both memories; the read port returns k and v one cycle
// after rd_en / rd_addr (synchronous read). DEPTH, the longest sequence that
// fits, is this design's choice; the paper gives no memory size.
module kv_buffer #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 7,
  parameter int unsigned D     = 64,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned W    = 1 + EXP_W + MAN_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [D-1:0][W-1:0]  wr_k,
  input  logic [D-1:0][W-1:0]  wr_v,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic [D-1:0][W-1:0]  rd_k,
  output logic [D-1:0][W-1:0]  rd_v
);
  logic [D*W-1:0] kmem [DEPTH];
  logic [D*W-1:0] vmem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      kmem[wr_addr] <= wr_k;
      vmem[wr_addr] <= wr_v;
    end
    if (rd_en) begin
      rd_k <= kmem[rd_addr];
      rd_v <= vmem[rd_addr];
    end
  end
endmodule
