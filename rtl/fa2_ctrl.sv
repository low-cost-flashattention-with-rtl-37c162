// fa2_ctrl: sequencer of the kernel.
//
// The paper describes the schedule in words: keys and values are streamed one
// pair per cycle to all query lanes, the attention of each query is completed
// by a final division, and the computation ends when all queries are done. This
// controller implements that schedule; its encoding and handshake are this
// design's own. start (accepted in ST_IDLE only, with seq_len >= 1) begins a
// run: for seq_len cycles it reads address 0 .. seq_len-1 of the key/value
// buffer, and one cycle later (the buffer's read latency) it presents the tag
// {valid, first, last} that goes with the data. It then waits in ST_DRAIN until
// lanes_done (all lanes have finished their division) and pulses done. busy is
// high from the cycle after start until done.
module fa2_ctrl
  import fa_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned NW   = $clog2(DEPTH + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [NW-1:0]  seq_len,     // N, 1 .. DEPTH
  input  logic           lanes_done,
  output logic           rd_en,
  output logic [AW-1:0]  rd_addr,
  output tag_t           tag,         // aligned with the buffer's read data
  output logic           busy,
  output logic           done
);
  ctrl_state_t   state;
  logic [NW-1:0] cnt, len;

  assign busy    = (state != ST_IDLE);
  assign rd_en   = (state == ST_STREAM);
  assign rd_addr = cnt[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      cnt   <= '0;
      len   <= '0;
      tag   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      tag  <= '{valid: rd_en, first: rd_en && cnt == '0, last: rd_en && cnt == len - 1'b1};
      case (state)
        ST_IDLE: begin
          if (start && seq_len != '0) begin
            len   <= seq_len;
            cnt   <= '0;
            state <= ST_STREAM;
          end
        end
        ST_STREAM: begin
          if (cnt == len - 1'b1) state <= ST_DRAIN;
          else                   cnt   <= cnt + 1'b1;
        end
        ST_DRAIN: begin
          if (lanes_done) begin
            state <= ST_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  a_len_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == ST_IDLE) |-> (seq_len <= NW'(DEPTH)));
endmodule
