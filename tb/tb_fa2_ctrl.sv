// tb_fa2_ctrl: self-checking testbench of the sequencer at DEPTH = 16. For
// random sequence lengths 1..16 it checks that read addresses 0..N-1 are issued
// on N consecutive cycles, that the tag one cycle later marks valid, first and
// last correctly, that a start while busy is ignored, that done waits for
// lanes_done (raised after a random delay) and pulses once, and that busy
// covers the whole run.
module tb_fa2_ctrl;
  import fa_pkg::*;

  localparam int DEPTH = 16;
  logic       clk = 1'b0, rst_n = 1'b0;
  int         checks = 0, failures = 0, cycles = 0, ignored = 0;
  logic       start, lanes_done, rd_en, busy, done;
  logic [4:0] seq_len;
  logic [3:0] rd_addr;
  tag_t       tag;

  fa2_ctrl #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .start, .seq_len, .lanes_done,
                                 .rd_en, .rd_addr, .tag, .busy, .done);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 20000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic expect_true(string what, logic c);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("%s failed at cycle %0d", what, cycles);
    end
  endtask

  initial begin
    start = 1'b0; lanes_done = 1'b0; seq_len = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 100; run++) begin
      int n, dly;
      n = 1 + $urandom_range(DEPTH - 1);
      @(negedge clk);
      expect_true("idle before start", !busy && !rd_en);
      start = 1'b1; seq_len = 5'(n);
      @(negedge clk);
      start = 1'b0;
      for (int i = 0; i < n; i++) begin
        expect_true("rd_en", rd_en);
        expect_true("rd_addr", rd_addr == 4'(i));
        expect_true("busy", busy);
        if (i == 1) begin          // a start while streaming must be ignored
          start = 1'b1; seq_len = 5'(DEPTH);
          ignored++;
        end else start = 1'b0;
        @(negedge clk);
        expect_true("tag", tag == '{valid: 1'b1, first: (i == 0), last: (i == n - 1)});
      end
      start = 1'b0;
      expect_true("stream stops", !rd_en);
      dly = $urandom_range(12);
      repeat (dly) begin
        @(negedge clk);
        expect_true("no early done", !done && busy && !rd_en);
      end
      lanes_done = 1'b1;
      @(negedge clk);
      lanes_done = 1'b0;
      expect_true("done pulse", done);
      @(negedge clk);
      expect_true("done once", !done && !busy);
    end
    $display("starts while busy: %0d", ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
