// tb_divide_unit: self-checking testbench of the sequential final divider at
// D = 8 (BFloat16). Random (l, o) pairs are started; attn must match the
// reference quotients o[j] / l, done must pulse D + 1 cycles after the edge
// that samples start (one latch cycle, then one element per cycle)
// and busy must be high in between.
module tb_divide_unit;
  import fp_ref_pkg::*;

  localparam int D = 8;
  logic               clk = 1'b0, rst_n = 1'b0;
  int                 checks = 0, failures = 0, cycles = 0;
  logic               start, busy, done;
  logic [15:0]        l;
  logic [D-1:0][15:0] o, attn;

  divide_unit #(.D(D)) dut (.clk, .rst_n, .start, .l, .o, .attn, .busy, .done);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 10000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    start = 1'b0; l = '0; o = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      logic [15:0] lv;
      logic [D-1:0][15:0] ov;
      int c0, wait_cycles;
      @(negedge clk);
      lv = 16'(rand_float(0, 8, 8, 7) & 64'h7fff);        // l >= 1, positive
      for (int j = 0; j < D; j++) ov[j] = 16'(rand_float(-4, 8, 8, 7));
      l = lv; o = ov; start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      l = '0; o = '0;                                     // inputs are latched
      wait_cycles = 1;
      checks++;
      if (!busy) begin failures++; $display("not busy after start"); end
      while (!done && wait_cycles < 4 * D) begin
        @(negedge clk);
        wait_cycles++;
      end
      checks++;
      if (wait_cycles != D + 1) begin
        failures++;
        $display("done after %0d cycles, expected %0d", wait_cycles, D + 1);
      end
      for (int j = 0; j < D; j++) begin
        checks++;
        if (fbits_t'(attn[j]) != div(fbits_t'(ov[j]), fbits_t'(lv), 8, 7)) begin
          failures++;
          if (failures < 10) $display("attn[%0d]=%h expected %h", j, attn[j], div(fbits_t'(ov[j]), fbits_t'(lv), 8, 7));
        end
      end
      repeat ($urandom_range(2)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
