// tb_kv_buffer: self-checking testbench of the key/value buffer at D = 4,
// DEPTH = 32 (BFloat16). It fills every address with random keys and values,
// overwrites some, then reads addresses in random order, one per cycle, and
// checks that rd_k / rd_v return the last written words one cycle after the
// read request and hold while rd_en is low.
module tb_kv_buffer;
  localparam int D = 4, DEPTH = 32;
  logic               clk = 1'b0;
  int                 checks = 0, failures = 0, cycles = 0;
  logic               wr_en, rd_en;
  logic [4:0]         wr_addr, rd_addr;
  logic [D-1:0][15:0] wr_k, wr_v, rd_k, rd_v;
  logic [D-1:0][15:0] mk [DEPTH], mv [DEPTH];

  kv_buffer #(.D(D), .DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_addr, .wr_k, .wr_v,
                                         .rd_en, .rd_addr, .rd_k, .rd_v);

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

  task automatic write(int a);
    @(negedge clk);
    wr_en = 1'b1; wr_addr = 5'(a);
    for (int j = 0; j < D; j++) begin
      wr_k[j] = 16'($urandom); wr_v[j] = 16'($urandom);
    end
    mk[a] = wr_k; mv[a] = wr_v;
  endtask

  initial begin
    logic [D-1:0][15:0] hk, hv;
    wr_en = 1'b0; rd_en = 1'b0; wr_addr = '0; rd_addr = '0; wr_k = '0; wr_v = '0;
    for (int a = 0; a < DEPTH; a++) write(a);
    for (int i = 0; i < 20; i++) write($urandom_range(DEPTH - 1));
    @(negedge clk);
    wr_en = 1'b0;
    for (int i = 0; i < 500; i++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      rd_en = 1'b1; rd_addr = 5'(a);
      @(negedge clk);
      checks += 2;
      if (rd_k != mk[a]) begin failures++; $display("key %0d mismatch", a); end
      if (rd_v != mv[a]) begin failures++; $display("value %0d mismatch", a); end
      if ($urandom_range(3) == 0) begin
        hk = rd_k; hv = rd_v;
        rd_en = 1'b0; rd_addr = 5'(a + 1);
        @(negedge clk);
        checks++;
        if (rd_k != hk || rd_v != hv) begin failures++; $display("output did not hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
