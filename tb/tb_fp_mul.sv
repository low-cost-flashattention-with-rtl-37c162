// tb_fp_mul: self-checking testbench of fp_mul, in BFloat16 (the default format) and
// in FP32. Random operands with unbiased exponents in [-40, 40] and random signs
// and mantissas, plus zero operands, are applied and each result is compared,
// bit for bit, with the double-precision reference of fp_ref_pkg rounded to
// the same format.
module tb_fp_mul;
  import fp_ref_pkg::*;

  logic        clk = 1'b0;
  int          checks = 0, failures = 0, cycles = 0;
  logic [15:0] a16, b16, y16;
  logic [31:0] a32, b32, y32;

  fp_mul u_bf16 (.a(a16), .b(b16), .y(y16));
  fp_mul #(.EXP_W(8), .MAN_W(23)) u_fp32 (.a(a32), .b(b32), .y(y32));

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

  task automatic check16(fbits_t a, fbits_t b);
    fbits_t exp16;
    a16 = 16'(a); b16 = 16'(b);
    #1;
    exp16 = mul(a, b, 8, 7);
    checks++;
    if (fbits_t'(y16) != exp16) begin
      failures++;
      if (failures < 10) $display("BF16 %h op %h: got %h expected %h", a16, b16, y16, exp16);
    end
  endtask

  task automatic check32(fbits_t a, fbits_t b);
    fbits_t exp32;
    a32 = 32'(a); b32 = 32'(b);
    #1;
    exp32 = mul(a, b, 8, 23);
    checks++;
    if (fbits_t'(y32) != exp32) begin
      failures++;
      if (failures < 10) $display("FP32 %h op %h: got %h expected %h", a32, b32, y32, exp32);
    end
  endtask

  initial begin
    for (int i = 0; i < 4000; i++) begin
      check16(rand_float(-40, 40, 8, 7), rand_float(-40, 40, 8, 7));
      check32(rand_float(-40, 40, 8, 23), rand_float(-40, 40, 8, 23));
    end
    // operands of close magnitude (cancellation, carries)
    for (int i = 0; i < 2000; i++) begin
      fbits_t x;
      x = rand_float(-3, 3, 8, 7);
      check16(x, x ^ fbits_t'($urandom_range(7)) ^ (fbits_t'($urandom_range(1)) << 15));
      x = rand_float(-3, 3, 8, 23);
      check32(x, x ^ fbits_t'($urandom_range(7)) ^ (fbits_t'($urandom_range(1)) << 31));
    end
    check16(0, rand_float(-3, 3, 8, 7));
    check16(rand_float(-3, 3, 8, 7), 64'h3f80);
    check32(rand_float(-3, 3, 8, 23), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
