// tb_log2exp: self-checking testbench of the Log2Exp quantiser. It applies
// hand-picked arguments whose L is worked out by hand from the paper's formula
// (0 -> 0, -1 -> round(1.4375) = 1, -15 -> round(21.5625) = 22, any x below -15
// clips to 22, positive x clips to 0), then random negative BF16 and FP32
// arguments in [-32, 0) compared with the reference of fp_ref_pkg.
module tb_log2exp;
  import fp_ref_pkg::*;
  import fa_pkg::*;

  logic        clk = 1'b0;
  int          checks = 0, failures = 0, cycles = 0;
  logic [15:0] x16;
  logic [31:0] x32;
  logic signed [FIX_W-1:0] xf16, xf32;
  logic [L_W-1:0] l16, l32;

  log2exp u_bf16 (.x(x16), .xf(xf16), .l(l16));
  log2exp #(.EXP_W(8), .MAN_W(23)) u_fp32 (.x(x32), .xf(xf32), .l(l32));

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

  task automatic check_fixed(logic [15:0] x, int l_exp);
    x16 = x;
    #1;
    checks++;
    if (int'(l16) != l_exp) begin
      failures++;
      $display("x=%h: L=%0d expected %0d", x, l16, l_exp);
    end
  endtask

  initial begin
    check_fixed(16'h0000, 0);    // 0
    check_fixed(16'hbf80, 1);    // -1.0
    check_fixed(16'hc170, 22);   // -15.0
    check_fixed(16'hc200, 22);   // -32.0, clipped
    check_fixed(16'hc8c0, 22);   // -393216, clipped
    check_fixed(16'hff80, 22);   // -infinity, clipped
    check_fixed(16'h4000, 0);    // +2.0, clipped to 0
    check_fixed(16'hbf00, 1);    // -0.5 -> 0.71875 -> 1
    check_fixed(16'hbe80, 0);    // -0.25 -> 0.359375 -> 0
    check_fixed(16'hc000, 3);    // -2.0 -> 2.875 -> 3
    check_fixed(16'hc100, 12);   // -8.0 -> 11.5 -> 12 (tie to larger L)
    // Xf itself for -1.5: -1536 in Q6.10
    x16 = 16'hbfc0;
    #1;
    checks++;
    if (xf16 != -16'sd1536) begin
      failures++;
      $display("Xf(-1.5)=%0d expected -1536", xf16);
    end
    for (int i = 0; i < 5000; i++) begin
      fbits_t a, b;
      a = rand_float(-12, 4, 8, 7) | 64'h8000;
      b = rand_float(-12, 4, 8, 23) | 64'h8000_0000;
      x16 = 16'(a);
      x32 = 32'(b);
      #1;
      checks += 2;
      if (int'(l16) != log2exp(a, 8, 7)) begin
        failures++;
        if (failures < 10) $display("BF16 x=%h: L=%0d expected %0d", x16, l16, log2exp(a, 8, 7));
      end
      if (int'(l32) != log2exp(b, 8, 23)) begin
        failures++;
        if (failures < 10) $display("FP32 x=%h: L=%0d expected %0d", x32, l32, log2exp(b, 8, 23));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
