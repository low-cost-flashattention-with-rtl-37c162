// tb_fa2_workloads: runs the configurations the kernel is evaluated in,
// hidden dimensions d = 16, 64, 256 in BFloat16 and FP32, as far as
// simulation time allows. Three instances of wl_harness:
//   * BFloat16, d = 16 on hardware built for D = 64 (zero-padded vectors),
//     showing that a smaller head fits the default build;
//   * FP32 (MAN_W = 23) at d = 16, 64 and 256;
//   * BFloat16, d = 256 (D = 256), the largest dimension.
// Each compares all attention outputs bit for bit with the reference model.
// (d = 64 in BFloat16 is the default build, covered by tb_fa2_full.)
module tb_fa2_workloads;
  logic clk = 1'b0;
  int   cycles = 0;
  int   c0, f0, c1, f1, c2, f2, c3, f3, c4, f4;
  logic d0, d1, d2, d3, d4;

  always #5 clk = ~clk;

  wl_harness #(.D(64), .DACT(16), .NQ(2), .DEPTH(32), .NKEYS(32)) u_bf16_d16 (
    .clk, .checks(c0), .failures(f0), .finished(d0));
  wl_harness #(.MAN_W(23), .D(64), .DACT(64), .NQ(1), .DEPTH(32), .NKEYS(32)) u_fp32_d64 (
    .clk, .checks(c1), .failures(f1), .finished(d1));
  wl_harness #(.D(256), .DACT(256), .NQ(1), .DEPTH(16), .NKEYS(16)) u_bf16_d256 (
    .clk, .checks(c2), .failures(f2), .finished(d2));

  wl_harness #(.MAN_W(23), .D(16), .DACT(16), .NQ(2), .DEPTH(32), .NKEYS(32)) u_fp32_d16 (
    .clk, .checks(c3), .failures(f3), .finished(d3));
  wl_harness #(.MAN_W(23), .D(256), .DACT(256), .NQ(1), .DEPTH(8), .NKEYS(8)) u_fp32_d256 (
    .clk, .checks(c4), .failures(f4), .finished(d4));

  always @(posedge clk) begin
    cycles++;
    if (d0 && d1 && d2 && d3 && d4) begin
      $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3 + c4, f0 + f1 + f2 + f3 + f4);
      $finish;
    end
    if (cycles > 20000) begin
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3 + c4, f0 + f1 + f2 + f3 + f4 + 1);
      $finish;
    end
  end
endmodule
