// tb_expmul: self-checking testbench of the ExpMul operator on a vector of 9
// BFloat16 elements. Random arguments x in [-32, 0] and random vectors (with
// some zero elements and some small exponents, so that results underflow to
// zero) are applied; each element is compared with v * 2^-L from fp_ref_pkg.
// Two hand-worked cases: x = 0 passes v unchanged, and x = -1 halves v.
// The testbench also counts how many elements were flushed to zero.
module tb_expmul;
  import fp_ref_pkg::*;
  import fa_pkg::*;

  localparam int LEN = 9;
  logic                  clk = 1'b0;
  int                    checks = 0, failures = 0, cycles = 0, flushed = 0;
  logic [15:0]           x;
  logic [LEN-1:0][15:0]  v, out;
  logic [L_W-1:0]        l;

  expmul #(.LEN(LEN)) dut (.x(x), .v(v), .out(out), .l(l));

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

  task automatic compare(string what, logic [LEN-1:0][15:0] expv);
    for (int j = 0; j < LEN; j++) begin
      checks++;
      if (out[j] != expv[j]) begin
        failures++;
        if (failures < 10) $display("%s x=%h v[%0d]=%h: got %h expected %h", what, x, j, v[j], out[j], expv[j]);
      end
    end
  endtask

  initial begin
    logic [LEN-1:0][15:0] e;
    // x = 0: identity
    x = 16'h0000;
    for (int j = 0; j < LEN; j++) v[j] = 16'(rand_float(-5, 5, 8, 7));
    #1;
    compare("identity", v);
    // x = -1: L = 1, every exponent drops by one
    x = 16'hbf80;
    #1;
    for (int j = 0; j < LEN; j++) e[j] = v[j] - 16'h0080;
    compare("halve", e);
    for (int i = 0; i < 3000; i++) begin
      x = 16'(rand_float(-8, 5, 8, 7) | 64'h8000);
      for (int j = 0; j < LEN; j++) begin
        case ($urandom_range(5))
          0:       v[j] = 16'h0000;
          1:       v[j] = 16'(rand_float(-126, -110, 8, 7));   // tiny: may underflow
          default: v[j] = 16'(rand_float(-20, 20, 8, 7));
        endcase
      end
      #1;
      for (int j = 0; j < LEN; j++) begin
        e[j] = 16'(expmul(log2exp(64'(x), 8, 7), 64'(v[j]), 8, 7));
        if (v[j][14:7] != 0 && out[j] == 0) flushed++;
      end
      compare("random", e);
    end
    checks++;
    if (flushed == 0) begin
      failures++;
      $display("underflow to zero never exercised");
    end
    $display("flushed to zero: %0d elements", flushed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
