// tb_max_sub_unit: self-checking testbench of the running-maximum and
// subtract stage (BFloat16). Sequences of 1 to 8 random scores, separated by
// random idle cycles, are fed with first/last tags. One cycle after each score
// the unit must show m_i, s_i - m_i, m_{i-1} - m_i, the new-maximum flag and the
// tag, all compared with a reference that tracks the maximum itself. The
// testbench counts steps that raised the maximum and steps that kept it, and
// fails if either never happened.
module tb_max_sub_unit;
  import fp_ref_pkg::*;
  import fa_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  int          checks = 0, failures = 0, cycles = 0, raised = 0, kept = 0;
  logic [15:0] s, x_new, x_old, m;
  logic        new_max;
  tag_t        tag_in, tag_out;

  max_sub_unit dut (.clk, .rst_n, .s, .tag_in, .x_new, .x_old, .m, .new_max, .tag_out);

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

  task automatic expect_eq(string what, fbits_t got, fbits_t want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, want);
    end
  endtask

  initial begin
    fbits_t mref, mprev, mnew;
    s = '0;
    tag_in = '0;
    mref = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int seq = 0; seq < 300; seq++) begin
      int n;
      n = 1 + $urandom_range(7);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        s      = 16'(rand_float(-3, 3, 8, 7));
        tag_in = '{valid: 1'b1, first: (i == 0), last: (i == n - 1)};
        mprev  = (i == 0) ? fbits_t'(s) : mref;
        mnew   = fmax(mprev, fbits_t'(s), 8, 7);
        @(negedge clk);
        tag_in = '0;
        expect_eq("m", fbits_t'(m), mnew);
        expect_eq("x_new", fbits_t'(x_new), add(fbits_t'(s), neg(mnew, 8, 7), 8, 7));
        expect_eq("x_old", fbits_t'(x_old), add(mprev, neg(mnew, 8, 7), 8, 7));
        expect_eq("new_max", fbits_t'(new_max), fbits_t'(i != 0 && mnew != mprev));
        expect_eq("tag", fbits_t'(tag_out), fbits_t'({1'b1, i == 0, i == n - 1}));
        if (i != 0 && mnew != mprev) raised++;
        if (i != 0 && mnew == mprev) kept++;
        mref = mnew;
        repeat ($urandom_range(2)) @(negedge clk);
      end
    end
    checks++;
    if (raised == 0 || kept == 0) begin
      failures++;
      $display("maximum never raised or never kept");
    end
    $display("maximum raised %0d times, kept %0d times", raised, kept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
