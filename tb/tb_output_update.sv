// tb_output_update: self-checking testbench of the merged output/sum-of-
// exponentials accumulator at D = 4 (BFloat16). Sequences of random ExpMul
// arguments x_new, x_old <= 0 (including 0 and values below the clip bound -15)
// and random value vectors are applied with first/last tags and random idle
// cycles. After every step l and o are compared with the reference update
// o* = ExpMul(x_old, o*) + ExpMul(x_new, [1 v]); final_valid must pulse exactly
// one cycle after each step tagged last.
module tb_output_update;
  import fp_ref_pkg::*;
  import fa_pkg::*;

  localparam int D = 4;
  logic               clk = 1'b0, rst_n = 1'b0;
  int                 checks = 0, failures = 0, cycles = 0, finals = 0, clipped = 0;
  logic [15:0]        x_new, x_old, l;
  logic [D-1:0][15:0] v, o;
  tag_t               tag_in;
  logic               final_valid;
  logic [L_W-1:0]     l_new, l_old;

  output_update #(.D(D)) dut (.clk, .rst_n, .x_new, .x_old, .v, .tag_in, .l, .o,
                              .final_valid, .l_new, .l_old);

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

  function automatic logic [15:0] rand_arg();
    case ($urandom_range(4))
      0:       return 16'h0000;
      1:       return 16'(rand_float(4, 5, 8, 7) | 64'h8000);   // <= -16: clipped
      default: return 16'(rand_float(-4, 3, 8, 7) | 64'h8000);
    endcase
  endfunction

  initial begin
    fbits_t ostar[D+1], nxt[D+1], vstar[D+1];
    int ln, lo;
    x_new = '0; x_old = '0; v = '0; tag_in = '0;
    for (int j = 0; j <= D; j++) ostar[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int seq = 0; seq < 200; seq++) begin
      int n;
      n = 1 + $urandom_range(6);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        x_new  = rand_arg();
        x_old  = rand_arg();
        for (int j = 0; j < D; j++) v[j] = 16'(rand_float(-6, 6, 8, 7));
        tag_in = '{valid: 1'b1, first: (i == 0), last: (i == n - 1)};
        ln = log2exp(fbits_t'(x_new), 8, 7);
        lo = log2exp(fbits_t'(x_old), 8, 7);
        if (ln == 22) clipped++;
        vstar[0] = one(8, 7);
        for (int j = 0; j < D; j++) vstar[j+1] = fbits_t'(v[j]);
        for (int j = 0; j <= D; j++)
          nxt[j] = add(expmul(lo, (i == 0) ? 0 : ostar[j], 8, 7), expmul(ln, vstar[j], 8, 7), 8, 7);
        ostar = nxt;
        #1;
        expect_eq("l_new", fbits_t'(l_new), fbits_t'(ln));
        expect_eq("l_old", fbits_t'(l_old), fbits_t'(lo));
        @(negedge clk);
        tag_in = '0;
        expect_eq("l", fbits_t'(l), ostar[0]);
        for (int j = 0; j < D; j++) expect_eq("o", fbits_t'(o[j]), ostar[j+1]);
        expect_eq("final_valid", fbits_t'(final_valid), fbits_t'(i == n - 1));
        if (final_valid) finals++;
        repeat ($urandom_range(1)) begin
          @(negedge clk);
          expect_eq("final_valid idle", fbits_t'(final_valid), 0);
        end
      end
    end
    checks++;
    if (finals != 200 || clipped == 0) begin
      failures++;
      $display("finals=%0d clipped=%0d", finals, clipped);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
