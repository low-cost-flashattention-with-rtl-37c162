// tb_query_block: self-checking testbench of one query lane at D = 8
// (BFloat16). For each run a random query is loaded, N random keys (N = 1..12)
// enter one per cycle with first/last tags, and each value vector follows its
// key VLAT = 2 + log2(D) cycles later, as the top level delays it. The lane's
// attention vector is compared, bit for bit, with the reference model of the
// FlashAttention-2/ExpMul algorithm, and attn_done must come exactly
// log2(D) + D + 4 cycles after the last key.
module tb_query_block;
  import fp_ref_pkg::*;
  import fa_pkg::*;

  localparam int D = 8, LOGD = 3, VLAT = 2 + LOGD;
  logic               clk = 1'b0, rst_n = 1'b0;
  int                 checks = 0, failures = 0, cycles = 0;
  logic               q_we, attn_done, div_busy, new_max;
  logic [D-1:0][15:0] q_in, k, v, attn;
  logic [D-1:0][15:0] vpipe [VLAT];
  tag_t               tag_in, upd_tag;
  logic [L_W-1:0]     l_new, l_old;
  logic [D-1:0][15:0] vsrc;

  query_block #(.D(D)) dut (.clk, .rst_n, .q_we, .q_in, .k, .tag_in, .v, .attn,
                            .attn_done, .div_busy, .new_max, .l_new, .l_old, .upd_tag);

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

  // value delay line of the testbench (stands in for the top level's)
  always @(posedge clk) begin
    vpipe[0] <= vsrc;
    for (int i = 1; i < VLAT; i++) vpipe[i] <= vpipe[i-1];
  end
  assign v = vpipe[VLAT-1];

  initial begin
    q_we = 1'b0; q_in = '0; k = '0; tag_in = '0; vsrc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 60; run++) begin
      fvec_t qa, kk, vv, ref_attn;
      int n, t_last, lat;
      n  = 1 + $urandom_range(11);
      qa = new[D]; kk = new[n*D]; vv = new[n*D];
      @(negedge clk);
      for (int j = 0; j < D; j++) begin
        q_in[j] = 16'(rand_float(-3, 1, 8, 7));
        qa[j]   = fbits_t'(q_in[j]);
      end
      q_we = 1'b1;
      @(negedge clk);
      q_we = 1'b0;
      for (int i = 0; i < n; i++) begin
        for (int j = 0; j < D; j++) begin
          k[j]    = 16'(rand_float(-3, 1 + (run % 3), 8, 7));
          vsrc[j] = 16'(rand_float(-4, 4, 8, 7));
          kk[i*D+j] = fbits_t'(k[j]);
          vv[i*D+j] = fbits_t'(vsrc[j]);
        end
        tag_in = '{valid: 1'b1, first: (i == 0), last: (i == n - 1)};
        t_last = cycles;
        @(negedge clk);
      end
      tag_in = '0; k = '0; vsrc = '0;
      while (!attn_done && cycles - t_last < 100) @(negedge clk);
      lat = cycles - t_last;
      checks++;
      if (lat != LOGD + D + 4) begin
        failures++;
        $display("attn_done %0d cycles after last key, expected %0d", lat, LOGD + D + 4);
      end
      ref_attn = lane_attn(qa, kk, vv, n, D, 8, 7);
      for (int j = 0; j < D; j++) begin
        checks++;
        if (fbits_t'(attn[j]) != ref_attn[j]) begin
          failures++;
          if (failures < 10) $display("run %0d attn[%0d]=%h expected %h", run, j, attn[j], ref_attn[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
