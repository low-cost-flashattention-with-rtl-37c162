// tb_fa2_full: the kernel at its default size (D = 64, NQ = 4 query lanes,
// DEPTH = 256, BFloat16), taken through complete operations: a full buffer of
// N = 256 random keys and values, then a run with large scores and tiny values
// (clipping and underflow). The checks are those of tb_fa2_expmul_top: bit-exact
// comparison of every lane's attention vector with the reference model, the
// value-range sanity check and the done latency N + log2(D) + D + 6.
module tb_fa2_full;
  import fp_ref_pkg::*;
  import fa_pkg::*;

  localparam int D = 64, NQ = 4, DEPTH = 256, LOGD = 6;
  localparam int W = 16;

  logic                        clk = 1'b0, rst_n = 1'b0;
  int                          checks = 0, failures = 0, cycles = 0;
  logic                        q_we, kv_we, start, busy, done;
  logic [1:0]                  q_sel;
  logic [7:0]                  kv_addr;
  logic [8:0]                  seq_len;
  logic [D-1:0][W-1:0]         q_data, k_data, v_data;
  logic [NQ-1:0][D-1:0][W-1:0] attn;

  // mechanism counters
  int n_new_max = 0, n_rescale = 0, n_clip = 0, n_flush = 0, n_single = 0;
  int n_full = 0, n_b2b = 0, n_busy_start = 0;

  fa2_expmul_top dut (
    .clk, .rst_n, .q_we, .q_sel, .q_data, .kv_we, .kv_addr, .k_data, .v_data,
    .start, .seq_len, .busy, .done, .attn);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 100000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // observe the mechanisms inside lane 0
  always @(posedge clk) if (rst_n) begin
    if (dut.g_lane[0].u_lane.new_max) n_new_max++;
    if (dut.g_lane[0].u_lane.upd_tag.valid) begin
      if (!dut.g_lane[0].u_lane.upd_tag.first && dut.g_lane[0].u_lane.l_old != 0) n_rescale++;
      if (dut.g_lane[0].u_lane.l_new == 5'd22) n_clip++;
      for (int j = 0; j <= D; j++)
        if (dut.g_lane[0].u_lane.u_update.v_star[j][14:7] != 0 &&
            dut.g_lane[0].u_lane.u_update.scaled_new[j] == 0) n_flush++;
    end
  end

  fvec_t qs[NQ];
  fvec_t kk, vv;

  task automatic load_queries(int escale);
    for (int n = 0; n < NQ; n++) begin
      qs[n] = new[D];
      @(negedge clk);
      for (int j = 0; j < D; j++) begin
        q_data[j] = W'(rand_float(-3, escale, 8, 7));
        qs[n][j]  = fbits_t'(q_data[j]);
      end
      q_we = 1'b1; q_sel = 2'(n);
    end
    @(negedge clk);
    q_we = 1'b0;
  endtask

  // mode 0: random; mode 1: large keys and some tiny values; mode 2: keys growing with i
  task automatic load_kv(int n, int mode);
    kk = new[n*D]; vv = new[n*D];
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      for (int j = 0; j < D; j++) begin
        case (mode)
          1:       k_data[j] = W'(rand_float(0, 3, 8, 7));
          2:       k_data[j] = W'(rand_float(-6 + i / 4, -5 + i / 4, 8, 7) & 64'h7fff);
          default: k_data[j] = W'(rand_float(-3, 1, 8, 7));
        endcase
        if (mode == 1 && j % 4 == 0) v_data[j] = W'(rand_float(-125, -110, 8, 7));  // tiny
        else                         v_data[j] = W'(rand_float(-4, 4, 8, 7));
        kk[i*D+j] = fbits_t'(k_data[j]);
        vv[i*D+j] = fbits_t'(v_data[j]);
      end
      kv_we = 1'b1; kv_addr = 8'(i);
    end
    @(negedge clk);
    kv_we = 1'b0;
  endtask

  task automatic run_and_check(int n, bit poke_busy);
    int t0, lat;
    @(negedge clk);
    start = 1'b1; seq_len = 9'(n);
    t0 = cycles;
    @(negedge clk);
    start = 1'b0;
    if (poke_busy) begin
      @(negedge clk);
      start = 1'b1; seq_len = 9'(1);      // must be ignored: kernel is busy
      n_busy_start += busy;
      @(negedge clk);
      start = 1'b0;
    end
    while (!done && cycles - t0 < 2000) @(negedge clk);
    lat = cycles - t0;
    checks++;
    if (lat != n + LOGD + D + 6) begin
      failures++;
      $display("done after %0d cycles, expected %0d", lat, n + LOGD + D + 6);
    end
    if (n == 1) n_single++;
    if (n == DEPTH) n_full++;
    for (int q = 0; q < NQ; q++) begin
      fvec_t r;
      r = lane_attn(qs[q], kk, vv, n, D, 8, 7);
      for (int j = 0; j < D; j++) begin
        real lo, hi, a;
        checks += 2;
        if (fbits_t'(attn[q][j]) != r[j]) begin
          failures++;
          if (failures < 10) $display("N=%0d lane %0d attn[%0d]=%h expected %h", n, q, j, attn[q][j], r[j]);
        end
        lo = 1.0e30; hi = -1.0e30;
        for (int i = 0; i < n; i++) begin
          a = to_real(vv[i*D+j], 8, 7);
          if (a < lo) lo = a;
          if (a > hi) hi = a;
        end
        a = to_real(fbits_t'(attn[q][j]), 8, 7);
        if (a < lo - 0.02 * (hi - lo) - 0.02 * (lo < 0 ? -lo : lo) ||
            a > hi + 0.02 * (hi - lo) + 0.02 * (hi < 0 ? -hi : hi)) begin
          failures++;
          $display("attn %f outside value range [%f, %f]", a, lo, hi);
        end
      end
    end
  endtask

  task automatic expect_seen(string what, int cnt);
    checks++;
    $display("%-32s %0d", what, cnt);
    if (cnt == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    q_we = 1'b0; kv_we = 1'b0; start = 1'b0; q_sel = '0; kv_addr = '0; seq_len = '0;
    q_data = '0; k_data = '0; v_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    load_queries(1);
    load_kv(DEPTH, 0);
    run_and_check(DEPTH, 1'b0);
    load_queries(3);
    load_kv(DEPTH, 1);
    run_and_check(DEPTH, 1'b1);
    expect_seen("runs with N = DEPTH", n_full);
    expect_seen("starts ignored while busy", n_busy_start);
    expect_seen("argument clipped at -15 (L = 22)", n_clip);
    expect_seen("ExpMul underflow to zero", n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
