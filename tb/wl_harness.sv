// wl_harness: testbench helper that runs one configuration of the kernel.
// It instantiates fa2_expmul_top with the given format and size, loads NQ
// random queries whose first DACT elements are used (the rest are zero, so a
// hidden dimension smaller than D runs zero-padded), loads N = NKEYS random
// keys and values, runs the kernel and compares every attention element with
// the reference model evaluated at hidden dimension DACT; padded elements must
// come out as zero. Results are reported through checks / failures / finished.
module wl_harness
  import fp_ref_pkg::*;
#(
  parameter int EXP_W = 8,
  parameter int MAN_W = 7,
  parameter int D     = 64,
  parameter int DACT  = 64,
  parameter int NQ    = 1,
  parameter int DEPTH = 32,
  parameter int NKEYS = 32,
  parameter int W     = 1 + EXP_W + MAN_W
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int QW = (NQ > 1) ? $clog2(NQ) : 1;
  localparam int AW = $clog2(DEPTH);
  localparam int NW = $clog2(DEPTH + 1);

  logic                        rst_n, q_we, kv_we, start, busy, done;
  logic [QW-1:0]               q_sel;
  logic [AW-1:0]               kv_addr;
  logic [NW-1:0]               seq_len;
  logic [D-1:0][W-1:0]         q_data, k_data, v_data;
  logic [NQ-1:0][D-1:0][W-1:0] attn;

  fa2_expmul_top #(.EXP_W(EXP_W), .MAN_W(MAN_W), .D(D), .NQ(NQ), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .q_we, .q_sel, .q_data, .kv_we, .kv_addr, .k_data, .v_data,
    .start, .seq_len, .busy, .done, .attn);

  initial begin
    fvec_t qs[NQ];
    fvec_t kk, vv, r;
    int    t;
    checks = 0; failures = 0; finished = 1'b0;
    rst_n = 1'b0; q_we = 1'b0; kv_we = 1'b0; start = 1'b0;
    q_sel = '0; kv_addr = '0; seq_len = '0; q_data = '0; k_data = '0; v_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NQ; n++) begin
      qs[n] = new[DACT];
      @(negedge clk);
      q_data = '0;
      for (int j = 0; j < DACT; j++) begin
        q_data[j] = W'(rand_float(-3, 0, EXP_W, MAN_W));
        qs[n][j]  = fbits_t'(q_data[j]);
      end
      q_we = 1'b1; q_sel = QW'(n);
    end
    kk = new[NKEYS*DACT]; vv = new[NKEYS*DACT];
    for (int i = 0; i < NKEYS; i++) begin
      @(negedge clk);
      q_we = 1'b0;
      k_data = '0; v_data = '0;
      for (int j = 0; j < DACT; j++) begin
        k_data[j] = W'(rand_float(-3, 1, EXP_W, MAN_W));
        v_data[j] = W'(rand_float(-4, 4, EXP_W, MAN_W));
        kk[i*DACT+j] = fbits_t'(k_data[j]);
        vv[i*DACT+j] = fbits_t'(v_data[j]);
      end
      kv_we = 1'b1; kv_addr = AW'(i);
    end
    @(negedge clk);
    kv_we = 1'b0;
    start = 1'b1; seq_len = NW'(NKEYS);
    @(negedge clk);
    start = 1'b0;
    t = 0;
    while (!done && t < 4 * (NKEYS + D + 40)) begin
      @(negedge clk);
      t++;
    end
    checks++;
    if (!done) begin
      failures++;
      $display("D=%0d DACT=%0d MAN_W=%0d: no done", D, DACT, MAN_W);
    end
    for (int n = 0; n < NQ; n++) begin
      r = lane_attn(qs[n], kk, vv, NKEYS, DACT, EXP_W, MAN_W);
      for (int j = 0; j < D; j++) begin
        fbits_t want;
        want = (j < DACT) ? r[j] : 0;
        checks++;
        if (fbits_t'(attn[n][j]) != want) begin
          failures++;
          if (failures < 6) $display("D=%0d DACT=%0d MAN_W=%0d lane %0d attn[%0d]=%h expected %h",
                                     D, DACT, MAN_W, n, j, attn[n][j], want);
        end
      end
    end
    $display("config EXP_W=%0d MAN_W=%0d D=%0d d=%0d N=%0d: %0d checks, %0d failures",
             EXP_W, MAN_W, D, DACT, NKEYS, checks, failures);
    finished = 1'b1;
  end
endmodule
