// tb_dot_unit: self-checking testbench of the pipelined dot-product unit at
// D = 8 (BFloat16). A random query is held while random keys enter on random
// cycles (first/last flags random too); each s leaving the pipe is compared
// with the reference dot product (same adder-tree order) and must appear
// exactly 1 + log2(D) = 4 cycles after its key, with its tag. A second phase
// feeds a key every cycle to check the initiation interval of 1.
module tb_dot_unit;
  import fp_ref_pkg::*;
  import fa_pkg::*;

  localparam int D   = 8;
  localparam int LAT = 1 + $clog2(D);

  logic               clk = 1'b0, rst_n = 1'b0;
  int                 checks = 0, failures = 0, cycles = 0, outputs = 0, pushed = 0;
  logic [D-1:0][15:0] q, k;
  tag_t               tag_in, tag_out;
  logic [15:0]        s;

  typedef struct { fbits_t s; int cyc; tag_t tag; } exp_t;
  exp_t expq[$];

  dot_unit #(.D(D)) dut (.clk, .rst_n, .q, .k, .tag_in, .s, .tag_out);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 5000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // scoreboard
  always @(posedge clk) if (rst_n && tag_out.valid) begin
    exp_t e;
    outputs++;
    if (expq.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      e = expq.pop_front();
      checks += 3;
      if (fbits_t'(s) != e.s) begin
        failures++;
        if (failures < 10) $display("s=%h expected %h", s, e.s);
      end
      if (cycles - e.cyc != LAT) begin
        failures++;
        $display("latency %0d expected %0d", cycles - e.cyc, LAT);
      end
      if (tag_out != e.tag) begin
        failures++;
        $display("tag mismatch");
      end
    end
  end

  task automatic drive(bit busy);
    fvec_t qa, ka;
    qa = new[D];
    ka = new[D];
    tag_in = '0;
    if (busy || $urandom_range(2) != 0) begin
      for (int j = 0; j < D; j++) begin
        k[j]  = 16'(rand_float(-4, 2, 8, 7));
        qa[j] = fbits_t'(q[j]);
        ka[j] = fbits_t'(k[j]);
      end
      tag_in = '{valid: 1'b1, first: 1'($urandom_range(1)), last: 1'($urandom_range(1))};
      pushed++;
      expq.push_back('{s: dot(qa, ka, D, 8, 7), cyc: cycles + 1, tag: tag_in});
    end
  endtask

  initial begin
    tag_in = '0;
    for (int j = 0; j < D; j++) q[j] = 16'(rand_float(-4, 2, 8, 7));
    k = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      drive(i >= 300);
    end
    @(negedge clk);
    tag_in = '0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (expq.size() != 0 || outputs != pushed || pushed < 100) begin
      failures++;
      $display("missing outputs: %0d pending", expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
