// tb_exec_pool: test of several NN executors working in parallel.
// Four executors run the default 256-32-16-2 network with random weights
// loaded once through the broadcast write port. Phase 1 checks that a
// lone request still takes the single-executor latency (83 cycles).
// Phase 2 streams 80 requests with random back-pressure on the result port (ready one cycle in four);
// every result is matched by its tag against the reference model, and each
// tag must come back exactly once. Phase 3 streams 80 requests with the
// result port always ready and checks the throughput: at 200 MHz it must
// reach at least 4 x 1.8M inferences/s, the per-executor gain the paper
// reports, and all four executors must have been busy at once.
module tb_exec_pool
  import n3ic_pkg::*;
  import bnn_ref_pkg::*;
;
  localparam int unsigned E = 4;
  localparam int unsigned NREQ = 80;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, busy;
  logic [255:0] in_vec = '0, out_vec;
  logic [15:0] in_ctx = '0, out_ctx;
  logic wr_en = 0;
  logic [7:0] wr_addr = '0;
  logic [255:0] wr_data = '0;

  exec_pool #(.NUM_EXEC(E), .CTX_W(16)) dut (.*);

  int checks = 0, failures = 0, cycles = 0;
  int max_busy = 0, n_held = 0, n_full = 0;
  vec_t w1 [256], w2 [256], w3 [256];
  vec_t expect_q [NREQ];
  int seen [NREQ];
  bit rand_ready = 0;

  always #5 clk = ~clk;

  function automatic vec_t ref_net(vec_t x);
    return ref_layer(ref_layer(ref_layer(x, 256, 32, w1), 32, 16, w2), 16, 2, w3);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cycles);
    end
  endtask

  always @(posedge clk) begin
    cycles++;
    if ($countones(dut.e_busy) > max_busy) max_busy = $countones(dut.e_busy);
    if (out_valid && !out_ready && $countones(dut.e_out_valid) > 1) n_held++;
    if (in_valid && !in_ready) n_full++;
    if (rand_ready) out_ready <= ($urandom_range(3) == 0);
  end

  // Result checker: matches each result by its tag.
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (out_ctx < NREQ) begin
        check(out_vec == expect_q[out_ctx], $sformatf("result of request %0d", out_ctx));
        seen[out_ctx]++;
      end else check(0, "result with unknown tag");
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic stream(int first_cycle_ref);
    for (int i = 0; i < int'(NREQ); i++) begin
      vec_t x;
      x = rand_vec(256);
      expect_q[i] = ref_net(x);
      seen[i] = 0;
      @(negedge clk);
      in_valid = 1; in_vec = x; in_ctx = 16'(i);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      w1[i] = (i < 32) ? rand_vec(256) : '0;
      w2[i] = (i < 16) ? rand_vec(32) : '0;
      w3[i] = (i < 2) ? rand_vec(16) : '0;
    end
    for (int r = 0; r < 35; r++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 8'(r);
      wr_data = (r < 32) ? pack_row(256, 32, w1, r) : (r < 34) ? pack_row(32, 16, w2, r - 32) : pack_row(16, 2, w3, 0);
    end
    @(negedge clk);
    wr_en = 0;

    // Phase 1: latency of a lone request.
    begin
      vec_t x;
      x = rand_vec(256);
      expect_q[0] = ref_net(x);
      @(negedge clk);
      in_valid = 1; in_vec = x; in_ctx = 16'd0; out_ready = 1;
      @(posedge clk);
      t0 = cycles;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(negedge clk);
      check(cycles - t0 == 83, $sformatf("lone latency %0d, expected 83", cycles - t0));
      @(negedge clk);
    end

    // Phase 2: stream with random back-pressure.
    rand_ready = 1;
    stream(0);
    wait (!busy);
    rand_ready = 0;
    @(negedge clk);
    out_ready = 1;
    for (int i = 0; i < int'(NREQ); i++) check(seen[i] == 1, $sformatf("request %0d returned %0d times", i, seen[i]));

    // Phase 3: throughput with the result port always ready.
    @(negedge clk);
    t0 = cycles;
    stream(0);
    wait (!busy);
    t1 = cycles;
    for (int i = 0; i < int'(NREQ); i++) check(seen[i] == 1, $sformatf("request %0d returned %0d times", i, seen[i]));
    $display("%0d inferences on %0d executors in %0d cycles = %0.2f M/s at 200 MHz",
             NREQ, E, t1 - t0, real'(NREQ) * 200.0 / real'(t1 - t0));
    check(real'(NREQ) * 200.0e6 / real'(t1 - t0) >= real'(E) * 1.8e6, "throughput of 1.8M/s per executor");
    check(max_busy == int'(E), $sformatf("all executors busy at once (max %0d)", max_busy));
    check(n_held > 0, "result held while another executor waited");
    check(n_full > 0, "request refused with all executors busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
