// pool_harness: streams NREQ tagged requests into an exec_pool of NE
// executors running one fully connected layer of 256 inputs and M neurons.
// Random weights are loaded through the broadcast port; the result port is
// always ready. Every result is matched by its tag against the reference
// model, and each tag must return exactly once. It reports the number of
// cycles from the first accepted request to the last result, from which the
// caller derives the throughput.
module pool_harness
  import bnn_ref_pkg::*;
#(
  parameter int unsigned NE   = 2,
  parameter int unsigned M    = 32,
  parameter int unsigned NREQ = 24
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   span,
  output logic finished
);
  localparam int unsigned SZ [2] = '{256, M};

  logic in_valid = 0, in_ready, out_valid, busy;
  logic out_ready = 1;
  logic [255:0] in_vec = '0, out_vec;
  logic [7:0] in_ctx = '0, out_ctx;
  logic wr_en = 0;
  logic [7:0] wr_addr = '0;
  logic [255:0] wr_data = '0;
  vec_t w [256];
  vec_t expect_q [NREQ];
  int seen [NREQ];
  int cycles = 0, last_out = 0;

  exec_pool #(.NUM_EXEC(NE), .NUM_LAYERS(1), .LAYER_SIZE(SZ), .CTX_W(8)) dut (.*);

  always @(posedge clk) begin
    cycles++;
    if (rst_n && out_valid) begin
      checks++;
      if (out_ctx >= NREQ || out_vec != expect_q[out_ctx]) begin
        failures++;
        $display("FAIL %0d executors, 256x%0d layer: result with tag %0d", NE, M, out_ctx);
      end else seen[out_ctx]++;
      last_out = cycles;
    end
  end

  initial begin
    int t0;
    checks = 0; failures = 0; span = 0; finished = 0;
    foreach (seen[i]) seen[i] = 0;
    wait (rst_n);
    for (int i = 0; i < 256; i++) w[i] = (i < int'(M)) ? rand_vec(256) : '0;
    for (int r = 0; r < int'(M); r++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 8'(r); wr_data = pack_row(256, M, w, r);
    end
    @(negedge clk);
    wr_en = 0;
    for (int i = 0; i < int'(NREQ); i++) begin
      vec_t x;
      x = rand_vec(256);
      expect_q[i] = ref_layer(x, 256, M, w);
      @(negedge clk);
      in_valid = 1; in_vec = x; in_ctx = 8'(i);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (i == 0) t0 = cycles;
      @(negedge clk);
      in_valid = 0;
    end
    wait (!busy);
    @(negedge clk);
    span = last_out - t0;
    for (int i = 0; i < int'(NREQ); i++) begin
      checks++;
      if (seen[i] != 1) begin
        failures++;
        $display("FAIL %0d executors, 256x%0d layer: tag %0d returned %0d times", NE, M, i, seen[i]);
      end
    end
    finished = 1;
  end
endmodule
