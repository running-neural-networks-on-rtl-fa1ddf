// exec_harness: runs one nn_executor of a given shape with random weights
// and inputs, checks every result against the reference model, and reports
// the measured latency (cycles from accepted input to out_valid), which must
// equal 1 + sum over layers of (2 * rows + 4).
module exec_harness
  import bnn_ref_pkg::*;
#(
  parameter int unsigned NL = 3,
  parameter int unsigned SZ4 [4] = '{152, 128, 64, 2},  // first NL+1 used
  parameter int unsigned TRIALS = 10
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   latency,
  output logic finished
);
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, busy;
  logic [255:0] in_vec = '0, out_vec;
  logic [0:0] in_ctx = '0, out_ctx;
  logic wr_en = 0;
  logic [7:0] wr_addr = '0;
  logic [255:0] wr_data = '0;
  vec_t w [NL][256];

  typedef int unsigned sz_t [NL+1];
  function automatic sz_t trim();
    sz_t t;
    for (int i = 0; i <= int'(NL); i++) t[i] = SZ4[i];
    return t;
  endfunction
  localparam sz_t SZ = trim();
  int cycles = 0;

  nn_executor #(.NUM_LAYERS(NL), .LAYER_SIZE(SZ)) dut (.*);

  always @(posedge clk) cycles++;

  function automatic int expected_latency();
    int l;
    l = 1;
    for (int k = 0; k < int'(NL); k++) l += 2 * int'(rows(SZ[k], SZ[k+1])) + 4;
    return l;
  endfunction

  initial begin
    int base, t0;
    checks = 0; failures = 0; latency = -1; finished = 0;
    wait (rst_n);
    base = 0;
    for (int k = 0; k < int'(NL); k++) begin
      for (int i = 0; i < 256; i++) w[k][i] = (i < int'(SZ[k+1])) ? rand_vec(SZ[k]) : '0;
      for (int r = 0; r < int'(rows(SZ[k], SZ[k+1])); r++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 8'(base + r); wr_data = pack_row(SZ[k], SZ[k+1], w[k], r);
      end
      base += rows(SZ[k], SZ[k+1]);
    end
    @(negedge clk);
    wr_en = 0;
    for (int t = 0; t < int'(TRIALS); t++) begin
      vec_t x, a;
      x = rand_vec(SZ[0]);
      a = x;
      for (int k = 0; k < int'(NL); k++) a = ref_layer(a, SZ[k], SZ[k+1], w[k]);
      @(negedge clk);
      in_valid = 1; in_vec = x;
      while (!in_ready) @(negedge clk);
      t0 = cycles;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(negedge clk);
      latency = cycles - t0;
      checks++;
      if (out_vec != a) begin
        failures++;
        $display("FAIL %0d-layer net, input %0d: result %0h expected %0h", NL, SZ[0], out_vec, a);
      end
      checks++;
      if (latency != expected_latency()) begin
        failures++;
        $display("FAIL latency %0d expected %0d", latency, expected_latency());
      end
    end
    finished = 1;
  end
endmodule
