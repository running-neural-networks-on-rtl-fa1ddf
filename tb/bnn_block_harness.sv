// bnn_block_harness: drives one bnn_block of fan-in N and M neurons with
// random weights and inputs, and compares every output with the reference
// model. The weight memory is a behavioural array with the same one-cycle
// read latency as the executor's memory. It also checks the block's latency:
// done must come exactly 2*rows+4 cycles after start.
module bnn_block_harness
  import bnn_ref_pkg::*;
#(
  parameter int unsigned N = 256,
  parameter int unsigned M = 32,
  parameter int unsigned BASE = 3,
  parameter int unsigned TRIALS = 20
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int unsigned R = (M + (256 / N) - 1) / (256 / N);

  logic         start = 0, busy, done, rd_en;
  logic [N-1:0] in_vec = '0;
  logic [M-1:0] out_vec;
  logic [7:0]   rd_addr;
  logic [255:0] rd_data;
  logic [255:0] mem [256];
  vec_t         w [256];

  bnn_block #(.N_IN(N), .M_OUT(M), .DEPTH(256), .BASE_ADDR(BASE)) dut (.*);

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  initial begin
    checks = 0; failures = 0; finished = 0;
    for (int i = 0; i < 256; i++) mem[i] = '0;
    for (int i = 0; i < 256; i++) w[i] = '0;
    wait (rst_n);
    for (int t = 0; t < int'(TRIALS); t++) begin
      vec_t x, exp;
      int lat;
      // Trial 0 uses all-ones weights and input: every neuron must fire.
      for (int i = 0; i < int'(M); i++) w[i] = (t == 0) ? '1 : rand_vec(N);
      for (int r = 0; r < int'(R); r++) mem[BASE + r] = pack_row(N, M, w, r);
      x = (t == 0) ? '1 : rand_vec(N);
      exp = ref_layer(x, N, M, w);
      @(negedge clk);
      start = 1; in_vec = x[N-1:0];
      @(negedge clk);
      start = 0; in_vec = '0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
        if (lat > 1000) break;
      end
      checks++;
      if (out_vec !== exp[M-1:0]) begin
        failures++;
        $display("FAIL N=%0d M=%0d trial %0d: out %h expected %h", N, M, t, out_vec, exp[M-1:0]);
      end
      checks++;
      if (lat != int'(2 * R + 4)) begin
        failures++;
        $display("FAIL N=%0d M=%0d: latency %0d expected %0d", N, M, lat, 2 * R + 4);
      end
      // the result holds after done
      @(negedge clk);
      checks++;
      if (out_vec !== exp[M-1:0] || busy) begin
        failures++;
        $display("FAIL N=%0d M=%0d: result not held or still busy", N, M);
      end
    end
    finished = 1;
  end
endmodule
