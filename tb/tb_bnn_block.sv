// tb_bnn_block: self-checking test of the binary FC layer block.
// Three layer shapes are run: 256x32 (one neuron per row, 32 LTs), 32x16
// (eight neurons per 256-bit row) and 152x20 (fan-in not a multiple of 8, so
// the last LT of a neuron sees padding). Each is checked against the
// reference model and for its latency of 2*rows+4 cycles.
module tb_bnn_block;
  logic clk = 0, rst_n = 0;
  int c0, f0, c1, f1, c2, f2, c3, f3;
  logic d0, d1, d2, d3;
  int checks, failures, cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  bnn_block_harness #(.N(256), .M(32), .BASE(3))  h0 (.clk, .rst_n, .checks(c0), .failures(f0), .finished(d0));
  bnn_block_harness #(.N(32),  .M(16), .BASE(0))  h1 (.clk, .rst_n, .checks(c1), .failures(f1), .finished(d1));
  bnn_block_harness #(.N(152), .M(20), .BASE(40)) h2 (.clk, .rst_n, .checks(c2), .failures(f2), .finished(d2));
  bnn_block_harness #(.N(16),  .M(2),  .BASE(9))  h3 (.clk, .rst_n, .checks(c3), .failures(f3), .finished(d3));

  initial begin
    wait (cycles == 20000);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3, f0 + f1 + f2 + f3 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (d0 && d1 && d2 && d3);
    checks = c0 + c1 + c2 + c3;
    failures = f0 + f1 + f2 + f3;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
