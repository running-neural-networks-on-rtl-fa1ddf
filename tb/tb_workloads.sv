// tb_workloads: the network shapes the paper evaluates besides the default
// 256-32-16-2 traffic-analysis network (which tb_n3ic_top runs):
//   - network tomography: 19 one-way delays of 8 bits = 152 inputs, binary
//     MLPs of 32-16-2, 64-32-2 and 128-64-2 neurons;
//   - layer-size scaling: a single FC layer with 256 inputs and 32, 64 or
//     128 neurons.
// Each runs on its own executor with random weights and is checked against
//   - executor scaling: the same three single layers streamed through pools
//     of 1, 2 and 4 executors.
// Each runs with random weights and is checked against the reference model.
// Timing checks at 200 MHz: the 128-64-2 tomography network must finish
// within the 2 us the paper reports; the latency of the single layer must
// grow linearly with its neuron count; a pool of 2 or 4 executors must give
// at least 0.95 x 2 or 4 times the throughput of one executor.
module tb_workloads;
  logic clk = 0, rst_n = 0;
  int c [6], f [6], lat [6];
  logic d [6];
  int checks, failures, cycles = 0;
  localparam int unsigned PE [3] = '{1, 2, 4};
  localparam int unsigned PM [3] = '{32, 64, 128};
  int pc [3][3], pf [3][3], pspan [3][3];
  logic pd [3][3];

  for (genvar e = 0; e < 3; e++) begin : g_pe
    for (genvar m = 0; m < 3; m++) begin : g_pm
      pool_harness #(.NE(PE[e]), .M(PM[m])) h (.clk, .rst_n, .checks(pc[e][m]), .failures(pf[e][m]),
                                              .span(pspan[e][m]), .finished(pd[e][m]));
    end
  end

  function automatic bit pools_done();
    foreach (pd[e, m]) if (!pd[e][m]) return 0;
    return 1;
  endfunction

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  exec_harness #(.NL(3), .SZ4('{152, 32, 16, 2}))  h_t32  (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .latency(lat[0]), .finished(d[0]));
  exec_harness #(.NL(3), .SZ4('{152, 64, 32, 2}))  h_t64  (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .latency(lat[1]), .finished(d[1]));
  exec_harness #(.NL(3), .SZ4('{152, 128, 64, 2})) h_t128 (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .latency(lat[2]), .finished(d[2]));
  exec_harness #(.NL(1), .SZ4('{256, 32, 0, 0}))  h_fc32  (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .latency(lat[3]), .finished(d[3]));
  exec_harness #(.NL(1), .SZ4('{256, 64, 0, 0}))  h_fc64  (.clk, .rst_n, .checks(c[4]), .failures(f[4]), .latency(lat[4]), .finished(d[4]));
  exec_harness #(.NL(1), .SZ4('{256, 128, 0, 0})) h_fc128 (.clk, .rst_n, .checks(c[5]), .failures(f[5]), .latency(lat[5]), .finished(d[5]));

  function automatic int sum6(int a [6]);
    int s;
    s = 0;
    foreach (a[i]) s += a[i];
    return s;
  endfunction

  initial begin
    wait (cycles == 100000);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", sum6(c), sum6(f) + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!(d[0] && d[1] && d[2] && d[3] && d[4] && d[5] && pools_done())) @(negedge clk);
    checks = sum6(c);
    failures = sum6(f);
    foreach (pc[e, m]) begin
      checks += pc[e][m];
      failures += pf[e][m];
    end
    for (int m = 0; m < 3; m++) begin
      $display("256x%0d layer, 24 requests: 1 exec %0d cycles (%0.2f M/s), 2 exec %0d (%0.2f M/s), 4 exec %0d (%0.2f M/s)",
               PM[m], pspan[0][m], 24.0 * 200.0 / real'(pspan[0][m]), pspan[1][m], 24.0 * 200.0 / real'(pspan[1][m]),
               pspan[2][m], 24.0 * 200.0 / real'(pspan[2][m]));
      for (int e = 1; e < 3; e++) begin
        checks++;
        if (real'(pspan[0][m]) / real'(pspan[e][m]) < 0.95 * real'(PE[e])) begin
          failures++;
          $display("FAIL %0d executors do not scale the throughput of the 256x%0d layer", PE[e], PM[m]);
        end
      end
    end
    $display("tomography latency: 32-16-2 %0d, 64-32-2 %0d, 128-64-2 %0d cycles", lat[0], lat[1], lat[2]);
    $display("single 256-input layer latency: 32 %0d, 64 %0d, 128 %0d cycles", lat[3], lat[4], lat[5]);
    checks++;
    if (lat[2] * 5 >= 2000) begin failures++; $display("FAIL tomography 128-64-2 not below 2 us"); end
    checks++;
    if (lat[5] - lat[4] != 2 * (lat[4] - lat[3])) begin failures++; $display("FAIL layer latency not linear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
