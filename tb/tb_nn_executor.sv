// tb_nn_executor: end-to-end test of the executor with its default network
// (256 inputs, layers of 32, 16 and 2 neurons). Random weights are loaded
// through the write port, random inputs are run and each result is compared
// with the reference model applied layer by layer. Also checked: the context
// word comes back with its result, the result holds while out_ready is low,
// the latency from accepted input to out_valid is 83 cycles, and with
// out_ready held high a new input is taken every 84 cycles, i.e. at least
// the 1.8 M inferences/s the paper reports per executor at 200 MHz
// (200e6 / 1.8e6 = 111 cycles).
module tb_nn_executor
  import bnn_ref_pkg::*;
;
  localparam int L = 3;
  localparam int unsigned SZ [4] = '{256, 32, 16, 2};
  localparam int LATENCY = 83;
  localparam int PERIOD  = 84;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, busy;
  logic [255:0] in_vec = '0, out_vec;
  logic [7:0] in_ctx = '0, out_ctx;
  logic wr_en = 0;
  logic [7:0] wr_addr = '0;
  logic [255:0] wr_data = '0;
  int checks = 0, failures = 0, cycles = 0;
  vec_t w [L][256];

  nn_executor #(.CTX_W(8)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 50000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic vec_t ref_net(vec_t x);
    vec_t a;
    a = x;
    for (int k = 0; k < L; k++) a = ref_layer(a, SZ[k], SZ[k+1], w[k]);
    return a;
  endfunction

  task automatic load_weights();
    int base;
    base = 0;
    for (int k = 0; k < L; k++) begin
      for (int i = 0; i < 256; i++) w[k][i] = (i < int'(SZ[k+1])) ? rand_vec(SZ[k]) : '0;
      for (int r = 0; r < int'(rows(SZ[k], SZ[k+1])); r++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 8'(base + r); wr_data = pack_row(SZ[k], SZ[k+1], w[k], r);
      end
      base += rows(SZ[k], SZ[k+1]);
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    int t_acc, t_prev_acc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights();
    t_prev_acc = -1;
    for (int t = 0; t < 40; t++) begin
      vec_t x, exp;
      bit stall;
      x = rand_vec(256);
      exp = ref_net(x);
      stall = (t % 4 == 3);          // every fourth result is back-pressured
      @(negedge clk);
      in_valid = 1; in_vec = x; in_ctx = 8'(t);
      out_ready = !stall;
      while (!in_ready) @(negedge clk);
      t_acc = cycles;
      if (t_prev_acc >= 0 && t % 4 != 0)
        check(t_acc - t_prev_acc == PERIOD, $sformatf("input period %0d, expected %0d", t_acc - t_prev_acc, PERIOD));
      t_prev_acc = t_acc;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(negedge clk);
      check(cycles - t_acc == LATENCY, $sformatf("latency %0d, expected %0d", cycles - t_acc, LATENCY));
      check(out_vec == exp, $sformatf("trial %0d: result %0h expected %0h", t, out_vec, exp));
      check(out_ctx == 8'(t), "context returned");
      if (stall) begin
        repeat (5) @(negedge clk);
        check(out_valid && out_vec == exp && !in_ready, "result held under back-pressure");
        out_ready = 1;
      end
    end
    check(LATENCY * 5 <= 500, "latency within 0.5 us at 200 MHz");
    check(200.0e6 / PERIOD >= 1.8e6, "throughput at least 1.8 M inferences/s");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
