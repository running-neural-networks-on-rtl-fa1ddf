// tb_n3ic_top: end-to-end test of the NIC inference engine at its default
// size (256-bit input, binary MLP of 32, 16 and 2 neurons, 256-row weight
// memory), with no parameter overridden.
//
// The testbench loads random weights through the weight port, then plays the
// packet parser, the forwarding module and the NIC memory:
//   1. one packet-field trigger with a packet-field result: the result must
//      match the reference model and arrive 85 cycles after the trigger is
//      accepted (0.425 us at 200 MHz, within the paper's 0.5 us);
//   2. back-to-back triggers with results written to memory: one inference
//      every 84 cycles, i.e. 2.38 M inferences/s at 200 MHz, above the
//      1.8 M/s the paper reports for one executor;
//   3. random traffic from both trigger sources with random input sources,
//      destinations and packet-result back-pressure, every result checked.
// Each mechanism is counted and a failure is counted for any that never
// happened: parser trigger, forwarding trigger, simultaneous triggers,
// trigger stalled by a busy executor, packet-field input, memory input,
// packet-field result, memory result, packet-result back-pressure.
module tb_n3ic_top
  import n3ic_pkg::*;
  import bnn_ref_pkg::*;
;
  localparam int L = 3;
  localparam int unsigned SZ [4] = '{256, 32, 16, 2};

  logic clk = 0, rst_n = 0;
  logic p_valid = 0, p_ready, f_valid = 0, f_ready;
  nn_req_t p_req = '0, f_req = '0;
  logic mrd_en, mwr_en;
  logic [MEM_AW-1:0] mrd_addr, mwr_addr;
  logic [ROW_W-1:0] mrd_data, mwr_data;
  logic pr_valid, pr_ready = 1;
  logic [ROW_W-1:0] pr_data;
  logic [TAG_W-1:0] pr_tag;
  logic wr_en = 0;
  logic [7:0] wr_addr = '0;
  logic [ROW_W-1:0] wr_data = '0;
  logic busy;

  n3ic_top dut (.*);

  int checks = 0, failures = 0, cycles = 0;
  vec_t w [L][256];
  logic [ROW_W-1:0] nicmem [64];

  typedef struct { vec_t y; nn_ctx_t c; int t; } exp_t;
  exp_t expq [$];
  int n_parser = 0, n_fwd = 0, n_tie = 0, n_stall = 0, n_in_pkt = 0, n_in_mem = 0;
  int n_out_pkt = 0, n_out_mem = 0, n_bp = 0;
  int last_pkt_lat = -1, last_mem_t = -1, mem_period = -1;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 200000);
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

  function automatic nn_req_t rnd_req(bit rand_src, bit rand_dst);
    nn_req_t r;
    r.src = rand_src ? in_src_e'($urandom_range(1)) : SRC_PKT;
    r.in_addr = MEM_AW'($urandom_range(31));          // inputs in words 0..31
    r.pkt_field = rand_vec(256);
    r.ctx.dst = rand_dst ? out_dst_e'($urandom_range(1)) : DST_PKT;
    r.ctx.out_addr = MEM_AW'(32 + $urandom_range(31)); // results in 32..63
    r.ctx.tag = TAG_W'($urandom);
    return r;
  endfunction

  // NIC memory: one-cycle reads, results written by the engine.
  always_ff @(posedge clk) begin
    if (mrd_en) mrd_data <= nicmem[mrd_addr[5:0]];
    if (mwr_en) nicmem[mwr_addr[5:0]] <= mwr_data;
  end

  // Monitor: grants, stalls, deliveries.
  always @(posedge clk) if (rst_n) begin
    if (p_valid && f_valid && (p_ready || f_ready)) n_tie++;
    if ((p_valid && !p_ready && !f_ready) || (f_valid && !f_ready && !p_ready)) if (busy) n_stall++;
    if (p_valid && p_ready) begin
      exp_t e;
      n_parser++;
      e.y = ref_net(p_req.src == SRC_PKT ? p_req.pkt_field : nicmem[p_req.in_addr[5:0]]);
      e.c = p_req.ctx; e.t = cycles;
      if (p_req.src == SRC_PKT) n_in_pkt++; else n_in_mem++;
      expq.push_back(e);
    end
    if (f_valid && f_ready) begin
      exp_t e;
      n_fwd++;
      e.y = ref_net(f_req.src == SRC_PKT ? f_req.pkt_field : nicmem[f_req.in_addr[5:0]]);
      e.c = f_req.ctx; e.t = cycles;
      if (f_req.src == SRC_PKT) n_in_pkt++; else n_in_mem++;
      expq.push_back(e);
    end
    if (pr_valid && !pr_ready) n_bp++;
    if (pr_valid && pr_ready) begin
      exp_t e;
      n_out_pkt++;
      e = expq.pop_front();
      last_pkt_lat = cycles - e.t;
      check(e.c.dst == DST_PKT && pr_data == e.y && pr_tag == e.c.tag,
            $sformatf("packet result %0h tag %0h, expected %0h tag %0h", pr_data, pr_tag, e.y, e.c.tag));
    end
    if (mwr_en) begin
      exp_t e;
      n_out_mem++;
      e = expq.pop_front();
      if (last_mem_t >= 0) mem_period = cycles - last_mem_t;
      last_mem_t = cycles;
      check(e.c.dst == DST_MEM && mwr_data == e.y && mwr_addr == e.c.out_addr,
            $sformatf("memory result %0h at %0d, expected %0h at %0d", mwr_data, mwr_addr, e.y, e.c.out_addr));
    end
  end

  // Random requesters, active while gen is set.
  bit gen = 0, rnd_bp = 0;
  always @(posedge clk) if (rst_n) begin
    if (p_valid && p_ready) p_valid <= 0;
    else if (!p_valid && gen && $urandom_range(3) == 0) begin p_req <= rnd_req(1, 1); p_valid <= 1; end
    if (f_valid && f_ready) f_valid <= 0;
    else if (!f_valid && gen && $urandom_range(3) == 0) begin f_req <= rnd_req(1, 1); f_valid <= 1; end
  end
  always @(negedge clk) if (rnd_bp) pr_ready <= ($urandom_range(3) == 0);

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
    for (int i = 0; i < 64; i++) nicmem[i] = rand_vec(256);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights();

    // 1. single inline inference, packet field in and out
    @(negedge clk);
    p_req = rnd_req(0, 0);
    p_valid = 1;
    @(negedge clk);
    p_valid = 0;
    wait (expq.size() == 0);
    @(negedge clk);
    check(last_pkt_lat == 85, $sformatf("inline latency %0d cycles, expected 85", last_pkt_lat));

    // 2. back-to-back memory-input, memory-result inferences
    for (int t = 0; t < 6; t++) begin
      @(negedge clk);
      f_req = rnd_req(0, 0);
      f_req.src = SRC_MEM;
      f_req.ctx.dst = DST_MEM;
      f_valid = 1;
      @(posedge clk);
      while (!f_ready) @(posedge clk);
      @(negedge clk);
      f_valid = 0;
    end
    wait (expq.size() == 0);
    check(mem_period == 84, $sformatf("inference period %0d cycles, expected 84", mem_period));
    check(200.0e6 / mem_period >= 1.8e6, "at least 1.8 M inferences/s at 200 MHz");

    // 3. random traffic with back-pressure
    rnd_bp = 1;
    @(negedge clk);
    gen = 1;
    repeat (8000) @(negedge clk);
    gen = 0;
    wait (!p_valid && !f_valid);
    wait (expq.size() == 0);
    rnd_bp = 0;
    pr_ready = 1;
    repeat (5) @(negedge clk);

    $display("parser triggers %0d, forwarding triggers %0d, simultaneous %0d, stalled cycles %0d",
             n_parser, n_fwd, n_tie, n_stall);
    $display("packet inputs %0d, memory inputs %0d, packet results %0d, memory results %0d, back-pressure cycles %0d",
             n_in_pkt, n_in_mem, n_out_pkt, n_out_mem, n_bp);
    check(n_parser > 0, "parser trigger happened");
    check(n_fwd > 0, "forwarding trigger happened");
    check(n_tie > 0, "simultaneous triggers happened");
    check(n_stall > 0, "trigger stalled by busy executor happened");
    check(n_in_pkt > 0, "packet-field input happened");
    check(n_in_mem > 0, "memory input happened");
    check(n_out_pkt > 0, "packet-field result happened");
    check(n_out_mem > 0, "memory result happened");
    check(n_bp > 0, "packet-result back-pressure happened");
    check(expq.size() == 0, "every inference delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
