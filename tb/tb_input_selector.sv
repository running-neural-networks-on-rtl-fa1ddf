// tb_input_selector: test of trigger arbitration and input selection.
// Random triggers from the packet parser and the forwarding module, with
// random input sources, are driven against a behavioural NIC memory (one
// cycle read latency) and a consumer that accepts at random. Each vector
// handed on is checked against the packet field or memory word of the
// granted request, together with its context, and the grants are checked
// to alternate when both sources request at once.
module tb_input_selector
  import n3ic_pkg::*;
;
  logic clk = 0, rst_n = 0;
  logic p_valid = 0, p_ready, f_valid = 0, f_ready;
  nn_req_t p_req, f_req;
  logic mrd_en;
  logic [MEM_AW-1:0] mrd_addr;
  logic [ROW_W-1:0] mrd_data;
  logic x_valid, x_ready = 0;
  logic [ROW_W-1:0] x_vec;
  nn_ctx_t x_ctx;
  logic [ROW_W-1:0] nicmem [64];
  int checks = 0, failures = 0, cycles = 0;
  int n_pkt = 0, n_mem = 0, n_tie = 0, n_stall = 0;
  nn_req_t expq [$];
  logic last_src_f = 0;

  input_selector dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  always_ff @(posedge clk) if (mrd_en) mrd_data <= nicmem[mrd_addr[5:0]];

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ROW_W-1:0] rnd();
    logic [ROW_W-1:0] v;
    for (int i = 0; i < ROW_W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic nn_req_t rnd_req();
    nn_req_t r;
    r.src = in_src_e'($urandom_range(1));
    r.in_addr = MEM_AW'($urandom_range(63));
    r.pkt_field = rnd();
    r.ctx.dst = out_dst_e'($urandom_range(1));
    r.ctx.out_addr = MEM_AW'($urandom);
    r.ctx.tag = TAG_W'($urandom);
    return r;
  endfunction

  // Requesters: hold a request until it is granted; while gen is set, an
  // idle requester raises a new random request with probability 1/3.
  bit gen = 1;
  always @(posedge clk) if (rst_n) begin
    if (p_valid && p_ready) p_valid <= 0;
    else if (!p_valid && gen && $urandom_range(2) == 0) begin p_req <= rnd_req(); p_valid <= 1; end
    if (f_valid && f_ready) f_valid <= 0;
    else if (!f_valid && gen && $urandom_range(2) == 0) begin f_req <= rnd_req(); f_valid <= 1; end
  end

  // Record the expected order of grants, and check round-robin ties.
  always @(posedge clk) if (rst_n) begin
    if (p_valid && f_valid && (p_ready || f_ready)) begin
      n_tie++;
      checks++;
      if (f_ready != !last_src_f) begin
        failures++;
        $display("FAIL round-robin: last was %0s", last_src_f ? "fwd" : "parser");
      end
    end
    if (p_valid && !p_ready && !f_ready) n_stall++;
    if (p_ready && f_ready) begin failures++; $display("FAIL both granted"); end
    if (p_valid && p_ready) begin expq.push_back(p_req); last_src_f <= 0; end
    if (f_valid && f_ready) begin expq.push_back(f_req); last_src_f <= 1; end
  end

  // Consumer: random ready; check what is handed on.
  always @(negedge clk) x_ready <= ($urandom_range(3) != 0);
  always @(posedge clk) if (rst_n && x_valid && x_ready) begin
    nn_req_t e;
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      e = expq.pop_front();
      if (e.src == SRC_PKT) n_pkt++; else n_mem++;
      if (x_vec !== (e.src == SRC_PKT ? e.pkt_field : nicmem[e.in_addr[5:0]]) || x_ctx !== e.ctx) begin
        failures++;
        $display("FAIL output for src %0d: vec/ctx mismatch", e.src);
      end
    end
  end

  initial begin
    for (int i = 0; i < 64; i++) nicmem[i] = rnd();
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (600) @(negedge clk);
    gen = 0;
    wait (!p_valid && !f_valid);
    repeat (10) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d inputs never handed on", expq.size()); end
    checks++;
    if (n_pkt == 0 || n_mem == 0 || n_tie == 0 || n_stall == 0) begin
      failures++;
      $display("FAIL coverage pkt=%0d mem=%0d tie=%0d stall=%0d", n_pkt, n_mem, n_tie, n_stall);
    end
    $display("packet inputs %0d, memory inputs %0d, ties %0d, stalls %0d", n_pkt, n_mem, n_tie, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
