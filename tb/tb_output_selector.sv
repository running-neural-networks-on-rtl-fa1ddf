// tb_output_selector: test of result delivery.
// Random results with random destinations are offered; packet results are
// taken by a forwarding-module model with random pr_ready, memory results
// are caught on the write port. Every result must arrive once, in order,
// at its destination, with its tag or address, and a waiting packet result
// must hold and back-pressure the executor side.
module tb_output_selector
  import n3ic_pkg::*;
;
  logic clk = 0, rst_n = 0;
  logic r_valid = 0, r_ready;
  logic [ROW_W-1:0] r_vec = '0;
  nn_ctx_t r_ctx = '0;
  logic pr_valid, pr_ready = 0;
  logic [ROW_W-1:0] pr_data;
  logic [TAG_W-1:0] pr_tag;
  logic mwr_en;
  logic [MEM_AW-1:0] mwr_addr;
  logic [ROW_W-1:0] mwr_data;
  int checks = 0, failures = 0, cycles = 0, n_pkt = 0, n_mem = 0, n_bp = 0;
  typedef struct { logic [ROW_W-1:0] v; nn_ctx_t c; } res_t;
  res_t pktq [$], memq [$];

  output_selector dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) pr_ready <= ($urandom_range(2) == 0);

  always @(posedge clk) if (rst_n) begin
    if (r_valid && r_ready) begin
      res_t e;
      e.v = r_vec; e.c = r_ctx;
      if (r_ctx.dst == DST_PKT) pktq.push_back(e); else memq.push_back(e);
    end
    if (r_valid && !r_ready) n_bp++;
    if (pr_valid && pr_ready) begin
      res_t e;
      checks++; n_pkt++;
      e = pktq.pop_front();
      if (pr_data !== e.v || pr_tag !== e.c.tag) begin failures++; $display("FAIL packet result"); end
    end
    if (mwr_en) begin
      res_t e;
      checks++; n_mem++;
      e = memq.pop_front();
      if (mwr_data !== e.v || mwr_addr !== e.c.out_addr) begin failures++; $display("FAIL memory write"); end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      r_valid = 1;
      for (int i = 0; i < ROW_W / 32; i++) r_vec[i*32 +: 32] = $urandom;
      r_ctx.dst = out_dst_e'($urandom_range(1));
      r_ctx.out_addr = MEM_AW'($urandom);
      r_ctx.tag = TAG_W'($urandom);
      #1;
      while (!r_ready) @(negedge clk);
      @(negedge clk);
      r_valid = 0;
      repeat ($urandom_range(2)) @(negedge clk);
    end
    repeat (40) @(negedge clk);
    checks++;
    if (pktq.size() != 0 || memq.size() != 0 || n_pkt == 0 || n_mem == 0 || n_bp == 0) begin
      failures++;
      $display("FAIL left pkt=%0d mem=%0d, delivered pkt=%0d mem=%0d, back-pressure %0d",
               pktq.size(), memq.size(), n_pkt, n_mem, n_bp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
