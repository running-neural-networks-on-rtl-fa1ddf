// tb_weight_mem: weight memory write/read test.
// Writes random 256-bit rows to every address, reads them back in random
// order checking the one-cycle read latency, that rd_data holds while
// rd_en is low, and that a read and a write to the same row in one cycle
// return the old contents.
module tb_weight_mem;
  localparam int DEPTH = 64;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  logic [255:0] wr_data = 0, rd_data;
  logic [255:0] model [DEPTH];
  int checks = 0, failures = 0, cycles = 0;

  weight_mem #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [255:0] rnd();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic check(logic [255:0] exp, string what);
    checks++;
    if (rd_data !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rd_data, exp);
    end
  endtask

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = 6'(a); wr_data = rnd(); model[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      rd_en = 1; rd_addr = 6'(a);
      @(negedge clk);
      rd_en = 0;
      check(model[a], "read");
      // hold while idle, even if the address moves
      rd_addr = 6'($urandom_range(DEPTH - 1));
      @(negedge clk);
      check(model[a], "hold");
    end
    // read during write of the same row gives the old row
    rd_en = 1; rd_addr = 6'd7; wr_en = 1; wr_addr = 6'd7; wr_data = rnd();
    @(negedge clk);
    check(model[7], "read-during-write");
    model[7] = wr_data;
    wr_en = 0;
    @(negedge clk);
    rd_en = 0;
    check(model[7], "after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
