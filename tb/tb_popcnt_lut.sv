// tb_popcnt_lut: exhaustive check of the 8-bit popcount lookup table.
// Every one of the 256 addresses is applied and the result compared with
// $countones of the address.
module tb_popcnt_lut;
  logic [7:0] addr;
  logic [3:0] count;
  int checks = 0, failures = 0;

  popcnt_lut dut (.addr(addr), .count(count));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      addr = 8'(i);
      #1;
      checks++;
      if (count != 4'($countones(addr))) begin
        failures++;
        $display("FAIL addr=%02h count=%0d expected %0d", addr, count, $countones(addr));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
