// tb_parity_decision: self-checking test of the bit assignment F2.
//
// Every 16-bit count is applied; the output must be 1 for an even count and
// 0 for an odd count.
module tb_parity_decision;
  logic [15:0] count = '0;
  logic bit_o;
  int checks = 0, failures = 0;

  parity_decision dut (.count, .bit_o);

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 65536; c++) begin
      count = 16'(c);
      #1;
      checks++;
      if (bit_o !== ((c % 2 == 0) ? 1'b1 : 1'b0)) begin
        failures++;
        if (failures < 10) $display("FAIL count %0d gave %0b", c, bit_o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
