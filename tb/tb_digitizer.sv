// tb_digitizer: self-checking test of the 16-level binary form.
//
// The three examples printed for the transmitter's initial condition
// (1032 -> 1000010000001000, -3107 -> 0000110000100011, 0 ->
// 1000000000000000), the two range ends, and every other 16-bit value
// against a sign-magnitude reference with the sign bit high for v >= 0.
module tb_digitizer;
  import chaos_pkg::*;

  sample_t v = '0;
  logic [15:0] b;
  int checks = 0, failures = 0;

  digitizer dut (.v, .b);

  task automatic check(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m;
  initial begin
    v = 16'sd1032;   #1 check("wx(0)", b, 16'b1000010000001000);
    v = -16'sd3107;  #1 check("wy(0)", b, 16'b0000110000100011);
    v = 16'sd0;      #1 check("wz(0)", b, 16'b1000000000000000);
    v = 16'sd32767;  #1 check("max", b, 16'hFFFF);
    v = -16'sd32768; #1 check("min", b, 16'h7FFF);
    for (int k = -32767; k <= 32767; k++) begin
      v = sample_t'(k);
      m = (k < 0) ? -k : k;
      #1 check($sformatf("value %0d", k), b, {(k >= 0) ? 1'b1 : 1'b0, 15'(m)});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
