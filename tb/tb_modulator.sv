// tb_modulator: self-checking test of the information modulator.
//
// Drives random transmitter z states and information samples with a random
// info_valid. The held sample must change only on a clock with info_valid,
// and s_z must equal the 16-bit-saturated sum wz + held sample. Also checks the cleared hold register after reset and the
// hold behaviour at a 1-in-100 input rate (4.5 MHz at a 450 MHz clock).
module tb_modulator;
  import chaos_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, info_valid = 1'b0;
  sample_t w_z = '0, s_z;
  sample_t info = '0;
  int checks = 0, failures = 0;

  modulator dut (.clk, .rst_n, .w_z, .info, .info_valid, .s_z);

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int sat_ref(int v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int held;
  initial begin
    w_z = 16'sd100;
    repeat (2) @(posedge clk);
    #1 check("reset: no information", int'(s_z), 100);
    rst_n = 1'b1;
    held  = 0;
    // random rate
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      w_z = sample_t'($urandom);
      info = sample_t'($urandom);
      info_valid = $urandom_range(0, 3) == 0;
      #1;
      check("s_z before clock", int'(s_z), sat_ref(int'(w_z) + held));
      @(posedge clk); #1;
      if (info_valid) held = int'(info);
      check("s_z after clock", int'(s_z), sat_ref(int'(w_z) + held));
    end
    // 1-in-100 input rate: a sine sample is held for 100 clocks
    w_z = '0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      info_valid = (n % 100 == 0);
      info = sample_t'($rtoi(0.5 * S_F * $sin(6.2831853 * n / 1000.0)));
      @(posedge clk); #1;
      if (info_valid) held = int'(info);
      check("held sine sample", int'(s_z), held);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
