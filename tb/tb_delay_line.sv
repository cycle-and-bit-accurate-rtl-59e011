// tb_delay_line: self-checking test of the delay element D.
//
// Feeds random samples with a random clock enable and random input-valid
// bits; after every clock q and q_valid must equal what was presented DEPTH
// enabled clocks earlier (a reference queue), and 0 / invalid for the first
// DEPTH enabled clocks after reset.
module tb_delay_line;
  import chaos_pkg::*;

  localparam int DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, in_valid = 1'b0, q_valid;
  sample_t d = '0, q;
  int checks = 0, failures = 0;

  delay_line dut (.clk, .rst_n, .en, .in_valid, .d, .q, .q_valid);

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int   qd [$];
  bit   qv [$];
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < DEPTH; k++) begin qd.push_back(0); qv.push_back(1'b0); end
    for (int n = 0; n < 10000; n++) begin
      @(negedge clk);
      en       = $urandom_range(0, 4) != 0;
      in_valid = $urandom_range(0, 7) != 0;
      d        = sample_t'($urandom);
      @(posedge clk); #1;
      if (en) begin
        qd.push_back(int'(d)); qv.push_back(in_valid);
        void'(qd.pop_front()); void'(qv.pop_front());
      end
      check("q", int'(q), qd[0]);
      check("q_valid", int'(q_valid), int'(qv[0]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
