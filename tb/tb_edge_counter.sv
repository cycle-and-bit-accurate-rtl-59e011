// tb_edge_counter: self-checking test of the edge counter E_c with memory M.
//
// Random edge markers with a random clock enable: the combinational count
// must equal the number of edges stored so far plus the present marker, and
// the stored value must advance only on enabled clocks. A long run wraps the
// 16-bit counter once.
module tb_edge_counter;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, edge_i = 1'b0;
  logic [15:0] count;
  int checks = 0, failures = 0;

  edge_counter dut (.clk, .rst_n, .en, .edge_i, .count);

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int stored;
  initial begin
    repeat (2) @(posedge clk);
    #1 check("reset count", int'(count), 0);
    rst_n = 1'b1; stored = 0;
    for (int n = 0; n < 80000; n++) begin
      @(negedge clk);
      en     = $urandom_range(0, 3) != 0;
      edge_i = (n < 70000) ? 1'b1 : $urandom_range(0, 1) == 1;   // wrap first
      #1;
      check("count", int'(count), (stored + int'(edge_i)) % 65536);
      @(posedge clk);
      if (en) stored = (stored + int'(edge_i)) % 65536;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
