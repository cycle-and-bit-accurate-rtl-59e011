// tb_edge_detector: self-checking test of the decision function F1.
//
// Presents a sequence of error samples and checks edge_o against
// |previous - current| >= 1554 (a_threshold = 0.5 at scale 3107): directed
// steps just below and at the threshold in both directions, a slow ramp that
// must never fire, the first sample after reset (no previous sample, no
// edge), invalid samples (ignored), and random samples.
module tb_edge_detector;
  import chaos_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, in_valid = 1'b0, edge_o;
  sample_t e = '0;
  int checks = 0, failures = 0, fired = 0;

  edge_detector dut (.clk, .rst_n, .en, .in_valid, .e, .edge_o);

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int prev;
  bit have_prev;
  // present one sample, check the combinational output, then clock it in
  task automatic sample(int v, bit valid = 1'b1);
    int dlt;
    bit exp;
    @(negedge clk);
    e = sample_t'(v); en = 1'b1; in_valid = valid;
    #1;
    dlt = prev - v;
    if (dlt < 0) dlt = -dlt;
    exp = valid && have_prev && (dlt >= 1554);
    check($sformatf("edge for %0d -> %0d", prev, v), int'(edge_o), int'(exp));
    if (edge_o) fired++;
    @(posedge clk);
    if (valid) begin prev = v; have_prev = 1'b1; end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    have_prev = 1'b0; prev = 0;
    sample(5000);                 // first sample: no previous, no edge
    sample(5000 - 1553);          // just below the threshold
    sample(5000 - 1553 + 1554);   // exactly at the threshold, upwards
    sample(5000 - 1553 + 1554 - 1554); // at the threshold, downwards
    sample(-30000, 1'b0);         // invalid: ignored
    sample(3447 + 100);           // compared with 3447, not with -30000
    for (int k = 0; k < 2000; k++) sample(-2000 + 2 * k);   // slow ramp
    sample(32767); sample(-32768); sample(32767);            // extremes
    for (int k = 0; k < 5000; k++) sample($urandom_range(0, 6000) - 3000);
    // clock enable low: nothing is marked and the previous sample is kept
    @(negedge clk); en = 1'b0; e = 16'sd20000; #1;
    check("no edge with en = 0", int'(edge_o), 0);
    if (fired == 0) begin failures++; $display("FAIL no edge ever detected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
