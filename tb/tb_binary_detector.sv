// tb_binary_detector: self-checking test of the complete detection chain.
//
// Builds an error e3 the way the modulated link produces it: a slowly
// varying background (a sine of amplitude 0.3, well below the threshold per
// sample) plus, for every transition of a random bit stream at 1 bit per 450
// samples, a step of +-1.0 (3107) that decays back to zero. The recovered bit
// must toggle at each transition exactly DEPTH = 4 samples after the step
// enters, start at 1 (even count), and never toggle elsewhere. Edge marks and
// the edge count are checked against the number of transitions.
module tb_binary_detector;
  import chaos_pkg::*;

  localparam int DEPTH = 4, BIT_LEN = 450, NBITS = 60;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, edge_o, recovered;
  logic [15:0] count;
  sample_t e3 = '0;
  int checks = 0, failures = 0, edges_seen = 0, toggles = 0;

  binary_detector dut (.clk, .rst_n, .en, .e3, .edge_o, .count, .recovered);

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (NBITS * BIT_LEN + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected recovered bit per input sample index
  bit   exp_bit [$];
  int   exp_cnt [$];
  real  pulse;
  bit   info, info_prev;
  int   n_trans;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    info_prev = 1'b0; n_trans = 0; pulse = 0.0;
    for (int n = 0; n < NBITS * BIT_LEN; n++) begin
      if (n % BIT_LEN == 0 && n > 0) info = 1'($urandom_range(0, 1));
      else if (n == 0) info = 1'b0;
      if (info != info_prev) begin
        pulse = pulse + (info ? -1.0 : 1.0);   // error dips when the bit rises
        n_trans++;
      end
      info_prev = info;
      exp_bit.push_back((n_trans % 2) == 0);
      exp_cnt.push_back(n_trans);
      @(negedge clk);
      en = 1'b1;
      e3 = sample_t'($rtoi(S_F * (pulse + 0.3 * $sin(6.2831853 * n / 3000.0))));
      pulse = pulse * 0.98;
      #1;
      if (n >= DEPTH) begin
        check("recovered", int'(recovered), int'(exp_bit[n - DEPTH]));
        check("count", int'(count), exp_cnt[n - DEPTH]);
      end else begin
        check("recovered before first sample", int'(recovered), 1);
      end
      if (edge_o) edges_seen++;
    end
    if (n_trans == 0) begin failures++; $display("FAIL no transitions generated"); end
    check("edges marked", edges_seen, exp_cnt[NBITS * BIT_LEN - 1 - DEPTH]);
    $display("transitions %0d, edges marked %0d", n_trans, edges_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
