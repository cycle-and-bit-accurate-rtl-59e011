// tb_euler_integrator: self-checking test of the forward-Euler integrator.
//
// A reference model in real arithmetic keeps the exact register value
// (IC * 2^20 plus the sum of f * round(0.001 * 2^20)), clamps it to the
// 16-bit range and rounds it half-to-even; the DUT state must match it after
// every clock. The test checks the reset value, that en = 0 holds the state,
// that the state moves one clock after f, the step size (1000 steps of
// f = 1000 move x by 1000, i.e. 0.001 * f per step), rounding of exact halves,
// saturation at both ends, and a run of random derivatives.
module tb_euler_integrator;
  import chaos_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  sample_t f = '0, x;
  int checks = 0, failures = 0;

  localparam sample_t IC0 = 16'sd1032;
  euler_integrator #(.IC(IC0)) dut (.clk, .rst_n, .en, .f, .x);

  // Second instance with a step of 0.5 and 4 fraction bits: f = 1 puts the
  // register on exact halves, which must round to the even neighbour.
  sample_t f2 = '0, x2;
  logic    en2 = 1'b0;
  euler_integrator #(.FRAC(4), .STEP(0.5), .IC(16'sd0)) dut_half (
    .clk, .rst_n, .en(en2), .f(f2), .x(x2));
  int half_exp [8] = '{0, 1, 2, 2, 2, 3, 4, 4};   // k/2 rounded half-to-even, k = 1..8

  always #5 clk = ~clk;

  real    acc_ref;                      // register value in units of 2^-20
  localparam real HQ = 1049.0;          // round(0.001 * 2^20)
  localparam real AMAX = 32767.0 * 1048576.0;
  localparam real AMIN = -32768.0 * 1048576.0;

  function automatic int ref_x(real acc);
    real r = acc / 1048576.0;
    real n = $floor(r);
    real d = r - n;
    if (d > 0.5) n = n + 1.0;
    else if (d == 0.5 && ($rtoi(n) % 2 != 0)) n = n + 1.0;
    return $rtoi(n);
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic step(sample_t fv, bit e);
    f  = fv;
    en = e;
    @(posedge clk);
    #1;
    if (e) begin
      acc_ref = acc_ref + real'(fv) * HQ;
      if (acc_ref > AMAX) acc_ref = AMAX;
      if (acc_ref < AMIN) acc_ref = AMIN;
    end
    check("state", int'(x), ref_x(acc_ref));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int x0;
  initial begin
    acc_ref = real'(IC0) * 1048576.0;
    repeat (3) @(posedge clk);
    #1;
    check("reset value", int'(x), 1032);
    rst_n = 1'b1;
    // en = 0 holds the state
    for (int i = 0; i < 5; i++) step(16'sd20000, 1'b0);
    check("hold", int'(x), 1032);
    // the state moves one clock after f is presented
    f = 16'sd1000; en = 1'b1;
    #1 check("no combinational path f->x", int'(x), 1032);
    // 1000 steps of f = 1000: x advances by 0.001*1000 per step
    x0 = int'(x);
    for (int i = 0; i < 1000; i++) step(16'sd1000, 1'b1);
    check("step size 0.001", int'(x) - x0, 1000);
    // random derivatives
    for (int i = 0; i < 5000; i++) step(sample_t'($urandom), 1'b1);
    // drive to positive saturation and back
    for (int i = 0; i < 2000; i++) step(16'sd32767, 1'b1);
    check("positive saturation", int'(x), 32767);
    for (int i = 0; i < 4000; i++) step(-16'sd32768, 1'b1);
    check("negative saturation", int'(x), -32768);
    for (int i = 0; i < 3000; i++) step(sample_t'($urandom_range(0, 4000)), 1'b1);
    for (int i = 0; i < 5000; i++) step(sample_t'($urandom_range(0, 65535)), 1'b1);
    // convergent rounding of exact halves (x = 0.5, 1.0, ..., 4.0)
    f2 = 16'sd1; en2 = 1'b1;
    for (int k = 1; k <= 8; k++) begin
      @(posedge clk); #1;
      check($sformatf("half-even rounding of %0d/2", k), int'(x2), half_exp[k-1]);
    end
    en2 = 1'b0;
    // reset reloads the initial condition
    rst_n = 1'b0; #1;
    acc_ref = real'(IC0) * 1048576.0;
    check("reset reload", int'(x), 1032);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
