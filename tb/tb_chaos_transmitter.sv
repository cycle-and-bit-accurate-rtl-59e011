// tb_chaos_transmitter: self-checking test of the transmitter state block.
//
// Checks the reset state against the paper's initial condition
// w(0) = (1032, -3107, 0), then closes the loop with a linear stand-in
// vector field (f = (-wy, wx, wx - wz), used only to exercise the three
// integrators; the paper's chaotic system is not reproduced) and compares
// every state after every step with a real-arithmetic Euler reference.
module tb_chaos_transmitter;
  import chaos_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  state3_t f, w;
  int checks = 0, failures = 0;

  chaos_transmitter dut (.clk, .rst_n, .en, .f, .w);

  always #5 clk = ~clk;

  always_comb begin
    f.x = sat(-20'(w.y));
    f.y = w.x;
    f.z = sat(20'(w.x) - 20'(w.z));
  end

  real ax, ay, az;                  // reference registers, units of 2^-20
  localparam real HQ = 1049.0, SC = 1048576.0;

  function automatic int rnd(real acc);
    real r = acc / SC, n = $floor(r), d = r - n;
    if (d > 0.5 || (d == 0.5 && ($rtoi(n) % 2 != 0))) n = n + 1.0;
    return $rtoi(n);
  endfunction

  function automatic real clampr(real a);
    if (a > 32767.0 * SC) return 32767.0 * SC;
    if (a < -32768.0 * SC) return -32768.0 * SC;
    return a;
  endfunction

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

  int fx, fy, fz;
  initial begin
    repeat (2) @(posedge clk);
    #1;
    check("wx(0)", int'(w.x), 1032);
    check("wy(0)", int'(w.y), -3107);
    check("wz(0)", int'(w.z), 0);
    ax = 1032.0 * SC; ay = -3107.0 * SC; az = 0.0;
    rst_n = 1'b1;
    en    = 1'b1;
    for (int n = 0; n < 20000; n++) begin
      // reference derivative from the reference state (rounded as the DUT sees it)
      fx = -rnd(ay);
      fy = rnd(ax);
      fz = rnd(ax) - rnd(az);
      @(posedge clk); #1;
      ax = clampr(ax + real'(fx) * HQ);
      ay = clampr(ay + real'(fy) * HQ);
      az = clampr(az + real'(fz) * HQ);
      check("wx", int'(w.x), rnd(ax));
      check("wy", int'(w.y), rnd(ay));
      check("wz", int'(w.z), rnd(az));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
