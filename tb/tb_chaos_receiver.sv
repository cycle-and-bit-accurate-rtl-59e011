// tb_chaos_receiver: self-checking test of the receiver state block.
//
// Checks the reset state against the paper's receiver initial condition
// sigma(0) = (0, -4660, 1553), then drives random vector-field terms f and
// control inputs u and compares each state with a real-arithmetic Euler
// reference of d sigma/dt = sat16(f + u). Large f and u of equal sign check
// that their sum saturates.
module tb_chaos_receiver;
  import chaos_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  state3_t f = '0, u = '0, sigma;
  int checks = 0, failures = 0;

  chaos_receiver dut (.clk, .rst_n, .en, .f, .u, .sigma);

  always #5 clk = ~clk;

  real a [3];
  localparam real HQ = 1049.0, SC = 1048576.0;

  function automatic int rnd(real acc);
    real r = acc / SC, n = $floor(r), d = r - n;
    if (d > 0.5 || (d == 0.5 && ($rtoi(n) % 2 != 0))) n = n + 1.0;
    return $rtoi(n);
  endfunction

  function automatic real clampr(real v, real lo, real hi);
    return (v > hi) ? hi : (v < lo) ? lo : v;
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

  int fv [3], uv [3];
  initial begin
    repeat (2) @(posedge clk);
    #1;
    check("sx(0)", int'(sigma.x), 0);
    check("sy(0)", int'(sigma.y), -4660);
    check("sz(0)", int'(sigma.z), 1553);
    a[0] = 0.0; a[1] = -4660.0 * SC; a[2] = 1553.0 * SC;
    rst_n = 1'b1;
    en    = 1'b1;
    for (int n = 0; n < 12000; n++) begin
      for (int k = 0; k < 3; k++) begin
        if (n % 1000 < 20) begin            // bursts of large equal-sign terms
          fv[k] = (n % 2000 < 1000) ? 30000 : -30000;
          uv[k] = fv[k];
        end else begin
          fv[k] = $urandom_range(0, 8000) - 4000;
          uv[k] = $urandom_range(0, 8000) - 4000;
        end
      end
      f = '{x: 16'(fv[0]), y: 16'(fv[1]), z: 16'(fv[2])};
      u = '{x: 16'(uv[0]), y: 16'(uv[1]), z: 16'(uv[2])};
      @(posedge clk); #1;
      for (int k = 0; k < 3; k++)
        a[k] = clampr(a[k] + clampr(real'(fv[k] + uv[k]), -32768.0, 32767.0) * HQ,
                      -32768.0 * SC, 32767.0 * SC);
      check("sx", int'(sigma.x), rnd(a[0]));
      check("sy", int'(sigma.y), rnd(a[1]));
      check("sz", int'(sigma.z), rnd(a[2]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
