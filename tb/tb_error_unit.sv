// tb_error_unit: self-checking test of the synchronisation error unit.
//
// Random receiver states and received signals; each error must equal
// sigma - r saturated to 16 bits. Directed cases cover both saturation
// limits and a zero error.
module tb_error_unit;
  import chaos_pkg::*;

  state3_t sigma = '0, r = '0, e;
  int checks = 0, failures = 0;

  error_unit dut (.sigma, .r, .e);

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
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sigma = '{x: 16'sd30000, y: -16'sd30000, z: 16'sd1553};
    r     = '{x: -16'sd30000, y: 16'sd30000, z: 16'sd1553};
    #1;
    check("ex saturates high", int'(e.x), 32767);
    check("ey saturates low", int'(e.y), -32768);
    check("ez zero", int'(e.z), 0);
    for (int n = 0; n < 5000; n++) begin
      sigma = state3_t'({$urandom, $urandom});
      r     = state3_t'({$urandom, $urandom});
      #1;
      check("ex", int'(e.x), sat_ref(int'(sigma.x) - int'(r.x)));
      check("ey", int'(e.y), sat_ref(int'(sigma.y) - int'(r.y)));
      check("ez", int'(e.z), sat_ref(int'(sigma.z) - int'(r.z)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
