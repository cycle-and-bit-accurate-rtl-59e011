// tb_sine_workloads: the four sine-modulation cases, run through the whole
// system at its default parameters.
//
// A sine of amplitude 0.5 (1553 at scale 3107) modulates wz in four cases:
//   A: 16-bit samples, 50 kHz, one new sample every 100 clocks (4.5 MHz)
//   B: 16-bit samples, 50 kHz, a new sample every clock (450 MHz)
//   C:  8-bit samples, 50 kHz, every clock; the 8-bit value is two's
//       complement with 6 fraction bits (steps of 1/64, i.e. 48.5 LSB)
//   D: 16-bit samples, 25 kHz, every clock
// Each case resets the system, lets the receiver synchronise for 2000 clocks
// and then sends one full sine period (9000 or 18000 clocks). As in the
// end-to-end bench the vector field (-y, x, x - z) and the control u = -8 e
// are stand-ins, not the paper's chaotic system or adaptive controller, and
// the channel is noise-free.
//
// Checks per clock: the transmitted z equals wz plus the held sample, and
// the held sample changes only at the input rate. Per case: the binary
// detector marks no edge (a slow sine never steps by the threshold), and the
// receiver follows the modulated signal (|e3| stays below half the sine
// amplitude). Across cases: coarser input sampling (A against B) and coarser
// resolution (C against B) give a larger peak error, the trend the paper
// reports. The peak errors are printed.
module tb_sine_workloads;
  import chaos_pkg::*;

  localparam int SYNC = 2000;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  state3_t f_tx, w, s_tx, r_rx, f_rx, u, sigma, e;
  sample_t info = '0;
  logic info_valid = 1'b0;
  logic [2:0][15:0] w_bits, e_bits;
  logic edge_o, recovered;
  logic [15:0] edge_count;
  int checks = 0, failures = 0;

  chaos_comm_top dut (
    .clk, .rst_n, .en, .f_tx, .w, .info, .info_valid, .s_tx, .r_rx,
    .f_rx, .u, .sigma, .e, .w_bits, .e_bits, .edge_o, .edge_count, .recovered
  );

  always #5 clk = ~clk;

  function automatic state3_t field(state3_t v);
    field.x = sat(-20'(v.y));
    field.y = v.x;
    field.z = sat(20'(v.x) - 20'(v.z));
  endfunction

  always_comb begin
    f_tx = field(w);
    f_rx = field(sigma);
    u.x  = sat(-20'(e.x) * 8);
    u.y  = sat(-20'(e.y) * 8);
    u.z  = sat(-20'(e.z) * 8);
    r_rx = s_tx;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Quantise a real value (units of 1.0) to the 16-bit sample or to an 8-bit
  // Q1.6 value expressed at the 16-bit scale.
  function automatic sample_t quant(real m, int bits);
    if (bits == 8) return sample_t'($rtoi($floor(m * 64.0 + 0.5) * S_F / 64.0));
    return sample_t'($rtoi($floor(m * S_F + 0.5)));
  endfunction

  int peak [4];

  task automatic run_case(int idx, int div, int bits, real freq_hz);
    int nper, held, edges, pk;
    real m;
    nper = $rtoi(450.0e6 / freq_hz);
    rst_n = 1'b0; en = 1'b0; info_valid = 1'b0; info = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1; en = 1'b1;
    repeat (SYNC) @(posedge clk);
    held = 0; edges = 0; pk = 0;
    for (int n = 0; n < nper; n++) begin
      @(negedge clk);
      m = 0.5 * $sin(6.283185307179586 * freq_hz * n / 450.0e6);
      info_valid = (n % div == 0);
      info = quant(m, bits);
      @(posedge clk); #1;
      if (info_valid) held = int'(info);
      check("transmitted z = wz + held sample", int'(s_tx.z) - int'(w.z), held);
      if (edge_o) edges++;
      if ((e.z < 0 ? -int'(e.z) : int'(e.z)) > pk) pk = (e.z < 0) ? -int'(e.z) : int'(e.z);
    end
    check($sformatf("case %0d: no false edges", idx), edges, 0);
    checks++;
    if (pk >= S_F / 4) begin
      failures++;
      $display("FAIL case %0d: peak |e3| %0d not below half the amplitude", idx, pk);
    end
    peak[idx] = pk;
  endtask

  initial begin
    run_case(0, 100, 16, 50.0e3);
    run_case(1,   1, 16, 50.0e3);
    run_case(2,   1,  8, 50.0e3);
    run_case(3,   1, 16, 25.0e3);
    $display("peak |e3| (LSB, 3107 = 1.0): A 4.5MHz/16b/50k %0d, B 450MHz/16b/50k %0d, C 450MHz/8b/50k %0d, D 450MHz/16b/25k %0d",
             peak[0], peak[1], peak[2], peak[3]);
    checks++;
    if (!(peak[0] > peak[1])) begin failures++; $display("FAIL coarser input sampling did not raise the error"); end
    checks++;
    if (!(peak[2] > peak[1])) begin failures++; $display("FAIL coarser resolution did not raise the error"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
