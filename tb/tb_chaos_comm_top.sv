// tb_chaos_comm_top: end-to-end test of the communication system at its
// default parameters, sending a binary information signal at one bit per 450
// samples (1 MHz at the 450 MHz system rate).
//
// The chaotic vector field and the adaptive control law live outside the
// design, so this bench closes the loops with stand-ins: the linear field
// f(v) = (-vy, vx, vx - vz) for both transmitter and receiver, and the
// proportional control u = -8 e. They exercise every path of the design but
// are not the paper's chaotic system or controller. The channel is
// noise-free (r_rx = s_tx).
//
// Checks: the reset state and its digitised form against the paper's printed
// initial condition bits; synchronisation of receiver and transmitter during
// an unmodulated start; one recovered-bit toggle per information
// transition, DEPTH = 4 clocks after the information enters the transmitter;
// the recovered level in the middle of every bit (1 for an even number of
// transitions, as the F2 rule gives); the edge count; and the digitised
// errors. Counts how often each mechanism happened (synchronisation, edge
// marks, rising and falling recovered bit, information sample loads,
// negative and non-negative digitised states) and fails for any that never
// did.
module tb_chaos_comm_top;
  import chaos_pkg::*;

  localparam int BIT_LEN = 450, NBITS = 40, SYNC_BITS = 4, DEPTH = 4;

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

  // stand-in vector field, controller and channel
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

  function automatic logic [15:0] dig_ref(int v);
    int m = (v < 0) ? -v : v;
    if (m > 32767) m = 32767;
    return {(v >= 0) ? 1'b1 : 1'b0, 15'(m)};
  endfunction

  initial begin
    repeat (NBITS * BIT_LEN + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_sync = 0, n_edges = 0, n_rise = 0, n_fall = 0, n_loads = 0, n_neg = 0, n_pos = 0;

  int  cyc = 0;
  int  load_cyc [$];          // clock numbers at which a changed bit was loaded
  bit  rec_prev;
  int  n_trans = 0;
  bit  bit_now = 1'b0;

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  initial begin
    repeat (2) @(posedge clk);
    #1;
    check("w_bits x at reset", int'(w_bits[2]), int'(16'b1000010000001000));
    check("w_bits y at reset", int'(w_bits[1]), int'(16'b0000110000100011));
    check("w_bits z at reset", int'(w_bits[0]), int'(16'b1000000000000000));
    check("sigma.x at reset", int'(sigma.x), 0);
    check("sigma.y at reset", int'(sigma.y), -4660);
    check("sigma.z at reset", int'(sigma.z), 1553);
    check("recovered at reset", int'(recovered), 1);
    rst_n = 1'b1;
    en    = 1'b1;
    rec_prev = recovered;
    for (int b = 0; b < NBITS; b++) begin
      bit nb;
      nb = (b < SYNC_BITS) ? 1'b0 : 1'(($urandom >> 7) & 1);
      for (int k = 0; k < BIT_LEN; k++) begin
        @(negedge clk);
        info_valid = (k == 0);                  // information rate: one sample per bit
        info       = nb ? sample_t'(S_F) : '0;
        @(posedge clk);
        #1;
        if (info_valid) begin
          n_loads++;
          if (nb != bit_now) begin load_cyc.push_back(cyc); n_trans++; end
          bit_now = nb;
        end
        if (edge_o) n_edges++;
        if (recovered != rec_prev) begin
          if (recovered) n_rise++; else n_fall++;
          if (load_cyc.size() == 0) begin
            failures++; $display("FAIL recovered toggled without a transition at clock %0d", cyc);
          end else begin
            check("detection latency (clocks)", cyc - load_cyc.pop_front(), DEPTH);
          end
          rec_prev = recovered;
        end
        if (w.x < 0) n_neg++; else n_pos++;
        if (k == BIT_LEN / 2) begin
          check("recovered level mid-bit", int'(recovered), int'((n_trans % 2) == 0));
          check("edge count mid-bit", int'(edge_count), n_trans);
          check("e_bits z", int'(e_bits[0]), int'(dig_ref(int'(e.z))));
          check("e_bits x", int'(e_bits[2]), int'(dig_ref(int'(e.x))));
          check("w_bits x", int'(w_bits[2]), int'(dig_ref(int'(w.x))));
        end
        if (b == SYNC_BITS - 1 && k == BIT_LEN - 1) begin
          // receiver synchronised with the unmodulated transmitter
          checks++;
          if ((e.x > 8 || e.x < -8) || (e.y > 8 || e.y < -8) || (e.z > 8 || e.z < -8)) begin
            failures++;
            $display("FAIL not synchronised: e = (%0d, %0d, %0d)", e.x, e.y, e.z);
          end else n_sync++;
        end
      end
    end
    check("all transitions detected", load_cyc.size(), 0);
    $display("mechanisms: sync %0d, edges %0d, recovered rise %0d fall %0d, info loads %0d, wx<0 %0d, wx>=0 %0d",
             n_sync, n_edges, n_rise, n_fall, n_loads, n_neg, n_pos);
    if (n_sync == 0)  begin failures++; $display("FAIL synchronisation never happened"); end
    if (n_edges == 0) begin failures++; $display("FAIL no edge marked"); end
    if (n_rise == 0)  begin failures++; $display("FAIL recovered bit never rose"); end
    if (n_fall == 0)  begin failures++; $display("FAIL recovered bit never fell"); end
    if (n_loads == 0) begin failures++; $display("FAIL no information sample loaded"); end
    if (n_neg == 0)   begin failures++; $display("FAIL no negative state digitised"); end
    if (n_pos == 0)   begin failures++; $display("FAIL no non-negative state digitised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
