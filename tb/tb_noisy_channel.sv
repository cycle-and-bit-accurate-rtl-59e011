// tb_noisy_channel: binary transmission through an additive white Gaussian
// noise channel, swept over noise levels, with the bit error rate counted.
//
// The system runs at its default parameters with one information bit per
// 450 clocks. Gaussian noise of standard deviation SIGMA (in LSB, 3107 =
// 1.0), made by the Box-Muller method from $urandom, is added to each of the
// three transmitted signals. Each level resets the system, sends 4
// unmodulated bits for synchronisation and then 60 random bits; the
// recovered bit is compared in the middle of every bit with the level the
// detector must show for the transmitted sequence (1 after an even number
// of transitions). The printed Eb/N0 is this bench's own measure,
// Eb/N0 = (3107^2 * 450) / (2 * SIGMA^2); it is not the paper's SNR and
// noise-power setting, which cannot be rebuilt without the paper's chaotic
// system and controller. The vector field (-y, x, x - z) and the control
// u = -8 e are stand-ins, as in the end-to-end bench.
//
// Checks: no bit errors at the low noise levels; bit errors do occur at the
// highest level (each noise-made edge flips the count parity, so errors
// persist until the next false edge, which drives the BER towards 0.5 as in
// the paper's low-SNR region).
module tb_noisy_channel;
  import chaos_pkg::*;

  localparam int BIT_LEN = 450, SYNC_BITS = 4, NBITS = 60, NLEV = 6;
  localparam int LEVELS [NLEV] = '{0, 50, 100, 200, 400, 900};

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  state3_t f_tx, w, s_tx, r_rx, f_rx, u, sigma, e;
  state3_t noise = '0;
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
    f_tx   = field(w);
    f_rx   = field(sigma);
    u.x    = sat(-20'(e.x) * 8);
    u.y    = sat(-20'(e.y) * 8);
    u.z    = sat(-20'(e.z) * 8);
    r_rx.x = sat(20'(s_tx.x) + 20'(noise.x));
    r_rx.y = sat(20'(s_tx.y) + 20'(noise.y));
    r_rx.z = sat(20'(s_tx.z) + 20'(noise.z));
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic real gauss();
    real u1 = (real'($urandom_range(0, 32'hFFFFFFFE)) + 1.0) / 4294967296.0;
    real u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic sample_t noise_sample(int sd);
    real v = real'(sd) * gauss();
    if (v > 32767.0) v = 32767.0;
    if (v < -32768.0) v = -32768.0;
    return sample_t'($rtoi(v));
  endfunction

  initial begin
    repeat (NLEV * (SYNC_BITS + NBITS) * BIT_LEN + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int errors [NLEV];

  initial begin
    for (int lv = 0; lv < NLEV; lv++) begin
      int n_trans;
      bit bit_now, nb;
      rst_n = 1'b0; en = 1'b0; info_valid = 1'b0; info = '0; noise = '0;
      repeat (2) @(posedge clk);
      @(negedge clk);
      rst_n = 1'b1; en = 1'b1;
      n_trans = 0; bit_now = 1'b0; errors[lv] = 0;
      for (int b = 0; b < SYNC_BITS + NBITS; b++) begin
        nb = (b < SYNC_BITS) ? 1'b0 : 1'(($urandom >> 5) & 1);
        if (nb != bit_now) n_trans++;
        bit_now = nb;
        for (int k = 0; k < BIT_LEN; k++) begin
          @(negedge clk);
          info_valid = (k == 0);
          info  = nb ? sample_t'(S_F) : '0;
          noise = '{x: noise_sample(LEVELS[lv]), y: noise_sample(LEVELS[lv]),
                    z: noise_sample(LEVELS[lv])};
          @(posedge clk); #1;
          if (b >= SYNC_BITS && k == BIT_LEN / 2 &&
              recovered != ((n_trans % 2) == 0))
            errors[lv]++;
        end
      end
      if (LEVELS[lv] == 0)
        $display("sigma %4d LSB  Eb/N0 inf       BER %0d/%0d", LEVELS[lv], errors[lv], NBITS);
      else
        $display("sigma %4d LSB  Eb/N0 %5.1f dB  BER %0d/%0d", LEVELS[lv],
                 10.0 * $log10(real'(S_F) * S_F * BIT_LEN / (2.0 * LEVELS[lv] * LEVELS[lv])),
                 errors[lv], NBITS);
    end
    for (int lv = 0; lv < 3; lv++)
      check($sformatf("no bit errors at sigma %0d", LEVELS[lv]), errors[lv], 0);
    checks++;
    if (errors[NLEV-1] == 0) begin
      failures++;
      $display("FAIL no bit errors even at the highest noise level");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
