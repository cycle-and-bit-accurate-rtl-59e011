// modulator: puts the information signal onto the z state of the transmitter.
//
// The information sample is taken into a hold register whenever info_valid
// is high, which models the input rate of the modulating signal (every clock
// for sampling at the system rate, every 100th clock for 4.5 MHz at 450 MHz).
// The transmitted z signal is s_z = wz + m, where m is the held sample,
// saturated to 16 bits; wx and wy are sent unchanged and do not pass through
// this block. The paper states only that the information modulates wz;
// additive modulation, the hold register and the saturation are this
// design's choices. A binary information bit is presented as 0 or S_F (1.0).
// s_z is combinational from w_z and the hold register; the register clears
// on reset.
module modulator
  import chaos_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t w_z,
  input  sample_t info,
  input  logic    info_valid,
  output sample_t s_z
);

  sample_t info_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          info_q <= '0;
    else if (info_valid) info_q <= info;
  end

  assign s_z = sat(20'(w_z) + 20'(info_q));

endmodule
