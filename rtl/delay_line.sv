// delay_line: the delay element D in front of the binary detector.
//
// Delays the error e3 by DEPTH samples (one sample per clock with en = 1) so
// that the free transmitter and the controlled receiver have time to
// synchronise before edges are looked for. A valid bit travels with each
// sample; the stages cleared at reset come out with q_valid = 0, so the
// edge detector never compares a real sample with a reset value. The paper
// gives the purpose of D but not its length: DEPTH = 4 and the valid bit are
// this design's choices. Latency: DEPTH enabled clocks from d to q.
module delay_line
  import chaos_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  logic    in_valid,
  input  sample_t d,
  output sample_t q,
  output logic    q_valid
);

  sample_t    data_q  [DEPTH];
  logic       valid_q [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        data_q[i]  <= '0;
        valid_q[i] <= 1'b0;
      end
    end else if (en) begin
      data_q[0]  <= d;
      valid_q[0] <= in_valid;
      for (int i = 1; i < DEPTH; i++) begin
        data_q[i]  <= data_q[i-1];
        valid_q[i] <= valid_q[i-1];
      end
    end
  end

  assign q       = data_q[DEPTH-1];
  assign q_valid = valid_q[DEPTH-1];

  initial assert (DEPTH >= 1) else $error("delay_line: DEPTH must be at least 1");

endmodule
