// edge_detector: the decision function F1 of the binary detector.
//
// Compares the current sample n of the (delayed) error e3 with the previous
// sample m and outputs 1 when |m - n| >= THRESHOLD, else 0, exactly as the
// paper's F1 code. A step of the information signal makes e3 jump by about
// its amplitude in one sample, while the chaotic and control dynamics change
// it only a little per sample, so F1 marks each information transition with
// a pulse one sample wide. THRESHOLD = 1554 is the paper's a_threshold = 0.5
// at the scaling factor 3107.
//
// Timing: edge_o is combinational on e and the internal previous-sample
// register, which is loaded on every clock with en = 1. Before a first valid
// sample has been stored (after reset) edge_o stays 0; that start-up rule is
// this design's choice.
module edge_detector
  import chaos_pkg::*;
#(
  parameter int THRESHOLD = A_THRESHOLD
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  logic    in_valid,
  input  sample_t e,
  output logic    edge_o
);

  sample_t            prev_q;     // e3(previous_sample)
  logic               prev_valid_q;
  logic signed [W:0]  diff;
  logic        [W:0]  mag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_q       <= '0;
      prev_valid_q <= 1'b0;
    end else if (en && in_valid) begin
      prev_q       <= e;
      prev_valid_q <= 1'b1;
    end
  end

  always_comb begin
    diff   = (W+1)'(prev_q) - (W+1)'(e);          // m - n
    mag    = diff[W] ? (W+1)'(-diff) : (W+1)'(diff);
    edge_o = en && in_valid && prev_valid_q && (mag >= (W+1)'(THRESHOLD));
  end

endmodule
