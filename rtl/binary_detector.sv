// binary_detector: recovers a binary information signal from the error e3.
//
// The chain follows the paper's detection mechanism: e3 is delayed by D
// (delay_line), F1 (edge_detector) marks each sample where e3 jumps by at
// least THRESHOLD, E_c with its memory M (edge_counter) counts those marks,
// and F2 (parity_decision) turns the count parity into the recovered bit.
// Each transition of the transmitted bit changes e3 by about 1.0 (S_F) in
// one sample, so every transition toggles the recovered bit.
//
// Timing: one sample per clock with en = 1. A step of e3 appears on edge_o,
// count and recovered DEPTH enabled clocks later (D is registered, F1, E_c
// and F2 are combinational). rst_n clears everything; recovered is 1 until
// the first edge.
module binary_detector
  import chaos_pkg::*;
#(
  parameter int DEPTH     = 4,
  parameter int THRESHOLD = A_THRESHOLD,
  parameter int CW        = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  sample_t       e3,
  output logic          edge_o,
  output logic [CW-1:0] count,
  output logic          recovered
);

  sample_t e3_d;
  logic    e3_d_valid;

  delay_line #(.DEPTH(DEPTH)) u_d (
    .clk, .rst_n, .en, .in_valid(1'b1), .d(e3), .q(e3_d), .q_valid(e3_d_valid)
  );

  edge_detector #(.THRESHOLD(THRESHOLD)) u_f1 (
    .clk, .rst_n, .en, .in_valid(e3_d_valid), .e(e3_d), .edge_o
  );

  edge_counter #(.CW(CW)) u_ec (
    .clk, .rst_n, .en, .edge_i(edge_o), .count
  );

  parity_decision #(.CW(CW)) u_f2 (
    .count, .bit_o(recovered)
  );

endmodule
