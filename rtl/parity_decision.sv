// parity_decision: the bit assignment F2 of the binary detector.
//
// Outputs 1 when the edge count modulo 2 is 0 and 0 when it is 1, as in the
// paper's F2 code, so the recovered bit toggles at every detected transition
// of the information signal. Its absolute polarity is set by the parity of
// the count at start (a count of 0 gives 1). Combinational.
module parity_decision #(
  parameter int CW = 16
) (
  input  logic [CW-1:0] count,
  output logic          bit_o
);

  always_comb begin
    if (count % 2 == 0) bit_o = 1'b1;
    else                bit_o = 1'b0;
  end

endmodule
