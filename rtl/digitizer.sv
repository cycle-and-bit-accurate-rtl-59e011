// digitizer: 16-level binary form of a fixed-point sample.
//
// Produces the bit lines b15..b0 in which the paper shows its signals: b15 is
// the sign and is high for a positive value or zero and low for a negative
// one; b14..b0 hold the magnitude, most significant first. The paper's
// examples fix this sign-magnitude form: 1032 gives 1000010000001000, -3107
// gives 0000110000100011 and 0 gives 1000000000000000. -32768, whose
// magnitude does not fit in 15 bits, is shown as magnitude 32767 (this
// design's choice). Combinational.
module digitizer
  import chaos_pkg::*;
(
  input  sample_t       v,
  output logic [W-1:0]  b
);

  assign b = digitize(v);

endmodule
