// error_unit: synchronisation errors between receiver and received signal.
//
// e = sigma - r for each of the three states, saturated to 16 bits, where r is
// the transmitted signal after the channel. e3 carries the information for
// the binary detector; all three errors go to the adaptive controller. The
// sign convention (receiver minus transmitter) is this design's choice; the
// detector looks only at the size of a change of e3. Combinational.
module error_unit
  import chaos_pkg::*;
(
  input  state3_t sigma,
  input  state3_t r,
  output state3_t e
);

  always_comb begin
    e.x = sat(20'(sigma.x) - 20'(r.x));
    e.y = sat(20'(sigma.y) - 20'(r.y));
    e.z = sat(20'(sigma.z) - 20'(r.z));
  end

endmodule
