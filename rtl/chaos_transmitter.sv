// chaos_transmitter: state of the master (drive) chaotic system.
//
// Three Euler integrators hold w = (wx, wy, wz) and start from the paper's
// initial condition w(0) = (1032, -3107, 0), i.e. about (0.33, -1, 0) at the
// scaling factor 3107. The right-hand side f(w) of the chaotic system is not
// part of this block: it arrives on the port f and must be computed
// combinationally from w by the vector-field logic outside. One step is taken
// per clock with en = 1; w is registered.
module chaos_transmitter
  import chaos_pkg::*;
#(
  parameter state3_t IC = TX_IC
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  state3_t f,
  output state3_t w
);

  euler_integrator #(.IC(IC.x)) u_int_x (.clk, .rst_n, .en, .f(f.x), .x(w.x));
  euler_integrator #(.IC(IC.y)) u_int_y (.clk, .rst_n, .en, .f(f.y), .x(w.y));
  euler_integrator #(.IC(IC.z)) u_int_z (.clk, .rst_n, .en, .f(f.z), .x(w.z));

endmodule
