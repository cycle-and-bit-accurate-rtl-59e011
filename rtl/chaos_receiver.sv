// chaos_receiver: state of the slave (response) chaotic system.
//
// Three Euler integrators hold sigma = (sx, sy, sz), started from the paper's
// receiver initial condition sigma(0) = (0, -4660, 1553). Each integrates the
// sum of its vector-field term and its control input, d sigma/dt = f(sigma)
// + u; the sum saturates to 16 bits. The paper assumes the receiver's
// coefficients equal the transmitter's, so the same integrator is used. Both
// f(sigma) and the control u come from outside (vector field and adaptive
// controller), combinationally from sigma and the errors. The additive entry
// of u and the saturation are this design's choices.
module chaos_receiver
  import chaos_pkg::*;
#(
  parameter state3_t IC = RX_IC
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  state3_t f,
  input  state3_t u,
  output state3_t sigma
);

  state3_t d;

  always_comb begin
    d.x = sat(20'(f.x) + 20'(u.x));
    d.y = sat(20'(f.y) + 20'(u.y));
    d.z = sat(20'(f.z) + 20'(u.z));
  end

  euler_integrator #(.IC(IC.x)) u_int_x (.clk, .rst_n, .en, .f(d.x), .x(sigma.x));
  euler_integrator #(.IC(IC.y)) u_int_y (.clk, .rst_n, .en, .f(d.y), .x(sigma.y));
  euler_integrator #(.IC(IC.z)) u_int_z (.clk, .rst_n, .en, .f(d.z), .x(sigma.z));

endmodule
