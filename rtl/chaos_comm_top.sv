// chaos_comm_top: fixed-point chaos-based communication system.
//
// A master chaotic system (chaos_transmitter) carries the information on its
// z state (modulator); the modulated signal s_tx goes out to the channel. On
// the receive side the slave system (chaos_receiver) is driven towards the
// received signal r_rx by an adaptive controller, and the errors
// e = sigma - r_rx (error_unit) feed both that controller and the binary
// detector, which recovers the information bit from jumps of e3. All state
// is 16-bit fixed point at scale 3107 per unit; one Euler step of 0.001 is
// taken per clock with en = 1 (450 MHz in the paper's system).
//
// The chaotic vector field, the adaptive control law and the channel are not
// inside: f_tx must be driven as f(w), f_rx as f(sigma) and u as the control
// computed from e, all combinationally from the outputs of this module; for
// a noise-free link connect r_rx = s_tx. w_bits and e_bits give the states
// and errors in the 16-level sign-magnitude form (b15 high = non-negative).
//
// Timing: w and sigma are registered and change on the clock after their
// derivatives are presented. recovered follows a step of e3 after DEPTH
// samples.
module chaos_comm_top
  import chaos_pkg::*;
#(
  parameter int DEPTH     = 4,
  parameter int THRESHOLD = A_THRESHOLD,
  parameter int CW        = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  // transmitter side
  input  state3_t             f_tx,
  output state3_t             w,
  input  sample_t             info,
  input  logic                info_valid,
  output state3_t             s_tx,
  // receiver side
  input  state3_t             r_rx,
  input  state3_t             f_rx,
  input  state3_t             u,
  output state3_t             sigma,
  output state3_t             e,
  // digitised views
  output logic [2:0][W-1:0]   w_bits,
  output logic [2:0][W-1:0]   e_bits,
  // detector
  output logic                edge_o,
  output logic [CW-1:0]       edge_count,
  output logic                recovered
);

  chaos_transmitter u_tx (.clk, .rst_n, .en, .f(f_tx), .w);

  modulator u_mod (.clk, .rst_n, .w_z(w.z), .info, .info_valid, .s_z(s_tx.z));
  assign s_tx.x = w.x;
  assign s_tx.y = w.y;

  chaos_receiver u_rx (.clk, .rst_n, .en, .f(f_rx), .u, .sigma);

  error_unit u_err (.sigma, .r(r_rx), .e);

  binary_detector #(.DEPTH(DEPTH), .THRESHOLD(THRESHOLD), .CW(CW)) u_det (
    .clk, .rst_n, .en, .e3(e.z), .edge_o, .count(edge_count), .recovered
  );

  // index 2 = x, 1 = y, 0 = z
  digitizer u_dig_wx (.v(w.x), .b(w_bits[2]));
  digitizer u_dig_wy (.v(w.y), .b(w_bits[1]));
  digitizer u_dig_wz (.v(w.z), .b(w_bits[0]));
  digitizer u_dig_ex (.v(e.x), .b(e_bits[2]));
  digitizer u_dig_ey (.v(e.y), .b(e_bits[1]));
  digitizer u_dig_ez (.v(e.z), .b(e_bits[0]));

endmodule
