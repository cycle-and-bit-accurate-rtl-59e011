// chaos_pkg: types, constants and arithmetic helpers shared by the fixed-point
// chaos-based communication system.
//
// Every signal of the system is a 16-bit two's complement integer that stands
// for a real value times the common scaling factor S_F = 3107, so 1.0 is held
// as 3107. Initial conditions, controller gains and the detector threshold are
// given here in those units. The values of S_F, the initial conditions, the
// gains and a_threshold = 0.5 follow the paper; the integer threshold 1554 is
// 0.5 * S_F rounded up, because |d| >= 1553.5 is |d| >= 1554 for integers.
//
// Helpers: sat() clamps a wide signed value to W bits, digitize() builds the
// 16-level binary form in which bit 15 is high for a non-negative value and
// bits 14..0 carry the magnitude (the paper's printed examples: 1032 ->
// 1000010000001000, -3107 -> 0000110000100011, 0 -> 1000000000000000).
package chaos_pkg;

  localparam int W   = 16;      // sample resolution
  localparam int S_F = 3107;    // common scaling factor

  typedef logic signed [W-1:0] sample_t;

  // One value per state variable (x, y, z).
  typedef struct packed {
    sample_t x;
    sample_t y;
    sample_t z;
  } state3_t;

  // Transmitter and receiver initial conditions.
  localparam state3_t TX_IC = '{x: 16'sd1032, y: -16'sd3107, z: 16'sd0};
  localparam state3_t RX_IC = '{x: 16'sd0,    y: -16'sd4660, z: 16'sd1553};

  // Gains of the adaptive controller (the control law itself is external).
  localparam int K1 = 2 * S_F;
  localparam int K2 = S_F;
  localparam int K3 = 3 * S_F;

  // Edge detector threshold: a_threshold = 0.5 in real units.
  localparam int A_THRESHOLD = (S_F + 1) / 2;

  localparam sample_t SAMPLE_MAX = sample_t'({1'b0, {(W-1){1'b1}}});
  localparam sample_t SAMPLE_MIN = sample_t'({1'b1, {(W-1){1'b0}}});

  // Clamp a 20-bit signed value (enough for the sum or difference of two
  // samples) to the sample range.
  function automatic sample_t sat(input logic signed [W+3:0] v);
    if (v > (W+4)'(SAMPLE_MAX)) return SAMPLE_MAX;
    if (v < (W+4)'(SAMPLE_MIN)) return SAMPLE_MIN;
    return v[W-1:0];
  endfunction

  // Sign-magnitude form with the sign bit high for v >= 0.
  function automatic logic [W-1:0] digitize(input sample_t v);
    logic [W-2:0] mag;
    if (v == SAMPLE_MIN) mag = {(W-1){1'b1}};
    else if (v < 0)      mag = (W-1)'(-v);
    else                 mag = (W-1)'(v);
    return {~v[W-1], mag};
  endfunction

endpackage
