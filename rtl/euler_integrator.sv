// euler_integrator: forward-Euler integration of one state variable,
//   x[n+1] = x[n] + STEP * f[n].
//
// Structure as in the paper's integrator: a constant multiplier (STEP = 0.001),
// an adder whose other input is the register output, and a register whose
// output is both the fed-back operand and the state x(t). STEP is held as the
// integer H_Q = round(STEP * 2^FRAC), and the register keeps FRAC fraction
// bits under the 16-bit integer state so that small increments accumulate;
// that internal precision is this design's choice, the paper states only the
// 16-bit signal resolution. The state output is the register rounded to 16
// bits with convergent (round-half-to-even, i.e. unbiased) rounding, and the
// register saturates at the 16-bit range instead of wrapping.
//
// Interface: f is the derivative in the same scale as x (S_F units). On each
// clock with en = 1 one Euler step is taken; x changes one clock after f is
// presented, so f must be a function of the present x for an explicit Euler
// step. rst_n (asynchronous, active low) loads the initial condition IC.
module euler_integrator
  import chaos_pkg::*;
#(
  parameter int      FRAC = 20,
  parameter real     STEP = 0.001,
  parameter sample_t IC   = '0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  sample_t f,
  output sample_t x
);

  localparam int HW  = 16;                                   // width of H_Q
  localparam int H_Q = $rtoi(STEP * (2.0 ** FRAC) + 0.5);    // 1049 for FRAC = 20
  localparam int AW  = W + FRAC;                             // register width
  localparam int SW  = AW + 2;                               // sum width

  localparam logic signed [SW-1:0] ACC_MAX = SW'(SAMPLE_MAX) <<< FRAC;
  localparam logic signed [SW-1:0] ACC_MIN = SW'(SAMPLE_MIN) <<< FRAC;

  logic signed [AW-1:0]   acc_q;    // register (z^-1)
  logic signed [W+HW:0]   prod;     // constant multiplier output
  logic signed [SW-1:0]   sum;      // adder output
  logic signed [AW-1:0]   acc_d;

  always_comb begin
    prod = f * $signed({1'b0, HW'(H_Q)});
    sum  = SW'(acc_q) + SW'(prod);
    if (sum > ACC_MAX)      acc_d = AW'(ACC_MAX);
    else if (sum < ACC_MIN) acc_d = AW'(ACC_MIN);
    else                    acc_d = AW'(sum);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc_q <= AW'(IC) <<< FRAC;
    else if (en) acc_q <= acc_d;
  end

  // Convergent rounding of the register to the 16-bit state.
  logic signed [W-1:0]    int_part;
  logic        [FRAC-1:0] frac_part;
  logic                   round_up;

  always_comb begin
    int_part  = acc_q[AW-1:FRAC];
    frac_part = acc_q[FRAC-1:0];
    round_up  = frac_part[FRAC-1] &&
                ((frac_part[FRAC-2:0] != '0) || int_part[0]);
    // acc_q <= ACC_MAX has zero fraction at the top value, so +1 cannot overflow.
    x = round_up ? int_part + 1'b1 : int_part;
  end

endmodule
