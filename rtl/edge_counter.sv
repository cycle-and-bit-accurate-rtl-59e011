// edge_counter: the edge counter E_c with its memory M.
//
// E_c is an adder with two inputs, the F1 edge marker and its own previous
// output held in the one-sample memory M, so count[n] = count[n-1] + edge[n]
// counts the information transitions detected so far. The memory breaks what
// would otherwise be an algebraic loop. count is the combinational adder
// output (it already includes the present edge); M is loaded from it on each
// clock with en = 1 and starts at INIT after reset. The counter is CW bits
// wide and wraps; only its parity is used downstream. CW and INIT are this
// design's choices.
module edge_counter #(
  parameter int          CW   = 16,
  parameter logic [CW-1:0] INIT = '0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          edge_i,
  output logic [CW-1:0] count
);

  logic [CW-1:0] m_q;   // memory / delay M

  assign count = m_q + CW'(edge_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  m_q <= INIT;
    else if (en) m_q <= count;
  end

endmodule
