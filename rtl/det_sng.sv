// det_sng: deterministic stochastic number generator of the counter-based
// stochastic-computing multiplier.
//
// It turns a Q-bit binary fraction b = b[Q-1]..b[0] (value b / 2^Q) into a
// bit stream whose first 2^Q - 1 bits hold bit b[i] exactly 2^i times, spread
// evenly, followed by a 0: the ones-density of any prefix approximates b.  As in
// the paper, it is an FSM driving the select input of a multiplexer.  The FSM
// is a time counter t; at time t the multiplexer passes b[Q-1-z], where z is
// the number of trailing zeros of t+1 (z >= Q gives the constant 0).  For
// Q = 4 this yields, from t = 0, the printed pattern of the paper's example:
// X3 X2 X3 X1 X3 X2 X3 X0 X3 X2 X3 X1 X3 X2 X3 0.  Deriving the select from the
// trailing zeros of t+1 is this design's own formulation of that pattern.
//
// Interface: `clear` restarts the pattern at t = 0, `advance` steps it by one
// bit.  `sn` is combinational from the current t and `coef`, so the bit for
// time t is valid in the cycle before the edge that advances t.
module det_sng #(
  parameter int Q = 9                   // width of the binary input
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,           // restart the pattern (t := 0)
  input  logic         advance,         // step to the next bit
  input  logic [Q-1:0] coef,            // binary number to convert
  output logic         sn               // stochastic bit for the current t
);

  localparam int SW = $clog2(Q + 1);

  logic [Q-1:0] t;                      // FSM state: position in the stream
  logic [Q:0]   tp1;
  logic [SW-1:0] mux_sel;               // number of trailing zeros of t+1
  logic         mux_zero;               // select the constant-0 input

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       t <= '0;
    else if (clear)   t <= '0;
    else if (advance) t <= t + 1'b1;
  end

  // FSM output decode: trailing-zero count of t+1.
  always_comb begin
    tp1      = {1'b0, t} + 1'b1;
    mux_sel  = SW'(Q);
    for (int i = Q; i >= 0; i--)
      if (tp1[i]) mux_sel = SW'(i);
    mux_zero = (int'(mux_sel) >= Q);
  end

  // Multiplexer: weight-2^i bit b[i] is picked when z = Q-1-i.
  always_comb begin
    sn = 1'b0;
    if (!mux_zero) sn = coef[Q-1-int'(mux_sel)];
  end

endmodule
