// cbsc_mult: counter-based stochastic-computing multiplier (unipolar).
//
// Computes approximately x * w for a Q-bit fraction x (value x / 2^Q) and a
// DW-bit integer w.  A down counter is loaded with w; while it is non-zero it
// decrements every cycle and an up counter adds the current bit of the
// deterministic stochastic stream of x.  When the down counter reaches zero
// the up counter holds the number of ones in the first w bits of the stream,
// which is about x * w / 2^Q, in units of w's least significant bit.  The
// structure (stochastic number generator, down counter with a zero test that
// stops the up counter) follows the paper; which operand drives which counter
// is set by the instantiating MAC unit.
//
// Timing: `start` is sampled on a rising edge; the down counter then holds w
// and `done` (down counter == 0) rises w cycles later, with `prod` valid and
// held until the next `start`.  For w = 0 `done` is high right after `start`.
// A `start` while busy restarts the multiplication.
module cbsc_mult #(
  parameter int Q  = 9,                 // bits of the stochastic operand x
  parameter int DW = 9                  // bits of the counted operand w
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [Q-1:0]  x,              // fraction, converted to a bit stream
  input  logic [DW-1:0] w,              // integer, loaded into the down counter
  output logic          done,           // down counter reached zero
  output logic [DW-1:0] prod            // up counter: ones counted
);

  logic [Q-1:0]  x_q;
  logic [DW-1:0] down_cnt;
  logic [DW-1:0] up_cnt;
  logic          run;                   // down counter non-zero (EN of the up counter)
  logic          sn;

  assign run  = (down_cnt != '0);
  assign done = !run;
  assign prod = up_cnt;

  det_sng #(.Q(Q)) u_sng (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (start),
    .advance (run && !start),
    .coef    (x_q),
    .sn      (sn)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q      <= '0;
      down_cnt <= '0;
      up_cnt   <= '0;
    end else if (start) begin
      x_q      <= x;
      down_cnt <= w;
      up_cnt   <= '0;
    end else if (run) begin
      down_cnt <= down_cnt - 1'b1;
      up_cnt   <= up_cnt + DW'(sn);
    end
  end

endmodule
