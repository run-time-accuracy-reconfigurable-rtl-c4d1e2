// adder_block: adder block of the ARSC MAC unit.
//
// Adds the N products of one multiply-accumulate round.  Each product arrives
// as an unsigned count from a counter-based stochastic multiplier plus a sign
// (the XOR of the data sign and the coefficient sign, formed in the MAC unit),
// so the adder adds or subtracts it.  The sum is then brought back to the
// full data width by appending the `shift` zeros that truncation removed
// (the paper's "add 0 at the end of the output number"), scaled by
// 2^-OSHIFT and returned as an M-bit signed-magnitude word, saturated to the
// largest magnitude.  The scaling step keeps DCT results inside M bits: it is
// this design's choice (the paper gives no number format for the transform
// results); the 2D DCT uses OSHIFT = 1 per pass and the inverse DCT
// OSHIFT = -1, so DCT followed by inverse DCT returns to pixel scale.
// Scaling acts on the magnitude, so it truncates towards zero.
// Purely combinational.
module adder_block #(
  parameter int N      = 8,             // products per round
  parameter int M      = 10,            // output width, signed-magnitude
  parameter int OSHIFT = 0              // >0: divide by 2^OSHIFT, <0: multiply
) (
  input  logic [N-1:0][M-2:0]     prod,   // product magnitudes (counts)
  input  logic [N-1:0]            psign,  // 1: subtract the product
  input  logic [$clog2(M)-1:0]    shift,  // bits removed by truncation
  output logic [M-1:0]            y       // {sign, magnitude}
);

  localparam int AW = M + $clog2(N) + M + 2;   // room for every shift
  localparam int MAXMAG = (1 << (M - 1)) - 1;

  logic signed [AW-1:0] acc;
  logic [AW-1:0]        mag;
  logic                 neg;

  always_comb begin
    acc = '0;
    for (int i = 0; i < N; i++) begin
      if (psign[i]) acc = acc - AW'(prod[i]);
      else          acc = acc + AW'(prod[i]);
    end
    neg = acc[AW-1];
    mag = neg ? AW'(-acc) : AW'(acc);
    mag = mag << shift;
    if (OSHIFT > 0) mag = mag >> OSHIFT;
    else            mag = mag << (-OSHIFT);
    if (mag > AW'(MAXMAG)) mag = AW'(MAXMAG);
    y = {neg && (mag != '0), mag[M-2:0]};
  end

endmodule
