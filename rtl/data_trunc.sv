// data_trunc: data truncation block of the ARSC MAC unit.
//
// Each of the N inputs is an M-bit signed-magnitude word.  The block keeps the
// sign bit and removes the `sel` least significant magnitude bits, so that an
// M-bit word becomes an (M - sel)-bit word; e.g. with M = 10 and SEL = 010 the
// word 1_111010101 becomes 1_1110101 (8 bits), as in the paper's example.
// The shortened magnitude is returned right-aligned in an M-bit container
// (sign still at bit M-1, dropped bits replaced by leading zeros), because
// the width changes at run time.  SEL codes 0..4 select 10..6 bits as in the
// paper; the unused codes 5..7 behave like 4, which is this design's choice.
// Purely combinational.
module data_trunc
  import arsc_pkg::*;
#(
  parameter int N = N_DEF,              // lanes
  parameter int M = M_DEF               // input width, signed-magnitude
) (
  input  sel_t                 sel,
  input  logic [N-1:0][M-1:0]  x,
  output logic [N-1:0][M-1:0]  xt,      // {sign, 0.., magnitude >> shift}
  output logic [$clog2(M)-1:0] shift    // magnitude bits removed
);

  always_comb begin
    shift = ($clog2(M))'(sel_shift(sel, M));
    for (int i = 0; i < N; i++) begin
      xt[i]        = '0;
      xt[i][M-1]   = x[i][M-1];
      xt[i][M-2:0] = x[i][M-2:0] >> shift;
    end
  end

endmodule
