// arsc_mac: ARSC multiply-accumulate unit, one 1D N-point DCT or inverse DCT.
//
// The unit takes an N-vector of M-bit signed-magnitude data and produces the
// N outputs of its 1D transform, one output per round.  It contains the data
// truncation block, N counter-based stochastic multipliers with an XOR of the
// data and coefficient signs in front of each, and the adder block, as in the
// paper's MAC unit.  The accuracy selection signal `sel` decides how many
// data bits take part: with d = M-1-sel magnitude bits a round lasts at most
// 2^d + 1 cycles, so each bit removed halves the computing time.
//
// Operand roles (this design's choice, the paper does not fix them): the
// truncated data magnitude drives each multiplier's down counter, which makes
// the round length follow the data bit width, and the CQ-bit coefficient
// magnitude feeds the deterministic stochastic number generator.  Round j
// uses coefficients C[j][i] (forward, INVERSE = 0) or C[i][j] (inverse DCT,
// INVERSE = 1) for lane i; the table is computed at elaboration.
//
// Interface and timing: `start` (one cycle, while idle) latches `x_in` and
// `sel`.  Round j (j = 0..N-1) issues a start to all multipliers, waits until
// every down counter is zero and then registers the adder result: `out_valid`
// is high for one cycle with `out_idx` = j and `out_data`.  With D the largest
// truncated magnitude of the vector, output j appears (j+1)*(D+2) cycles after
// the edge that sampled `start`; `done` is high together with the last output.
module arsc_mac
  import arsc_pkg::*;
#(
  parameter int N       = N_DEF,        // vector length (N-point transform)
  parameter int M       = M_DEF,        // data width, signed-magnitude
  parameter int CQ      = CQ_DEF,       // coefficient magnitude bits
  parameter bit INVERSE = 1'b0,         // 0: DCT, 1: inverse DCT
  parameter int OSHIFT  = 0             // output scaling, see adder_block
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  sel_t                sel,
  input  logic [N-1:0][M-1:0] x_in,
  output logic                busy,
  output logic                out_valid,
  output logic [$clog2(N)-1:0] out_idx,
  output logic [M-1:0]        out_data,
  output logic                done
);

  localparam int CW = CQ + 1;
  localparam int IW = $clog2(N);
  localparam int SHW = $clog2(M);

  function automatic logic [N*N*CW-1:0] gen_table();
    logic [N*N*CW-1:0] r;
    r = '0;
    for (int u = 0; u < N; u++)
      for (int x = 0; x < N; x++)
        r[(u*N+x)*CW +: CW] = CW'(dct_coef(N, CQ, u, x));
    return r;
  endfunction

  localparam logic [N*N*CW-1:0] COEF = gen_table();   // C[u][x] at (u*N+x)

  typedef enum logic [1:0] {S_IDLE, S_ROUND, S_RUN} state_t;
  state_t state;

  logic [N-1:0][M-1:0]  xt_now;
  logic [SHW-1:0]       shift_now;
  logic [N-1:0][M-1:0]  xt_q;           // latched truncated vector
  logic [SHW-1:0]       shift_q;
  logic [IW-1:0]        round;
  logic                 mult_start;
  logic [N-1:0]         mult_done;
  logic [N-1:0][M-2:0]  mult_prod;
  logic [N-1:0][CQ-1:0] cmag;
  logic [N-1:0]         csign;
  logic [N-1:0]         psign;
  logic [M-1:0]         sum_y;

  data_trunc #(.N(N), .M(M)) u_trunc (
    .sel   (sel),
    .x     (x_in),
    .xt    (xt_now),
    .shift (shift_now)
  );

  // Coefficients of the current round and the product signs (XOR gates).
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [CW-1:0] c;
      c        = INVERSE ? COEF[(i*N + int'(round))*CW +: CW]
                         : COEF[(int'(round)*N + i)*CW +: CW];
      cmag[i]  = c[CQ-1:0];
      csign[i] = c[CQ];
      psign[i] = csign[i] ^ xt_q[i][M-1];
    end
  end

  for (genvar g = 0; g < N; g++) begin : g_mult
    cbsc_mult #(.Q(CQ), .DW(M-1)) u_mult (
      .clk   (clk),
      .rst_n (rst_n),
      .start (mult_start),
      .x     (cmag[g]),
      .w     (xt_q[g][M-2:0]),
      .done  (mult_done[g]),
      .prod  (mult_prod[g])
    );
  end

  adder_block #(.N(N), .M(M), .OSHIFT(OSHIFT)) u_adder (
    .prod  (mult_prod),
    .psign (psign),
    .shift (shift_q),
    .y     (sum_y)
  );

  assign mult_start = (state == S_ROUND);
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      xt_q      <= '0;
      shift_q   <= '0;
      round     <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          xt_q    <= xt_now;
          shift_q <= shift_now;
          round   <= '0;
          state   <= S_ROUND;
        end
        S_ROUND: state <= S_RUN;
        S_RUN: if (&mult_done) begin
          out_valid <= 1'b1;
          out_idx   <= round;
          out_data  <= sum_y;
          if (int'(round) == N - 1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            round <= round + 1'b1;
            state <= S_ROUND;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A new vector may only be started while the unit is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);

endmodule
