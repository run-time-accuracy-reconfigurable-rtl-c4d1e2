// dct2d_block: 2D N x N DCT block, or 2D N x N inverse DCT block (INVERSE = 1).
//
// As in the paper, the block is two ARSC MAC units with an N x N intermediate
// data buffer between them.  The first MAC unit transforms N input vectors
// (lines) one after the other and writes each result line into the buffer.
// When the buffer is full the second MAC unit transforms the buffer read
// transposed, one line at a time; its N outputs are gathered into `vec_out`.
// For the forward DCT the input lines are tile rows, so `vec_out` of line q
// is column q of the 2D DCT; for the inverse DCT the input lines are those
// columns and `vec_out` of line q is row q of the reconstructed tile.
//
// The block has no sequencer of its own: the logic control unit starts each
// MAC unit (`m1_start` with line number `m1_line` and data `m1_vec`,
// `m2_start` with line `m2_line`) and waits for `m1_done` / `m2_done`.  The
// last element of `vec_out` is written on the edge that ends the cycle in
// which `m2_done` is high; `vec_out` then holds until the next second-unit
// line.  `clear` empties the intermediate buffer before a new tile.
module dct2d_block
  import arsc_pkg::*;
#(
  parameter int N       = N_DEF,
  parameter int M       = M_DEF,
  parameter int CQ      = CQ_DEF,
  parameter bit INVERSE = 1'b0,
  parameter int OSHIFT  = INVERSE ? -1 : 1   // per-pass scaling, see adder_block
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  sel_t                  sel,
  input  logic                  clear,
  input  logic                  m1_start,
  input  logic [$clog2(N)-1:0]  m1_line,
  input  logic [N-1:0][M-1:0]   m1_vec,
  output logic                  m1_done,
  input  logic                  m2_start,
  input  logic [$clog2(N)-1:0]  m2_line,
  output logic                  m2_done,
  output logic                  full,
  output logic                  busy,     // either MAC unit working
  output logic [N-1:0][M-1:0]   vec_out
);

  localparam int IW = $clog2(N);

  logic [IW-1:0]        line_q;
  logic                 m1_valid, m2_valid;
  logic [IW-1:0]        m1_idx,   m2_idx;
  logic [M-1:0]         m1_data,  m2_data;
  logic [N-1:0][M-1:0]  buf_rdata;
  logic                 m1_busy,  m2_busy;

  // Line number of the vector the first MAC unit is working on.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        line_q <= '0;
    else if (m1_start) line_q <= m1_line;
  end

  arsc_mac #(.N(N), .M(M), .CQ(CQ), .INVERSE(INVERSE), .OSHIFT(OSHIFT)) u_mac1 (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (m1_start),
    .sel       (sel),
    .x_in      (m1_vec),
    .busy      (m1_busy),
    .out_valid (m1_valid),
    .out_idx   (m1_idx),
    .out_data  (m1_data),
    .done      (m1_done)
  );

  inter_buffer #(.N(N), .M(M)) u_buf (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (clear),
    .we    (m1_valid),
    .wline (line_q),
    .widx  (m1_idx),
    .wdata (m1_data),
    .rline (m2_line),
    .rdata (buf_rdata),
    .full  (full)
  );

  arsc_mac #(.N(N), .M(M), .CQ(CQ), .INVERSE(INVERSE), .OSHIFT(OSHIFT)) u_mac2 (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (m2_start),
    .sel       (sel),
    .x_in      (buf_rdata),
    .busy      (m2_busy),
    .out_valid (m2_valid),
    .out_idx   (m2_idx),
    .out_data  (m2_data),
    .done      (m2_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        vec_out <= '0;
    else if (m2_valid) vec_out[m2_idx] <= m2_data;
  end

  assign busy = m1_busy | m2_busy;

  // The second MAC unit starts only on a full intermediate buffer.
  a_m2_after_full: assert property (@(posedge clk) disable iff (!rst_n) m2_start |-> full);

endmodule
