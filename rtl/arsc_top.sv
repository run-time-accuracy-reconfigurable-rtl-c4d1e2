// arsc_top: accuracy-reconfigurable stochastic-computing (ARSC) image
// compress/decompress engine, 2D DCT -> frequency mask -> 2D inverse DCT.
//
// Structure (after the paper's top-level diagram): an input buffer RAM, a 2D
// N x N DCT block, a 2D N x N inverse DCT block, an output buffer RAM and a
// logic control unit, with the accuracy selection signal SEL going to the MAC
// units of both blocks.  All multiplications are counter-based stochastic
// multiplications whose length follows the data bit width selected by SEL
// (000..100 = 10..6 bits), so dropping one bit roughly halves the frame time;
// this is what lets the clock slow down (aging, power saving) while the frame
// rate is kept.
//
// Between the two blocks every DCT coefficient F(v,u) of a tile is multiplied
// by the mask bit m(u,v) (`mask[v*N+u]`; 1 keeps a frequency, 0 removes it),
// the paper's frequency-domain filter.  The mask is a port because the paper
// does not give its values; all ones passes every coefficient.
//
// Pixels are PIX_W = 8-bit unsigned and enter the datapath as non-negative
// M-bit signed-magnitude words.  Reconstructed values are clamped to
// 0..255 on their way to the output buffer (this design's choice).
//
// Host interface: write the image into the input buffer through `in_we`,
// `in_waddr`, `in_wdata` (one word = N pixels of one image row, raster order,
// word y*IMG_W/N + x/N), pulse `start` with `sel` set, wait for `done`
// (`busy` low), then read the output buffer through `out_re`, `out_raddr`,
// `out_rdata` (data one cycle after `out_re`).  SEL is sampled at `start`.
module arsc_top
  import arsc_pkg::*;
#(
  parameter int N     = N_DEF,          // DCT size (paper: 8)
  parameter int M     = M_DEF,          // data width, signed-magnitude (paper: 10)
  parameter int CQ    = CQ_DEF,         // coefficient magnitude bits
  parameter int IMG_W = 256,            // image width in pixels
  parameter int IMG_H = 256,            // image height in pixels
  localparam int WW   = N * PIX_W,      // buffer word width
  localparam int AW   = $clog2(IMG_W * IMG_H / N)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  sel_t           sel,           // accuracy selection signal
  input  logic [N*N-1:0] mask,          // frequency mask, bit v*N+u
  input  logic           start,
  output logic           busy,
  output logic           done,
  output sel_t           sel_active,    // SEL of the running / last frame
  // input buffer write port
  input  logic           in_we,
  input  logic [AW-1:0]  in_waddr,
  input  logic [WW-1:0]  in_wdata,
  // output buffer read port
  input  logic           out_re,
  input  logic [AW-1:0]  out_raddr,
  output logic [WW-1:0]  out_rdata
);

  localparam int IW = $clog2(N);
  localparam int DEPTH = IMG_W * IMG_H / N;

  logic                in_re;
  logic [AW-1:0]       in_raddr;
  logic [WW-1:0]       in_rdata;
  logic                out_we;
  logic [AW-1:0]       out_waddr;
  logic [WW-1:0]       out_wdata;
  logic                d_clear, i_clear;
  logic                d_m1_start, d_m1_done, d_m2_start, d_m2_done, d_full, d_busy;
  logic                i_m1_start, i_m1_done, i_m2_start, i_m2_done, i_full, i_busy;
  logic [IW-1:0]       d_m1_line, d_m2_line, i_m1_line, i_m2_line;
  logic [N-1:0][M-1:0] d_vec_in, d_vec_out, i_vec_in, i_vec_out;

  frame_ram #(.WIDTH(WW), .DEPTH(DEPTH)) u_in_buf (
    .clk   (clk),
    .we    (in_we),
    .waddr (in_waddr),
    .wdata (in_wdata),
    .re    (in_re),
    .raddr (in_raddr),
    .rdata (in_rdata)
  );

  logic_control #(.N(N), .IMG_W(IMG_W), .IMG_H(IMG_H)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .sel_in     (sel),
    .busy       (busy),
    .frame_done (done),
    .sel        (sel_active),
    .in_re      (in_re),
    .in_raddr   (in_raddr),
    .d_clear    (d_clear),
    .d_m1_start (d_m1_start),
    .d_m1_line  (d_m1_line),
    .d_m1_done  (d_m1_done),
    .d_m2_start (d_m2_start),
    .d_m2_line  (d_m2_line),
    .d_m2_done  (d_m2_done),
    .d_full     (d_full),
    .i_clear    (i_clear),
    .i_m1_start (i_m1_start),
    .i_m1_line  (i_m1_line),
    .i_m1_done  (i_m1_done),
    .i_m2_start (i_m2_start),
    .i_m2_line  (i_m2_line),
    .i_m2_done  (i_m2_done),
    .i_full     (i_full),
    .out_we     (out_we),
    .out_waddr  (out_waddr)
  );

  // Pixels -> non-negative signed-magnitude data words.
  always_comb
    for (int k = 0; k < N; k++)
      d_vec_in[k] = M'(in_rdata[k*PIX_W +: PIX_W]);

  dct2d_block #(.N(N), .M(M), .CQ(CQ), .INVERSE(1'b0)) u_dct (
    .clk      (clk),
    .rst_n    (rst_n),
    .sel      (sel_active),
    .clear    (d_clear),
    .m1_start (d_m1_start),
    .m1_line  (d_m1_line),
    .m1_vec   (d_vec_in),
    .m1_done  (d_m1_done),
    .m2_start (d_m2_start),
    .m2_line  (d_m2_line),
    .m2_done  (d_m2_done),
    .full     (d_full),
    .busy     (d_busy),
    .vec_out  (d_vec_out)
  );

  // Frequency mask: d_vec_out is coefficient column u = i_m1_line, element v.
  always_comb
    for (int v = 0; v < N; v++)
      i_vec_in[v] = mask[v*N + int'(i_m1_line)] ? d_vec_out[v] : '0;

  dct2d_block #(.N(N), .M(M), .CQ(CQ), .INVERSE(1'b1)) u_idct (
    .clk      (clk),
    .rst_n    (rst_n),
    .sel      (sel_active),
    .clear    (i_clear),
    .m1_start (i_m1_start),
    .m1_line  (i_m1_line),
    .m1_vec   (i_vec_in),
    .m1_done  (i_m1_done),
    .m2_start (i_m2_start),
    .m2_line  (i_m2_line),
    .m2_done  (i_m2_done),
    .full     (i_full),
    .busy     (i_busy),
    .vec_out  (i_vec_out)
  );

  // Reconstructed row -> pixels, clamped to the pixel range.
  always_comb
    for (int k = 0; k < N; k++) begin
      if (i_vec_out[k][M-1])
        out_wdata[k*PIX_W +: PIX_W] = '0;
      else if (i_vec_out[k][M-2:0] > (M-1)'((1 << PIX_W) - 1))
        out_wdata[k*PIX_W +: PIX_W] = '1;
      else
        out_wdata[k*PIX_W +: PIX_W] = i_vec_out[k][PIX_W-1:0];
    end

  frame_ram #(.WIDTH(WW), .DEPTH(DEPTH)) u_out_buf (
    .clk   (clk),
    .we    (out_we),
    .waddr (out_waddr),
    .wdata (out_wdata),
    .re    (out_re),
    .raddr (out_raddr),
    .rdata (out_rdata)
  );

  // The datapath blocks only work while a frame is running.
  a_idle_quiet: assert property (@(posedge clk) disable iff (!rst_n) !busy |-> !(d_busy || i_busy));

endmodule
