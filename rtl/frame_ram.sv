// frame_ram: image buffer (the paper's input buffer and output buffer RAMs).
//
// Simple dual-port RAM with one synchronous write port and one synchronous
// read port.  A word holds one row of an N x N tile, N pixels of PW bits
// (pixel k of the row in bits k*PW +: PW), so a single read hands N pixels to
// the 2D DCT block at once, as the paper describes.  Words are stored in
// raster order: word (y * W/N + x/N) holds pixels x..x+N-1 of image row y.
// `rdata` is registered: it shows the word addressed when `re` was sampled
// and holds until the next read.  The word organisation and the port
// arrangement are this design's choices; the paper only names the RAMs.
module frame_ram #(
  parameter int WIDTH = 64,             // bits per word (N pixels)
  parameter int DEPTH = 8192            // words (256 x 256 pixels / 8)
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
