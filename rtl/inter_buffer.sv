// inter_buffer: N x N intermediate data buffer of a 2D (inverse) DCT block.
//
// The first MAC unit of the block writes its results line by line: element
// `widx` of line `wline` goes to cell [wline][widx].  The second MAC unit reads
// the buffer transposed: `rdata` holds cells [0..N-1][rline], i.e. element
// `widx` = rline of every line, which turns row transforms into column
// transforms.  `full` rises once every line has received its last element
// (index N-1); the second MAC unit may only start then, as the paper requires.
// `clear` empties the buffer for the next tile.  Writes are synchronous; the
// read port is combinational.  Implemented as registers (N*N*M bits).
module inter_buffer #(
  parameter int N = 8,
  parameter int M = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] wline,
  input  logic [$clog2(N)-1:0] widx,
  input  logic [M-1:0]         wdata,
  input  logic [$clog2(N)-1:0] rline,
  output logic [N-1:0][M-1:0]  rdata,
  output logic                 full
);

  logic [M-1:0] mem [N][N];
  logic [N-1:0] line_done;

  assign full = &line_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      line_done <= '0;
      for (int a = 0; a < N; a++)
        for (int b = 0; b < N; b++)
          mem[a][b] <= '0;
    end else if (clear) begin
      line_done <= '0;
    end else if (we) begin
      mem[wline][widx] <= wdata;
      if (int'(widx) == N - 1) line_done[wline] <= 1'b1;
    end
  end

  always_comb
    for (int a = 0; a < N; a++) rdata[a] = mem[a][rline];

  // The buffer must be cleared before a new set of lines is written.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n) we && !clear |-> !full);

endmodule
