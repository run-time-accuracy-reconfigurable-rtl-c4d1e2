// tb_arsc_top_full: the ARSC image engine at its default size, a 256 x 256
// 8-bit image (1024 tiles), with no parameter overridden.  One frame runs at
// full accuracy (SEL = 0, 10 bits) and one at SEL = 1 (9 bits); every output
// pixel is compared with the bit-true reference model.  The testbench prints
// the frame time in cycles, the frame rate this gives at the 85.7 MHz clock
// of the FPGA prototype, and the PSNR against the input image, and checks
// that the 9-bit frame takes 0.4..0.6 of the 10-bit frame's cycles.
module tb_arsc_top_full;
  import arsc_pkg::*;
  import arsc_ref_pkg::*;
  localparam int W = 256, H = 256;
  localparam int WORDS = W * H / 8;
  logic clk = 0, rst_n = 0;
  sel_t sel, sel_active;
  logic [63:0] mask;
  logic start, busy, done, in_we, out_re;
  logic [12:0] in_waddr, out_raddr;
  logic [63:0] in_wdata, out_rdata;
  int checks = 0, failures = 0;
  int img [H][W];
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  arsc_top dut (.*);

  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(int s, output int frame_cycles, output real psnr);
    int t0;
    real se;
    tile_t t, f, r;
    int exp [H][W];
    for (int ty = 0; ty < H / 8; ty++)
      for (int tx = 0; tx < W / 8; tx++) begin
        for (int y = 0; y < 8; y++)
          for (int x = 0; x < 8; x++) t[y][x] = img[ty*8+y][tx*8+x];
        f = block2d(t, s, 1'b0);
        r = block2d(f, s, 1'b1);
        for (int y = 0; y < 8; y++)
          for (int x = 0; x < 8; x++)
            exp[ty*8+y][tx*8+x] = (r[y][x] < 0) ? 0 : (r[y][x] > 255) ? 255 : r[y][x];
      end
    sel = sel_t'(s);
    start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    frame_cycles = cyc - t0;
    se = 0.0;
    for (int a = 0; a < WORDS; a++) begin
      out_re = 1; out_raddr = 13'(a); @(negedge clk); out_re = 0;
      for (int k = 0; k < 8; k++) begin
        int y, x, got;
        y = a / (W / 8); x = (a % (W / 8)) * 8 + k;
        got = int'(out_rdata[k*8 +: 8]);
        checks++;
        if (got != exp[y][x]) begin
          failures++;
          if (failures < 10) $display("FAIL sel=%0d pixel (%0d,%0d) got=%0d exp=%0d", s, x, y, got, exp[y][x]);
        end
        se += (got - img[y][x]) * (got - img[y][x]);
      end
    end
    se = se / (W * H);
    psnr = (se == 0.0) ? 99.0 : 10.0 * $log10(255.0 * 255.0 / se);
  endtask

  initial begin
    int fc [5];
    real ps [5];
    start = 0; sel = 0; mask = '1; in_we = 0; in_waddr = 0; in_wdata = 0; out_re = 0; out_raddr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Synthetic scene: smooth shading, a bright disc, a dark bar and texture.
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        real v;
        v = 110.0 + 60.0 * $sin(x / 23.0) + 40.0 * $cos(y / 17.0) + ((x * 7 + y * 13) % 11);
        if ((x - 160) * (x - 160) + (y - 90) * (y - 90) < 1600) v = 240.0;
        if (y >= 200 && y < 210) v = 5.0;
        img[y][x] = (v < 0.0) ? 0 : (v > 255.0) ? 255 : $rtoi(v);
      end
    for (int a = 0; a < WORDS; a++) begin
      in_we = 1; in_waddr = 13'(a);
      for (int k = 0; k < 8; k++) in_wdata[k*8 +: 8] = 8'(img[a / (W / 8)][(a % (W / 8)) * 8 + k]);
      @(negedge clk);
    end
    in_we = 0;
    for (int s = 0; s < 5; s++) begin
      run_frame(s, fc[s], ps[s]);
      $display("SEL=%0d (%0d bits): frame %0d cycles = %f frames/s at 85.7 MHz; same rate as 10 bits at %f MHz; PSNR %f dB",
               s, 10 - s, fc[s], 85.7e6 / fc[s], 85.7 * fc[s] / fc[0], ps[s]);
      if (s > 0) begin
        checks++;
        if (fc[s] * 10 > fc[s-1] * 6 || fc[s] * 10 < fc[s-1] * 4) begin
          failures++;
          $display("FAIL frame time ratio %0d / %0d", fc[s], fc[s-1]);
        end
      end
    end
    checks++;
    if (ps[0] < 30.0) begin failures++; $display("FAIL 10-bit PSNR %f", ps[0]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
