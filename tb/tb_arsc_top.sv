// tb_arsc_top: end-to-end test of the ARSC image engine on a 16 x 16 image
// (four 8 x 8 tiles).  The image is written into the input buffer, a frame is
// run, and the output buffer is compared pixel by pixel with the bit-true
// reference model (2D DCT, frequency mask, 2D inverse DCT, clamp).  Frames
// run at every accuracy setting SEL = 0..4 (10..6 bits) and once more with a
// low-pass mask.  Checked besides the pixels:
//   - frame time: every bit removed must shorten the frame to 0.4..0.6 of
//     the previous one (computing time ~ 2^bit-width);
//   - mechanisms, each counted and required at least once: a mode switch
//     (SEL differing from the previous frame), masked coefficients, output
//     clamping (a reconstructed value outside 0..255), the wait for a full
//     intermediate buffer, the overlap of the fill and drain stages of
//     consecutive tiles, the overlap of the DCT second unit with the inverse
//     first unit;
//   - the reconstruction quality (PSNR against the input image) at 10 bits.
module tb_arsc_top;
  import arsc_pkg::*;
  import arsc_ref_pkg::*;
  localparam int W = 16, H = 16;
  localparam int WORDS = W * H / 8;
  logic clk = 0, rst_n = 0;
  sel_t sel, sel_active;
  logic [63:0] mask;
  logic start, busy, done, in_we, out_re;
  logic [$clog2(WORDS)-1:0] in_waddr, out_raddr;
  logic [63:0] in_wdata, out_rdata;
  int checks = 0, failures = 0;
  int img [H][W];
  int cyc = 0;
  int n_switch = 0, n_masked = 0, n_clamp = 0, n_fullwait = 0, n_ov_tile = 0, n_ov_col = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  arsc_top #(.IMG_W(W), .IMG_H(H)) dut (.*);

  // Last first-unit line done while its buffer is not yet full: the control
  // unit has to wait for the full flag before starting the second unit.
  always @(posedge clk)
    if ((dut.d_m1_done && dut.d_m1_line == 3'd7 && !dut.d_full) ||
        (dut.i_m1_done && dut.i_m1_line == 3'd7 && !dut.i_full)) n_fullwait++;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected output image of the whole engine.
  // Overlapped stages: DCT fill of a tile while the previous tile drains, and
  // the DCT second unit working while the inverse first unit works.
  always @(posedge clk) begin
    if (dut.u_dct.u_mac1.busy && dut.u_idct.u_mac2.busy) n_ov_tile++;
    if (dut.u_dct.u_mac2.busy && dut.u_idct.u_mac1.busy) n_ov_col++;
  end

  task automatic model(int s, logic [63:0] m, output int res [H][W], output int clamps, output int masked);
    tile_t t, f, r;
    clamps = 0; masked = 0;
    for (int ty = 0; ty < H / 8; ty++)
      for (int tx = 0; tx < W / 8; tx++) begin
        for (int y = 0; y < 8; y++)
          for (int x = 0; x < 8; x++) t[y][x] = img[ty*8+y][tx*8+x];
        f = block2d(t, s, 1'b0);                 // f[u][v]
        for (int u = 0; u < 8; u++)
          for (int v = 0; v < 8; v++)
            if (!m[v*8+u]) begin
              if (f[u][v] != 0) masked++;
              f[u][v] = 0;
            end
        r = block2d(f, s, 1'b1);                 // r[y][x]
        for (int y = 0; y < 8; y++)
          for (int x = 0; x < 8; x++) begin
            int p;
            p = r[y][x];
            if (p < 0 || p > 255) clamps++;
            res[ty*8+y][tx*8+x] = (p < 0) ? 0 : (p > 255) ? 255 : p;
          end
      end
  endtask

  task automatic run_frame(int s, logic [63:0] m, output int frame_cycles, output real psnr);
    int exp [H][W];
    int cl, mk, t0;
    real se;
    model(s, m, exp, cl, mk);
    n_clamp += cl; n_masked += mk;
    sel = sel_t'(s); mask = m;
    if (sel_active != sel) n_switch++;
    start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    frame_cycles = cyc - t0;
    checks++;
    if (sel_active != sel_t'(s)) begin failures++; $display("FAIL sel_active"); end
    se = 0.0;
    for (int a = 0; a < WORDS; a++) begin
      out_re = 1; out_raddr = $bits(out_raddr)'(a); @(negedge clk); out_re = 0;
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
    int fc [6];
    real ps [6];
    logic [63:0] lowpass;
    start = 0; sel = 0; mask = '1; in_we = 0; in_waddr = 0; in_wdata = 0; out_re = 0; out_raddr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Test image: smooth ramp, a saturated bright square and a dark bar.
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        img[y][x] = (x * 9 + y * 5) % 200 + 20;
        if (x >= 3 && x < 7 && y >= 2 && y < 12) img[y][x] = 255;
        if (y == 13) img[y][x] = 0;
      end
    for (int a = 0; a < WORDS; a++) begin
      in_we = 1; in_waddr = $bits(in_waddr)'(a);
      for (int k = 0; k < 8; k++) in_wdata[k*8 +: 8] = 8'(img[a / (W / 8)][(a % (W / 8)) * 8 + k]);
      @(negedge clk);
    end
    in_we = 0;
    lowpass = '0;
    for (int v = 0; v < 8; v++)
      for (int u = 0; u < 8; u++) lowpass[v*8+u] = (u + v < 4);
    for (int s = 0; s < 5; s++) begin
      run_frame(s, '1, fc[s], ps[s]);
      $display("SEL=%0d (%0d bits): frame %0d cycles, PSNR %f dB", s, 10 - s, fc[s], ps[s]);
    end
    run_frame(0, lowpass, fc[5], ps[5]);
    $display("SEL=0 low-pass mask: frame %0d cycles, PSNR %f dB", fc[5], ps[5]);
    for (int s = 1; s < 5; s++) begin
      checks++;
      if (fc[s] * 10 > fc[s-1] * 6 || fc[s] * 10 < fc[s-1] * 4) begin
        failures++;
        $display("FAIL frame time SEL=%0d: %0d vs %0d", s, fc[s], fc[s-1]);
      end
    end
    checks++;
    if (ps[0] < 30.0) begin failures++; $display("FAIL 10-bit PSNR %f", ps[0]); end
    $display("mechanisms: mode switches=%0d masked coefficients=%0d clamped pixels=%0d full-buffer waits=%0d overlapped fill/drain cycles=%0d overlapped column cycles=%0d",
             n_switch, n_masked, n_clamp, n_fullwait, n_ov_tile, n_ov_col);
    checks += 6;
    if (n_switch < 4)   begin failures++; $display("FAIL no mode switch"); end
    if (n_masked == 0)  begin failures++; $display("FAIL mask never applied"); end
    if (n_clamp == 0)   begin failures++; $display("FAIL clamp never happened"); end
    if (n_fullwait == 0) begin failures++; $display("FAIL full-buffer wait never happened"); end
    if (n_ov_tile == 0) begin failures++; $display("FAIL tile stages never overlapped"); end
    if (n_ov_col == 0)  begin failures++; $display("FAIL column stages never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
