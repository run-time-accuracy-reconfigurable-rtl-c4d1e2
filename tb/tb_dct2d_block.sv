// tb_dct2d_block: checks the 2D DCT block and the 2D inverse DCT block.
// Each is driven as the logic control unit drives it: N first-unit lines,
// wait for the intermediate buffer to be full, N second-unit lines.  Every
// gathered output vector is compared bit-exactly with the reference model,
// and the forward result is also compared loosely with a floating-point
// orthonormal 2D DCT (scaled by 1/4) to show the arithmetic is a real DCT.
module tb_dct2d_block;
  import arsc_pkg::*;
  import arsc_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  sel_t sel;
  logic clear;
  logic m1_start [2], m2_start [2], m1_done [2], m2_done [2], full [2], busy [2];
  logic [2:0] m1_line [2], m2_line [2];
  logic [7:0][9:0] m1_vec [2], vec_out [2];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dct2d_block #(.INVERSE(1'b0)) dutf (.clk, .rst_n, .sel, .clear,
    .m1_start(m1_start[0]), .m1_line(m1_line[0]), .m1_vec(m1_vec[0]), .m1_done(m1_done[0]),
    .m2_start(m2_start[0]), .m2_line(m2_line[0]), .m2_done(m2_done[0]),
    .full(full[0]), .busy(busy[0]), .vec_out(vec_out[0]));
  dct2d_block #(.INVERSE(1'b1)) duti (.clk, .rst_n, .sel, .clear,
    .m1_start(m1_start[1]), .m1_line(m1_line[1]), .m1_vec(m1_vec[1]), .m1_done(m1_done[1]),
    .m2_start(m2_start[1]), .m2_line(m2_line[1]), .m2_done(m2_done[1]),
    .full(full[1]), .busy(busy[1]), .vec_out(vec_out[1]));

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Runs one tile through block b and compares with the reference.
  task automatic run_tile(int b, tile_t lines);
    tile_t exp;
    exp = block2d(lines, int'(sel), b == 1);
    clear = 1; @(negedge clk); clear = 0;
    for (int l = 0; l < 8; l++) begin
      for (int i = 0; i < 8; i++) m1_vec[b][i] = to_sm(lines[l][i]);
      m1_line[b] = 3'(l); m1_start[b] = 1; @(negedge clk); m1_start[b] = 0;
      m1_vec[b] = '0;                      // data must have been latched
      while (!m1_done[b]) @(negedge clk);
      checks++;
      if (full[b] != 1'b0) begin failures++; $display("FAIL full early"); end
    end
    @(negedge clk);
    checks++;
    if (!full[b]) begin failures++; $display("FAIL buffer not full"); end
    for (int q = 0; q < 8; q++) begin
      m2_line[b] = 3'(q); m2_start[b] = 1; @(negedge clk); m2_start[b] = 0;
      while (!m2_done[b]) @(negedge clk);
      @(negedge clk);
      for (int p = 0; p < 8; p++) begin
        checks++;
        if (from_sm(vec_out[b][p]) != exp[q][p]) begin
          failures++;
          $display("FAIL blk=%0d sel=%0d q=%0d p=%0d got=%0d exp=%0d", b, sel, q, p,
                   from_sm(vec_out[b][p]), exp[q][p]);
        end
      end
    end
  endtask

  initial begin
    tile_t t;
    real ref_f, err, maxerr;
    sel = 0; clear = 0;
    for (int b = 0; b < 2; b++) begin
      m1_start[b] = 0; m2_start[b] = 0; m1_line[b] = 0; m2_line[b] = 0; m1_vec[b] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 7; k++) begin
      sel = sel_t'(k % 5);
      for (int y = 0; y < 8; y++)
        for (int x = 0; x < 8; x++)
          t[y][x] = (k == 0) ? 40 + 20 * x + 5 * y : int'($urandom_range(0, 255));
      run_tile(0, t);
      if (k == 0) begin
        // forward 10-bit result against the exact DCT of the tile, / 4
        maxerr = 0.0;
        for (int u = 0; u < 8; u++)
          for (int v = 0; v < 8; v++) begin
            ref_f = 0.0;
            for (int y = 0; y < 8; y++)
              for (int x = 0; x < 8; x++)
                ref_f += t[y][x] * (((u == 0) ? $sqrt(0.125) : 0.5) * $cos((2*x+1)*u*3.14159265358979/16.0))
                                 * (((v == 0) ? $sqrt(0.125) : 0.5) * $cos((2*y+1)*v*3.14159265358979/16.0));
            err = from_sm(vec_out[0][v]) - ref_f / 4.0;   // vec_out holds column u = 7 only
            if (u == 7) begin
              if (err < 0) err = -err;
              if (err > maxerr) maxerr = err;
            end
          end
        checks++;
        if (maxerr > 8.0) begin failures++; $display("FAIL DCT accuracy %f", maxerr); end
      end
      for (int y = 0; y < 8; y++)
        for (int x = 0; x < 8; x++)
          t[y][x] = int'($urandom_range(0, 300)) - 150;
      run_tile(1, t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
