// tb_arsc_mac: checks the ARSC MAC unit, forward (DCT) and inverse, for every
// SEL code on random signed vectors, bit-exact against the reference model,
// and the round timing: output j must appear (j+1)*(D+2) cycles after the
// edge that samples start, D being the largest truncated data magnitude.
// Also checks that one bit less of accuracy roughly halves a vector's time.
module tb_arsc_mac;
  import arsc_pkg::*;
  import arsc_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start;
  sel_t sel;
  logic [7:0][9:0] x_in;
  logic busy_f, busy_i, ov_f, ov_i, done_f, done_i;
  logic [2:0] idx_f, idx_i;
  logic [9:0] d_f, d_i;
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  arsc_mac #(.INVERSE(1'b0), .OSHIFT(1)) dutf (.clk, .rst_n, .start, .sel, .x_in,
    .busy(busy_f), .out_valid(ov_f), .out_idx(idx_f), .out_data(d_f), .done(done_f));
  arsc_mac #(.INVERSE(1'b1), .OSHIFT(-1)) duti (.clk, .rst_n, .start, .sel, .x_in,
    .busy(busy_i), .out_valid(ov_i), .out_idx(idx_i), .out_data(d_i), .done(done_i));

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t v;
    int t0, dmax, nout, tlen [5];
    start = 0; sel = 0; x_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      sel = sel_t'(k % 8);
      for (int i = 0; i < 8; i++) begin
        // same vector for k = 0..4 (timing comparison), random otherwise
        if (k == 0) v[i] = int'($urandom_range(300, 511));
        else if (k >= 5) v[i] = int'($urandom_range(0, 1022)) - 511;
        x_in[i] = to_sm(v[i]);
      end
      dmax = max_w(v, int'(sel));
      start = 1; @(negedge clk); start = 0;
      t0 = cyc;                      // edge that sampled start
      nout = 0;
      while (nout < 8 && cyc - t0 < 5000) begin
        @(negedge clk);
        if (ov_f) begin
          checks++;
          if (int'(idx_f) != nout || from_sm(d_f) != mac_out(v, int'(sel), 1'b0, 1, nout)
              || (cyc - t0) != (nout + 1) * (dmax + 2) || done_f != (nout == 7)) begin
            failures++;
            $display("FAIL fwd sel=%0d j=%0d got=%0d exp=%0d t=%0d exp_t=%0d", sel, idx_f,
                     from_sm(d_f), mac_out(v, int'(sel), 1'b0, 1, nout), cyc - t0, (nout + 1) * (dmax + 2));
          end
          checks++;
          if (!ov_i || from_sm(d_i) != mac_out(v, int'(sel), 1'b1, -1, nout)) begin
            failures++;
            $display("FAIL inv sel=%0d j=%0d got=%0d exp=%0d", sel, nout, from_sm(d_i),
                     mac_out(v, int'(sel), 1'b1, -1, nout));
          end
          nout++;
        end
      end
      if (k < 5) tlen[k] = cyc - t0;
      checks++;
      if (nout != 8) begin
        failures++;
        $display("FAIL only %0d outputs", nout);
      end
      @(negedge clk);
    end
    // Each bit removed should cut the vector time to about one half.
    for (int s = 1; s < 5; s++) begin
      checks++;
      if (tlen[s] * 2 > tlen[s-1] + 40 || tlen[s] * 2 < tlen[s-1] - 40) begin
        failures++;
        $display("FAIL time sel=%0d %0d vs %0d", s, tlen[s], tlen[s-1]);
      end
    end
    $display("vector cycles for SEL 0..4: %0d %0d %0d %0d %0d", tlen[0], tlen[1], tlen[2], tlen[3], tlen[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
