// tb_cbsc_mult: checks the counter-based stochastic multiplier.
// - The paper's worked example with 4-bit operands: x = 13/16, w = 9 gives 8.
// - A 9-bit instance with random operands against the closed-form count of
//   the reference model, and the latency: done rises exactly w cycles after
//   the edge that samples start.
module tb_cbsc_mult;
  import arsc_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic st4, st9, done4, done9;
  logic [3:0] x4, w4, p4;
  logic [8:0] x9, w9, p9;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cbsc_mult #(.Q(4), .DW(4)) dut4 (.clk, .rst_n, .start(st4), .x(x4), .w(w4), .done(done4), .prod(p4));
  cbsc_mult #(.Q(9), .DW(9)) dut9 (.clk, .rst_n, .start(st9), .x(x9), .w(w9), .done(done9), .prod(p9));

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    st4 = 0; st9 = 0; x4 = 0; w4 = 0; x9 = 0; w9 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Worked example: X = 1101b = 13/16, W = 1001b = 9 -> 8/16.
    x4 = 4'd13; w4 = 4'd9; st4 = 1; @(negedge clk); st4 = 0;
    lat = 0;
    while (!done4) begin @(negedge clk); lat++; end
    checks++;
    if (p4 != 4'd8 || lat != 9) begin
      failures++;
      $display("FAIL example prod=%0d lat=%0d", p4, lat);
    end
    // Random operands, including the corner cases 0 and 511.
    for (int k = 0; k < 300; k++) begin
      int xv, wv;
      xv = (k < 4) ? ((k & 1) ? 511 : 0) : int'($urandom_range(0, 511));
      wv = (k < 4) ? ((k & 2) ? 511 : 0) : int'($urandom_range(0, 511));
      x9 = 9'(xv); w9 = 9'(wv); st9 = 1; @(negedge clk); st9 = 0;
      lat = 0;
      while (!done9 && lat < 600) begin @(negedge clk); lat++; end
      checks++;
      if (int'(p9) != sc_count(xv, wv, 9) || lat != wv) begin
        failures++;
        $display("FAIL x=%0d w=%0d prod=%0d exp=%0d lat=%0d", xv, wv, p9, sc_count(xv, wv, 9), lat);
      end
      // accuracy: within 9 of x*w/512
      checks++;
      if ((int'(p9) * 512 - xv * wv) > 9 * 512 || (xv * wv - int'(p9) * 512) > 9 * 512) begin
        failures++;
        $display("FAIL accuracy x=%0d w=%0d prod=%0d", xv, wv, p9);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
