// tb_det_sng: checks the deterministic stochastic number generator.
// A 4-bit instance is compared with the printed 16-bit pattern
// X3 X2 X3 X1 X3 X2 X3 X0 X3 X2 X3 X1 X3 X2 X3 0; a 9-bit instance must give,
// over 2^9 - 1 bits, exactly as many ones as its binary input, and every
// prefix must stay within Q ones of the ideal density.
module tb_det_sng;
  logic clk = 0, rst_n = 0;
  logic clr4, adv4, clr9, adv9;
  logic [3:0] c4;
  logic [8:0] c9;
  logic sn4, sn9;
  int checks = 0, failures = 0;
  int pat [16] = '{3, 2, 3, 1, 3, 2, 3, 0, 3, 2, 3, 1, 3, 2, 3, -1};

  always #5 clk = ~clk;

  det_sng #(.Q(4)) dut4 (.clk, .rst_n, .clear(clr4), .advance(adv4), .coef(c4), .sn(sn4));
  det_sng #(.Q(9)) dut9 (.clk, .rst_n, .clear(clr9), .advance(adv9), .coef(c9), .sn(sn9));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones, expb;
    clr4 = 0; adv4 = 0; clr9 = 0; adv9 = 0; c4 = 0; c9 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Printed pattern, for several inputs.
    for (int v = 0; v < 16; v += 5) begin
      c4 = 4'(v);
      clr4 = 1; @(negedge clk); clr4 = 0; adv4 = 1;
      for (int t = 0; t < 16; t++) begin
        expb = (pat[t] < 0) ? 0 : ((v >> pat[t]) & 1);
        checks++;
        if (sn4 !== 1'(expb)) begin
          failures++;
          $display("FAIL Q=4 coef=%0d t=%0d sn=%0d exp=%0d", v, t, sn4, expb);
        end
        @(negedge clk);
      end
      adv4 = 0;
    end
    // Ones count over a full period equals the input value.
    for (int k = 0; k < 12; k++) begin
      int v;
      v = (k < 2) ? k * 511 : int'($urandom_range(0, 511));
      c9 = 9'(v);
      clr9 = 1; @(negedge clk); clr9 = 0; adv9 = 1;
      ones = 0;
      for (int t = 0; t < 511; t++) begin
        ones += int'(sn9);
        // prefix density: |ones*512 - v*(t+1)| <= 9*512
        if ((ones * 512 - v * (t + 1)) > 9 * 512 || (v * (t + 1) - ones * 512) > 9 * 512) begin
          failures++;
          $display("FAIL Q=9 prefix coef=%0d t=%0d ones=%0d", v, t, ones);
        end
        @(negedge clk);
      end
      checks++;
      if (ones != v) begin
        failures++;
        $display("FAIL Q=9 coef=%0d ones=%0d", v, ones);
      end
      checks++;
      if (sn9 !== 1'b0) begin   // position 2^9 - 1 is the constant 0
        failures++;
        $display("FAIL Q=9 last bit not zero");
      end
      adv9 = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
