// tb_data_trunc: checks the data truncation block on the paper's example
// (SEL = 010 turns 1_111010101 into the 8-bit 1_1110101) and on random words
// for every SEL code, against sign kept / magnitude >> min(SEL, 4).
module tb_data_trunc;
  import arsc_pkg::*;
  logic [2:0] sel;
  logic [7:0][9:0] x, xt;
  logic [3:0] shift;
  int checks = 0, failures = 0;

  data_trunc #(.N(8), .M(10)) dut (.sel, .x, .xt, .shift);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = '0;
    x[0] = 10'b1_111010101; sel = 3'b010;
    #1;
    checks++;
    if (xt[0] != 10'b1_00_1110101 || shift != 4'd2) begin
      failures++;
      $display("FAIL example xt=%b", xt[0]);
    end
    for (int k = 0; k < 400; k++) begin
      int s;
      sel = 3'(k % 8);
      for (int i = 0; i < 8; i++) x[i] = 10'($urandom);
      #1;
      s = (k % 8 > 4) ? 4 : k % 8;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (xt[i][9] != x[i][9] || int'(xt[i][8:0]) != (int'(x[i][8:0]) >> s) || int'(shift) != s) begin
          failures++;
          $display("FAIL sel=%0d x=%b xt=%b", sel, x[i], xt[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
