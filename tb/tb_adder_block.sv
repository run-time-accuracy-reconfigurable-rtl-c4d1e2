// tb_adder_block: checks the adder block (signed sum of product counts,
// zero appending, scaling, saturation) for the DCT scaling (OSHIFT = 1) and
// the inverse DCT scaling (OSHIFT = -1) against the reference model.
module tb_adder_block;
  import arsc_ref_pkg::*;
  logic [7:0][8:0] prod;
  logic [7:0] psign;
  logic [3:0] shift;
  logic [9:0] yf, yi;
  int checks = 0, failures = 0;
  int nsat = 0;

  adder_block #(.N(8), .M(10), .OSHIFT(1))  dutf (.prod, .psign, .shift, .y(yf));
  adder_block #(.N(8), .M(10), .OSHIFT(-1)) duti (.prod, .psign, .shift, .y(yi));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 1000; k++) begin
      int acc, lim;
      shift = 4'($urandom_range(0, 4));
      lim = (k % 3 == 0) ? 511 : (511 >> shift) / 4;
      acc = 0;
      for (int i = 0; i < 8; i++) begin
        prod[i]  = 9'($urandom_range(0, lim));
        psign[i] = 1'($urandom);
        acc += psign[i] ? -int'(prod[i]) : int'(prod[i]);
      end
      #1;
      checks += 2;
      if (from_sm(yf) != finish(acc, shift, 1) || (yf == 10'h200)) begin
        failures++;
        $display("FAIL fwd acc=%0d shift=%0d y=%0d exp=%0d", acc, shift, from_sm(yf), finish(acc, shift, 1));
      end
      if (from_sm(yi) != finish(acc, shift, -1) || (yi == 10'h200)) begin
        failures++;
        $display("FAIL inv acc=%0d shift=%0d y=%0d exp=%0d", acc, shift, from_sm(yi), finish(acc, shift, -1));
      end
      if (yf[8:0] == 9'd511) nsat++;
    end
    checks++;
    if (nsat == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
