// tb_inter_buffer: checks the intermediate buffer: lines written element by
// element read back transposed, `full` only after the last element of every
// line, and `clear` emptying it for the next tile.
module tb_inter_buffer;
  logic clk = 0, rst_n = 0;
  logic clear, we, full;
  logic [2:0] wline, widx, rline;
  logic [9:0] wdata;
  logic [7:0][9:0] rdata;
  logic [9:0] model [8][8];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  inter_buffer #(.N(8), .M(10)) dut (.clk, .rst_n, .clear, .we, .wline, .widx, .wdata, .rline, .rdata, .full);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [8];
    clear = 0; we = 0; wline = 0; widx = 0; wdata = 0; rline = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      clear = 1; @(negedge clk); clear = 0;
      checks++;
      if (full) begin failures++; $display("FAIL full after clear"); end
      for (int l = 0; l < 8; l++) order[l] = (l * 3 + rep) % 8;   // line order varies
      for (int l = 0; l < 8; l++)
        for (int j = 0; j < 8; j++) begin
          checks++;
          if (full) begin failures++; $display("FAIL full too early l=%0d j=%0d", l, j); end
          we = 1; wline = 3'(order[l]); widx = 3'(j); wdata = 10'($urandom);
          model[order[l]][j] = wdata;
          @(negedge clk);
          we = 0;
        end
      checks++;
      if (!full) begin failures++; $display("FAIL not full"); end
      for (int q = 0; q < 8; q++) begin
        rline = 3'(q); #1;
        for (int a = 0; a < 8; a++) begin
          checks++;
          if (rdata[a] != model[a][q]) begin
            failures++;
            $display("FAIL read line %0d elem %0d", q, a);
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
