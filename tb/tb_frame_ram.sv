// tb_frame_ram: checks the image buffer RAM at its default size
// (8192 words of 64 bits): random writes, registered reads one cycle later,
// read data held while re is low, and simultaneous read and write.
module tb_frame_ram;
  logic clk = 0;
  logic we, re;
  logic [12:0] waddr, raddr;
  logic [63:0] wdata, rdata;
  logic [63:0] model [8192];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  frame_ram dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] held;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    @(negedge clk);
    for (int a = 0; a < 8192; a++) begin
      we = 1; waddr = 13'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int k = 0; k < 3000; k++) begin
      raddr = 13'($urandom);
      re = 1;
      // write a different word in the same cycle
      we = 1; waddr = raddr + 13'd1; wdata = {$urandom, $urandom};
      @(negedge clk);
      model[waddr] = wdata;
      re = 0; we = 0;
      checks++;
      if (rdata != model[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
      held = rdata;
      raddr = raddr + 13'd7;
      @(negedge clk);
      checks++;
      if (rdata != held) begin failures++; $display("FAIL rdata not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
