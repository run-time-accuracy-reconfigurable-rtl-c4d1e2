// tb_logic_control: checks the logic control unit on a 16 x 16 image (four
// tiles).  The DCT blocks are replaced by responders that answer each start
// with a done pulse after a random delay and model the intermediate buffers'
// full flags.  The testbench records the commands of each of the three
// stages and compares them with the schedule worked out independently:
//   fill:  per tile 8 x (input read of tile row r, DCT first unit on line r);
//   mid:   per tile 8 x (DCT second unit on line c, inverse first unit on c);
//   drain: per tile 8 x (inverse second unit on line r, output write of row r).
// Buffer rules: a second unit starts only on a full buffer, a first unit
// never writes into a buffer that is still full (not yet handed back), and
// the inverse first unit is never restarted while running.  It also checks
// that the stages really overlap, that SEL is held for the frame and that
// `frame_done` pulses once.
module tb_logic_control;
  import arsc_pkg::*;
  localparam int W = 16, H = 16, N = 8;
  logic clk = 0, rst_n = 0;
  logic start, busy, frame_done, in_re, d_clear, i_clear, out_we;
  sel_t sel_in, sel;
  logic [4:0] in_raddr, out_waddr;
  logic d_m1_start, d_m1_done, d_m2_start, d_m2_done, d_full;
  logic i_m1_start, i_m1_done, i_m2_start, i_m2_done, i_full;
  logic [2:0] d_m1_line, d_m2_line, i_m1_line, i_m2_line;
  int checks = 0, failures = 0;
  string got [3][$], exp [3][$];
  int n_overlap = 0;
  logic i1_busy = 0, i2_busy = 0, d1_busy = 0;
  int d_cnt, i_cnt;

  always #5 clk = ~clk;

  logic_control #(.N(N), .IMG_W(W), .IMG_H(H)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Responders: done pulse 1..20 cycles after a start.
  int dly [4];
  logic [3:0] starts, dones;
  assign starts = {i_m2_start, i_m1_start, d_m2_start, d_m1_start};
  assign {i_m2_done, i_m1_done, d_m2_done, d_m1_done} = dones;
  always @(posedge clk) begin
    for (int u = 0; u < 4; u++) begin
      dones[u] <= 1'b0;
      if (!rst_n)          dly[u] <= 0;
      else if (starts[u])  dly[u] <= int'($urandom_range(1, 20));
      else if (dly[u] > 0) begin
        dly[u] <= dly[u] - 1;
        if (dly[u] == 1) dones[u] <= 1'b1;
      end
    end
  end

  // Full flags: set after 8 first-unit lines, cleared by d_clear / i_clear.
  always @(posedge clk) begin
    if (d_clear) d_cnt <= 0;
    else if (d_m1_done) d_cnt <= d_cnt + 1;
    if (i_clear) i_cnt <= 0;
    else if (i_m1_done) i_cnt <= i_cnt + 1;
  end
  assign d_full = (d_cnt == 8);
  assign i_full = (i_cnt == 8);

  // Command trace, one list per stage, and the buffer rules.
  always @(posedge clk) if (rst_n) begin
    if (in_re)      got[0].push_back($sformatf("RD%0d", in_raddr));
    if (d_m1_start) got[0].push_back($sformatf("D1_%0d", d_m1_line));
    if (d_m2_start) got[1].push_back($sformatf("D2_%0d", d_m2_line));
    if (i_m1_start) got[1].push_back($sformatf("I1_%0d", i_m1_line));
    if (i_m2_start) got[2].push_back($sformatf("I2_%0d", i_m2_line));
    if (out_we)     got[2].push_back($sformatf("WR%0d", out_waddr));
    if (d_m2_start && !d_full) begin failures++; $display("FAIL DCT second unit before full"); end
    if (i_m2_start && !i_full) begin failures++; $display("FAIL IDCT second unit before full"); end
    if (d_m1_start && d_cnt >= 8) begin failures++; $display("FAIL DCT buffer overwritten"); end
    if (i_m1_start && i_cnt >= 8) begin failures++; $display("FAIL IDCT buffer overwritten"); end
    if (i_m1_start && i1_busy) begin failures++; $display("FAIL IDCT first unit restarted"); end
    if (busy && sel != 3'd3) begin failures++; $display("FAIL sel not held: %0d", sel); end
    if (d1_busy && i2_busy) n_overlap++;
    if (i_m1_start) i1_busy <= 1; else if (i_m1_done) i1_busy <= 0;
    if (i_m2_start) i2_busy <= 1; else if (i_m2_done) i2_busy <= 0;
    if (d_m1_start) d1_busy <= 1; else if (d_m1_done) d1_busy <= 0;
  end

  initial begin
    int ndone;
    start = 0; sel_in = 3'd3;
    d_cnt = 0; i_cnt = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ty = 0; ty < H / N; ty++)
      for (int tx = 0; tx < W / N; tx++) begin
        for (int r = 0; r < N; r++) begin
          exp[0].push_back($sformatf("RD%0d", (ty * N + r) * (W / N) + tx));
          exp[0].push_back($sformatf("D1_%0d", r));
        end
        for (int c = 0; c < N; c++) begin
          exp[1].push_back($sformatf("D2_%0d", c));
          exp[1].push_back($sformatf("I1_%0d", c));
        end
        for (int r = 0; r < N; r++) begin
          exp[2].push_back($sformatf("I2_%0d", r));
          exp[2].push_back($sformatf("WR%0d", (ty * N + r) * (W / N) + tx));
        end
      end
    @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    sel_in = 3'd1;                       // must not affect the running frame
    ndone = 0;
    while (busy) begin
      if (frame_done) ndone++;
      @(negedge clk);
    end
    if (frame_done) ndone++;             // pulses in the first idle cycle
    checks++;
    if (ndone != 1) begin failures++; $display("FAIL frame_done count %0d", ndone); end
    for (int g = 0; g < 3; g++) begin
      checks++;
      if (got[g].size() != exp[g].size()) begin
        failures++;
        $display("FAIL stage %0d: %0d commands, expected %0d", g, got[g].size(), exp[g].size());
      end
      for (int k = 0; k < exp[g].size() && k < got[g].size(); k++) begin
        checks++;
        if (got[g][k] != exp[g][k]) begin
          failures++;
          if (failures < 10) $display("FAIL stage %0d command %0d: %s, expected %s", g, k, got[g][k], exp[g][k]);
        end
      end
    end
    // The D2 of column c+1 must be issued before the I1 of column c finishes,
    // and fill of a tile must overlap drain of the previous one.
    checks++;
    if (n_overlap == 0) begin failures++; $display("FAIL fill and drain stages never overlapped"); end
    // A second frame takes the new SEL.
    sel_in = 3'd3;
    start = 1; @(negedge clk); start = 0;
    checks++;
    if (sel != 3'd3 || !busy) begin failures++; $display("FAIL second frame"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
