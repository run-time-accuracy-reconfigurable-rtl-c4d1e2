// logic_control: logic control unit of the ARSC image engine.
//
// Runs one frame, tile by tile (N x N tiles in raster order), through
// input buffer -> 2D DCT block -> frequency mask -> 2D inverse DCT block ->
// output buffer.  The work of a tile falls into three stages, each driven by
// its own small sequencer so that the stages of consecutive tiles overlap:
//   fill  (DCT first MAC unit): for each tile row r, read it from the input
//         buffer (one word) and start the unit on it;
//   mid   (DCT second MAC unit, inverse DCT first MAC unit): once the DCT
//         intermediate buffer is full, for each column c start the DCT second
//         unit on line c, then start the inverse first unit on the (masked)
//         result; the DCT second unit already works on column c+1 while the
//         inverse first unit works on column c;
//   drain (inverse DCT second MAC unit): once the inverse buffer is full, for
//         each row r start the unit on line r and write the reconstructed row
//         to the output buffer.
// Each intermediate buffer is handed between the stage that fills it and the
// stage that reads it by a token; it is cleared and handed back as soon as
// the reader has started its last line (a MAC unit latches its input when it
// starts).  So the fill stage of tile t+1 runs while the drain stage of tile t
// does, and each MAC unit is started only when it is idle.  The paper
// gives the unit's role (it controls the data flow of all blocks) and asks
// for parallel operation to hide the stochastic latency, but not a schedule:
// this overlapped schedule is this design's choice.
//
// The accuracy selection signal is sampled when a frame starts and held for
// the whole frame, so SEL can change at run time between frames.
//
// Interface: `start` (pulse, while idle) begins a frame; `busy` is high until
// `frame_done` pulses, one cycle after the last output row is written.
// Output buffer writes are `out_we` with `out_waddr`; the data is formed
// outside from the inverse DCT block's output vector, valid in that cycle.
module logic_control
  import arsc_pkg::*;
#(
  parameter int N     = N_DEF,
  parameter int IMG_W = 256,
  parameter int IMG_H = 256,
  localparam int AW   = $clog2(IMG_W * IMG_H / N),
  localparam int IW   = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  sel_t          sel_in,
  output logic          busy,
  output logic          frame_done,
  output sel_t          sel,            // SEL held for the running frame
  // input buffer read port
  output logic          in_re,
  output logic [AW-1:0] in_raddr,
  // 2D DCT block
  output logic          d_clear,
  output logic          d_m1_start,
  output logic [IW-1:0] d_m1_line,
  input  logic          d_m1_done,
  output logic          d_m2_start,
  output logic [IW-1:0] d_m2_line,
  input  logic          d_m2_done,
  input  logic          d_full,
  // 2D inverse DCT block
  output logic          i_clear,
  output logic          i_m1_start,
  output logic [IW-1:0] i_m1_line,
  input  logic          i_m1_done,
  output logic          i_m2_start,
  output logic [IW-1:0] i_m2_line,
  input  logic          i_m2_done,
  input  logic          i_full,
  // output buffer write port
  output logic          out_we,
  output logic [AW-1:0] out_waddr
);

  localparam int TX = IMG_W / N;        // tiles per image row
  localparam int NT = (IMG_W / N) * (IMG_H / N);
  localparam int TW = $clog2(NT + 1);

  typedef enum logic [1:0] {F_WAIT, F_READ, F_START, F_RUN} fill_t;
  typedef enum logic [2:0] {M_WAIT, M_D2_START, M_D2_RUN, M_I1_READY, M_I1_START, M_LAST} mid_t;
  typedef enum logic [1:0] {R_WAIT, R_START, R_RUN, R_WRITE} drain_t;

  logic           run;                  // frame in progress
  fill_t          fs;
  mid_t           ms;
  drain_t         rs;
  logic [TW-1:0]  ft, mt, rt;           // tile handled by each stage
  logic [IW-1:0]  fr, mc, rr;           // row / column within the tile
  logic           d_tok;                // DCT buffer: 0 fill stage, 1 mid stage
  logic           i_tok;                // inverse buffer: 0 mid stage, 1 drain stage
  logic           i1_run;               // inverse first MAC unit working
  logic           done_q;

  // Word address of row `r` of tile `t`.
  function automatic logic [AW-1:0] row_addr(logic [TW-1:0] t, logic [IW-1:0] r);
    int unsigned ti;
    ti = int'(t);
    return AW'(((ti / TX) * N + int'(r)) * TX + (ti % TX));
  endfunction

  assign busy       = run;
  assign frame_done = done_q;
  assign in_re      = (fs == F_READ);
  assign in_raddr   = row_addr(ft, fr);
  assign d_m1_start = (fs == F_START);
  assign d_m1_line  = fr;
  assign d_m2_start = (ms == M_D2_START);
  assign d_m2_line  = mc;
  assign i_m1_start = (ms == M_I1_START);
  assign i_m1_line  = mc;
  assign i_m2_start = (rs == R_START);
  assign i_m2_line  = rr;
  assign out_we     = (rs == R_WRITE);
  assign out_waddr  = row_addr(rt, rr);
  // A buffer is released as its reader starts on the last line, and both are
  // cleared when a frame starts.
  assign d_clear    = (!run && start) || (d_m2_start && int'(mc) == N - 1);
  assign i_clear    = (!run && start) || (i_m2_start && int'(rr) == N - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      sel    <= '0;
      done_q <= 1'b0;
      fs <= F_WAIT; ms <= M_WAIT; rs <= R_WAIT;
      ft <= '0; mt <= '0; rt <= '0;
      fr <= '0; mc <= '0; rr <= '0;
      d_tok  <= 1'b0;
      i_tok  <= 1'b0;
      i1_run <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (!run) begin
        if (start) begin
          run <= 1'b1;
          sel <= sel_in;
          ft <= '0; mt <= '0; rt <= '0;
          fr <= '0; mc <= '0; rr <= '0;
          d_tok <= 1'b0;
          i_tok <= 1'b0;
        end
      end else begin
        // ---------------- fill stage ----------------
        unique case (fs)
          F_WAIT:  if (!d_tok && int'(ft) < NT) begin fr <= '0; fs <= F_READ; end
          F_READ:  fs <= F_START;        // RAM data valid next cycle
          F_START: fs <= F_RUN;
          F_RUN: if (d_m1_done) begin
            if (int'(fr) == N - 1) begin
              d_tok <= 1'b1;
              ft    <= ft + 1'b1;
              fs    <= F_WAIT;
            end else begin
              fr <= fr + 1'b1;
              fs <= F_READ;
            end
          end
          default: fs <= F_WAIT;
        endcase
        // ---------------- mid stage ----------------
        if (i_m1_start)     i1_run <= 1'b1;
        else if (i_m1_done) i1_run <= 1'b0;
        unique case (ms)
          M_WAIT: if (d_tok && d_full && int'(mt) < NT) begin mc <= '0; ms <= M_D2_START; end
          M_D2_START: begin
            if (int'(mc) == N - 1) d_tok <= 1'b0;   // buffer handed back
            ms <= M_D2_RUN;
          end
          M_D2_RUN:   if (d_m2_done) ms <= M_I1_READY;
          M_I1_READY: if (!i1_run && !i_m1_done && (mc != '0 || !i_tok)) ms <= M_I1_START;
          M_I1_START: begin
            if (int'(mc) == N - 1) ms <= M_LAST;
            else begin
              mc <= mc + 1'b1;
              ms <= M_D2_START;
            end
          end
          M_LAST: if (i_m1_done) begin
            i_tok <= 1'b1;
            mt    <= mt + 1'b1;
            ms    <= M_WAIT;
          end
          default: ms <= M_WAIT;
        endcase
        // ---------------- drain stage ----------------
        unique case (rs)
          R_WAIT:  if (i_tok && i_full) begin rr <= '0; rs <= R_START; end
          R_START: begin
            if (int'(rr) == N - 1) i_tok <= 1'b0;   // buffer handed back
            rs <= R_RUN;
          end
          R_RUN:   if (i_m2_done) rs <= R_WRITE;
          R_WRITE: begin
            if (int'(rr) == N - 1) begin
              rt <= rt + 1'b1;
              rs <= R_WAIT;
              if (int'(rt) == NT - 1) begin
                run    <= 1'b0;
                done_q <= 1'b1;
                fs <= F_WAIT; ms <= M_WAIT;
              end
            end else begin
              rr <= rr + 1'b1;
              rs <= R_START;
            end
          end
          default: rs <= R_WAIT;
        endcase
      end
    end
  end

  // Handshake rules: a second MAC unit starts only on a full buffer, and a
  // first MAC unit is never started while its previous line is running.
  a_d2_full: assert property (@(posedge clk) disable iff (!rst_n) d_m2_start |-> d_full);
  a_i2_full: assert property (@(posedge clk) disable iff (!rst_n) i_m2_start |-> i_full);
  a_i1_idle: assert property (@(posedge clk) disable iff (!rst_n) i_m1_start |-> !i1_run);

endmodule
