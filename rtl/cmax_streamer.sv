// cmax_streamer -- channel streamer feeding the four blur modules.
//
// Walks the current stage grid row by row and reads two horizontally
// neighbouring pixels of every channel per clock: pixels (2k, y) and
// (2k+1, y) sit in the even-x and odd-x banks of row parity y[0] at the same
// bank address floor(y/2)*W_s/2 + k, so one read of two banks per channel
// gives the pair.  Each row is followed by two zero beats and the grid by
// four zero rows; they flush the 9-tap horizontal and vertical filters so
// every blurred pixel, borders included (zero padding), comes out.  Reads
// clear the memory (see cmax_iwe_mem).
//
// Interface: start (one cycle) with stage stable.  Outputs per beat, one
// cycle after the memory read: beat_valid, the pixel pairs of the four
// channels, the row, the beat index inside the row (col) and the stage grid
// size.  done pulses with the last beat.  A stage of H_s rows takes
// (H_s + 4) * (W_s/2 + 2) clocks.  Row-by-row order at 2 pixels per clock
// follows the paper; the flush beats are this design's choice.
module cmax_streamer
  import cmax_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  stage_t                       stage,
  // memory read port
  output logic                         rd_en,
  output logic                         rd_row_odd,
  output logic [BADW-1:0]              rd_addr,
  input  logic [NCH-1:0][1:0][DW-1:0]  rd_data,
  // pixel stream
  output logic                         beat_valid,
  output logic [NCH-1:0][1:0][DW-1:0]  beat_px,
  output logic [8:0]                   beat_row,
  output logic [7:0]                   beat_col,
  output logic                         busy,
  output logic                         done
);
  logic [8:0] row;
  logic [7:0] col;
  logic [7:0] wh;          // W_s / 2
  logic [8:0] hs;
  logic       run;
  logic       pad, pad_q, last;

  assign wh   = 8'(stage_w(stage) >> 1);
  assign hs   = stage_h(stage);
  assign pad  = (row >= hs) || (col >= wh);
  assign last = (row == hs + 9'd3) && (col == wh + 8'd1);

  assign rd_en      = run && !pad;
  assign rd_row_odd = row[0];
  assign rd_addr    = BADW'(32'(row[8:1]) * 32'(wh) + 32'(col));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; row <= '0; col <= '0;
      beat_valid <= 1'b0; done <= 1'b0; pad_q <= 1'b0;
      beat_row <= '0; beat_col <= '0;
    end else begin
      beat_valid <= run;
      pad_q      <= pad;
      beat_row   <= row;
      beat_col   <= col;
      done       <= run && last;
      if (start) begin
        run <= 1'b1; row <= '0; col <= '0;
      end else if (run) begin
        if (last) run <= 1'b0;
        if (col == wh + 8'd1) begin
          col <= '0;
          row <= row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  assign beat_px = pad_q ? '0 : rd_data;
  assign busy    = run;
endmodule
