// tb_cmax_streamer -- runs the streamer over all three stage grids against a
// behavioural bank memory (one-cycle read latency, pixel value a known
// function of channel and coordinates).  Checks the read address/bank of
// every real beat, the raster order of beats (row, col), that the two pad
// beats per row and the four pad rows carry zeros and issue no reads, the
// done pulse on the last beat and the stage latency (H_s + 4) * (W_s/2 + 2)
// beats plus one clock of read latency.
module tb_cmax_streamer;
  import cmax_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  stage_t stage = ST_FULL;
  logic rd_en, rd_row_odd;
  logic [BADW-1:0] rd_addr;
  logic [NCH-1:0][1:0][DW-1:0] rd_data, beat_px;
  logic beat_valid, busy, done;
  logic [8:0] beat_row;
  logic [7:0] beat_col;
  cmax_streamer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [DW-1:0] pixval(int c, int x, int y);
    return DW'(c * 1000000 + y * 1000 + x + 7);
  endfunction

  // behavioural memory: address -> (row pair, column pair) of the stage grid
  int wh;
  always @(posedge clk) begin
    if (rd_en) begin
      int yy, xx;
      yy = int'(rd_addr) / wh * 2 + int'(rd_row_odd);
      xx = int'(rd_addr) % wh * 2;
      for (int c = 0; c < NCH; c++)
        for (int q = 0; q < 2; q++) rd_data[c][q] <= pixval(c, xx + q, yy);
    end else rd_data <= 'x;
  end

  initial begin
    stage_t st [3] = '{ST_QUARTER, ST_HALF, ST_FULL};
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (st[i]) begin
      int hs, exp_row, exp_col, nbeats, cyc, nreads;
      bit got_done;
      stage = st[i];
      hs = int'(stage_h(stage)); wh = int'(stage_w(stage)) / 2;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      exp_row = 0; exp_col = 0; nbeats = 0; cyc = 1; nreads = 0; got_done = 0;
      while (!got_done && cyc < 100000) begin
        if (rd_en) begin
          nreads++;
          check(busy, "read while idle");
        end
        if (beat_valid) begin
          bit pad;
          pad = (exp_row >= hs) || (exp_col >= wh);
          check(int'(beat_row) == exp_row && int'(beat_col) == exp_col,
                $sformatf("beat order: got (%0d,%0d) want (%0d,%0d)", beat_row, beat_col, exp_row, exp_col));
          for (int c = 0; c < NCH; c++)
            for (int q = 0; q < 2; q++)
              check(beat_px[c][q] == (pad ? DW'(0) : pixval(c, 2 * exp_col + q, exp_row)),
                    $sformatf("stage %0d ch %0d px (%0d,%0d) got %0d", stage, c, 2 * exp_col + q, exp_row, beat_px[c][q]));
          nbeats++;
          got_done = done;
          if (exp_col == wh + 1) begin exp_col = 0; exp_row++; end else exp_col++;
        end else check(!done, "done without beat");
        @(negedge clk); cyc++;
      end
      check(got_done, "done pulse");
      check(nbeats == (hs + 4) * (wh + 2), $sformatf("beats %0d want %0d", nbeats, (hs + 4) * (wh + 2)));
      check(nreads == hs * wh, $sformatf("reads %0d want %0d", nreads, hs * wh));
      // one extra clock: the memory read latency before the first beat
      check(cyc - 1 == (hs + 4) * (wh + 2) + 1, $sformatf("stage %0d latency %0d cycles, want %0d", stage, cyc - 1, (hs + 4) * (wh + 2) + 1));
      repeat (3) @(negedge clk);
      check(!busy && !beat_valid, "idle after stage");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
