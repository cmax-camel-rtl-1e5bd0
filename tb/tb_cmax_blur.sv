// tb_cmax_blur -- streams random signed images of every stage grid through
// the blur in the streamer's beat format (pairs, two zero beats per row, four
// zero rows) with random idle cycles between beats, using both the reset
// binomial kernels and random asymmetric kernels (so a mirrored tap order is
// caught).  Every output pixel must appear exactly once and equal the direct
// 2-D convolution with zero padding,
//   out(x,y) = floor( sum_{i,k} c[i] c[k] img(x-4+i, y-4+k) / 2^16 ).
module tb_cmax_blur;
  import cmax_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic signed [1:0][DW-1:0] in_px = '0, out_px;
  logic [8:0] in_row = '0, hs = '0, out_row;
  logic [7:0] in_col = '0, ws_half = '0, out_col;
  logic [TAPS-1:0][7:0] coef = '0;
  logic out_valid;
  cmax_blur dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int img [H_FULL][W_FULL];
  int W, H;
  bit seen [H_FULL][W_FULL];

  function automatic int ref_px(int x, int y);
    longint acc = 0;
    for (int k = 0; k < TAPS; k++)
      for (int i = 0; i < TAPS; i++) begin
        int xx, yy;
        xx = x - 4 + i; yy = y - 4 + k;
        if (xx >= 0 && xx < W && yy >= 0 && yy < H)
          acc += longint'(coef[i]) * longint'(coef[k]) * longint'(img[yy][xx]);
      end
    return int'(acc >>> 16);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int q = 0; q < 2; q++) begin
      int x, y;
      x = 2 * int'(out_col) + q; y = int'(out_row);
      if (x < W && y < H) begin
        check(!seen[y][x], $sformatf("pixel (%0d,%0d) emitted twice", x, y));
        seen[y][x] = 1;
        check($signed(out_px[q]) == ref_px(x, y),
              $sformatf("pixel (%0d,%0d) got %0d want %0d", x, y, $signed(out_px[q]), ref_px(x, y)));
      end else check(0, "output outside the grid");
    end
  end

  initial begin
    stage_t st [3] = '{ST_QUARTER, ST_HALF, ST_FULL};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 2; pass++)
      foreach (st[s]) begin
        W = int'(stage_w(st[s])); H = int'(stage_h(st[s]));
        ws_half = 8'(W / 2); hs = 9'(H);
        for (int k = 0; k < TAPS; k++)
          coef[k] = pass == 0 ? default_coef(st[s], k) : 8'($urandom_range(0, 255));
        for (int y = 0; y < H; y++)
          for (int x = 0; x < W; x++) begin
            img[y][x] = $urandom_range(0, 1 << 22) - (1 << 21);
            seen[y][x] = 0;
          end
        for (int r = 0; r < H + 4; r++)
          for (int c = 0; c < W / 2 + 2; c++) begin
            @(negedge clk);
            in_valid = 0;
            while ($urandom_range(0, 7) == 0) @(negedge clk);
            in_valid = 1; in_row = 9'(r); in_col = 8'(c);
            for (int q = 0; q < 2; q++)
              in_px[q] = (r < H && c < W / 2) ? DW'(img[r][2 * c + q]) : '0;
          end
        @(negedge clk); in_valid = 0;
        repeat (5) @(negedge clk);
        for (int y = 0; y < H; y++)
          for (int x = 0; x < W; x++)
            if (!seen[y][x]) check(0, $sformatf("pixel (%0d,%0d) missing", x, y));
        checks++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
