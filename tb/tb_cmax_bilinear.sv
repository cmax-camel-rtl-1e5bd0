// tb_cmax_bilinear -- random warped events at all three stage widths.  For
// each event the four taps are recomputed from the plain definition (tap
// pixel (x0+t_x, y0+t_y), bank = its parity bits, address from the bank
// formula, deltas from the reference voting function) and compared with the
// bank-ordered output; the four banks of an event must all differ, the
// output must follow the input by one clock, and events off the grid must
// vote zero while keeping their tag.
module tb_cmax_bilinear;
  import cmax_pkg::*;
  import cmax_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  warp_out_t in = '0;
  logic [7:0] ws_half = 8'd120;
  vote_t out;
  cmax_bilinear dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rwarp_t r;
    int dl[4];
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int ws;
      ws = (i % 3 == 0) ? 60 : (i % 3 == 1) ? 120 : 240;
      @(negedge clk);
      ws_half = 8'(ws / 2);
      r.x0 = $urandom_range(0, ws - 2); r.y0 = $urandom_range(0, 43);
      r.ax = $urandom_range(0, 65535); r.ay = $urandom_range(0, 65535);
      for (int j = 0; j < 3; j++) begin
        r.rx[j] = longint'($urandom_range(0, 2_000_000)) - 1_000_000;
        r.ry[j] = longint'($urandom_range(0, 2_000_000)) - 1_000_000;
      end
      r.valid = (i % 10 != 9);
      in.x0 = 16'(r.x0); in.y0 = 16'(r.y0); in.ax = 16'(r.ax); in.ay = 16'(r.ay);
      in.rx0 = 32'(r.rx[0]); in.rx1 = 32'(r.rx[1]); in.rx2 = 32'(r.rx[2]);
      in.ry0 = 32'(r.ry[0]); in.ry1 = 32'(r.ry[1]); in.ry2 = 32'(r.ry[2]);
      in.act_valid = r.valid; in.pol = 1'($urandom); in.p_act = PIXW'(i);
      in.tag.p_ref = PIXW'(i + 1); in.tag.last = 1'(i % 2);
      in_valid = 1;
      @(posedge clk); #1;
      check(out_valid, "one-cycle latency");
      check(out.tag == in.tag && out.p_act == in.p_act && out.act_valid == in.act_valid, "tag passes through");
      begin
        bit [3:0] seen;
        seen = '0;
        for (int ty = 0; ty < 2; ty++)
          for (int tx = 0; tx < 2; tx++) begin
            int xt, yt, b, a;
            xt = r.x0 + tx; yt = r.y0 + ty;
            b  = (yt % 2) * 2 + (xt % 2);
            a  = (yt / 2) * (ws / 2) + xt / 2;
            seen[b] = 1;
            ref_vote(r, in.pol, tx, ty, dl);
            check(int'(out.slot[b].addr) == a, $sformatf("tap %0d%0d address", tx, ty));
            for (int c = 0; c < 4; c++)
              check(int'(out.slot[b].delta[c]) == (r.valid ? dl[c] : 0),
                    $sformatf("event %0d tap %0d%0d ch %0d: %0d vs %0d", i, tx, ty, c, $signed(out.slot[b].delta[c]), dl[c]));
          end
        check(seen == 4'hF, "four distinct banks");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
