// tb_cmax_warp -- random events, motion hypotheses and stages through the
// warp pipeline; every output field is compared with the reference warp of
// cmax_ref_pkg, and each result must appear exactly five clocks after its
// input.  Events are issued back to back (one per clock).
module tb_cmax_warp;
  import cmax_pkg::*;
  import cmax_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  event_t ev = '0;
  tag_t tag_in = '0;
  warp_cfg_t cfg = '0;
  warp_out_t out;
  cmax_warp dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  event_t q_ev [$];
  int     q_t  [$];
  int     cyc = 0, n_valid = 0, n_invalid = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    rwarp_t r;
    event_t e;
    int t0;
    if (q_ev.size() == 0) check(0, "unexpected output");
    else begin
      e = q_ev.pop_front(); t0 = q_t.pop_front();
      r = ref_warp(e, cfg);
      check(cyc - t0 == 5, $sformatf("latency %0d", cyc - t0));
      check(out.act_valid == r.valid, "in-range flag");
      if (r.valid) n_valid++; else n_invalid++;
      check(int'(out.x0) == r.x0 && int'(out.y0) == r.y0, $sformatf("x0/y0 %0d,%0d vs %0d,%0d", out.x0, out.y0, r.x0, r.y0));
      check(int'(out.ax) == r.ax && int'(out.ay) == r.ay, "alpha");
      check(longint'(out.rx0) == r.rx[0] && longint'(out.rx1) == r.rx[1] && longint'(out.rx2) == r.rx[2], "r_x");
      check(longint'(out.ry0) == r.ry[0] && longint'(out.ry1) == r.ry[1] && longint'(out.ry2) == r.ry[2], "r_y");
      if (r.valid) check(int'(out.p_act) == r.pact, "p_act");
      check(out.pol == e.p, "polarity");
      check(out.tag.p_ref == PIXW'(e.x), "tag");
    end
  end

  initial begin
    cfg.fx = 200 << 16; cfg.fy = 198 << 16; cfg.cx = 120 << 16; cfg.cy = 90 << 16;
    cfg.inv_fx = 32'((64'd1 << 30) / 200); cfg.inv_fy = 32'((64'd1 << 30) / 198);
    cfg.t_ref = 15'd3000;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int blk = 0; blk < 12; blk++) begin
      in_valid = 0;
      repeat (8) @(negedge clk);              // pipeline empty before cfg changes
      cfg.stage = (blk % 3 == 0) ? ST_QUARTER : (blk % 3 == 1) ? ST_HALF : ST_FULL;
      cfg.wx = $urandom_range(0, 20_000_000) - 10_000_000;
      cfg.wy = $urandom_range(0, 20_000_000) - 10_000_000;
      cfg.wz = $urandom_range(0, 20_000_000) - 10_000_000;
      for (int i = 0; i < 200; i++) begin
        ev.x = 8'($urandom_range(0, W_FULL - 1)); ev.y = 8'($urandom_range(0, H_FULL - 1));
        ev.t = 15'($urandom_range(0, 6000)); ev.p = 1'($urandom);
        tag_in.p_ref = PIXW'(ev.x); tag_in.last = 0;
        in_valid = 1;
        q_ev.push_back(ev); q_t.push_back(cyc);
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (10) @(negedge clk);
    check(q_ev.size() == 0, "all results returned");
    check(n_valid > 0 && n_invalid > 0, "both in-range and out-of-range events seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
