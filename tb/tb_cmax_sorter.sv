// tb_cmax_sorter -- sorts clustered random windows at all three stages
// (the sorter drives a real warp front-end and a behavioural event memory)
// and compares the tables with a direct model of the algorithm: active[]
// must list the non-empty groups in ascending order, offset[] must be the
// prefix sum of the per-group budgets ceil(cnt/stride), and each group's run
// in perm[] must hold the indices of the events whose rank inside the group
// is a multiple of the stride, in index order.  Also checks the cycle count
// (clear + count + prefix + perm passes).
module tb_cmax_sorter;
  import cmax_pkg::*;
  import cmax_ref_pkg::*;
  localparam int N = 3000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, ev_rd_en, tag_valid, wo_valid, busy, done;
  stage_t stage = ST_QUARTER;
  logic [IDXW-1:0] n_events = N, ev_rd_addr, perm_raddr = '0, perm_rdata;
  tag_t tag;
  warp_out_t wo;
  logic [PIXW-1:0] n_active, active_raddr = '0, active_rdata, offset_raddr = '0;
  logic [IDXW:0] offset_rdata, offset_rdata_next;
  event_t evs [N];
  event_t ev_q;
  warp_cfg_t cfg;

  always_ff @(posedge clk) if (ev_rd_en) ev_q <= evs[ev_rd_addr];
  always_comb begin cfg = '0; cfg.fx = 200 << 16; cfg.fy = 200 << 16; cfg.cx = 120 << 16; cfg.cy = 90 << 16;
    cfg.inv_fx = 32'((64'd1 << 30) / 200); cfg.inv_fy = cfg.inv_fx; cfg.t_ref = 15'd1000;
    cfg.wx = 4_000_000; cfg.wy = -3_000_000; cfg.wz = 2_000_000; cfg.stage = stage; end

  cmax_warp u_warp (.clk, .rst_n, .in_valid(tag_valid), .ev(ev_q), .tag_in(tag), .cfg,
                    .out_valid(wo_valid), .out(wo));
  cmax_sorter dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int subs = 0;
    for (int i = 0; i < N; i++) begin
      evs[i].x = 8'(10 + ((i / 20) * 41) % 220 + $urandom_range(0, 3));
      evs[i].y = 8'(8 + ((i / 20) * 29) % 160 + $urandom_range(0, 3));
      evs[i].t = 15'($urandom_range(0, 2000));
      evs[i].p = 1'($urandom);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int sidx = 0; sidx < 3; sidx++) begin
      int cnt [int];
      int runs [int][$];
      int rank [int];
      int P, stride, t0, t1, m, expect_off;
      runs.delete(); rank.delete(); cnt.delete();
      stage = (sidx == 0) ? ST_QUARTER : (sidx == 1) ? ST_HALF : ST_FULL;
      P = int'(stage_w(stage)) * int'(stage_h(stage));
      stride = 1 << int'(stage);
      // model
      for (int i = 0; i < N; i++) begin
        rwarp_t r;
        warp_cfg_t c;
        c = cfg; c.stage = stage;
        r = ref_warp(evs[i], c);
        if (r.valid) begin
          int rk;
          rk = rank.exists(r.pact) ? rank[r.pact] : 0;
          if (rk % stride == 0) runs[r.pact].push_back(i); else subs++;
          rank[r.pact] = rk + 1;
        end
      end
      @(negedge clk); start = 1; t0 = $time / 10;
      @(negedge clk); start = 0;
      @(posedge clk iff done); t1 = $time / 10;
      check(t1 - t0 <= 2 * P + 2 * N + 12 && t1 - t0 >= 2 * P + 2 * N, $sformatf("cycles %0d for P=%0d N=%0d", t1 - t0, P, N));
      check(int'(n_active) == runs.num(), $sformatf("n_active %0d vs %0d", n_active, runs.num()));
      m = 0; expect_off = 0;
      foreach (runs[p]) begin
        @(negedge clk);
        active_raddr = PIXW'(m); #1;
        check(int'(active_rdata) == p, $sformatf("active[%0d]=%0d vs %0d", m, active_rdata, p));
        offset_raddr = PIXW'(p); #1;
        check(int'(offset_rdata) == expect_off, $sformatf("offset[%0d]", p));
        check(int'(offset_rdata_next) == expect_off + runs[p].size(), $sformatf("offset[%0d+1]", p));
        for (int k = 0; k < runs[p].size(); k++) begin
          perm_raddr = IDXW'(expect_off + k); #1;
          check(int'(perm_rdata) == runs[p][k], "perm entry");
        end
        expect_off += runs[p].size(); m++;
      end
      $display("stage %0d: %0d active groups, %0d retained, %0d cycles", stage, runs.num(), expect_off, t1 - t0);
    end
    check(subs > 0, "subsampling dropped events");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
