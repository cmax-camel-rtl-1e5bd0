// tb_cmax_feeder -- drives the feeder from behavioural sorter tables with
// random group sizes and checks that the event indices come out group by
// group in perm[] order, tagged with the right p_ref and with last_in_pg on
// exactly the last event of each run, both with random back-pressure and
// without it.  Without back-pressure the feeder must issue one event per
// clock after a single table-lookup cycle.
module tb_cmax_feeder;
  import cmax_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, stall = 0, ev_rd_en, tag_valid, busy, done;
  logic [PIXW-1:0] n_active = '0, active_raddr, active_rdata, offset_raddr;
  logic [IDXW:0] offset_rdata, offset_rdata_next;
  logic [IDXW-1:0] perm_raddr, perm_rdata, ev_rd_addr;
  tag_t tag;

  localparam int NG = 300;
  int act_tbl [NG];
  int off_tbl [P_MAX + 1];
  int perm_tbl [N_MAX];
  assign active_rdata      = PIXW'(act_tbl[active_raddr < NG ? active_raddr : 0]);
  assign offset_rdata      = (IDXW+1)'(off_tbl[offset_raddr]);
  assign offset_rdata_next = (IDXW+1)'(off_tbl[offset_raddr + 1]);
  assign perm_rdata        = IDXW'(perm_tbl[perm_raddr]);

  cmax_feeder dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected stream
  int exp_idx [$], exp_p [$];
  bit exp_last [$];
  logic [IDXW-1:0] rd_q;
  always @(posedge clk) if (ev_rd_en) rd_q <= ev_rd_addr;
  always @(posedge clk) if (rst_n && tag_valid) begin
    if (exp_idx.size() == 0) check(0, "extra event");
    else begin
      int i, p; bit l;
      i = exp_idx.pop_front(); p = exp_p.pop_front(); l = exp_last.pop_front();
      check(int'(rd_q) == i && int'(tag.p_ref) == p && tag.last == l,
            $sformatf("got idx %0d p %0d last %0d, expected %0d %0d %0d", rd_q, tag.p_ref, tag.last, i, p, l));
    end
  end

  initial begin
    int p, sum, t0, t1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      p = 0; sum = 0;
      foreach (off_tbl[k]) off_tbl[k] = 0;
      for (int g = 0; g < NG; g++) begin
        int k;
        p += $urandom_range(1, 100);
        act_tbl[g] = p;
        k = (g % 7 == 0) ? $urandom_range(5, 12) : $urandom_range(1, 3);
        off_tbl[p] = sum;
        for (int j = 0; j < k; j++) begin
          perm_tbl[sum + j] = $urandom_range(0, N_MAX - 1);
          exp_idx.push_back(perm_tbl[sum + j]); exp_p.push_back(p); exp_last.push_back(j == k - 1);
        end
        sum += k;
        off_tbl[p + 1] = sum;
      end
      n_active = PIXW'(NG);
      @(negedge clk); start = 1; t0 = $time / 10;
      @(negedge clk); start = 0;
      while (!done) begin
        stall = (pass == 1) ? 1'($urandom_range(0, 3) == 0) : 1'b0;
        @(negedge clk);
      end
      t1 = $time / 10;
      stall = 0;
      repeat (3) @(negedge clk);
      check(exp_idx.size() == 0, "all events issued");
      if (pass == 0) check(t1 - t0 == sum + 2, $sformatf("issue cycles %0d for %0d events", t1 - t0, sum));
    end
    // no active groups: done at once
    n_active = '0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    check(done == 1, "empty table finishes at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
