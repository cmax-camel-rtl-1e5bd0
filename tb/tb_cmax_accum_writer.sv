// tb_cmax_accum_writer -- feeds runs of pixel groups (inliers sharing their
// group's four addresses, outliers with neighbouring addresses, off-grid
// events) into the writer, applies its commits to a behavioural memory and,
// after the drain and flush, compares every lane's memory with the plain sum
// of all deltas.  Also checks the inlier/outlier/group counters against the
// stimulus, that pending merge absorbed updates (commits fewer than
// updates), and the commit rule the bank memory relies on: a lane never
// commits the same address in two consecutive cycles.
module tb_cmax_accum_writer;
  import cmax_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, flush = 0, clr_cnt = 0, almost_full, idle;
  vote_t in = '0;
  logic [NLANE-1:0] cmt_valid;
  logic [NLANE-1:0][BADW-1:0] cmt_addr;
  logic [NLANE-1:0][DW-1:0] cmt_delta;
  logic [31:0] n_events, n_inlier, n_outlier, n_groups, n_hits, n_commits;
  cmax_accum_writer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int mem_model [NLANE][int];     // what the writer committed
  int expect_m  [NLANE][int];     // plain sum of the stimulus
  logic [NLANE-1:0] last_v = '0;
  logic [NLANE-1:0][BADW-1:0] last_a;
  int n_updates = 0;
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NLANE; l++) begin
      if (cmt_valid[l]) begin
        int a;
        a = int'(cmt_addr[l]);
        check(!(last_v[l] && last_a[l] == cmt_addr[l]), "back-to-back commit of one address");
        mem_model[l][a] = (mem_model[l].exists(a) ? mem_model[l][a] : 0) + int'(cmt_delta[l]);
      end
    end
    last_v <= cmt_valid; last_a <= cmt_addr;
  end

  function automatic slot_t [NBANK-1:0] mk_slots(int base_x, int base_y);
    slot_t [NBANK-1:0] s;
    for (int ty = 0; ty < 2; ty++)
      for (int tx = 0; tx < 2; tx++) begin
        int xt, yt, b;
        xt = base_x + tx; yt = base_y + ty;
        b = (yt % 2) * 2 + xt % 2;
        s[b].addr = BADW'((yt / 2) * 120 + xt / 2);
        for (int c = 0; c < NCH; c++) s[b].delta[c] = DW'($urandom_range(0, 2000) - 1000);
      end
    return s;
  endfunction

  initial begin
    int ni = 0, no = 0, ng = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int g = 0; g < 2000; g++) begin
      int k, gx, gy;
      bit any_in;
      k = $urandom_range(1, 6);
      gx = (g * 3) % 230; gy = (g / 70) % 170;
      any_in = 0;
      for (int e = 0; e < k; e++) begin
        int kind;
        kind = $urandom_range(0, 9);           // 0-6 inlier, 7-8 outlier, 9 off grid
        @(negedge clk);
        while (almost_full) begin in_valid = 0; @(negedge clk); end
        in.tag.p_ref = PIXW'(g);
        in.tag.last  = (e == k - 1);
        if (kind <= 6) begin
          in.slot = mk_slots(gx, gy); in.p_act = PIXW'(g); in.act_valid = 1; ni++; any_in = 1;
        end else if (kind <= 8) begin
          in.slot = mk_slots(gx + $urandom_range(0, 2), gy + $urandom_range(0, 1));
          in.p_act = PIXW'(g + 5000); in.act_valid = 1; no++;
        end else begin
          in.slot = mk_slots(gx, gy); in.act_valid = 0; in.p_act = '0;
        end
        if (in.act_valid)
          for (int b = 0; b < NBANK; b++)
            for (int c = 0; c < NCH; c++) begin
              int l, a;
              l = c * NBANK + b; a = int'(in.slot[b].addr);
              expect_m[l][a] = (expect_m[l].exists(a) ? expect_m[l][a] : 0) + int'(in.slot[b].delta[c]);
              n_updates++;
            end
        in_valid = 1;
      end
      if (any_in) ng++;
    end
    @(negedge clk); in_valid = 0;
    while (!idle) @(negedge clk);
    @(negedge clk); flush = 1;
    @(negedge clk); flush = 0;
    repeat (3) @(negedge clk);
    for (int l = 0; l < NLANE; l++) begin
      check(mem_model[l].num() == expect_m[l].num(), $sformatf("lane %0d touched %0d addresses, expected %0d", l, mem_model[l].num(), expect_m[l].num()));
      foreach (expect_m[l][a]) check(mem_model[l].exists(a) && mem_model[l][a] == expect_m[l][a], $sformatf("lane %0d addr %0d", l, a));
    end
    check(int'(n_inlier) == ni && int'(n_outlier) == no && int'(n_groups) == ng,
          $sformatf("counters in %0d/%0d out %0d/%0d groups %0d/%0d", n_inlier, ni, n_outlier, no, n_groups, ng));
    check(n_hits > 0, "pending merge hits");
    check(int'(n_commits) < n_updates, $sformatf("commits %0d < updates %0d", n_commits, n_updates));
    $display("updates %0d commits %0d hits %0d (%0d%% fewer memory updates)", n_updates, n_commits, n_hits,
             100 - 100 * int'(n_commits) / n_updates);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
