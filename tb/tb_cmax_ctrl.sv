// tb_cmax_ctrl -- drives the controller with behavioural sorter, feeder,
// writer and streamer models that answer each start pulse after a random
// delay, and with random statistics sums per evaluation.  A reference model
// of the coarse-to-fine policy (stage, V = P*S2 - S1^2, gain test against
// tau_s, keep / promote / done) predicts every decision.  Checks: command
// rejection during the memory reset sweep, handshake order (sort -> feed ->
// drain -> flush -> settle -> stream), flush only when the writer is idle
// and no earlier than DRAIN clocks after the feeder finished, the sort
// select during sorting, stats cleared with every stream start, and the
// decision, stage, V, V_prev and counters after each command.
module tb_cmax_ctrl;
  import cmax_pkg::*;
  localparam int AW = 96, DRAIN = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_start = 0, cmd_iter = 0, mem_init_busy = 1;
  logic [2:0][31:0] tau = '0;
  logic sort_start, sort_mode, sort_done = 0, feed_start, feed_done = 0, writer_idle = 1;
  logic flush, clr_cnt, stream_start, stream_done = 0, stats_clear;
  logic signed [AW-1:0] s1 = '0, s2 = '0;
  stage_t stage;
  logic [1:0] decision;
  logic signed [127:0] v_cur, v_prev;
  logic [15:0] n_iter, n_promote;
  logic busy, done;
  cmax_ctrl #(.AW(AW), .DRAIN(DRAIN)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- sub-block models and handshake checks ----
  typedef enum {H_IDLE, H_SORT, H_FEED, H_DRAIN, H_FLUSHED, H_STREAM} hs_t;
  hs_t ph = H_IDLE;
  int  t_feed_done, t_flush, cyc = 0, n_eval = 0;
  logic signed [AW-1:0] next_s1, next_s2;
  logic signed [AW-1:0] q_s1 [$], q_s2 [$];    // statistics of the coming evaluations
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    if (sort_start) begin
      check(ph == H_IDLE || ph == H_STREAM, "sort start out of order");
      check(sort_mode, "sort select high when sorting starts");
      ph <= H_SORT;
      fork begin
        repeat ($urandom_range(2, 40)) @(posedge clk);
        check(sort_mode, "sort select held during sort");
        sort_done <= 1; @(posedge clk); sort_done <= 0;
      end join_none
    end
    if (feed_start) begin
      check(ph == H_SORT || ph == H_IDLE || ph == H_STREAM, "feed start out of order");
      check(!sort_mode, "sort select low while feeding");
      check(clr_cnt, "counters cleared with feed start");
      ph <= H_FEED;
      writer_idle <= 0;
      fork begin
        repeat ($urandom_range(5, 80)) @(posedge clk);
        feed_done <= 1; t_feed_done = cyc; @(posedge clk); feed_done <= 0;
        repeat ($urandom_range(0, 30)) @(posedge clk);
        writer_idle <= 1;
      end join_none
    end
    if (flush) begin
      check(writer_idle, "flush only when the writer is idle");
      check(cyc - t_feed_done >= DRAIN, "flush after the drain time");
      check(ph == H_FEED, "flush order");
      ph <= H_FLUSHED; t_flush = cyc;
    end
    if (stream_start) begin
      check(ph == H_FLUSHED && cyc - t_flush >= 2, "stream starts after the read-modify-write settles");
      check(stats_clear, "stats cleared with stream start");
      ph <= H_STREAM;
      fork begin
        repeat ($urandom_range(3, 60)) @(posedge clk);
        stream_done <= 1; s1 <= q_s1.pop_front(); s2 <= q_s2.pop_front(); n_eval++;
        @(posedge clk); stream_done <= 0;
      end join_none
    end
  end

  // ---- reference policy ----
  stage_t m_stage;
  logic signed [127:0] m_vprev, m_v;
  int m_iter, m_prom;

  function automatic logic signed [127:0] vof(stage_t s, logic signed [AW-1:0] a, logic signed [AW-1:0] b);
    return 128'(b) * 128'(int'(stage_w(s)) * int'(stage_h(s))) - 128'(a) * 128'(a);
  endfunction

  // plan statistics so that V grows by a chosen fraction of |V_prev| (or
  // falls) relative to the previous evaluation at this stage
  task automatic plan(stage_t s, int pct_gain);
    logic signed [127:0] target;
    next_s1 = AW'($urandom_range(0, 1000) - 500);
    if (m_v == 0 || pct_gain == 999) target = 128'($urandom_range(1000000, 2000000)) <<< 20;
    else target = m_vprev + m_vprev / 100 * pct_gain;
    // choose S2 so that P*S2 - S1^2 is close to the target
    next_s2 = AW'((target + 128'(next_s1) * 128'(next_s1)) / 128'(int'(stage_w(s)) * int'(stage_h(s))));
    q_s1.push_back(next_s1); q_s2.push_back(next_s2);
  endtask

  task automatic wait_done(string what);
    int n = 0;
    while (!done && n < 100000) begin @(posedge clk); n++; end
    @(negedge clk);
  endtask

  task automatic do_cmd(bit is_start, int pct_gain);
    logic [1:0] exp_dec;
    if (is_start) begin
      m_stage = ST_QUARTER; m_iter = 0; m_prom = 0; m_v = 0;
      plan(m_stage, 999);
      @(negedge clk); cmd_start = 1; @(negedge clk); cmd_start = 0;
      wait_done("start");
      m_v = vof(m_stage, next_s1, next_s2); m_vprev = m_v; exp_dec = 0;
    end else begin
      logic signed [127:0] v, mag;
      plan(m_stage, pct_gain);
      m_iter++;
      v = vof(m_stage, next_s1, next_s2);
      mag = m_vprev < 0 ? -m_vprev : m_vprev;
      if (m_vprev != 0 && ((v - m_vprev) <<< 16) >= $signed({96'd0, tau[m_stage == ST_QUARTER ? 0 : m_stage == ST_HALF ? 1 : 2]}) * mag) begin
        exp_dec = 1; m_vprev = v; m_v = v;
      end else if (m_stage != ST_FULL) begin
        // promotion: the controller re-sorts and evaluates the new stage
        m_stage = next_stage(m_stage); m_prom++;
        plan(m_stage, 999);
        exp_dec = 2;
        m_v = vof(m_stage, next_s1, next_s2); m_vprev = m_v;
      end else begin
        exp_dec = 3; m_v = v;
      end
      @(negedge clk); cmd_iter = 1; @(negedge clk); cmd_iter = 0;
      wait_done("iter");
    end
    check(decision == exp_dec, $sformatf("decision %0d want %0d", decision, exp_dec));
    check(stage == m_stage, $sformatf("stage %0d want %0d", stage, m_stage));
    check(v_cur == m_v, $sformatf("V %0d want %0d", v_cur, m_v));
    check(v_prev == m_vprev, $sformatf("V_prev %0d want %0d", v_prev, m_vprev));
    check(int'(n_iter) == m_iter && int'(n_promote) == m_prom, "iteration counters");
    check(!busy, "idle after done");
  endtask

  initial begin
    int gains [8] = '{20, 8, -3, 40, 1, -10, 6, 0};
    tau[0] = 32'd6554; tau[1] = 32'd3277; tau[2] = 32'd655;   // 0.10, 0.05, 0.01
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); cmd_start = 1; @(negedge clk); cmd_start = 0;
    repeat (3) @(negedge clk);
    check(!busy && !sort_start, "command ignored during the memory reset sweep");
    mem_init_busy = 0;
    for (int w = 0; w < 12; w++) begin
      do_cmd(1, 0);
      for (int it = 0; it < 12; it++) begin
        do_cmd(0, (w == 0) ? gains[it % 8] : $urandom_range(0, 30) - 8);
        if (decision == 3) break;
      end
    end
    $display("evaluations %0d", n_eval);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
