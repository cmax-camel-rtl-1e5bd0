// tb_cmax_camel -- end-to-end test of the engine at its default size.
//
// A window of clustered synthetic events is written through the sensor
// port; the testbench then plays the host over APB: START, and a sequence of
// ITER commands with chosen omega and thresholds that walk through every
// branch of the stage policy (keep, promote 1/4 -> 1/2 -> 1, keep, done).
// After each command the statistics S1, S2, G_j, T_j, the scaled variance V,
// the decision, the stage, the number of events fed and of active groups
// are compared with a behavioural model (cmax_ref_pkg): plain images, direct
// convolution, whole-window sums.  It also counts how often each mechanism
// fired (sorting, subsampling, inliers, outliers, pending hits, commits,
// keep/promote/done, events leaving the grid) and fails if one never did.
module tb_cmax_camel;
  import cmax_pkg::*;
  import cmax_ref_pkg::*;

  localparam int N = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic        pready, pslverr;
  logic            ev_wr_en = 0;
  logic [IDXW-1:0] ev_wr_addr = '0;
  event_t          ev_wr_data = '0;
  logic            irq;

  cmax_camel dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- APB host ----------------------------------------------
  task automatic apb_wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 1; paddr = a; pwdata = d; penable = 0;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask
  task automatic apb_rd(input logic [11:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 0; paddr = a; penable = 0;
    @(negedge clk); penable = 1; #1 d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask
  task automatic rd_wide(input int word, input int nw, output logic [127:0] v);
    logic [31:0] d;
    v = '0;
    for (int k = 0; k < nw; k++) begin
      apb_rd(12'(12'h100 + 4 * (word + k)), d);
      v[32*k +: 32] = d;
    end
    if (nw == 3) v[127:96] = {32{v[95]}};
  endtask

  // ---------------- reference model state --------------------------------
  event_t    evs [N];
  warp_cfg_t cfg;
  bit        keep_ev [N];      // retained by the stage's subsampling
  int        pref [N];         // group at stage entry
  int        img [4][H_FULL][W_FULL];
  logic [7:0] kern [3][9];
  w96_t      rs1, rs2, rg[3], rt[3];
  logic signed [127:0] rv, rvprev;
  int        ref_active, ref_fed, ref_out, ref_in, ref_offgrid;
  int        n_sub_dropped;

  function automatic int sidx(stage_t s);
    return (s == ST_QUARTER) ? 0 : (s == ST_HALF) ? 1 : 2;
  endfunction

  task automatic ref_sort();
    int cnt [int];
    int rank [int];
    rwarp_t r;
    int stride;
    stride = 1 << int'(cfg.stage);
    cnt.delete(); rank.delete();
    for (int i = 0; i < N; i++) begin
      r = ref_warp(evs[i], cfg);
      keep_ev[i] = 0;
      pref[i] = r.valid ? r.pact : -1;
      if (r.valid) cnt[r.pact] = cnt.exists(r.pact) ? cnt[r.pact] + 1 : 1;
    end
    ref_active = cnt.num();
    for (int i = 0; i < N; i++) begin
      if (pref[i] >= 0) begin
        int rk;
        rk = rank.exists(pref[i]) ? rank[pref[i]] : 0;
        keep_ev[i] = (rk % stride) == 0;
        if (!keep_ev[i]) n_sub_dropped++;
        rank[pref[i]] = rk + 1;
      end
    end
  endtask

  task automatic ref_eval();
    rwarp_t r;
    int ws, hs, dl[4];
    longint h [H_FULL][W_FULL];
    int s;
    s  = sidx(cfg.stage);
    ws = W_FULL >> int'(cfg.stage);
    hs = (H_FULL + (1 << int'(cfg.stage)) - 1) >> int'(cfg.stage);
    foreach (img[c, y, x]) img[c][y][x] = 0;
    ref_fed = 0; ref_out = 0; ref_in = 0;
    for (int i = 0; i < N; i++) begin
      if (!keep_ev[i]) continue;
      ref_fed++;
      r = ref_warp(evs[i], cfg);
      if (!r.valid) begin ref_offgrid++; continue; end
      if (r.pact == pref[i]) ref_in++; else ref_out++;
      for (int ty = 0; ty < 2; ty++)
        for (int tx = 0; tx < 2; tx++) begin
          ref_vote(r, evs[i].p, tx, ty, dl);
          for (int c = 0; c < 4; c++) img[c][r.y0 + ty][r.x0 + tx] += dl[c];
        end
    end
    rs1 = 0; rs2 = 0;
    for (int j = 0; j < 3; j++) begin rg[j] = 0; rt[j] = 0; end
    begin
      int blurred [4][H_FULL][W_FULL];
      for (int c = 0; c < 4; c++) begin
        for (int y = 0; y < hs; y++)
          for (int x = 0; x < ws; x++) begin
            h[y][x] = 0;
            for (int k = 0; k < 9; k++)
              if (x - 4 + k >= 0 && x - 4 + k < ws) h[y][x] += longint'(img[c][y][x-4+k]) * longint'(kern[s][k]);
          end
        for (int y = 0; y < hs; y++)
          for (int x = 0; x < ws; x++) begin
            longint v;
            v = 0;
            for (int k = 0; k < 9; k++)
              if (y - 4 + k >= 0 && y - 4 + k < hs) v += h[y-4+k][x] * longint'(kern[s][k]);
            blurred[c][y][x] = int'(v >>> 16);
          end
      end
      for (int y = 0; y < hs; y++)
        for (int x = 0; x < ws; x++) begin
          w96_t iv;
          iv = w96_t'(blurred[0][y][x]);
          rs1 += iv;
          rs2 += iv * iv;
          for (int j = 0; j < 3; j++) begin
            rg[j] += iv * w96_t'(blurred[j+1][y][x]);
            rt[j] += w96_t'(blurred[j+1][y][x]);
          end
        end
    end
    rv = 128'(rs2 * w96_t'(ws * hs)) - 128'(rs1 * rs1);
  endtask

  // ---------------- command and compare ----------------------------------
  int n_keep = 0, n_prom = 0, n_done = 0, n_sorts = 0, n_hits_tot = 0, n_commits_tot = 0;
  int n_in_tot = 0, n_out_tot = 0, n_stall_tot = 0;
  int kernels_seen [3] = '{0, 0, 0};

  task automatic wait_irq();
    fork
      begin @(posedge clk iff irq); end
      begin repeat (2_000_000) @(posedge clk); end
    join_any
    disable fork;
  endtask

  task automatic compare(string tag, logic [1:0] exp_dec);
    logic [127:0] v;
    logic [31:0] st, d;
    apb_rd(12'h004, st);
    check(st[0] == 0, {tag, ": idle after irq"});
    check(st[2:1] == exp_dec, $sformatf("%s: decision %0d expected %0d", tag, st[2:1], exp_dec));
    check(st[5:4] == 2'(cfg.stage), $sformatf("%s: stage %0d expected %0d", tag, st[5:4], cfg.stage));
    rd_wide(0, 3, v);  check(96'(v) == rs1, $sformatf("%s: S1 %0d vs %0d", tag, $signed(96'(v)), rs1));
    rd_wide(3, 3, v);  check(96'(v) == rs2, $sformatf("%s: S2", tag));
    for (int j = 0; j < 3; j++) begin
      rd_wide(6 + 3*j, 3, v);  check(96'(v) == rg[j], $sformatf("%s: G%0d %0d vs %0d", tag, j, $signed(96'(v)), rg[j]));
      rd_wide(15 + 3*j, 3, v); check(96'(v) == rt[j], $sformatf("%s: T%0d", tag, j));
    end
    rd_wide(24, 4, v); check(v == rv, $sformatf("%s: V", tag));
    apb_rd(12'h100 + 4*32, d); check(d == 32'(ref_fed), $sformatf("%s: fed %0d vs %0d", tag, d, ref_fed));
    apb_rd(12'h100 + 4*33, d); check(d == 32'(ref_in), $sformatf("%s: inliers %0d vs %0d", tag, d, ref_in)); n_in_tot += d;
    apb_rd(12'h100 + 4*34, d); check(d == 32'(ref_out), $sformatf("%s: outliers %0d vs %0d", tag, d, ref_out)); n_out_tot += d;
    apb_rd(12'h100 + 4*36, d); n_hits_tot += d;
    apb_rd(12'h100 + 4*37, d); n_commits_tot += d;
    apb_rd(12'h100 + 4*38, d); n_stall_tot += d;
    apb_rd(12'h100 + 4*40, d); check(d == 32'(ref_active), $sformatf("%s: active groups %0d vs %0d", tag, d, ref_active));
    apb_rd(12'h100 + 4*41, d);
    $display("%s: stage=%0d decision=%0d V=%0d cycles=%0d fed=%0d in=%0d out=%0d",
             tag, cfg.stage, st[2:1], $signed(rv), d, ref_fed, ref_in, ref_out);
    kernels_seen[sidx(cfg.stage)]++;
  endtask

  task automatic set_omega(int wx, int wy, int wz);
    cfg.wx = wx; cfg.wy = wy; cfg.wz = wz;
    apb_wr(12'h00C, wx); apb_wr(12'h010, wy); apb_wr(12'h014, wz);
  endtask

  // run ITER and predict the decision with the model
  task automatic iter(string tag, logic [31:0] tau_q16);
    logic [1:0] exp_dec;
    real g;
    apb_wr((cfg.stage == ST_QUARTER) ? 12'h034 : (cfg.stage == ST_HALF) ? 12'h038 : 12'h03C, tau_q16);
    ref_eval();
    g = (rvprev != 0) ? (real'(rv - rvprev) / ((rvprev < 0) ? -real'(rvprev) : real'(rvprev))) : -1.0;
    apb_wr(12'h000, 32'h2);
    wait_irq();
    if (rvprev != 0 && g >= real'(tau_q16) / 65536.0) begin
      exp_dec = 2'd1; rvprev = rv; n_keep++;
      compare(tag, exp_dec);
    end else if (cfg.stage != ST_FULL) begin
      cfg.stage = next_stage(cfg.stage);
      ref_sort(); ref_eval(); rvprev = rv; n_prom++; n_sorts++;
      compare(tag, 2'd2);
    end else begin
      n_done++;
      compare(tag, 2'd3);
    end
  endtask

  initial begin
    logic [31:0] d;
    // clustered events: 60 scene points, 10 events each, random timing
    for (int i = 0; i < N; i++) begin
      int cx0, cy0;
      cx0 = 20 + ((i / 10) * 37) % 200;
      cy0 = 15 + ((i / 10) * 23) % 150;
      evs[i].x = 8'(cx0 + $urandom_range(0, 2));
      evs[i].y = 8'(cy0 + $urandom_range(0, 2));
      evs[i].t = 15'($urandom_range(0, 5000));
      evs[i].p = 1'($urandom_range(0, 1));
    end
    evs[0].x = 8'd239; evs[0].y = 8'd179;     // on the last row/column: off the voting grid
    for (int i = 1; i < 9; i++) begin         // near the left/right borders, early/late
      evs[i].x = (i % 2) ? 8'd238 : 8'd1;
      evs[i].y = 8'd40 + 8'(i);
      evs[i].t = (i < 5) ? 15'd0 : 15'd5000;
    end
    cfg = '0;
    cfg.fx = 200 << 16; cfg.fy = 200 << 16; cfg.cx = 120 << 16; cfg.cy = 90 << 16;
    cfg.inv_fx = 32'((64'd1 << 30) / 200); cfg.inv_fy = cfg.inv_fx; cfg.t_ref = 15'd2500;
    cfg.stage = ST_QUARTER;
    for (int s = 0; s < 3; s++)
      for (int k = 0; k < 9; k++) kern[s][k] = default_coef((s == 0) ? ST_QUARTER : (s == 1) ? ST_HALF : ST_FULL, k);

    repeat (5) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); ev_wr_en = 1; ev_wr_addr = IDXW'(i); ev_wr_data = evs[i];
    end
    @(negedge clk); ev_wr_en = 0;
    apb_wr(12'h008, N);
    apb_wr(12'h01C, cfg.fx); apb_wr(12'h020, cfg.fy); apb_wr(12'h024, cfg.cx); apb_wr(12'h028, cfg.cy);
    apb_wr(12'h02C, cfg.inv_fx); apb_wr(12'h030, cfg.inv_fy); apb_wr(12'h018, 32'(cfg.t_ref));
    apb_rd(12'h01C, d); check(d == cfg.fx, "register read-back");
    set_omega(3_000_000, -2_000_000, 1_500_000);
    // wait for the memory clear after reset
    do apb_rd(12'h004, d); while (d[6]);

    // START: sort at 1/4 and evaluate
    ref_sort(); n_sorts++;
    ref_eval(); rvprev = rv;
    apb_wr(12'h000, 32'h1);
    wait_irq();
    compare("start", 2'd0);

    // same omega, tau = 0: gain 0 >= 0 -> keep
    iter("iter1-keep", 32'd0);
    // new omega, huge tau -> promote to 1/2 (re-sort, re-evaluate)
    set_omega(2_000_000, -1_000_000, 500_000);
    iter("iter2-promote", 32'h7fff_ffff);
    set_omega(2_500_000, -1_200_000, 800_000);
    iter("iter3-promote", 32'h7fff_ffff);
    // full resolution: keep, then move omega and stop
    iter("iter4-keep", 32'd0);
    set_omega(9_000_000, -6_000_000, 0);
    iter("iter5-done", 32'h7fff_ffff);

    $display("mechanisms: sorts=%0d subsampled=%0d inliers=%0d outliers=%0d off-grid=%0d hits=%0d commits=%0d keep=%0d promote=%0d done=%0d stall_cycles=%0d",
             n_sorts, n_sub_dropped, n_in_tot, n_out_tot, ref_offgrid, n_hits_tot, n_commits_tot, n_keep, n_prom, n_done, n_stall_tot);
    check(n_sorts >= 3, "stage-entry sorting happened at every stage");
    check(n_sub_dropped > 0, "subsampling dropped events");
    check(n_in_tot > 0, "local accumulation of inliers happened");
    check(n_out_tot > 0, "outliers happened");
    check(ref_offgrid > 0, "events left the grid");
    check(n_hits_tot > 0, "pending-merge hits happened");
    check(n_commits_tot > 0, "memory commits happened");
    check(n_keep > 0 && n_prom >= 2 && n_done == 1, "keep, promote and done all happened");
    check(kernels_seen[0] > 0 && kernels_seen[1] > 0 && kernels_seen[2] > 0, "3-, 5- and 9-tap blur all used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
