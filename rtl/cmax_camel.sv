// cmax_camel -- top level of the CMAX-CAMEL contrast-maximisation engine.
//
// The engine evaluates, for a window of DVS events and a rotation
// hypothesis omega, the variance of the blurred image of warped events (IWE)
// and its gradient with respect to omega, and runs the coarse-to-fine stage
// policy around it.  Data path (one event per clock):
//
//   event memory -> shared warp -> bilinear voting -> accumulation writer
//        ^   (sort? = 1: warp results go to the sorter instead)    |
//   feeder <- sorter tables                          16-lane commits
//                                                               v
//   statistics <- 4 x blur <- channel streamer <- IWE/dIWE 4 x 4 banks
//
// At stage entry the sorter groups the events by warped pixel and subsamples
// them; every iteration the feeder replays the retained events group by
// group, the writer absorbs inliers locally and merges repeated addresses,
// and the blurred images are reduced to running sums on the fly.  The
// controller sequences this and applies the gain test of the stage policy.
// The host (an optimiser on a CPU) reads variance and gradient over APB and
// writes the next omega.
//
// Interface: APB completer (see cmax_host_if for the register map), a
// sensor write port into the event memory, and irq, a one-cycle pulse when a
// command has finished.  STATUS (0x004): bit0 busy, bits 2:1 decision
// (0 ready, 1 keep, 2 promoted, 3 done), bits 5:4 stage shift (2 = 1/4,
// 1 = 1/2, 0 = 1), bit 6 memory clear after reset in progress.
// Result words (0x100 + 4*i): 0-2 S1, 3-5 S2, 6-14 G_x,y,z, 15-23 T_x,y,z
// (96-bit values, low word first), 24-27 V = P*S2 - S1^2, 28-31 V_prev,
// 32 events fed, 33 inliers, 34 outliers, 35 inlier group sums, 36 pending
// hits, 37 memory commits, 38 feeder stall cycles, 39 {promotions,
// iterations}, 40 active groups, 41 clock cycles of the last command.
module cmax_camel
  import cmax_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // APB completer
  input  logic            psel,
  input  logic            penable,
  input  logic            pwrite,
  input  logic [11:0]     paddr,
  input  logic [31:0]     pwdata,
  output logic [31:0]     prdata,
  output logic            pready,
  output logic            pslverr,
  // sensor interface into the event memory
  input  logic            ev_wr_en,
  input  logic [IDXW-1:0] ev_wr_addr,
  input  event_t          ev_wr_data,
  output logic            irq
);
  localparam int unsigned AW   = 96;
  localparam int unsigned NRES = 48;

  // ---------------- host interface and controller --------------------------
  logic                      cmd_start, cmd_iter;
  logic [IDXW-1:0]           n_events;
  warp_cfg_t                 hcfg, wcfg;
  logic [2:0][31:0]          tau;
  logic [2:0][TAPS-1:0][7:0] coef_all;
  logic [31:0]               status;
  logic [NRES-1:0][31:0]     res;

  logic        sort_start, sort_mode, sort_done, sort_busy;
  logic        feed_start, feed_done, feed_busy;
  logic        writer_idle, flush, clr_cnt, almost_full;
  logic        stream_start, stream_done, stream_busy, stats_clear;
  logic        init_busy;
  stage_t      stage;
  logic [1:0]  decision;
  logic signed [127:0] v_cur, v_prev;
  logic [15:0] n_iter, n_promote;
  logic        ctrl_busy;
  logic signed [AW-1:0] s1, s2;
  logic signed [2:0][AW-1:0] g, t;

  cmax_host_if #(.NRES(NRES)) u_host_if (
    .clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr,
    .cmd_start, .cmd_iter, .n_events, .wcfg(hcfg), .tau, .coef(coef_all), .status, .res);

  cmax_ctrl #(.AW(AW)) u_ctrl (
    .clk, .rst_n, .cmd_start, .cmd_iter, .tau, .mem_init_busy(init_busy),
    .sort_start, .sort_mode, .sort_done, .feed_start, .feed_done, .writer_idle,
    .flush, .clr_cnt, .stream_start, .stream_done, .stats_clear, .s1, .s2,
    .stage, .decision, .v_cur, .v_prev, .n_iter, .n_promote, .busy(ctrl_busy), .done(irq));

  always_comb begin
    wcfg       = hcfg;
    wcfg.stage = stage;
  end

  // ---------------- event memory with the sort?/feeder multiplexer --------
  logic            s_rd_en, f_rd_en, s_tag_v, f_tag_v;
  logic [IDXW-1:0] s_rd_addr, f_rd_addr;
  tag_t            s_tag, f_tag;
  event_t          ev_rd;

  cmax_event_mem u_event_mem (
    .clk, .wr_en(ev_wr_en), .wr_addr(ev_wr_addr), .wr_data(ev_wr_data),
    .rd_en(sort_mode ? s_rd_en : f_rd_en), .rd_addr(sort_mode ? s_rd_addr : f_rd_addr),
    .rd_data(ev_rd));

  // ---------------- shared warp front-end ----------------------------------
  logic      wo_valid;
  warp_out_t wo;
  cmax_warp u_warp (
    .clk, .rst_n, .in_valid(sort_mode ? s_tag_v : f_tag_v), .ev(ev_rd),
    .tag_in(sort_mode ? s_tag : f_tag), .cfg(wcfg), .out_valid(wo_valid), .out(wo));

  // ---------------- sorter and feeder --------------------------------------
  logic [PIXW-1:0] n_active, active_raddr, active_rdata, offset_raddr;
  logic [IDXW:0]   offset_rdata, offset_rdata_next;
  logic [IDXW-1:0] perm_raddr, perm_rdata;

  cmax_sorter u_sorter (
    .clk, .rst_n, .start(sort_start), .stage, .n_events,
    .ev_rd_en(s_rd_en), .ev_rd_addr(s_rd_addr), .tag_valid(s_tag_v), .tag(s_tag),
    .wo_valid(wo_valid && sort_mode), .wo, .busy(sort_busy), .done(sort_done), .n_active,
    .active_raddr, .active_rdata, .offset_raddr, .offset_rdata, .offset_rdata_next,
    .perm_raddr, .perm_rdata);

  cmax_feeder u_feeder (
    .clk, .rst_n, .start(feed_start), .n_active, .stall(almost_full),
    .active_raddr, .active_rdata, .offset_raddr, .offset_rdata, .offset_rdata_next,
    .perm_raddr, .perm_rdata, .ev_rd_en(f_rd_en), .ev_rd_addr(f_rd_addr),
    .tag_valid(f_tag_v), .tag(f_tag), .busy(feed_busy), .done(feed_done));

  // ---------------- bilinear voting and accumulation writer ----------------
  logic  vo_valid;
  vote_t vo;
  cmax_bilinear u_bilinear (
    .clk, .rst_n, .in_valid(wo_valid && !sort_mode), .in(wo),
    .ws_half(8'(stage_w(stage) >> 1)), .out_valid(vo_valid), .out(vo));

  logic [NLANE-1:0]           cmt_valid;
  logic [NLANE-1:0][BADW-1:0] cmt_addr;
  logic [NLANE-1:0][DW-1:0]   cmt_delta;
  logic [31:0] c_events, c_inlier, c_outlier, c_groups, c_hits, c_commits;

  cmax_accum_writer u_writer (
    .clk, .rst_n, .in_valid(vo_valid), .in(vo), .flush, .clr_cnt, .almost_full,
    .idle(writer_idle), .cmt_valid, .cmt_addr, .cmt_delta,
    .n_events(c_events), .n_inlier(c_inlier), .n_outlier(c_outlier),
    .n_groups(c_groups), .n_hits(c_hits), .n_commits(c_commits));

  // ---------------- IWE / dIWE banks ---------------------------------------
  logic                        m_rd_en, m_rd_row_odd;
  logic [BADW-1:0]             m_rd_addr;
  logic [NCH-1:0][1:0][DW-1:0] m_rd_data;

  cmax_iwe_mem u_iwe_mem (
    .clk, .rst_n, .cmt_valid, .cmt_addr, .cmt_delta,
    .rd_en(m_rd_en), .rd_row_odd(m_rd_row_odd), .rd_addr(m_rd_addr), .rd_data(m_rd_data),
    .init_busy);

  // ---------------- streamer, blur x4, statistics --------------------------
  logic                        b_valid;
  logic [NCH-1:0][1:0][DW-1:0] b_px;
  logic [8:0]                  b_row;
  logic [7:0]                  b_col;

  cmax_streamer u_streamer (
    .clk, .rst_n, .start(stream_start), .stage,
    .rd_en(m_rd_en), .rd_row_odd(m_rd_row_odd), .rd_addr(m_rd_addr), .rd_data(m_rd_data),
    .beat_valid(b_valid), .beat_px(b_px), .beat_row(b_row), .beat_col(b_col),
    .busy(stream_busy), .done(stream_done));

  logic [TAPS-1:0][7:0]        coef;
  assign coef = coef_all[(stage == ST_QUARTER) ? 0 : (stage == ST_HALF) ? 1 : 2];

  logic [NCH-1:0]              bl_valid;
  logic [NCH-1:0][1:0][DW-1:0] bl_px;
  logic [NCH-1:0][8:0]         bl_row;
  logic [NCH-1:0][7:0]         bl_col;

  for (genvar c = 0; c < NCH; c++) begin : g_blur
    cmax_blur u_blur (
      .clk, .rst_n, .in_valid(b_valid), .in_px(b_px[c]), .in_row(b_row), .in_col(b_col),
      .ws_half(8'(stage_w(stage) >> 1)), .hs(stage_h(stage)), .coef,
      .out_valid(bl_valid[c]), .out_px(bl_px[c]), .out_row(bl_row[c]), .out_col(bl_col[c]));
  end

  cmax_stats #(.AW(AW)) u_stats (
    .clk, .rst_n, .clear(stats_clear), .in_valid(bl_valid[0]),
    .iwe(bl_px[0]), .diwe({bl_px[3], bl_px[2], bl_px[1]}), .s1, .s2, .g, .t);

  // ---------------- activity counters and read-back ------------------------
  logic [31:0] c_stall, c_cycles, c_run;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_stall <= '0; c_cycles <= '0; c_run <= '0;
    end else begin
      if (clr_cnt) c_stall <= '0;
      else if (feed_busy && almost_full) c_stall <= c_stall + 1'b1;
      if (cmd_start || cmd_iter) c_run <= '0;
      else if (ctrl_busy)        c_run <= c_run + 1'b1;
      if (irq) c_cycles <= c_run + 1'b1;
    end
  end

  assign status = {25'd0, init_busy, 2'(stage), 1'b0, decision, ctrl_busy};

  always_comb begin
    res = '0;
    for (int w = 0; w < 3; w++) begin
      res[w]     = s1[32*w +: 32];
      res[3 + w] = s2[32*w +: 32];
      for (int j = 0; j < 3; j++) begin
        res[6 + 3*j + w]  = g[j][32*w +: 32];
        res[15 + 3*j + w] = t[j][32*w +: 32];
      end
    end
    for (int w = 0; w < 4; w++) begin
      res[24 + w] = v_cur[32*w +: 32];
      res[28 + w] = v_prev[32*w +: 32];
    end
    res[32] = c_events;
    res[33] = c_inlier;
    res[34] = c_outlier;
    res[35] = c_groups;
    res[36] = c_hits;
    res[37] = c_commits;
    res[38] = c_stall;
    res[39] = {n_promote, n_iter};
    res[40] = 32'(n_active);
    res[41] = c_cycles;
  end

  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n) !(sort_busy && feed_busy));
endmodule
