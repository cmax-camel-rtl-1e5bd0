// cmax_accum_writer -- local accumulation, pending merge and memory commit.
//
// Level 1, local accumulation.  Events arrive in pixel-group order.  An
// event is an inlier when its current warped grid index p_act equals the
// group p_ref it was sorted into; all inliers of a group then hit the same
// four bank addresses, so their 16 deltas (4 channels x 4 taps) are summed in
// 16 local registers and leave once, on last_in_pg, as one entry of the
// inlier FIFO.  Outliers (p_act != p_ref) go unchanged to the outlier FIFO.
// Events whose warped point left the grid are dropped (their last_in_pg still
// closes the group).
//
// Level 2, pending merge.  One FIFO entry per clock (inlier FIFO first) is
// split into 16 lanes (channel x bank).  Each lane holds one pending
// (address, delta) register: a new item with the same address is added to
// it; otherwise the pending value is committed to memory and replaced.
// flush commits every pending value; it is issued after the pipeline drains.
//
// Interface: in_valid/in from the bilinear stage (no back-pressure:
// almost_full tells the feeder to stop issuing early enough for everything in
// flight to fit).  cmt_* are per-lane commit requests to the bank memories;
// lane = channel*4 + bank.  Counters report accepted events, inliers,
// outliers, emitted group sums, pending hits and commits; clr_cnt clears
// them.  The scheme follows the paper; FIFO depth, the inlier-first
// arbitration and the flush are this design's choices.
module cmax_accum_writer
  import cmax_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned SLACK      = 10    // entries kept free for events in flight
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  vote_t                          in,
  input  logic                           flush,
  input  logic                           clr_cnt,
  output logic                           almost_full,
  output logic                           idle,
  output logic [NLANE-1:0]               cmt_valid,
  output logic [NLANE-1:0][BADW-1:0]     cmt_addr,
  output logic [NLANE-1:0][DW-1:0]       cmt_delta,
  output logic [31:0]                    n_events,
  output logic [31:0]                    n_inlier,
  output logic [31:0]                    n_outlier,
  output logic [31:0]                    n_groups,
  output logic [31:0]                    n_hits,
  output logic [31:0]                    n_commits
);
  typedef slot_t [NBANK-1:0] entry_t;
  localparam int unsigned EW = $bits(entry_t);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  // ---------------- level 1: local accumulation ----------------------------
  logic   inlier, outlier;
  entry_t acc, acc_nxt;
  logic   acc_any;
  logic   in_push, out_push;
  entry_t in_din;

  assign inlier  = in_valid && in.act_valid && (in.p_act == in.tag.p_ref);
  assign outlier = in_valid && in.act_valid && (in.p_act != in.tag.p_ref);

  always_comb begin
    acc_nxt = acc;
    if (inlier) begin
      for (int b = 0; b < NBANK; b++) begin
        acc_nxt[b].addr = in.slot[b].addr;
        for (int c = 0; c < NCH; c++)
          acc_nxt[b].delta[c] = (acc_any ? acc[b].delta[c] : '0) + in.slot[b].delta[c];
      end
    end
  end

  assign in_push  = in_valid && in.tag.last && (acc_any || inlier);
  assign in_din   = acc_nxt;
  assign out_push = outlier;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_any <= 1'b0;
    end else if (in_valid) begin
      if (in.tag.last) acc_any <= 1'b0;
      else if (inlier) acc_any <= 1'b1;
    end
  end
  always_ff @(posedge clk) if (inlier) acc <= acc_nxt;

  // ---------------- FIFOs --------------------------------------------------
  logic [EW-1:0] iq_dout, oq_dout;
  logic          iq_empty, oq_empty, iq_full, oq_full, iq_pop, oq_pop;
  logic [CW-1:0] iq_count, oq_count;

  cmax_fifo #(.WIDTH(EW), .DEPTH(FIFO_DEPTH)) u_inlier_fifo (
    .clk, .rst_n, .push(in_push), .din(in_din), .pop(iq_pop),
    .dout(iq_dout), .empty(iq_empty), .full(iq_full), .count(iq_count));
  cmax_fifo #(.WIDTH(EW), .DEPTH(FIFO_DEPTH)) u_outlier_fifo (
    .clk, .rst_n, .push(out_push), .din(in.slot), .pop(oq_pop),
    .dout(oq_dout), .empty(oq_empty), .full(oq_full), .count(oq_count));

  assign almost_full = (32'(iq_count) + SLACK >= FIFO_DEPTH) || (32'(oq_count) + SLACK >= FIFO_DEPTH);

  // ---------------- level 2: pending merge ---------------------------------
  entry_t  e;
  logic    take;
  assign iq_pop = !iq_empty;
  assign oq_pop = iq_empty && !oq_empty;
  assign take   = iq_pop || oq_pop;
  assign e      = entry_t'(iq_pop ? iq_dout : oq_dout);

  logic [NLANE-1:0]           pend_v;
  logic [NLANE-1:0][BADW-1:0] pend_a;
  logic [NLANE-1:0][DW-1:0]   pend_d;
  logic [NLANE-1:0]           hit;

  always_comb begin
    for (int l = 0; l < NLANE; l++) begin
      hit[l]       = take && pend_v[l] && (pend_a[l] == e[l % NBANK].addr);
      cmt_valid[l] = pend_v[l] && ((take && !hit[l]) || flush);
      cmt_addr[l]  = pend_a[l];
      cmt_delta[l] = pend_d[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_v <= '0;
    end else begin
      for (int l = 0; l < NLANE; l++) begin
        if (take) pend_v[l] <= 1'b1;
        else if (flush) pend_v[l] <= 1'b0;
      end
    end
  end
  always_ff @(posedge clk) begin
    for (int l = 0; l < NLANE; l++) begin
      if (take) begin
        pend_a[l] <= e[l % NBANK].addr;
        pend_d[l] <= hit[l] ? pend_d[l] + e[l % NBANK].delta[l / NBANK]
                            : e[l % NBANK].delta[l / NBANK];
      end
    end
  end

  assign idle = iq_empty && oq_empty;

  // ---------------- counters -----------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {n_events, n_inlier, n_outlier, n_groups, n_hits, n_commits} <= '0;
    end else if (clr_cnt) begin
      {n_events, n_inlier, n_outlier, n_groups, n_hits, n_commits} <= '0;
    end else begin
      n_events  <= n_events  + 32'(in_valid);
      n_inlier  <= n_inlier  + 32'(inlier);
      n_outlier <= n_outlier + 32'(outlier);
      n_groups  <= n_groups  + 32'(in_push);
      n_hits    <= n_hits    + 32'($countones(hit));
      n_commits <= n_commits + 32'($countones(cmt_valid));
    end
  end

  a_flush_when_idle: assert property (@(posedge clk) disable iff (!rst_n) flush |-> (idle && !in_valid));
endmodule
