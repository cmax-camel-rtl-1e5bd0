// cmax_sorter -- stage-local pixel-grouped sorting with stage-aware subsampling.
//
// Run once at stage entry.  Three main states, as in the paper:
//   COUNT  : every event of the window is read in index order, sent through
//            the shared warp front-end at the new stage's scale, and its
//            grid index p_act (its pixel group, gid) is stored; cnt[gid]++.
//   PREFIX : a scan over the P = H_s*W_s groups writes offset[p], applies
//            the stage policy (keep ratio = s: stride 1/s, budget
//            k = ceil(cnt/stride), active if cnt > 0), appends active
//            groups to active[] and initialises ptr[p] = offset[p].
//   PERM   : a second pass over gid[] writes retained event indices into
//            perm[] in group order; an event is retained when its rank inside
//            its own group is a multiple of the stride.
// A CLEAR state (P cycles) zeroes cnt[] before counting.  cnt[] is cleared
// again during PREFIX and reused as rank[] in PERM, so the sorter holds seven
// tables: gid, cnt/rank, offset, policy, active, ptr, perm.  The policy
// function is this design's reading of "keep ratio rho_s = s".
//
// Interface: start (one cycle) with stage and n_events stable; the sorter
// drives the event memory read port (ev_rd_*) and supplies a tag aligned with
// the read data (the event index travels in tag.p_ref) for the warp; warped
// results return on wo_valid/wo.  done pulses when the tables are ready; the
// feeder then reads them through the combinational read ports.  Timing:
// P + N + (pipeline) + P + N cycles.
module cmax_sorter
  import cmax_pkg::*;
#(
  parameter int unsigned NMAX = N_MAX,
  parameter int unsigned PMAX = P_MAX
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  stage_t          stage,
  input  logic [IDXW-1:0] n_events,
  // event memory read (index order) and tag for the warp input
  output logic            ev_rd_en,
  output logic [IDXW-1:0] ev_rd_addr,
  output logic            tag_valid,
  output tag_t            tag,
  // warp results
  input  logic            wo_valid,
  input  warp_out_t       wo,
  output logic            busy,
  output logic            done,
  output logic [PIXW-1:0] n_active,
  // table read ports (combinational)
  input  logic [PIXW-1:0] active_raddr,
  output logic [PIXW-1:0] active_rdata,
  input  logic [PIXW-1:0] offset_raddr,
  output logic [IDXW:0]   offset_rdata,
  output logic [IDXW:0]   offset_rdata_next,
  input  logic [IDXW-1:0] perm_raddr,
  output logic [IDXW-1:0] perm_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_COUNT, S_PREFIX, S_PERM, S_DONE} state_t;
  state_t state;

  // the seven tables
  logic [PIXW:0]   gid_mem    [NMAX];    // {valid, p_act}
  logic [IDXW:0]   cnt_mem    [PMAX];    // count, then rank
  logic [IDXW:0]   offset_mem [PMAX+1];
  logic [2:0]      pol_mem    [PMAX];    // {act, log2 stride}
  logic [PIXW-1:0] active_mem [PMAX];
  logic [IDXW:0]   ptr_mem    [PMAX];
  logic [IDXW-1:0] perm_mem   [NMAX];

  logic [PIXW:0]   p_cnt;       // group counter
  logic [IDXW:0]   i_cnt;       // issue counter
  logic [IDXW:0]   r_cnt;       // received warp results
  logic [IDXW:0]   sum;
  logic [PIXW:0]   m_cnt;
  logic [PIXW:0]   np;          // P of the stage

  assign np = (PIXW+1)'(32'(stage_w(stage)) * 32'(stage_h(stage)));

  // event reads in COUNT
  assign ev_rd_en   = (state == S_COUNT) && (i_cnt < (IDXW+1)'(n_events));
  assign ev_rd_addr = i_cnt[IDXW-1:0];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tag_valid <= 1'b0;
    else        tag_valid <= ev_rd_en;
  end
  always_ff @(posedge clk) begin
    tag.p_ref <= ev_rd_addr;
    tag.last  <= 1'b0;
  end

  // stage policy (keep ratio s): log2(stride) equals the stage shift
  logic [IDXW:0] c_p;
  logic [1:0]    lgs;
  logic [IDXW:0] k_p;
  logic          act_p;
  always_comb begin
    c_p   = cnt_mem[p_cnt[PIXW-1:0]];
    lgs   = 2'(stage);
    k_p   = (c_p + (IDXW+1)'((1 << lgs) - 1)) >> lgs;
    act_p = (c_p != 0);
  end

  // PERM lookups
  logic [PIXW:0]   g_i;
  logic [PIXW-1:0] gp;
  logic [2:0]      pol_g;
  logic [IDXW:0]   rank_g, ptr_g, end_g;
  logic            take;
  always_comb begin
    g_i    = gid_mem[i_cnt[IDXW-1:0]];
    gp     = g_i[PIXW-1:0];
    pol_g  = pol_mem[gp];
    rank_g = cnt_mem[gp];
    ptr_g  = ptr_mem[gp];
    end_g  = offset_mem[32'(gp) + 1];
    take   = g_i[PIXW] && pol_g[2] &&
             ((rank_g & ((IDXW+1)'(1 << pol_g[1:0]) - 1'b1)) == '0) && (ptr_g < end_g);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      p_cnt <= '0; i_cnt <= '0; r_cnt <= '0; sum <= '0; m_cnt <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_CLEAR; p_cnt <= '0;
        end
        S_CLEAR: begin
          cnt_mem[p_cnt[PIXW-1:0]] <= '0;
          p_cnt <= p_cnt + 1'b1;
          if (p_cnt == np - 1'b1) begin
            state <= S_COUNT; i_cnt <= '0; r_cnt <= '0;
          end
        end
        S_COUNT: begin
          if (ev_rd_en) i_cnt <= i_cnt + 1'b1;
          if (wo_valid) begin
            gid_mem[wo.tag.p_ref[IDXW-1:0]] <= {wo.act_valid, wo.p_act};
            if (wo.act_valid) cnt_mem[wo.p_act] <= cnt_mem[wo.p_act] + 1'b1;
            r_cnt <= r_cnt + 1'b1;
          end
          if ((wo_valid ? r_cnt + 1'b1 : r_cnt) == (IDXW+1)'(n_events)) begin
            state <= S_PREFIX; p_cnt <= '0; sum <= '0; m_cnt <= '0;
          end
        end
        S_PREFIX: begin
          offset_mem[p_cnt[PIXW-1:0]] <= sum;
          ptr_mem[p_cnt[PIXW-1:0]]    <= sum;
          pol_mem[p_cnt[PIXW-1:0]]    <= {act_p, lgs};
          cnt_mem[p_cnt[PIXW-1:0]]    <= '0;            // becomes rank[]
          if (act_p) begin
            active_mem[m_cnt[PIXW-1:0]] <= p_cnt[PIXW-1:0];
            m_cnt <= m_cnt + 1'b1;
            sum   <= sum + k_p;
          end
          p_cnt <= p_cnt + 1'b1;
          if (p_cnt == np - 1'b1) begin
            offset_mem[np[PIXW-1:0]] <= act_p ? sum + k_p : sum;
            state <= S_PERM; i_cnt <= '0;
          end
        end
        S_PERM: begin
          if (i_cnt == (IDXW+1)'(n_events)) begin
            state <= S_DONE;
          end else begin
            if (g_i[PIXW] && pol_g[2]) begin
              if (take) begin
                perm_mem[ptr_g[IDXW-1:0]] <= i_cnt[IDXW-1:0];
                ptr_mem[gp] <= ptr_g + 1'b1;
              end
              cnt_mem[gp] <= rank_g + 1'b1;
            end
            i_cnt <= i_cnt + 1'b1;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign n_active = m_cnt[PIXW-1:0];

  assign active_rdata      = active_mem[active_raddr];
  assign offset_rdata      = offset_mem[offset_raddr];
  assign offset_rdata_next = offset_mem[32'(offset_raddr) + 1];
  assign perm_rdata        = perm_mem[perm_raddr];
endmodule
