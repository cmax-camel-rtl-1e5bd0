// cmax_ctrl -- stage-transition controller and iteration sequencer.
//
// Runs the coarse-to-fine policy of the engine.  The host (which updates
// omega with its optimiser) issues two commands:
//   cmd_start : new window.  Stage := 1/4, sort, evaluate, V_prev := V.
//               decision = READY.
//   cmd_iter  : omega has been updated.  Evaluate at the current stage and
//               apply the gain test g = (V - V_prev)/|V_prev| >= tau_s:
//                 keep     : V_prev := V                 decision = KEEP
//                 promote  : stage := next, sort, evaluate,
//                            V_prev := V at the new stage decision = PROMOTED
//                 finest stage and g < tau : stop          decision = DONE
// One evaluation is: feed the sorted runs through warp, voting and the
// accumulation writer; wait for the pipeline and FIFOs to drain; flush the
// pending registers; stream the images through blur into the statistics.
// V is the variance scaled by P^2 (P = H_s W_s): V = P*S2 - S1^2.  The gain
// test compares (V - V_prev)*2^16 >= tau_s*|V_prev| (tau_s in Q16), so no
// divider is needed; the ratio does not depend on the P^2 scale because
// V and V_prev always come from the same stage.  V_prev = 0 counts as
// saturated.  The policy is the paper's; the split between host and engine,
// the scaling and the V_prev = 0 rule are this design's choices.
//
// Interface: one-cycle commands while !busy; done pulses when the decision
// is available.  The sub-block handshakes are start pulses and done pulses.
module cmax_ctrl
  import cmax_pkg::*;
#(
  parameter int unsigned AW    = 96,
  parameter int unsigned DRAIN = 12    // clocks for events in flight behind the feeder
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_start,
  input  logic                   cmd_iter,
  input  logic [2:0][31:0]       tau,          // [0]=1/4, [1]=1/2, [2]=1
  input  logic                   mem_init_busy,
  // sorter
  output logic                   sort_start,
  output logic                   sort_mode,    // the "sort?" select of the warp input/output
  input  logic                   sort_done,
  // feeder and writer
  output logic                   feed_start,
  input  logic                   feed_done,
  input  logic                   writer_idle,
  output logic                   flush,
  output logic                   clr_cnt,
  // streamer / statistics
  output logic                   stream_start,
  input  logic                   stream_done,
  output logic                   stats_clear,
  input  logic signed [AW-1:0]   s1,
  input  logic signed [AW-1:0]   s2,
  // status
  output stage_t                 stage,
  output logic [1:0]             decision,     // 0 READY, 1 KEEP, 2 PROMOTED, 3 DONE
  output logic signed [127:0]    v_cur,
  output logic signed [127:0]    v_prev,
  output logic [15:0]            n_iter,
  output logic [15:0]            n_promote,
  output logic                   busy,
  output logic                   done
);
  typedef enum logic [3:0] {
    C_IDLE, C_SORT, C_FEED, C_DRAIN, C_FLUSH, C_SETTLE, C_STREAM, C_TAIL, C_DECIDE
  } cstate_t;
  cstate_t state;

  localparam logic [1:0] D_READY = 2'd0, D_KEEP = 2'd1, D_PROM = 2'd2, D_DONE = 2'd3;

  logic        mode_entry;   // this evaluation opens a stage (sets V_prev)
  logic        sort_fire, feed_fire, stream_fire;
  logic [4:0]  wait_cnt;
  logic signed [127:0] v_new;
  logic signed [159:0] lhs, rhs, tau_sel;
  logic [31:0] np;

  assign np    = 32'(stage_w(stage)) * 32'(stage_h(stage));
  assign v_new = 128'(s2 * AW'(np)) - 128'(s1 * s1);

  always_comb begin
    tau_sel = 160'(tau[(stage == ST_QUARTER) ? 0 : (stage == ST_HALF) ? 1 : 2]);
    lhs     = (160'(v_cur) - 160'(v_prev)) <<< 16;
    rhs     = tau_sel * ((v_prev < 0) ? -160'(v_prev) : 160'(v_prev));
  end

  assign sort_start   = sort_fire;
  assign feed_start   = feed_fire;
  assign stream_start = stream_fire;
  assign busy         = (state != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; stage <= ST_QUARTER; decision <= D_READY;
      v_cur <= '0; v_prev <= '0; n_iter <= '0; n_promote <= '0;
      sort_mode <= 1'b0; mode_entry <= 1'b0;
      sort_fire <= 1'b0; feed_fire <= 1'b0; stream_fire <= 1'b0;
      flush <= 1'b0; clr_cnt <= 1'b0; stats_clear <= 1'b0; done <= 1'b0;
      wait_cnt <= '0;
    end else begin
      sort_fire <= 1'b0; feed_fire <= 1'b0; stream_fire <= 1'b0;
      flush <= 1'b0; clr_cnt <= 1'b0; stats_clear <= 1'b0; done <= 1'b0;
      case (state)
        C_IDLE: begin
          if (cmd_start && !mem_init_busy) begin
            stage <= ST_QUARTER; mode_entry <= 1'b1; n_iter <= '0; n_promote <= '0;
            decision <= D_READY;
            sort_mode <= 1'b1; sort_fire <= 1'b1; state <= C_SORT;
          end else if (cmd_iter && !mem_init_busy) begin
            mode_entry <= 1'b0; n_iter <= n_iter + 1'b1;
            feed_fire <= 1'b1; clr_cnt <= 1'b1; state <= C_FEED;
          end
        end
        C_SORT: if (sort_done && !sort_fire) begin
          sort_mode <= 1'b0; feed_fire <= 1'b1; clr_cnt <= 1'b1; state <= C_FEED;
        end
        C_FEED: if (feed_done) begin
          wait_cnt <= 5'(DRAIN); state <= C_DRAIN;
        end
        C_DRAIN: begin
          if (wait_cnt != 0) wait_cnt <= wait_cnt - 1'b1;
          else if (writer_idle) begin
            flush <= 1'b1; state <= C_FLUSH;
          end
        end
        C_FLUSH: begin
          wait_cnt <= 5'd2; state <= C_SETTLE;        // read-modify-write completes
        end
        C_SETTLE: begin
          if (wait_cnt != 0) wait_cnt <= wait_cnt - 1'b1;
          else begin
            stats_clear <= 1'b1; stream_fire <= 1'b1; state <= C_STREAM;
          end
        end
        C_STREAM: if (stream_done) begin
          wait_cnt <= 5'd4; state <= C_TAIL;          // blur and statistics latency
        end
        C_TAIL: begin
          if (wait_cnt != 0) wait_cnt <= wait_cnt - 1'b1;
          else begin
            v_cur <= v_new; state <= C_DECIDE;
          end
        end
        C_DECIDE: begin
          state <= C_IDLE; done <= 1'b1;
          if (mode_entry) begin
            v_prev   <= v_cur;          // decision stays READY or PROMOTED
          end else if ((v_prev != 0) && (lhs >= rhs)) begin
            v_prev   <= v_cur;
            decision <= D_KEEP;
          end else if (stage != ST_FULL) begin
            stage <= next_stage(stage); mode_entry <= 1'b1; n_promote <= n_promote + 1'b1;
            decision <= D_PROM; done <= 1'b0;
            sort_mode <= 1'b1; sort_fire <= 1'b1; state <= C_SORT;
          end else begin
            decision <= D_DONE;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
