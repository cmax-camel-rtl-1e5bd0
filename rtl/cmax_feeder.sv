// cmax_feeder -- streams the sorted event window in pixel-group order.
//
// For every active group p = active[m], m = 0..M-1, it reads the retained
// event indices perm[offset[p] .. offset[p+1]-1], fetches each event from the
// event memory and tags it with p_ref = p and last_in_pg (set on the last
// event of the run).  The next group's table entries are looked up while the
// current run is issued, so runs follow each other without a bubble: one
// event per clock while stall is low.  The stall input (back-pressure from
// the accumulation FIFOs) is this design's choice; the paper only says that
// the feeder streams each run with p_ref and last_in_pg.
//
// Interface: start (one cycle) with n_active stable; tag_valid/tag are
// aligned with the event memory's read data (one cycle after ev_rd_en).
// done pulses once after the last event has been issued.
module cmax_feeder
  import cmax_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [PIXW-1:0] n_active,
  input  logic            stall,
  // sorter tables
  output logic [PIXW-1:0] active_raddr,
  input  logic [PIXW-1:0] active_rdata,
  output logic [PIXW-1:0] offset_raddr,
  input  logic [IDXW:0]   offset_rdata,
  input  logic [IDXW:0]   offset_rdata_next,
  output logic [IDXW-1:0] perm_raddr,
  input  logic [IDXW-1:0] perm_rdata,
  // event memory
  output logic            ev_rd_en,
  output logic [IDXW-1:0] ev_rd_addr,
  output logic            tag_valid,
  output tag_t            tag,
  output logic            busy,
  output logic            done
);
  typedef enum logic [1:0] {F_IDLE, F_LOAD, F_EMIT} fstate_t;
  fstate_t state;

  logic [PIXW-1:0] m;          // index of the group being issued
  logic [PIXW-1:0] cur_p;
  logic [IDXW:0]   j, jend;
  logic            last;

  // table lookups: in LOAD the current group, in EMIT the next one
  assign active_raddr = (state == F_LOAD) ? m : m + 1'b1;
  assign offset_raddr = active_rdata;
  assign perm_raddr   = j[IDXW-1:0];

  assign last       = (j + 1'b1 == jend);
  assign ev_rd_en   = (state == F_EMIT) && !stall;
  assign ev_rd_addr = perm_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= F_IDLE;
      done  <= 1'b0;
      m     <= '0;
      cur_p <= '0;
      j     <= '0;
      jend  <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        F_IDLE: if (start) begin
          m <= '0;
          if (n_active == '0) done <= 1'b1;
          else                state <= F_LOAD;
        end
        F_LOAD: begin
          cur_p <= active_rdata;
          j     <= offset_rdata;
          jend  <= offset_rdata_next;
          state <= F_EMIT;
        end
        F_EMIT: if (!stall) begin
          if (last) begin
            if (m + 1'b1 == n_active) begin
              state <= F_IDLE;
              done  <= 1'b1;
            end else begin
              m     <= m + 1'b1;
              cur_p <= active_rdata;
              j     <= offset_rdata;
              jend  <= offset_rdata_next;
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        default: state <= F_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tag_valid <= 1'b0;
    else        tag_valid <= ev_rd_en;
  end
  always_ff @(posedge clk) begin
    tag.p_ref <= cur_p;
    tag.last  <= last;
  end

  assign busy = (state != F_IDLE);
endmodule
