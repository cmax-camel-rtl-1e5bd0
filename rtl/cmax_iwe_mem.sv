// cmax_iwe_mem -- IWE and dIWE_x/y/z images in 4 channels x 4 parity banks.
//
// Pixel (x, y) of a channel is stored in bank {y[0], x[0]} at address
// floor(y/2)*ceil(W_s/2) + floor(x/2), so each bank holds one even/odd
// coordinate class of ceil(H/2) x ceil(W/2) 32-bit entries (16 banks of
// 90 x 120 words = 675 KB at 240 x 180, the size the paper reports).
//
// Ports:
//  * 16 commit lanes (lane = channel*4 + bank) from the accumulation writer.
//    Each commit is a read-modify-write: the bank is read in the commit
//    cycle and the sum written in the next.  The writer never commits the
//    same address of a lane in two consecutive cycles, so no forwarding is
//    needed.
//  * A streaming read port for the blur: rd_en reads the even-x and odd-x
//    banks of row parity rd_row_odd at rd_addr in every channel (two
//    neighbouring pixels per channel) and clears those entries, so the
//    images are zero again for the next iteration.  Data one cycle later.
//  * After reset a sweep clears every entry (init_busy is high meanwhile).
// The two ports must not be used in the same cycle.  Banking follows the
// paper; clear-on-read and the reset sweep are this design's choices.
module cmax_iwe_mem
  import cmax_pkg::*;
#(
  parameter int unsigned W = W_FULL,
  parameter int unsigned H = H_FULL
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NLANE-1:0]              cmt_valid,
  input  logic [NLANE-1:0][BADW-1:0]    cmt_addr,
  input  logic [NLANE-1:0][DW-1:0]      cmt_delta,
  input  logic                          rd_en,
  input  logic                          rd_row_odd,
  input  logic [BADW-1:0]               rd_addr,
  output logic [NCH-1:0][1:0][DW-1:0]   rd_data,     // [channel][x parity]
  output logic                          init_busy
);
  localparam int unsigned BDEPTH = ((H + 1) / 2) * ((W + 1) / 2);

  logic [BADW-1:0] init_addr;
  logic [DW-1:0]   lane_rd [NLANE];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_addr <= '0;
    end else if (init_busy) begin
      init_addr <= init_addr + 1'b1;
      if (32'(init_addr) == BDEPTH - 1) init_busy <= 1'b0;
    end
  end

  for (genvar l = 0; l < NLANE; l++) begin : g_lane
    localparam int unsigned BK = l % NBANK;
    logic [DW-1:0]   mem [BDEPTH];
    logic [DW-1:0]   rmw_q, rd_q;
    logic [BADW-1:0] a_q;
    logic [DW-1:0]   d_q;
    logic            v_q;
    logic            sel;
    assign sel = rd_en && (rd_row_odd == BK[1]);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v_q <= 1'b0;
      else        v_q <= cmt_valid[l];
    end
    always_ff @(posedge clk) begin
      if (cmt_valid[l]) begin
        rmw_q <= mem[cmt_addr[l]];
        a_q   <= cmt_addr[l];
        d_q   <= cmt_delta[l];
      end
      if (init_busy)      mem[init_addr] <= '0;
      else if (v_q)       mem[a_q]       <= rmw_q + d_q;
      else if (sel)       mem[rd_addr]   <= '0;
      if (sel) rd_q <= mem[rd_addr];
    end
    assign lane_rd[l] = rd_q;
  end

  // bank index = {row parity, x parity}
  logic rd_row_q;
  always_ff @(posedge clk) if (rd_en) rd_row_q <= rd_row_odd;
  always_comb begin
    for (int c = 0; c < NCH; c++)
      for (int xp = 0; xp < 2; xp++)
        rd_data[c][xp] = lane_rd[c * NBANK + (rd_row_q ? 2 : 0) + xp];
  end

  a_ports_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && |cmt_valid));
endmodule
