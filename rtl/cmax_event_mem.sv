// cmax_event_mem -- on-chip raw event window memory.
//
// Holds one window of up to N_MAX 32-bit event words {p, t, y, x}.  The
// sensor interface writes events by index through the write port; the single
// synchronous read port is shared, through a multiplexer outside, by the
// sorter (index order, once per stage) and the feeder (pixel-group order,
// every iteration).  Read data appear one clock after rd_en.  The capacity
// (40,000 events x 4 bytes) follows the paper; the word layout and the
// one-cycle read are this design's choices.
module cmax_event_mem
  import cmax_pkg::*;
#(
  parameter int unsigned DEPTH = N_MAX
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [IDXW-1:0] wr_addr,
  input  event_t          wr_data,
  input  logic            rd_en,
  input  logic [IDXW-1:0] rd_addr,
  output event_t          rd_data
);
  event_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < DEPTH)) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[(32'(rd_addr) < DEPTH) ? rd_addr : '0];
  end
endmodule
