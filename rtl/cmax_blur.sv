// cmax_blur -- separable streaming Gaussian blur of one channel, 2 pixels/clk.
//
// The 2-D Gaussian is applied as a horizontal 1-D FIR followed by a vertical
// 1-D FIR over row line buffers, as in the paper.  The datapath always has 9
// taps; the 3- and 5-tap kernels of the quarter- and half-resolution stages
// are loaded with zeros in the outer taps.  Taps are unsigned Q8 (a kernel
// sums to 256).
//
// Horizontal: a window of the last five input beats (10 pixels) gives, when
// beat k arrives, the filtered pair of beat k-2 (pixels 2k-4 and 2k-3).
// Pixels left of the row are masked to zero; the streamer's two zero beats at
// the end of each row supply the right border.  Results are kept at full
// precision (64 bits, the line-buffer word).
// Vertical: horizontal results of row R go to line buffer R mod 9; with the
// eight previous rows read from the other buffers the filtered value of row
// R-4 is formed (rows above the image masked to zero, the streamer's four
// zero rows supply the bottom border) and scaled back by 2^-16 to the input
// format.  Nine line buffers per channel, as the paper counts them; the row
// being written is taken from the bypass, not re-read.
//
// Interface: in_valid, in_px (pair), in_row, in_col (beat index) from the
// streamer; ws_half = W_s/2 and hs = H_s of the stage; coef[0..8].  Outputs
// out_valid/out_px with out_row/out_col (pair index) of the blurred pair,
// three clocks after the beat that completes it.
module cmax_blur
  import cmax_pkg::*;
#(
  parameter int unsigned W   = W_FULL,
  parameter int unsigned NLB = 9,
  parameter int unsigned LBW = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic signed [1:0][DW-1:0]   in_px,
  input  logic [8:0]                  in_row,
  input  logic [7:0]                  in_col,
  input  logic [7:0]                  ws_half,
  input  logic [8:0]                  hs,
  input  logic [TAPS-1:0][7:0]        coef,
  output logic                        out_valid,
  output logic signed [1:0][DW-1:0]   out_px,
  output logic [8:0]                  out_row,
  output logic [7:0]                  out_col
);
  typedef logic signed [LBW-1:0] lb_t;
  localparam int unsigned WP = (W + 1) / 2;

  // ---------------- horizontal FIR -----------------------------------------
  logic signed [DW-1:0] win [4][2];    // beats k-1 .. k-4
  always_ff @(posedge clk) begin
    if (in_valid) begin
      win[0] <= '{in_px[0], in_px[1]};
      for (int d = 1; d < 4; d++) win[d] <= win[d-1];
    end
  end

  logic signed [DW-1:0] pix [10];
  lb_t                  h_a, h_b;
  always_comb begin
    for (int d = 0; d < 4; d++) begin   // beat k-4+d
      for (int q = 0; q < 2; q++)
        pix[2*d+q] = (in_col >= 8'(4 - d)) ? win[3-d][q] : '0;
    end
    pix[8] = in_px[0];
    pix[9] = in_px[1];
    h_a = '0;
    h_b = '0;
    for (int i = 0; i < TAPS; i++) begin
      h_a += lb_t'(pix[i])   * lb_t'($signed({1'b0, coef[i]}));
      h_b += lb_t'(pix[i+1]) * lb_t'($signed({1'b0, coef[i]}));
    end
  end

  logic       hv;
  lb_t        h_q [2];
  logic [8:0] h_row;
  logic [7:0] h_col;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hv <= 1'b0;
    else        hv <= in_valid && (in_col >= 8'd2) && (in_col < ws_half + 8'd2);
  end
  always_ff @(posedge clk) begin
    h_q[0] <= h_a;
    h_q[1] <= h_b;
    h_row  <= in_row;
    h_col  <= in_col - 8'd2;
  end

  // ---------------- vertical FIR over line buffers -------------------------
  lb_t        lb [NLB][WP][2];
  localparam int unsigned CW = $clog2(WP);
  logic [3:0]    slot;
  logic [CW-1:0] lb_col;                 // h_col < W_s/2 <= WP always
  assign slot   = 4'(h_row % 9'(NLB));
  assign lb_col = h_col[CW-1:0];

  always_ff @(posedge clk) begin
    if (hv) begin
      lb[slot][lb_col][0] <= h_q[0];
      lb[slot][lb_col][1] <= h_q[1];
    end
  end

  lb_t v_a, v_b;
  always_comb begin
    logic [3:0] s;
    v_a = '0;
    v_b = '0;
    s   = '0;
    for (int k = 0; k < TAPS - 1; k++) begin    // rows R-8+k, k = 0..7
      s = 4'((32'(slot) + NLB - 8 + k) % NLB);
      if (32'(h_row) + k >= 8) begin
        v_a += lb[s][lb_col][0] * lb_t'($signed({1'b0, coef[k]}));
        v_b += lb[s][lb_col][1] * lb_t'($signed({1'b0, coef[k]}));
      end
    end
    v_a += h_q[0] * lb_t'($signed({1'b0, coef[TAPS-1]}));
    v_b += h_q[1] * lb_t'($signed({1'b0, coef[TAPS-1]}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= hv && (h_row >= 9'd4) && (h_row < hs + 9'd4);
  end
  always_ff @(posedge clk) begin
    out_px[0] <= DW'(v_a >>> 16);
    out_px[1] <= DW'(v_b >>> 16);
    out_row   <= h_row - 9'd4;
    out_col   <= h_col;
  end
endmodule
