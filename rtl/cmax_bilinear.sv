// cmax_bilinear -- conflict-free banked bilinear voting.
//
// Turns one warped event into the four taps of its 2x2 bilinear stencil for
// all four channels (IWE, dIWE_x, dIWE_y, dIWE_z): 16 (bank, address, delta)
// tuples.  A tap at pixel (x, y) lives in bank {y[0], x[0]}; the four taps of
// a stencil always differ in these parity bits, so they fall into four
// different banks and can be written in the same cycle.  Bank-local address
// = floor(y/2) * ceil(W_s/2) + floor(x/2).  Tap (t_x, t_y) of corner
// (x0, y0) has bank {y0[0]^t_y, x0[0]^t_x}, as drawn in the paper's bank
// generator.  The output is ordered by bank: slot b carries the tap whose
// bank is b.
//
// Deltas, with w_x = t_x ? alpha_x : 1-alpha_x (same for y) and sign(p):
//   IWE    : p * w_x * w_y
//   dIWE_j : p * ( (t_x ? +1 : -1) * w_y * r_x[j] + w_x * (t_y ? +1 : -1) * r_y[j] )
// i.e. the derivative of the bilinear weight with respect to omega_j through
// the Jacobian rows.  An event whose warped point is off the grid
// (act_valid = 0) produces zero deltas but keeps its tag, so last_in_pg is
// never lost.  Formats: IWE Q12, dIWE Q8 (see cmax_pkg).
//
// Timing: fully pipelined, one event per clock, one cycle of latency.
module cmax_bilinear
  import cmax_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  warp_out_t  in,
  input  logic [7:0] ws_half,     // ceil(W_s/2) of the current stage
  output logic       out_valid,
  output vote_t      out
);
  typedef logic signed [63:0] w64_t;

  vote_t v;
  always_comb begin
    logic        tx, ty;
    logic [16:0] wx, wy;
    logic [33:0] w;
    logic signed [15:0] xt, yt;
    w64_t rx [3];
    w64_t ry [3];
    w64_t d;
    rx[0] = w64_t'(in.rx0); rx[1] = w64_t'(in.rx1); rx[2] = w64_t'(in.rx2);
    ry[0] = w64_t'(in.ry0); ry[1] = w64_t'(in.ry1); ry[2] = w64_t'(in.ry2);
    v = '0;
    d = '0;
    tx = 1'b0; ty = 1'b0; wx = '0; wy = '0; w = '0; xt = '0; yt = '0;
    v.p_act     = in.p_act;
    v.act_valid = in.act_valid;
    v.tag       = in.tag;
    for (int b = 0; b < NBANK; b++) begin
      tx = b[0] ^ in.x0[0];
      ty = b[1] ^ in.y0[0];
      xt = in.x0 + 16'(tx);
      yt = in.y0 + 16'(ty);
      wx = tx ? {1'b0, in.ax} : 17'h10000 - {1'b0, in.ax};
      wy = ty ? {1'b0, in.ay} : 17'h10000 - {1'b0, in.ay};
      w  = 34'(wx) * 34'(wy);                       // Q32
      v.slot[b].addr = BADW'(32'(yt[15:1]) * 32'(ws_half) + 32'(xt[15:1]));
      if (in.act_valid) begin
        d = w64_t'({30'd0, w}) >>> 20;              // Q12
        v.slot[b].delta[0] = DW'(in.pol ? d : -d);
        for (int j = 0; j < 3; j++) begin
          d = (((tx ? rx[j] : -rx[j]) * w64_t'({47'd0, wy})) +
               ((ty ? ry[j] : -ry[j]) * w64_t'({47'd0, wx}))) >>> 16;   // Q8
          v.slot[b].delta[j+1] = DW'(in.pol ? d : -d);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
  always_ff @(posedge clk) out <= v;
endmodule
