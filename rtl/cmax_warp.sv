// cmax_warp -- shared, pipelined event warp front-end (rotation model).
//
// For an event (x, y, t, p) and the hypothesis omega it computes, in five
// registered steps that follow the printed order of the warp pipeline
// (normalise, rotation terms, warp, Jacobian, decompose):
//   xn = (x-cx)/fx, yn = (y-cy)/fy, dt = t - t_ref
//   B = 1+xn^2, D = 1+yn^2, XY = xn*yn
//   u = fx(XY wx - B wy + yn wz),  v = fy(D wx - XY wy - xn wz)
//   (x', y') = s * (x - dt u, y - dt v)
//   r_x = s dt [fx XY, -fx B, fx yn],  r_y = s dt [fy D, -fy XY, -fy xn]
//   x0 = floor(x'), alpha_x = x' - x0 (same for y), p_act = y0*W_s + x0
// The equations are the paper's.  Division by fx, fy is a multiplication by
// host-supplied reciprocals; the scale s is a right shift (stage_t encodes
// it).  "In range" is taken to mean that all four bilinear taps lie on the
// stage grid: 0 <= x0 < W_s-1 and 0 <= y0 < H_s-1.
//
// Interface: one event per clock (in_valid), no back-pressure; result and the
// unchanged tag appear LAT = 5 cycles later on out_valid/out.  cfg must be
// held stable while events are in flight.  Number formats: see cmax_pkg.
module cmax_warp
  import cmax_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  event_t     ev,
  input  tag_t       tag_in,
  input  warp_cfg_t  cfg,
  output logic       out_valid,
  output warp_out_t  out
);


  typedef logic signed [95:0] wide_t;

  // ---- step 1: normalise --------------------------------------------------
  logic               v1;
  logic signed [31:0] xq1, yq1, xn1, yn1;
  logic signed [15:0] dt1;
  logic               p1;
  tag_t               tg1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end
  always_ff @(posedge clk) begin
    wide_t dxw, dyw;
    dxw = (wide_t'({ev.x, 16'h0}) - wide_t'(cfg.cx)) * wide_t'(cfg.inv_fx);
    dyw = (wide_t'({ev.y, 16'h0}) - wide_t'(cfg.cy)) * wide_t'(cfg.inv_fy);
    xq1 <= 32'({ev.x, 16'h0});
    yq1 <= 32'({ev.y, 16'h0});
    xn1 <= 32'(dxw >>> 30);
    yn1 <= 32'(dyw >>> 30);
    dt1 <= 16'($signed({1'b0, ev.t}) - $signed({1'b0, cfg.t_ref}));
    p1  <= ev.p;
    tg1 <= tag_in;
  end

  // ---- step 2: rotation terms --------------------------------------------
  logic               v2;
  logic signed [31:0] xq2, yq2, xn2, yn2, b2, d2, xy2;
  logic signed [15:0] dt2;
  logic               p2;
  tag_t               tg2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
  end
  always_ff @(posedge clk) begin
    b2  <= 32'sd65536 + 32'((wide_t'(xn1) * wide_t'(xn1)) >>> 16);
    d2  <= 32'sd65536 + 32'((wide_t'(yn1) * wide_t'(yn1)) >>> 16);
    xy2 <= 32'((wide_t'(xn1) * wide_t'(yn1)) >>> 16);
    {xq2, yq2, xn2, yn2, dt2, p2, tg2} <= {xq1, yq1, xn1, yn1, dt1, p1, tg1};
  end

  // ---- step 3: warp (and the f*term products for the Jacobian) ------------
  logic               v3;
  logic signed [31:0] xw3, yw3;                // warped, unscaled, Q16
  logic signed [31:0] jx0, jx1, jx2, jy0, jy1, jy2; // f*terms, Q16
  logic signed [15:0] dt3;
  logic               p3;
  tag_t               tg3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v3 <= 1'b0;
    else        v3 <= v2;
  end
  always_ff @(posedge clk) begin
    wide_t su, sv, u, v, fx, fy;
    fx = wide_t'($signed({1'b0, cfg.fx}));
    fy = wide_t'($signed({1'b0, cfg.fy}));
    // Q16 * Q40 >>> 16 -> Q40
    su = ((wide_t'(xy2) * wide_t'(cfg.wx)) >>> 16) - ((wide_t'(b2) * wide_t'(cfg.wy)) >>> 16)
       + ((wide_t'(yn2) * wide_t'(cfg.wz)) >>> 16);
    sv = ((wide_t'(d2) * wide_t'(cfg.wx)) >>> 16) - ((wide_t'(xy2) * wide_t'(cfg.wy)) >>> 16)
       - ((wide_t'(xn2) * wide_t'(cfg.wz)) >>> 16);
    u  = (su * fx) >>> 16;                     // Q40 px/us
    v  = (sv * fy) >>> 16;
    xw3 <= 32'(wide_t'(xq2) - ((wide_t'(dt2) * u) >>> 24));
    yw3 <= 32'(wide_t'(yq2) - ((wide_t'(dt2) * v) >>> 24));
    jx0 <= 32'((fx * wide_t'(xy2)) >>> 16);
    jx1 <= 32'(-((fx * wide_t'(b2)) >>> 16));
    jx2 <= 32'((fx * wide_t'(yn2)) >>> 16);
    jy0 <= 32'((fy * wide_t'(d2)) >>> 16);
    jy1 <= 32'(-((fy * wide_t'(xy2)) >>> 16));
    jy2 <= 32'(-((fy * wide_t'(xn2)) >>> 16));
    {dt3, p3, tg3} <= {dt2, p2, tg2};
  end

  // ---- step 4: scale and Jacobian rows ------------------------------------
  logic               v4;
  logic signed [31:0] xs4, ys4;
  logic signed [31:0] rx4 [3];
  logic signed [31:0] ry4 [3];
  logic               p4;
  tag_t               tg4;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v4 <= 1'b0;
    else        v4 <= v3;
  end
  always_ff @(posedge clk) begin
    int sh;
    sh = 28 + int'(cfg.stage);                 // Q16->Q8, dt unit 2^20 us, scale s
    xs4 <= xw3 >>> cfg.stage;
    ys4 <= yw3 >>> cfg.stage;
    rx4[0] <= 32'((wide_t'(dt3) * wide_t'(jx0)) >>> sh);
    rx4[1] <= 32'((wide_t'(dt3) * wide_t'(jx1)) >>> sh);
    rx4[2] <= 32'((wide_t'(dt3) * wide_t'(jx2)) >>> sh);
    ry4[0] <= 32'((wide_t'(dt3) * wide_t'(jy0)) >>> sh);
    ry4[1] <= 32'((wide_t'(dt3) * wide_t'(jy1)) >>> sh);
    ry4[2] <= 32'((wide_t'(dt3) * wide_t'(jy2)) >>> sh);
    {p4, tg4} <= {p3, tg3};
  end

  // ---- step 5: decompose into grid cell, fraction and p_act --------------
  logic signed [15:0] x0c, y0c;
  logic               inr;
  always_comb begin
    x0c = 16'(xs4 >>> 16);
    y0c = 16'(ys4 >>> 16);
    inr = (x0c >= 0) && (y0c >= 0) &&
          (x0c < $signed({7'd0, stage_w(cfg.stage)}) - 16'sd1) &&
          (y0c < $signed({7'd0, stage_h(cfg.stage)}) - 16'sd1);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v4;
  end
  always_ff @(posedge clk) begin
    out.x0        <= x0c;
    out.y0        <= y0c;
    out.ax        <= xs4[15:0];
    out.ay        <= ys4[15:0];
    out.rx0       <= rx4[0];
    out.rx1       <= rx4[1];
    out.rx2       <= rx4[2];
    out.ry0       <= ry4[0];
    out.ry1       <= ry4[1];
    out.ry2       <= ry4[2];
    out.act_valid <= inr;
    out.p_act     <= inr ? PIXW'(32'(y0c) * 32'(stage_w(cfg.stage)) + 32'(x0c)) : '0;
    out.pol       <= p4;
    out.tag       <= tg4;
  end


endmodule
