// cmax_pkg -- shared types, sizes and fixed-point formats of the CMAX engine.
//
// The engine estimates camera rotation by contrast maximisation: events are
// warped by a rotation hypothesis, voted bilinearly into an image of warped
// events (IWE) plus three derivative images (dIWE_x/y/z), blurred, and reduced
// to the variance and its gradient.  Everything the blocks exchange is defined
// here.
//
// Sizes that follow the paper: 40,000-event windows, three stages with scale
// 1/4, 1/2 and 1, 4 channels x 4 parity banks, 32-bit IWE entries and 32-bit
// event words (both implied by the memory sizes the paper reports), 9-tap
// blur.  The sensor size 240x180 is the DAVIS240C camera used by the
// evaluation data set.  All fixed-point formats are this design's own:
//   coordinates after normalisation / warp : Q16 (signed 32 bit)
//   omega                                 : signed 32 bit, unit 2^-40 rad/us
//   camera reciprocals inv_fx, inv_fy     : Q30
//   Jacobian rows r_x, r_y                : Q8, unit px per (rad / 2^20 us)
//   bilinear weights alpha                : Q16
//   IWE entries                           : Q12 ; dIWE entries : Q8
//   blur taps                             : Q8, each kernel sums to 256
package cmax_pkg;

  parameter int unsigned W_FULL  = 240;     // sensor width  (pixels)
  parameter int unsigned H_FULL  = 180;     // sensor height (pixels)
  parameter int unsigned N_MAX   = 40000;   // events per window
  parameter int unsigned P_MAX   = W_FULL * H_FULL;
  parameter int unsigned NCH     = 4;       // IWE, dIWE_x, dIWE_y, dIWE_z
  parameter int unsigned NBANK   = 4;       // parity banks per channel
  parameter int unsigned NLANE   = NCH * NBANK;
  parameter int unsigned DW      = 32;      // IWE / dIWE entry width
  parameter int unsigned TAPS    = 9;       // blur kernel, maximum taps
  parameter int unsigned IDXW    = 16;      // event index width
  parameter int unsigned PIXW    = 16;      // pixel (group) index width
  parameter int unsigned BADW    = 14;      // bank-local address width

  parameter int unsigned IWE_FRAC  = 12;
  parameter int unsigned DIWE_FRAC = 8;

  // Coarse-to-fine stages.  The encoding is the right-shift that applies s.
  typedef enum logic [1:0] {
    ST_QUARTER = 2'd2,   // s = 1/4, 3-tap blur
    ST_HALF    = 2'd1,   // s = 1/2, 5-tap blur
    ST_FULL    = 2'd0    // s = 1,   9-tap blur
  } stage_t;

  // Raw event word {p, t, y, x}: 32 bits per event.
  typedef struct packed {
    logic        p;      // 1 = positive polarity
    logic [14:0] t;      // microseconds inside the window
    logic [7:0]  y;
    logic [7:0]  x;
  } event_t;

  // Tag that travels with an event through warp and voting.
  typedef struct packed {
    logic [PIXW-1:0] p_ref;   // pixel group the event was sorted into
    logic            last;    // last_in_pg
  } tag_t;

  typedef struct packed {
    logic signed [31:0] wx, wy, wz;   // omega, 2^-40 rad/us
    logic [14:0]        t_ref;
    logic [31:0]        fx, fy;       // Q16 pixels
    logic [31:0]        cx, cy;       // Q16 pixels
    logic [31:0]        inv_fx, inv_fy; // Q30
    stage_t             stage;
  } warp_cfg_t;

  typedef struct packed {
    logic signed [15:0] x0, y0;       // floor of warped coordinate (stage grid)
    logic [15:0]        ax, ay;       // fractional part, Q16
    logic signed [31:0] rx0, rx1, rx2;  // Jacobian row x, Q8
    logic signed [31:0] ry0, ry1, ry2;  // Jacobian row y, Q8
    logic [PIXW-1:0]    p_act;
    logic               act_valid;    // warped point inside the grid
    logic               pol;
    tag_t               tag;
  } warp_out_t;

  // One bank-ordered slot of a voted event: slot b is the tap in bank b.
  typedef struct packed {
    logic [BADW-1:0]          addr;
    logic signed [NCH-1:0][DW-1:0] delta;  // [0]=IWE [1..3]=dIWE_x,y,z
  } slot_t;

  typedef struct packed {
    slot_t [NBANK-1:0] slot;
    logic [PIXW-1:0]   p_act;
    logic              act_valid;
    tag_t              tag;
  } vote_t;

  // Stage geometry helpers.
  function automatic logic [8:0] stage_w(stage_t s);
    return 9'(W_FULL >> s);
  endfunction
  function automatic logic [8:0] stage_h(stage_t s);
    return 9'((H_FULL + (1 << s) - 1) >> s);    // ceil(s*H)
  endfunction
  function automatic stage_t next_stage(stage_t s);
    return (s == ST_QUARTER) ? ST_HALF : ST_FULL;
  endfunction

  // Binomial approximations of the Gaussian used as reset values of the
  // kernel registers (Q8, sum 256).  Index 0..8, centre at 4.
  function automatic logic [7:0] default_coef(stage_t s, int k);
    logic [7:0] k9 [9] = '{8'd1, 8'd8, 8'd28, 8'd56, 8'd70, 8'd56, 8'd28, 8'd8, 8'd1};
    logic [7:0] k5 [9] = '{8'd0, 8'd0, 8'd16, 8'd64, 8'd96, 8'd64, 8'd16, 8'd0, 8'd0};
    logic [7:0] k3 [9] = '{8'd0, 8'd0, 8'd0, 8'd64, 8'd128, 8'd64, 8'd0, 8'd0, 8'd0};
    case (s)
      ST_FULL: return k9[k];
      ST_HALF: return k5[k];
      default: return k3[k];
    endcase
  endfunction

endpackage
