// cmax_host_if -- APB register file of the engine.
//
// The host writes the window size, the motion hypothesis omega, the
// reference time, the camera intrinsics, the stage thresholds tau_s and the
// blur kernels, then issues commands; it reads status, the statistics and
// the controller's decision back.  Zero-wait-state APB completer (pready is
// always 1, pslverr always 0); registers are 32 bits at word addresses.
//
//   0x000 CTRL     W: bit0 START (new window), bit1 ITER (omega updated)
//   0x004 STATUS   R: from the engine (see cmax_camel)
//   0x008 N_EVENTS 0x00C WX  0x010 WY  0x014 WZ  0x018 T_REF
//   0x01C FX  0x020 FY  0x024 CX  0x028 CY  0x02C INV_FX  0x030 INV_FY
//   0x034 TAU_Q  0x038 TAU_H  0x03C TAU_F            (Q16)
//   0x040 + 12*s + 4*w  kernel of stage s (0 = 1/4, 1 = 1/2, 2 = 1),
//                       word w holds taps 4w .. 4w+3, tap 4w in bits 7:0
//   0x100 + 4*i    R: result word i (res[i])
// Reset values: kernels are binomial approximations of the Gaussian, tau_s
// = 0, intrinsics zero.  The register map is this design's own.
module cmax_host_if
  import cmax_pkg::*;
#(
  parameter int unsigned NRES = 48
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         psel,
  input  logic                         penable,
  input  logic                         pwrite,
  input  logic [11:0]                  paddr,
  input  logic [31:0]                  pwdata,
  output logic [31:0]                  prdata,
  output logic                         pready,
  output logic                         pslverr,
  // configuration
  output logic                         cmd_start,
  output logic                         cmd_iter,
  output logic [IDXW-1:0]              n_events,
  output warp_cfg_t                    wcfg,          // stage field unused here
  output logic [2:0][31:0]             tau,
  output logic [2:0][TAPS-1:0][7:0]    coef,
  // read-back
  input  logic [31:0]                  status,
  input  logic [NRES-1:0][31:0]        res
);
  logic wr;
  assign wr      = psel && penable && pwrite;
  assign pready  = 1'b1;
  assign pslverr = 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_start <= 1'b0; cmd_iter <= 1'b0;
      n_events <= '0; wcfg <= '0; tau <= '0;
      for (int s = 0; s < 3; s++)
        for (int k = 0; k < TAPS; k++)
          coef[s][k] <= default_coef((s == 0) ? ST_QUARTER : (s == 1) ? ST_HALF : ST_FULL, k);
    end else begin
      cmd_start <= wr && (paddr == 12'h000) && pwdata[0];
      cmd_iter  <= wr && (paddr == 12'h000) && pwdata[1];
      if (wr) begin
        case (paddr)
          12'h008: n_events    <= pwdata[IDXW-1:0];
          12'h00C: wcfg.wx     <= pwdata;
          12'h010: wcfg.wy     <= pwdata;
          12'h014: wcfg.wz     <= pwdata;
          12'h018: wcfg.t_ref  <= pwdata[14:0];
          12'h01C: wcfg.fx     <= pwdata;
          12'h020: wcfg.fy     <= pwdata;
          12'h024: wcfg.cx     <= pwdata;
          12'h028: wcfg.cy     <= pwdata;
          12'h02C: wcfg.inv_fx <= pwdata;
          12'h030: wcfg.inv_fy <= pwdata;
          12'h034: tau[0]      <= pwdata;
          12'h038: tau[1]      <= pwdata;
          12'h03C: tau[2]      <= pwdata;
          default: begin
            if (paddr >= 12'h040 && paddr < 12'h064) begin
              int s, w;
              s = (int'(paddr) - 'h40) / 12;
              w = ((int'(paddr) - 'h40) % 12) / 4;
              for (int b = 0; b < 4; b++)
                if (4 * w + b < TAPS) coef[s][4*w+b] <= pwdata[8*b +: 8];
            end
          end
        endcase
      end
    end
  end

  always_comb begin
    prdata = '0;
    case (paddr)
      12'h004: prdata = status;
      12'h008: prdata = 32'(n_events);
      12'h00C: prdata = wcfg.wx;
      12'h010: prdata = wcfg.wy;
      12'h014: prdata = wcfg.wz;
      12'h018: prdata = 32'(wcfg.t_ref);
      12'h01C: prdata = wcfg.fx;
      12'h020: prdata = wcfg.fy;
      12'h024: prdata = wcfg.cx;
      12'h028: prdata = wcfg.cy;
      12'h02C: prdata = wcfg.inv_fx;
      12'h030: prdata = wcfg.inv_fy;
      12'h034: prdata = tau[0];
      12'h038: prdata = tau[1];
      12'h03C: prdata = tau[2];
      default: begin
        if (paddr >= 12'h040 && paddr < 12'h064) begin
          for (int b = 0; b < 4; b++)
            if (4 * ((int'(paddr) - 'h40) % 12 / 4) + b < TAPS)
              prdata[8*b +: 8] = coef[(int'(paddr) - 'h40) / 12][4 * ((int'(paddr) - 'h40) % 12 / 4) + b];
        end else if (paddr >= 12'h100 && 32'(paddr[11:2]) - 64 < NRES) begin
          prdata = res[32'(paddr[11:2]) - 64];
        end
      end
    endcase
  end
endmodule
