// cmax_stats -- on-the-fly statistics of the blurred images.
//
// As blurred pixels leave the four blur modules (in lockstep, two pixels per
// clock), this block accumulates
//   S1 = sum I,  S2 = sum I^2,  G_j = sum I * D_j,  T_j = sum D_j  (j = x,y,z)
// where I is the blurred IWE and D_j the blurred dIWE_j.  From these the
// variance S2/P - (S1/P)^2 and the gradient 2/P (G_j - S1 T_j / P) follow
// without any image-sized buffer for the blurred images (the paper's
// formulation).  Formats: I is Q12, D_j is Q8, so S1 is Q12, S2 Q24, G_j Q20
// and T_j Q8, all in AW-bit signed accumulators.  clear zeroes the sums.
// Results are valid one clock after the last in_valid.
module cmax_stats
  import cmax_pkg::*;
#(
  parameter int unsigned AW = 96
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             clear,
  input  logic                             in_valid,
  input  logic signed [1:0][DW-1:0]        iwe,
  input  logic signed [2:0][1:0][DW-1:0]   diwe,     // [j][pixel]
  output logic signed [AW-1:0]             s1,
  output logic signed [AW-1:0]             s2,
  output logic signed [2:0][AW-1:0]        g,
  output logic signed [2:0][AW-1:0]        t
);
  typedef logic signed [AW-1:0] acc_t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; g <= '0; t <= '0;
    end else if (clear) begin
      s1 <= '0; s2 <= '0; g <= '0; t <= '0;
    end else if (in_valid) begin
      acc_t i0, i1;
      i0 = acc_t'($signed(iwe[0]));
      i1 = acc_t'($signed(iwe[1]));
      s1 <= s1 + i0 + i1;
      s2 <= s2 + i0 * i0 + i1 * i1;
      for (int j = 0; j < 3; j++) begin
        g[j] <= g[j] + i0 * acc_t'($signed(diwe[j][0])) + i1 * acc_t'($signed(diwe[j][1]));
        t[j] <= t[j] + acc_t'($signed(diwe[j][0])) + acc_t'($signed(diwe[j][1]));
      end
    end
  end
endmodule
