// tb_cmax_stats -- feeds random blurred pixel pairs (full 32-bit signed
// range, so the products need the wide accumulators) with random gaps and
// compares S1, S2, G_j and T_j with 128-bit behavioural sums; then checks
// that clear zeroes every sum and that a second, small run starts from zero.
module tb_cmax_stats;
  import cmax_pkg::*;
  localparam int AW = 96;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0;
  logic signed [1:0][DW-1:0] iwe = '0;
  logic signed [2:0][1:0][DW-1:0] diwe = '0;
  logic signed [AW-1:0] s1, s2;
  logic signed [2:0][AW-1:0] g, t;
  cmax_stats #(.AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef logic signed [127:0] w_t;
  w_t m1, m2, mg [3], mt [3];

  task automatic run(int n, int mag);
    m1 = 0; m2 = 0; mg = '{0, 0, 0}; mt = '{0, 0, 0};
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      for (int q = 0; q < 2; q++) begin
        iwe[q] = DW'($urandom()) >>> mag;
        for (int j = 0; j < 3; j++) diwe[j][q] = DW'($urandom()) >>> mag;
        if (in_valid) begin
          m1 += w_t'($signed(iwe[q]));
          m2 += w_t'($signed(iwe[q])) * w_t'($signed(iwe[q]));
          for (int j = 0; j < 3; j++) begin
            mg[j] += w_t'($signed(iwe[q])) * w_t'($signed(diwe[j][q]));
            mt[j] += w_t'($signed(diwe[j][q]));
          end
        end
      end
    end
    @(negedge clk); in_valid = 0;
    @(negedge clk);
    check(w_t'(s1) == m1, "S1");
    check(w_t'(s2) == m2, "S2");
    for (int j = 0; j < 3; j++) begin
      check(w_t'($signed(g[j])) == mg[j], $sformatf("G%0d", j));
      check(w_t'($signed(t[j])) == mt[j], $sformatf("T%0d %0d %0d", j, t[j], mt[j]));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      run(r == 0 ? 43200 : 500 * r, r % 3 * 8);
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      check(s1 == 0 && s2 == 0 && g == '0 && t == '0, "clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
