// tb_cmax_iwe_mem -- full-size (240 x 180) check of the banked image memory.
// Measures the reset sweep (one entry per clock of every bank), then issues
// random read-modify-write commits on all 16 lanes (respecting the writer's
// rule that a lane never repeats an address in consecutive cycles), reads
// every entry of both row parities through the streaming port and compares
// with a behavioural sum, and finally reads everything again to confirm
// that the first read cleared the images.
module tb_cmax_iwe_mem;
  import cmax_pkg::*;
  localparam int W = W_FULL, H = H_FULL;
  localparam int BD = ((H + 1) / 2) * ((W + 1) / 2);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NLANE-1:0] cmt_valid = '0;
  logic [NLANE-1:0][BADW-1:0] cmt_addr = '0;
  logic [NLANE-1:0][DW-1:0] cmt_delta = '0;
  logic rd_en = 0, rd_row_odd = 0;
  logic [BADW-1:0] rd_addr = '0;
  logic [NCH-1:0][1:0][DW-1:0] rd_data;
  logic init_busy;
  cmax_iwe_mem #(.W(W), .H(H)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int model [NLANE][BD];

  task automatic read_all(bit expect_zero);
    for (int rp = 0; rp < 2; rp++)
      for (int a = 0; a < BD; a++) begin
        @(negedge clk); rd_en = 1; rd_row_odd = rp[0]; rd_addr = BADW'(a);
        @(negedge clk); rd_en = 0;
        for (int c = 0; c < NCH; c++)
          for (int xp = 0; xp < 2; xp++) begin
            int l;
            l = c * NBANK + rp * 2 + xp;
            check(rd_data[c][xp] == DW'(expect_zero ? 0 : model[l][a]),
                  $sformatf("lane %0d addr %0d got %0d want %0d", l, a, $signed(rd_data[c][xp]),
                            expect_zero ? 0 : model[l][a]));
          end
      end
  endtask

  initial begin
    int cyc = 0;
    logic [NLANE-1:0][BADW-1:0] prev_a;
    logic [NLANE-1:0] prev_v;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    while (init_busy) begin cyc++; @(negedge clk); end
    check(cyc >= BD - 1 && cyc <= BD + 1, $sformatf("reset sweep took %0d cycles, bank depth %0d", cyc, BD));
    prev_v = '0; prev_a = '0;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      for (int l = 0; l < NLANE; l++) begin
        int a;
        cmt_valid[l] = ($urandom_range(0, 3) != 0);
        // hot spot on a few addresses to exercise repeated read-modify-write
        a = ($urandom_range(0, 1) != 0) ? $urandom_range(0, 7) : $urandom_range(0, BD - 1);
        if (prev_v[l] && prev_a[l] == BADW'(a)) a = (a + 1) % BD;
        cmt_addr[l] = BADW'(a);
        cmt_delta[l] = DW'($urandom_range(0, 200000) - 100000);
        if (cmt_valid[l]) model[l][a] += int'(cmt_delta[l]);
      end
      prev_v = cmt_valid; prev_a = cmt_addr;
    end
    @(negedge clk); cmt_valid = '0;
    @(negedge clk);
    read_all(0);
    read_all(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
