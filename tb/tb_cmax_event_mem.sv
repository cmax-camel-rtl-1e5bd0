// tb_cmax_event_mem -- writes random event words to random addresses of the
// event memory and reads them back, checking data and the one-cycle read
// latency (rd_data changes only on the clock after rd_en).
module tb_cmax_event_mem;
  import cmax_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [IDXW-1:0] wr_addr = '0, rd_addr = '0;
  event_t wr_data = '0, rd_data;
  cmax_event_mem dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  event_t model [int];
  initial begin
    int a;
    event_t prev;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      a = (i < 10) ? N_MAX - 1 - i : $urandom_range(0, N_MAX - 1);
      wr_en = 1; wr_addr = IDXW'(a); wr_data = event_t'($urandom);
      model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    foreach (model[k]) begin
      @(negedge clk); rd_en = 1; rd_addr = IDXW'(k); prev = rd_data;
      #1 check(rd_data == prev, "read data must not change before the clock");
      @(negedge clk); rd_en = 0;
      check(rd_data == model[k], $sformatf("addr %0d: %h vs %h", k, rd_data, model[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
