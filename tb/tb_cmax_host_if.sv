// tb_cmax_host_if -- APB register file check.  Reads the reset values (the
// binomial kernels, zeros elsewhere), writes random values to every
// configuration register and kernel word and checks both the APB read-back
// and the decoded outputs (omega, intrinsics, t_ref, tau, taps), checks that
// START/ITER writes give one-cycle command pulses only for their own bit,
// reads the status word and every result word, and that unmapped addresses
// read as zero without side effects.
module tb_cmax_host_if;
  import cmax_pkg::*;
  localparam int NRES = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata, status = '0;
  logic pready, pslverr, cmd_start, cmd_iter;
  logic [IDXW-1:0] n_events;
  warp_cfg_t wcfg;
  logic [2:0][31:0] tau;
  logic [2:0][TAPS-1:0][7:0] coef;
  logic [NRES-1:0][31:0] res;
  cmax_host_if #(.NRES(NRES)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_start = 0, n_iter = 0;
  always @(posedge clk) begin
    if (cmd_start) n_start++;
    if (cmd_iter) n_iter++;
  end

  task automatic apb_write(logic [11:0] a, logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 1; paddr = a; pwdata = d; penable = 0;
    @(negedge clk); penable = 1;
    check(pready && !pslverr, "write response");
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask
  task automatic apb_read(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 0; paddr = a; penable = 0;
    @(negedge clk); penable = 1;
    check(pready && !pslverr, "read response");
    d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  function automatic logic [31:0] kword(int s, int w);
    logic [31:0] r = '0;
    for (int b = 0; b < 4; b++) if (4 * w + b < TAPS) r[8*b +: 8] = coef[s][4*w+b];
    return r;
  endfunction

  initial begin
    logic [31:0] d, v [16];
    logic [11:0] cfg_a [14] = '{12'h008, 12'h00C, 12'h010, 12'h014, 12'h018, 12'h01C, 12'h020,
                               12'h024, 12'h028, 12'h02C, 12'h030, 12'h034, 12'h038, 12'h03C};
    stage_t st [3] = '{ST_QUARTER, ST_HALF, ST_FULL};
    for (int i = 0; i < NRES; i++) res[i] = $urandom();
    repeat (3) @(posedge clk); rst_n = 1;
    // reset values
    for (int s = 0; s < 3; s++)
      for (int w = 0; w < 3; w++) begin
        logic [31:0] e;
        e = '0;
        for (int b = 0; b < 4; b++) if (4 * w + b < TAPS) e[8*b +: 8] = default_coef(st[s], 4 * w + b);
        apb_read(12'(12'h040 + 12 * s + 4 * w), d);
        check(d == e, $sformatf("reset kernel s%0d w%0d = %h want %h", s, w, d, e));
      end
    foreach (cfg_a[i]) begin apb_read(cfg_a[i], d); check(d == 0, "reset register zero"); end
    // configuration registers
    for (int rep = 0; rep < 20; rep++) begin
      foreach (cfg_a[i]) begin v[i] = $urandom(); apb_write(cfg_a[i], v[i]); end
      foreach (cfg_a[i]) begin
        logic [31:0] e;
        e = (i == 0) ? 32'(v[i][IDXW-1:0]) : (i == 4) ? 32'(v[i][14:0]) : v[i];
        apb_read(cfg_a[i], d);
        check(d == e, $sformatf("register %h read %h want %h", cfg_a[i], d, e));
      end
      check(n_events == v[0][IDXW-1:0] && wcfg.wx == v[1] && wcfg.wy == v[2] && wcfg.wz == v[3] &&
            wcfg.t_ref == v[4][14:0] && wcfg.fx == v[5] && wcfg.fy == v[6] && wcfg.cx == v[7] &&
            wcfg.cy == v[8] && wcfg.inv_fx == v[9] && wcfg.inv_fy == v[10], "decoded configuration");
      check(tau[0] == v[11] && tau[1] == v[12] && tau[2] == v[13], "decoded tau");
      // kernels
      for (int s = 0; s < 3; s++)
        for (int w = 0; w < 3; w++) begin
          logic [31:0] k;
          k = $urandom();
          apb_write(12'(12'h040 + 12 * s + 4 * w), k);
          if (w == 2) k = k & 32'hFF;
          apb_read(12'(12'h040 + 12 * s + 4 * w), d);
          check(d == k && kword(s, w) == k, $sformatf("kernel s%0d w%0d", s, w));
        end
    end
    // commands
    n_start = 0; n_iter = 0;
    apb_write(12'h000, 32'h1); apb_write(12'h000, 32'h2); apb_write(12'h000, 32'h2);
    apb_write(12'h000, 32'h0); apb_write(12'h004, 32'h3);
    repeat (2) @(negedge clk);
    check(n_start == 1 && n_iter == 2, $sformatf("command pulses start %0d iter %0d", n_start, n_iter));
    // status and results
    status = 32'hA5A5_0042;
    apb_read(12'h004, d); check(d == status, "status");
    for (int i = 0; i < NRES; i++) begin
      apb_read(12'(12'h100 + 4 * i), d);
      check(d == res[i], $sformatf("result word %0d", i));
    end
    apb_read(12'h0F0, d); check(d == 0, "unmapped address reads zero");
    apb_read(12'(12'h100 + 4 * NRES), d); check(d == 0, "beyond the result words reads zero");
    apb_write(12'h0F0, 32'hFFFF_FFFF);
    check(tau[0] == v[11] && wcfg.wx == v[1], "unmapped write has no effect");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
