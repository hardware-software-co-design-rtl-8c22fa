// tb_cfg_regs - reset defaults of the configuration registers, then random
// writes (including unmapped addresses) against a shadow copy.
module tb_cfg_regs;
  import rsv_pkg::*;

  logic              clk = 1'b0;
  logic              rst_n, we;
  logic [CFG_AW-1:0] addr;
  fix_t              wdata;
  wgt_t              weights [16];
  fix_t              vth, vreset, decay_k;
  int                checks = 0, failures = 0;
  int                sh_w [16];
  int                sh_vth, sh_vr, sh_k;

  cfg_regs dut (.clk, .rst_n, .we, .addr, .wdata, .weights, .vth, .vreset, .decay_k);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic compare(input string when);
    for (int i = 0; i < 16; i++)
      check(int'(weights[i]) == sh_w[i], $sformatf("%s w[%0d]=%0d exp %0d", when, i, weights[i], sh_w[i]));
    check(int'(vth) == sh_vth, $sformatf("%s vth %0d", when, vth));
    check(int'(vreset) == sh_vr, $sformatf("%s vreset %0d", when, vreset));
    check(int'(decay_k) == sh_k, $sformatf("%s decay %0d", when, decay_k));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // expected defaults, written out: 0.15, 1 mV, -0.11 in Fix_18_12
    int dw [16] = '{3, -2, 2, -3, 1, -1, -3, 2, 3, 1, -2, 3, -1, 2, 2, -3};
    rst_n = 1'b0; we = 1'b0; addr = '0; wdata = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    sh_w = dw; sh_vth = 614; sh_vr = 4; sh_k = -451;
    compare("reset");
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      we    = ($urandom_range(0, 3) != 0);
      addr  = CFG_AW'($urandom_range(0, 31));
      wdata = fix_t'($urandom);
      @(negedge clk);
      if (we) begin
        if (addr < 16)       sh_w[addr] = (int'(wdata[3:0]) >= 8) ? int'(wdata[3:0]) - 16 : int'(wdata[3:0]);
        else if (addr == 16) sh_vth = int'(wdata);
        else if (addr == 17) sh_vr  = int'(wdata);
        else if (addr == 18) sh_k   = int'(wdata);
      end
      we = 1'b0;
      compare($sformatf("write %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
