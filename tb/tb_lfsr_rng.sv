// tb_lfsr_rng - checks the random number generator against the reference
// sequence, its hold when no step is given, and its period of 63 steps
// (no earlier repeat of the seed).
module tb_lfsr_rng;
  import rsv_ref_pkg::*;

  logic       clk = 1'b0;
  logic       rst_n, step;
  logic [5:0] state;
  int         checks = 0, failures = 0;
  int         ref_s, period;

  lfsr_rng dut (.clk, .rst_n, .step, .state);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; step = 1'b0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); #1;
    check(state == 6'd1, "seed after reset");
    ref_s = 1; period = 0;
    for (int i = 1; i <= 200; i++) begin
      step <= ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (step) begin
        ref_s = lfsr_next(ref_s);
        if (period == 0 && ref_s == 1) period = i;
      end
      check(int'(state) == ref_s, $sformatf("state %0d vs ref %0d", state, ref_s));
      check(state != 6'd0, "non-zero");
    end
    // period: count steps from the seed until it returns
    rst_n <= 1'b0; step <= 1'b0;
    @(posedge clk); rst_n <= 1'b1; step <= 1'b1;
    @(posedge clk); #1;
    period = 1;
    while (state != 6'd1 && period < 100) begin
      @(posedge clk); #1;
      period++;
    end
    check(period == 63, $sformatf("period %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
