// tb_spike_delay - random spike vectors through a 3-step and a 1-step
// delay line with irregular step strobes, compared with a software queue.
module tb_spike_delay;
  logic       clk = 1'b0;
  logic       rst_n, step;
  logic [7:0] d, q1, q3;
  int         checks = 0, failures = 0;
  logic [7:0] hist [$];

  spike_delay #(.N(8), .DELAY(1)) dut1 (.clk, .rst_n, .step, .d, .q(q1));
  spike_delay #(.N(8), .DELAY(3)) dut3 (.clk, .rst_n, .step, .d, .q(q3));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; step = 1'b0; d = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    hist = '{8'h00, 8'h00, 8'h00};
    check(q1 == 0 && q3 == 0, "cleared");
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      d    = 8'($urandom);
      step = ($urandom_range(0, 2) != 0);
      @(negedge clk);
      if (step) begin
        hist.push_front(d);
        void'(hist.pop_back());
      end
      step = 1'b0;
      check(q1 == hist[0], $sformatf("q1 %h exp %h", q1, hist[0]));
      check(q3 == hist[2], $sformatf("q3 %h exp %h", q3, hist[2]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
