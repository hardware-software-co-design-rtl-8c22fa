// tb_synapse - drives two synapses (pulse-counter target 1 and 3) with
// random spikes, random values and weights, and compares fire and the
// reduced value (0 or 0.125 = 512) with a reference model in the same step.
module tb_synapse;
  import rsv_pkg::*;

  logic clk = 1'b0;
  logic rst_n, step, spike_in;
  wgt_t rnd, weight;
  logic fire1, fire3;
  fix_t psp1, psp3;
  int   checks = 0, failures = 0;
  int   cnt3, nfire1, nfire3;

  synapse #(.PULSE_CNT(1)) dut1 (.clk, .rst_n, .step, .spike_in, .rnd, .weight,
                                 .fire(fire1), .psp(psp1));
  synapse #(.PULSE_CNT(3)) dut3 (.clk, .rst_n, .step, .spike_in, .rnd, .weight,
                                 .fire(fire3), .psp(psp3));

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
    bit e1, e3, match;
    rst_n = 1'b0; step = 1'b0; spike_in = 1'b0; rnd = '0; weight = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    cnt3 = 0; nfire1 = 0; nfire3 = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      step     = 1'b1;
      spike_in = ($urandom_range(0, 1) == 1);
      weight   = wgt_t'($urandom_range(0, 3));
      rnd      = wgt_t'($urandom_range(0, 3));
      #1;
      match = (rnd == weight);
      e1 = spike_in && match;
      e3 = spike_in && match && (cnt3 == 2);
      check(fire1 == e1, $sformatf("fire1 %0d exp %0d", fire1, e1));
      check(psp1 == (e1 ? 18'sd512 : 18'sd0), $sformatf("psp1 %0d", psp1));
      check(fire3 == e3, $sformatf("fire3 %0d exp %0d (cnt %0d)", fire3, e3, cnt3));
      check(psp3 == (e3 ? 18'sd512 : 18'sd0), $sformatf("psp3 %0d", psp3));
      if (spike_in) cnt3 = (cnt3 == 2) ? 0 : cnt3 + 1;
      nfire1 += e1; nfire3 += e3;
    end
    check(nfire1 > 50 && nfire3 > 10, $sformatf("fired %0d/%0d", nfire1, nfire3));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
