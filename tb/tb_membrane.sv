// tb_membrane - leaky integrate-and-fire membrane.
// Directed part, default constants (V_th 0.15, V_reset 1 mV, k -0.11) and
// 0.125 of input per step: 4 -> 516 -> fire on the 2nd step (516+512-57),
// then one refractory step held at 4, then integration again. Random part:
// random inputs and constants (saturation included) against the reference
// model, every step, with idle cycles between steps that must hold state.
module tb_membrane;
  import rsv_pkg::*;
  import rsv_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n, step;
  fix_t vs, vth, vreset, decay_k, vm;
  logic spike, refractory;
  int   checks = 0, failures = 0;
  int   rvm, rrefr, nspk, nsat, nrefr;
  bit   rspk;

  membrane dut (.clk, .rst_n, .step, .vs, .vth, .vreset, .decay_k,
                .vm, .spike, .refractory);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic do_step(input int v);
    @(negedge clk);
    vs = fix_t'(v); step = 1'b1;
    @(negedge clk);
    step = 1'b0;
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; step = 1'b0; vs = '0;
    vth = VTH_DEF; vreset = VRESET_DEF; decay_k = DECAY_DEF;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(vm == 18'sd4 && !spike, "reset value");
    do_step(512);
    check(vm == 18'sd516 && !spike, $sformatf("step1 vm %0d", vm));
    do_step(512);
    check(vm == 18'sd4 && spike && refractory, $sformatf("step2 fire, vm %0d spk %0d", vm, spike));
    repeat (3) @(negedge clk);
    check(vm == 18'sd4 && spike, "hold between steps");
    do_step(512);
    check(vm == 18'sd4 && !spike && !refractory, $sformatf("refractory step vm %0d", vm));
    do_step(512);
    check(vm == 18'sd516 && !spike, $sformatf("after refractory vm %0d", vm));
    do_step(0);
    // 516 + ((512 * -451) >> 12) = 516 - 57
    check(vm == 18'sd459, $sformatf("decay vm %0d", vm));

    // random part
    rvm = int'(vm); rrefr = 0; nspk = 0; nsat = 0; nrefr = 0;
    for (int i = 0; i < 3000; i++) begin
      int v;
      if (i % 500 == 0) begin
        vth     = fix_t'($urandom_range(100, 3000));
        vreset  = fix_t'($urandom_range(0, 50));
        decay_k = (i % 1000 == 0) ? fix_t'(0) : -fix_t'($urandom_range(0, 1000));
        if (i == 1500) vth = FIX_MAX;
      end
      case ($urandom_range(0, 4))
        0:       v = 0;
        1:       v = 512;
        2:       v = 1024;
        3:       v = (i >= 1500 && i < 2000) ? 60000 : 256;
        default: v = -int'($urandom_range(0, 600));
      endcase
      if (rrefr == 0 &&
          longint'(rvm) + v + floor4096(longint'(rvm - int'(vreset)) * int'(decay_k)) > FMAX)
        nsat++;
      rspk = mem_step(rvm, rrefr, v, int'(vth), int'(vreset), int'(decay_k), 1);
      do_step(v);
      if (rspk) nspk++;
      if (refractory) nrefr++;
      check(int'(vm) == rvm && spike == rspk,
            $sformatf("rand %0d vm %0d exp %0d spk %0d exp %0d", i, vm, rvm, spike, rspk));
    end
    check(nspk > 20, $sformatf("spikes %0d", nspk));
    check(nsat > 0, $sformatf("saturations %0d", nsat));
    check(nrefr > 20, $sformatf("refractory %0d", nrefr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
