// tb_lif_neuron - one neuron with two synapses, driven with random spikes
// and random values against its weights; checks the synapse outputs and
// the membrane every step against the reference model. The threshold is
// lowered part of the time so that single synaptic events fire it.
module tb_lif_neuron;
  import rsv_pkg::*;
  import rsv_ref_pkg::*;

  logic       clk = 1'b0;
  logic       rst_n, step;
  logic [1:0] syn_in, syn_fire;
  wgt_t       rnd;
  wgt_t       weights [2];
  fix_t       vth, vreset, decay_k, vm;
  logic       spike, refractory;
  int         checks = 0, failures = 0;
  int         rvm, rrefr, nspk, nev;

  lif_neuron dut (.clk, .rst_n, .step, .syn_in, .rnd, .weights,
                  .vth, .vreset, .decay_k, .vm, .spike, .refractory, .syn_fire);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; step = 1'b0; syn_in = '0; rnd = '0;
    weights[0] = 4'sd3; weights[1] = -4'sd2;
    vth = VTH_DEF; vreset = VRESET_DEF; decay_k = DECAY_DEF;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    rvm = 4; rrefr = 0; nspk = 0; nev = 0;
    for (int i = 0; i < 4000; i++) begin
      int  vs;
      bit  rs;
      logic [1:0] ef;
      if (i == 2000) vth = fix_t'(400);
      syn_in = 2'($urandom);
      rnd    = ($urandom_range(0, 1) == 1) ? weights[$urandom_range(0, 1)] : wgt_t'($urandom);
      step   = 1'b1;
      #1;
      ef[0] = syn_in[0] && (rnd == weights[0]);
      ef[1] = syn_in[1] && (rnd == weights[1]);
      vs    = 512 * (int'(ef[0]) + int'(ef[1]));
      nev  += int'(ef[0]) + int'(ef[1]);
      check(syn_fire == ef, $sformatf("syn_fire %b exp %b", syn_fire, ef));
      rs = mem_step(rvm, rrefr, vs, int'(vth), int'(vreset), int'(decay_k), 1);
      @(negedge clk);
      step = 1'b0;
      nspk += rs;
      check(int'(vm) == rvm && spike == rs,
            $sformatf("step %0d vm %0d exp %0d spike %0d exp %0d", i, vm, rvm, spike, rs));
      @(negedge clk);
    end
    check(nspk > 50 && nev > 500, $sformatf("spikes %0d events %0d", nspk, nev));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
