// tb_reservoir_top - end-to-end test of the reservoir at its default size
// (8 neurons, 16 synapses, one input train), against an integer reference
// model of the whole network (shared LFSR, comparators, shift-by-3 synaptic
// values, leaky membranes, 1-step feedback delay).
//
// Phase 1, the recognition workload: 200 utterances (10 digits x 20) of
// 280 time steps each, with Poisson-like input trains whose rate depends on
// the digit. The reservoir is reset before each utterance and the eight
// membrane potentials are sampled at steps 50, 100, 150, 200 and 250,
// giving 40 values per utterance for an external readout. Every step the
// potentials and spikes are compared with the model.
// Phase 2: a lower threshold written through the configuration port, new
// weights, and irregular step strobes (stalls) during which nothing may
// change. Phase 3: decay 0 and the largest threshold, driving membranes
// into saturation. Each mechanism is counted and must occur.
module tb_reservoir_top;
  import rsv_pkg::*;
  import rsv_ref_pkg::*;

  localparam int NN = 8, NS = 2;

  logic              clk = 1'b0;
  logic              rst_n, step;
  logic [0:0]        in_spikes;
  logic              cfg_we;
  logic [CFG_AW-1:0] cfg_addr;
  fix_t              cfg_wdata;
  fix_t              vm [NN];
  logic [NN-1:0]     spikes;
  logic              state_valid;

  reservoir_top dut (.clk, .rst_n, .step, .in_spikes, .cfg_we, .cfg_addr,
                     .cfg_wdata, .vm, .spikes, .state_valid);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // reference state
  int r_lfsr, r_vm [NN], r_refr [NN], r_w [NN*NS], r_vth, r_vr, r_k;
  bit r_spk [NN], r_fb [NN];
  // mechanism counters
  int n_syn_ev, n_fb_ev, n_blocked, n_spk, n_refr, n_sat, n_stall, n_cfg, n_states;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ref_reset();
    int dw [16] = '{3, -2, 2, -3, 1, -1, -3, 2, 3, 1, -2, 3, -1, 2, 2, -3};
    r_lfsr = 1;
    foreach (r_vm[n]) begin r_vm[n] = 4; r_refr[n] = 0; r_spk[n] = 0; r_fb[n] = 0; end
    r_w = dw; r_vth = 614; r_vr = 4; r_k = -451;
  endtask

  task automatic do_reset();
    @(negedge clk);
    rst_n = 1'b0; step = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    ref_reset();
  endtask

  task automatic cfg_write(input int a, input int v);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = CFG_AW'(a); cfg_wdata = fix_t'(v);
    @(negedge clk);
    cfg_we = 1'b0;
    n_cfg++;
    if (a < 16) r_w[a] = ((v & 15) >= 8) ? (v & 15) - 16 : (v & 15);
    else if (a == 16) r_vth = v;
    else if (a == 17) r_vr = v;
    else if (a == 18) r_k = v;
  endtask

  // One time step of the reference network.
  task automatic ref_step(input bit x);
    int  rnd;
    bit  nspk [NN];
    rnd = rnd_of(r_lfsr);
    for (int n = 0; n < NN; n++) begin
      int vs = 0;
      for (int s = 0; s < NS; s++) begin
        src_t c = CONN_DEF[n][s];
        bit   sp = c.is_neuron ? r_fb[c.idx] : x;
        bit   hit = (rnd == r_w[n*NS+s]);
        if (sp && hit) begin
          vs += 512;
          n_syn_ev++;
          if (c.is_neuron) n_fb_ev++;
        end
        if (sp && !hit) n_blocked++;
      end
      if (r_refr[n] > 0) n_refr++;
      else if (longint'(r_vm[n]) + vs + floor4096(longint'(r_vm[n] - r_vr) * r_k) > FMAX) n_sat++;
      nspk[n] = mem_step(r_vm[n], r_refr[n], vs, r_vth, r_vr, r_k, 1);
      n_spk += nspk[n];
    end
    r_fb   = r_spk;
    r_spk  = nspk;
    r_lfsr = lfsr_next(r_lfsr);
  endtask

  task automatic compare(input string when);
    for (int n = 0; n < NN; n++) begin
      check(int'(vm[n]) == r_vm[n], $sformatf("%s vm[%0d]=%0d exp %0d", when, n, vm[n], r_vm[n]));
      check(spikes[n] == r_spk[n], $sformatf("%s spike[%0d]=%0d exp %0d", when, n, spikes[n], r_spk[n]));
    end
  endtask

  // Drive one time step; 'stall' idle cycles precede it.
  task automatic do_step(input bit x, input int stall);
    for (int i = 0; i < stall; i++) begin
      @(negedge clk);
      in_spikes = 1'($urandom);
      #1 compare("stall");
      n_stall++;
    end
    @(negedge clk);
    in_spikes = x; step = 1'b1;
    @(negedge clk);
    step = 1'b0;
    ref_step(x);
    check(state_valid == 1'b1, "state_valid one cycle after step");
    compare("step");
    @(posedge clk) #1;
    check(state_valid == 1'b0, "state_valid single cycle");
  endtask

  initial begin
    int total_spk1;
    rst_n = 1'b0; step = 1'b0; in_spikes = '0;
    cfg_we = 1'b0; cfg_addr = '0; cfg_wdata = '0;
    n_syn_ev = 0; n_fb_ev = 0; n_blocked = 0; n_spk = 0; n_refr = 0;
    n_sat = 0; n_stall = 0; n_cfg = 0; n_states = 0;
    repeat (3) @(posedge clk);

    // Phase 1: 10 digits x 20 utterances x 280 steps, default configuration
    for (int u = 0; u < 200; u++) begin
      int rate = 20 + 4 * (u / 20);     // percent, per digit
      do_reset();
      compare("reset");
      for (int t = 1; t <= 280; t++) begin
        do_step($urandom_range(0, 99) < rate, 0);
        if (t % 50 == 0 && t <= 250) n_states++;
      end
      if (u == 0) begin
        $display("utterance 0 final state (Fix_18_12):");
        for (int n = 0; n < NN; n++) $display("  N%0d vm=%0d", n, vm[n]);
      end
    end
    total_spk1 = n_spk;
    $display("phase 1: %0d synaptic events, %0d spikes, %0d state samples",
             n_syn_ev, total_spk1, n_states);

    // Phase 2: lower threshold, new weights, stalls
    do_reset();
    cfg_write(16, 300);
    for (int i = 0; i < 16; i++) cfg_write(i, $urandom_range(0, 15));
    cfg_write(16, 300);
    for (int t = 0; t < 600; t++) do_step($urandom_range(0, 1), $urandom_range(0, 2));

    // Phase 3: no leak, unreachable threshold -> saturation
    cfg_write(18, 0);
    cfg_write(16, 131071);
    cfg_write(17, 0);
    for (int t = 0; t < 8000; t++) do_step(1'b1, 0);

    $display("mechanisms: syn_events=%0d feedback_events=%0d blocked=%0d spikes=%0d refractory=%0d saturations=%0d stalls=%0d cfg_writes=%0d states=%0d",
             n_syn_ev, n_fb_ev, n_blocked, n_spk, n_refr, n_sat, n_stall, n_cfg, n_states);
    check(n_syn_ev > 0,   "synaptic events occurred");
    check(n_fb_ev > 0,    "feedback synaptic events occurred");
    check(n_blocked > 0,  "spikes blocked by the comparator occurred");
    check(total_spk1 > 0, "neurons fired under the default configuration");
    check(n_refr > 0,     "refractory steps occurred");
    check(n_sat > 0,      "saturation occurred");
    check(n_stall > 0,    "stalls occurred");
    check(n_cfg > 0,      "configuration writes occurred");
    check(n_states == 1000, "40-value state vectors sampled for every utterance");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
