// reservoir_top - recurrent spiking neural reservoir (liquid state machine
// core) with multiplier-less synapses.
//
// N_NEURON leaky integrate-and-fire neurons with N_SYN synapses each run
// in parallel, one time step per step strobe. All synapses compare their
// fixed weights against one shared 6-bit LFSR. Each synapse takes its
// spike from an external input train or from the delayed output spike of a
// neuron, as listed in CONN; the delay registers close the recurrent loops.
// The reservoir state, the membrane potentials of all neurons, is output
// after every step, for an external recorder and readout.
//
// From the reference design: 8 neurons in three layers (3x2x3), 16
// synapses, the shared LFSR, the fixed weights held in registers, the
// delayed feedback and the absence of any controller beyond the time
// step. This design's own choices: one input spike train (N_IN), the
// connection table CONN_DEF and default weights (rsv_pkg), the 1-step
// feedback delay and the configuration write port.
//
// Interface and timing: drive in_spikes and raise step for one clock per
// time step. On that clock edge every neuron, the LFSR and the delay line
// advance; vm and spikes then hold the new state and state_valid is high
// for one cycle. A spike that drives a neuron over threshold on step t
// shows on spikes after that edge and reaches the synapses it feeds on
// step t+1+FB_DELAY. cfg_we/cfg_addr/cfg_wdata write the configuration
// registers (see cfg_regs) at any time. rst_n is synchronous, active low.
module reservoir_top
  import rsv_pkg::*;
#(
  parameter int          N_NEURON      = N_NEURON_DEF,
  parameter int          N_SYN         = N_SYN_DEF,
  parameter int          N_IN          = N_IN_DEF,
  parameter int unsigned PULSE_CNT     = 1,
  parameter int unsigned SHIFT         = 3,
  parameter int unsigned REFRACT_STEPS = 1,
  parameter int          FB_DELAY      = 1,
  parameter src_t        CONN [N_NEURON][N_SYN] = CONN_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              step,
  input  logic [N_IN-1:0]   in_spikes,
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  fix_t              cfg_wdata,
  output fix_t              vm [N_NEURON],
  output logic [N_NEURON-1:0] spikes,
  output logic              state_valid
);

  localparam int N_W = N_NEURON * N_SYN;

  wgt_t              weights [N_W];
  fix_t              vth, vreset, decay_k;
  logic [LFSR_W-1:0] lfsr;
  wgt_t              rnd;
  logic [N_NEURON-1:0] fb;

  cfg_regs #(.N_W(N_W)) u_cfg (
    .clk, .rst_n,
    .we(cfg_we), .addr(cfg_addr), .wdata(cfg_wdata),
    .weights, .vth, .vreset, .decay_k
  );

  lfsr_rng #(.WIDTH(LFSR_W)) u_lfsr (.clk, .rst_n, .step, .state(lfsr));
  // The comparators see the low 4 bits; bits 5:4 only feed the LFSR's XOR.
  assign rnd = wgt_t'(lfsr[WGT_W-1:0]);

  spike_delay #(.N(N_NEURON), .DELAY(FB_DELAY)) u_fb (
    .clk, .rst_n, .step, .d(spikes), .q(fb)
  );

  function automatic logic pick(input src_t s, input logic [N_IN-1:0] x,
                                input logic [N_NEURON-1:0] f);
    if (s.is_neuron) return (int'(s.idx) < N_NEURON) ? f[s.idx] : 1'b0;
    else             return (int'(s.idx) < N_IN)     ? x[s.idx] : 1'b0;
  endfunction

  for (genvar n = 0; n < N_NEURON; n++) begin : g_nrn
    logic [N_SYN-1:0] syn_in;
    wgt_t             w [N_SYN];
    logic             refr;
    logic [N_SYN-1:0] syn_fire;

    for (genvar s = 0; s < N_SYN; s++) begin : g_src
      assign syn_in[s] = pick(CONN[n][s], in_spikes, fb);
      assign w[s]      = weights[n*N_SYN + s];
    end

    lif_neuron #(
      .N_SYN(N_SYN), .PULSE_CNT(PULSE_CNT), .SHIFT(SHIFT),
      .REFRACT_STEPS(REFRACT_STEPS)
    ) u_nrn (
      .clk, .rst_n, .step,
      .syn_in, .rnd, .weights(w),
      .vth, .vreset, .decay_k,
      .vm(vm[n]), .spike(spikes[n]), .refractory(refr), .syn_fire
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state_valid <= 1'b0;
    else        state_valid <= step;
  end

endmodule
