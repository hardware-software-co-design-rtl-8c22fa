// lif_neuron - one leaky integrate-and-fire neuron of the reservoir.
//
// N_SYN multiplier-less synapses (comparator AND pulse counter, reduced by
// a right shift) feed a saturating adder whose sum V_s(t) drives the
// leaky membrane. The composition follows the reference design's neuron:
// synapses, synaptic accumulation, membrane with decay and threshold.
//
// Interface: syn_in carries one spike per synapse for the present step,
// rnd the shared random value, weights the synapses' fixed weights;
// vth/vreset/decay_k configure the membrane. vm and spike are registers
// updated on the clock edge when step is high; syn_fire shows, in the same
// step, which synapses fired.
module lif_neuron
  import rsv_pkg::*;
#(
  parameter int          N_SYN         = 2,
  parameter int unsigned PULSE_CNT     = 1,
  parameter int unsigned SHIFT         = 3,
  parameter int unsigned REFRACT_STEPS = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,
  input  logic [N_SYN-1:0] syn_in,
  input  wgt_t             rnd,
  input  wgt_t             weights [N_SYN],
  input  fix_t             vth,
  input  fix_t             vreset,
  input  fix_t             decay_k,
  output fix_t             vm,
  output logic             spike,
  output logic             refractory,
  output logic [N_SYN-1:0] syn_fire
);

  fix_t psp [N_SYN];
  fix_t vs;

  for (genvar s = 0; s < N_SYN; s++) begin : g_syn
    synapse #(.PULSE_CNT(PULSE_CNT), .SHIFT(SHIFT)) u_syn (
      .clk, .rst_n, .step,
      .spike_in (syn_in[s]),
      .rnd,
      .weight   (weights[s]),
      .fire     (syn_fire[s]),
      .psp      (psp[s])
    );
  end

  syn_adder #(.N(N_SYN)) u_add (.psp, .sum(vs));

  membrane #(.REFRACT_STEPS(REFRACT_STEPS)) u_mem (
    .clk, .rst_n, .step, .vs, .vth, .vreset, .decay_k,
    .vm, .spike, .refractory
  );

endmodule
