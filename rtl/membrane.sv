// membrane - leaky integrate-and-fire membrane.
//
// One time step computes
//     leak  = ((V(t-1) - V_reset) * decay_k) >>> FRAC
//     V'    = sat(V(t-1) + V_s(t) + leak)
// With decay_k = -0.11 the potential relaxes exponentially towards V_reset
// when no synaptic input arrives; the leak uses the neuron's only
// multiplier. If V' >= V_th the neuron fires: spike goes high for that step
// and the potential is reset to V_reset. For the next REFRACT_STEPS steps
// the neuron is refractory: its input is ignored and the potential is held
// at V_reset, so it cannot fire.
//
// From the reference design: the 18-bit accumulator with 12 fractional
// bits, the adder/accumulator/decay/threshold-comparator structure, the
// reset after a spike, and the programmable threshold and decay constant.
// This design's own choices: the leak formula (the reference names an
// exponential decay towards V_reset and one multiplier, not the formula),
// truncation of the product, saturation at the Fix_18_12 limits and the
// refractory length. The accumulator register and the output register of
// the reference diagram are one register here; the spike is registered
// together with the reset.
//
// Timing: state changes on the clock edge when step is high; vm, spike
// and refractory are registers and hold between steps. rst_n is
// synchronous and active low and loads V_reset.
module membrane
  import rsv_pkg::*;
#(
  parameter int unsigned REFRACT_STEPS = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic step,
  input  fix_t vs,
  input  fix_t vth,
  input  fix_t vreset,
  input  fix_t decay_k,
  output fix_t vm,
  output logic spike,
  output logic refractory
);

  localparam int RW = (REFRACT_STEPS > 1) ? $clog2(REFRACT_STEPS + 1) : 1;
  localparam int XW = FIX_W + 24;

  logic [RW-1:0]         refr_cnt;
  logic signed [XW-1:0]  prod, leak;
  fix_t                  v_next;
  logic                  fire;

  always_comb begin
    prod   = ((XW)'(vm) - (XW)'(vreset)) * (XW)'(decay_k);
    leak   = prod >>> FIX_FRAC;
    v_next = sat_fix((XW)'(vm) + (XW)'(vs) + leak);
    fire   = (v_next >= vth);
  end

  assign refractory = (refr_cnt != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vm       <= vreset;
      spike    <= 1'b0;
      refr_cnt <= '0;
    end else if (step) begin
      if (refractory) begin
        vm       <= vreset;
        spike    <= 1'b0;
        refr_cnt <= refr_cnt - 1'b1;
      end else if (fire) begin
        vm       <= vreset;
        spike    <= 1'b1;
        refr_cnt <= RW'(REFRACT_STEPS);
      end else begin
        vm       <= v_next;
        spike    <= 1'b0;
      end
    end
  end

  // Crossing the threshold fires and resets the membrane on the same edge.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (step && !refractory && fire) |=> (spike && vm == $past(vreset)))
    else $error("membrane: threshold crossed without spike and reset");

endmodule
