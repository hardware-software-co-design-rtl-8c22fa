// syn_adder - synaptic accumulation of one neuron, V_s(t) = sum of the
// reduced synaptic values (Eq. 1 of the reference model).
//
// A combinational sum of N Fix_18_12 inputs, computed wide and saturated to
// the Fix_18_12 limits. The reference calls for a chain of adders; the
// saturation is this design's choice.
module syn_adder
  import rsv_pkg::*;
#(
  parameter int N = 2
) (
  input  fix_t psp [N],
  output fix_t sum
);

  logic signed [FIX_W+23:0] acc;

  always_comb begin
    acc = '0;
    for (int i = 0; i < N; i++) acc += (FIX_W+24)'(psp[i]);
    sum = sat_fix(acc);
  end

endmodule
