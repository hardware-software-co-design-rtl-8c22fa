// rsv_pkg - shared types and constants of the spiking reservoir.
//
// Number formats follow the reference design: membrane potentials and
// synaptic values are signed fixed point with 18 bits, 12 of them
// fractional (Fix_18_12), and the fixed synaptic weights are signed 4-bit
// values with 3 fractional bits (Fix_4_3). The default threshold (0.15),
// reset potential (1 mV) and decay constant (-0.11) are the reference values
// rounded to Fix_18_12. The default weights, the per-synapse connection
// table and the configuration address map are this design's own choices;
// the reference gives the reservoir's size and layering but not these.
package rsv_pkg;

  localparam int FIX_W    = 18;          // Fix_18_12 word
  localparam int FIX_FRAC = 12;
  localparam int WGT_W    = 4;           // Fix_4_3 weight
  localparam int LFSR_W   = 6;           // random number generator width

  localparam int N_NEURON_DEF = 8;       // 3x2x3 reservoir
  localparam int N_SYN_DEF    = 2;       // synapses per neuron (16 in all)
  localparam int N_IN_DEF     = 1;       // one spike train per utterance

  typedef logic signed [FIX_W-1:0] fix_t;
  typedef logic signed [WGT_W-1:0] wgt_t;

  localparam fix_t FIX_MAX = fix_t'({1'b0, {(FIX_W-1){1'b1}}});
  localparam fix_t FIX_MIN = fix_t'({1'b1, {(FIX_W-1){1'b0}}});
  localparam fix_t FIX_ONE = fix_t'(1 << FIX_FRAC);

  // round(x * 4096)
  localparam fix_t VTH_DEF    = fix_t'(614);    //  0.15
  localparam fix_t VRESET_DEF = fix_t'(4);      //  0.001
  localparam fix_t DECAY_DEF  = -fix_t'(451);   // -0.11

  // Source of one synapse: an external spike train or the delayed output
  // spike of a reservoir neuron.
  typedef struct packed {
    logic       is_neuron;
    logic [3:0] idx;
  } src_t;

  localparam src_t IN0 = '{is_neuron: 1'b0, idx: 4'd0};
  function automatic src_t nrn(input int unsigned i);
    return '{is_neuron: 1'b1, idx: 4'(i)};
  endfunction

  typedef src_t conn_t [N_NEURON_DEF][N_SYN_DEF];

  // Layers of the reservoir: L1 = N0 N1 N2, L2 = N3 N4, L3 = N6 N5 N7.
  // Synapse 0 of every neuron takes the input train. Synapse 1 takes the
  // delayed spike of another neuron: L2 reads L1, L3 reads L2 (N7 reads
  // N2 directly), and L1 reads L3, which closes the recurrent loops.
  localparam conn_t CONN_DEF = '{
    '{IN0, nrn(6)},   // N0 (1,1)
    '{IN0, nrn(5)},   // N1 (1,2)
    '{IN0, nrn(7)},   // N2 (1,3)
    '{IN0, nrn(0)},   // N3 (2,1)
    '{IN0, nrn(1)},   // N4 (2,2)
    '{IN0, nrn(3)},   // N5 (3,2)
    '{IN0, nrn(4)},   // N6 (3,1)
    '{IN0, nrn(2)}    // N7 (3,3)
  };

  typedef wgt_t wgts_t [N_NEURON_DEF*N_SYN_DEF];

  // Fixed weights within +-0.375, flat index = neuron*N_SYN + synapse.
  localparam wgts_t WGT_DEF = '{
     4'sd3, -4'sd2,   4'sd2, -4'sd3,   4'sd1, -4'sd1,   -4'sd3,  4'sd2,
     4'sd3,  4'sd1,  -4'sd2,  4'sd3,  -4'sd1,  4'sd2,    4'sd2, -4'sd3
  };

  // Configuration address map.
  localparam int CFG_AW        = 5;
  localparam int CFG_ADDR_VTH  = 16;
  localparam int CFG_ADDR_VRST = 17;
  localparam int CFG_ADDR_DCY  = 18;

  // Saturate a wide signed value into Fix_18_12.
  function automatic fix_t sat_fix(input logic signed [FIX_W+23:0] v);
    if (v > (FIX_W+24)'(FIX_MAX)) return FIX_MAX;
    if (v < (FIX_W+24)'(FIX_MIN)) return FIX_MIN;
    return fix_t'(v);
  endfunction

endpackage
