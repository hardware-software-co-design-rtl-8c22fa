// cfg_regs - registers holding the reservoir's programmable values.
//
// Holds the N_W fixed synaptic weights (Fix_4_3), the firing threshold,
// the reset potential and the decay constant (Fix_18_12). Reset loads the
// defaults of rsv_pkg (threshold 0.15, reset 1 mV, decay -0.11, as in the
// reference design; the weight values are this design's own). A write
// with we high on a clock edge stores wdata at addr:
//     0 .. N_W-1  weight (wdata[3:0])
//     16          threshold V_th
//     17          reset potential V_reset
//     18          decay constant
// Other addresses are ignored. Outputs are registers. The write port and
// address map are this design's own.
module cfg_regs
  import rsv_pkg::*;
#(
  parameter int    N_W     = 16,
  parameter wgts_t WGT_INIT = WGT_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [CFG_AW-1:0] addr,
  input  fix_t              wdata,
  output wgt_t              weights [N_W],
  output fix_t              vth,
  output fix_t              vreset,
  output fix_t              decay_k
);

  localparam int IW = (N_W > 1) ? $clog2(N_W) : 1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_W; i++) weights[i] <= WGT_INIT[i % (N_NEURON_DEF*N_SYN_DEF)];
      vth     <= VTH_DEF;
      vreset  <= VRESET_DEF;
      decay_k <= DECAY_DEF;
    end else if (we) begin
      if (int'(addr) < N_W)               weights[addr[IW-1:0]] <= wgt_t'(wdata[WGT_W-1:0]);
      else if (int'(addr) == CFG_ADDR_VTH)  vth     <= wdata;
      else if (int'(addr) == CFG_ADDR_VRST) vreset  <= wdata;
      else if (int'(addr) == CFG_ADDR_DCY)  decay_k <= wdata;
    end
  end

  initial assert (N_W <= CFG_ADDR_VTH) else $fatal(1, "cfg_regs: N_W overlaps the scalar registers");

endmodule
