// synapse - multiplier-less synapse.
//
// The synapse replaces the weight multiplication by a logic function of
// two conditions, ANDed together:
//   * comparator: the shared random value equals this synapse's fixed
//     weight (both Fix_4_3);
//   * pulse counter: the incoming spikes, counted, have reached PULSE_CNT
//     (the present spike included); the counter then starts again.
// When both hold, the synapse emits '1', which is reduced by a right shift
// of SHIFT bits into a Fix_18_12 contribution: 1.0 >> 3 = 0.125. Otherwise
// it contributes 0. The comparator, AND gate, pulse counter and 3-bit
// reduction follow the reference design; the counter's target (default 1,
// every spike counts) and the zero contribution of the no-pulse case are
// this design's reading of it.
//
// Timing: fire and psp are combinational in the same time step as
// spike_in and rnd. The counter advances on the clock edge when step is
// high. rst_n is synchronous and active low.
module synapse
  import rsv_pkg::*;
#(
  parameter int unsigned PULSE_CNT = 1,
  parameter int unsigned SHIFT     = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  logic step,
  input  logic spike_in,
  input  wgt_t rnd,
  input  wgt_t weight,
  output logic fire,
  output fix_t psp
);

  localparam int CW = (PULSE_CNT > 1) ? $clog2(PULSE_CNT) : 1;

  logic [CW-1:0] count;
  logic          cmp_hit, cnt_hit;

  assign cmp_hit = (rnd == weight);
  assign cnt_hit = spike_in && (32'(count) + 32'd1 >= PULSE_CNT);
  assign fire    = cmp_hit && cnt_hit;
  assign psp     = fire ? (FIX_ONE >>> SHIFT) : '0;

  always_ff @(posedge clk) begin
    if (!rst_n)                count <= '0;
    else if (step && spike_in) count <= cnt_hit ? '0 : count + 1'b1;
  end

endmodule
