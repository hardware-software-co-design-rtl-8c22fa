// lfsr_rng - random number generator shared by all synapses.
//
// A Fibonacci linear feedback shift register: on every time step the
// register shifts up by one bit and bit 0 takes the XOR of the tapped bits,
// so the XOR gate sits at the start of the register chain. The 6-bit width
// and the Fibonacci form follow the reference design. The taps (x^6+x^5+1,
// period 63) and the reset seed are this design's own choice; the reference
// does not name them. The all-zero state is never entered from a non-zero
// seed.
//
// Interface: clk, rst_n (synchronous, active low, loads SEED), step (shift
// once on the clock edge when high), state (the register, valid every cycle).
module lfsr_rng #(
  parameter int              WIDTH = 6,
  parameter logic [WIDTH-1:0] TAPS = 6'b110000,
  parameter logic [WIDTH-1:0] SEED = 6'b000001
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,
  output logic [WIDTH-1:0] state
);

  logic fb;
  assign fb = ^(state & TAPS);

  always_ff @(posedge clk) begin
    if (!rst_n)    state <= SEED;
    else if (step) state <= {state[WIDTH-2:0], fb};
  end

  assert property (@(posedge clk) disable iff (!rst_n) state != '0)
    else $error("lfsr_rng: locked in the all-zero state");

endmodule
