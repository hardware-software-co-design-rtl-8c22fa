// spike_delay - delay registers on the reservoir's feedback path.
//
// Each of the N spike lines passes through DELAY registers that advance
// once per time step, so a neuron's output spike reaches the synapses it
// feeds DELAY steps after it leaves the neuron's own output register. The
// reference design names delayed registers for the feedback; the delay
// length (default 1) is this design's choice. DELAY = 0 is a wire.
// rst_n is synchronous and active low and clears the line.
module spike_delay #(
  parameter int N     = 8,
  parameter int DELAY = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  input  logic [N-1:0] d,
  output logic [N-1:0] q
);

  if (DELAY == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [N-1:0] line [DELAY];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int i = 0; i < DELAY; i++) line[i] <= '0;
      end else if (step) begin
        line[0] <= d;
        for (int i = 1; i < DELAY; i++) line[i] <= line[i-1];
      end
    end
    assign q = line[DELAY-1];
  end

endmodule
