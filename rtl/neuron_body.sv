// neuron_body: excitatory neuron body of a TNN column. Every aclk cycle it
// adds the P unary synapse responses (an adder tree over `resp`) into the body
// potential, which therefore ramps as the RNL responses are integrated. fire
// goes high in the first cycle the running sum (potential plus this cycle's
// responses) reaches theta; the potential is cleared by grst. fire is a level
// that stays high while the sum is at or above theta; pulse2edge turns it into
// the neuron's output edge. theta is a run-time input because no threshold is
// fixed by the design.
module neuron_body
  import tnn7_pkg::*;
#(
  parameter int unsigned P  = 82,
  localparam int unsigned VW = $clog2(P * W_MAX + 1)
) (
  input  logic          aclk,
  input  logic          grst,
  input  logic [P-1:0]  resp,
  input  logic [VW-1:0] theta,
  output logic          fire
);
  localparam int unsigned CW = $clog2(P + 1);

  logic [VW-1:0] potential, sum;
  logic [CW-1:0] count;

  always_comb begin
    count = '0;
    for (int i = 0; i < P; i++) count += CW'(resp[i]);
  end

  // Saturating add: the potential cannot exceed P * W_MAX within one gamma
  // cycle unless an input is stretched into several windows.
  logic [VW:0] wide;
  assign wide = {1'b0, potential} + (VW+1)'(count);
  assign sum  = wide[VW] ? '1 : wide[VW-1:0];
  assign fire = (sum >= theta);

  always_ff @(posedge aclk) begin
    if (grst) potential <= '0;
    else      potential <= sum;
  end
endmodule
