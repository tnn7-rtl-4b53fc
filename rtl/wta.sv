// wta: 1-winner-take-all lateral inhibition over the Q neuron output edges.
// Each edge yin[i] goes through a less_equal whose inhibit input is the OR of
// all Q edges, i.e. the earliest spike of the column: neurons that fire after
// the first spike are suppressed, neurons firing in the same aclk cycle as it
// all pass. A priority pick then keeps only the lowest-index survivor, so at
// most one output edge is high per gamma cycle. That tie break is this
// design's choice. Edges in, edges out; yout follows yin combinationally and
// the suppression state is cleared by grst.
module wta #(
  parameter int unsigned Q = 2
) (
  input  logic         aclk,
  input  logic         grst,
  input  logic [Q-1:0] yin,
  output logic [Q-1:0] yout
);
  logic         first;
  logic [Q-1:0] passed;

  assign first = |yin;

  for (genvar i = 0; i < Q; i++) begin : g_le
    less_equal u_le (
      .aclk(aclk), .grst(grst), .data_in(yin[i]), .inhibit(first), .out(passed[i]));
  end

  // Lowest-index survivor wins: passed & -passed isolates the lowest set bit.
  assign yout = passed & (~passed + 1'b1);

  a_one_winner: assert property (@(posedge aclk) $onehot0(yout));
endmodule
