// tnn_column: a P x Q TNN column with STDP learning and 1-WTA inhibition,
// assembled from the TNN7 macros.
// Clocks: aclk is the unit clock, one tick of spike time. gclk is the gamma
// clock, one rising edge per input instance; edge2pulse turns each rising edge
// into a one-cycle gamma reset grst. The grst cycle first applies STDP to all
// weights using the spike edges of the gamma cycle that just ended, then all
// edge, potential and inhibit state is cleared.
// Inputs x[P-1:0] are edge-coded (0->1 at the spike time, held until the
// gamma boundary). Per input row: edge2pulse makes a start pulse, spike_gen
// with a 3-bit state register makes the 8-cycle input spike window shared by
// the Q synapses of that row. Per neuron: P synapses feed neuron_body (adder
// tree, threshold theta), whose fire level goes through pulse2edge; the Q
// edges pass the WTA and come out as y[Q-1:0], which is also each synapse's
// output spike for STDP.
// The BRVs (brv) are generated outside and shared by all synapses.
// Timing: an input edge at cycle t starts its readout in cycle t; y can rise in
// the same cycle the potential reaches theta. A gamma cycle must be long
// enough for every window to finish before the next grst (an assertion in the
// synapse checks this): latest input time + 8 aclk cycles.
module tnn_column
  import tnn7_pkg::*;
#(
  parameter int unsigned P  = 82,
  parameter int unsigned Q  = 2,
  localparam int unsigned VW = $clog2(P * W_MAX + 1)
) (
  input  logic                     aclk,
  input  logic                     gclk,
  input  logic                     rst,
  input  logic [P-1:0]             x,
  input  logic [VW-1:0]            theta,
  input  brv_t                     brv,
  output logic [Q-1:0]             y,
  output logic [Q-1:0][P-1:0][W_BITS-1:0] weights,
  output logic                     grst
);
  logic                          grst_p;
  logic [P-1:0]                  x_pulse, x_win;
  logic [P-1:0][W_BITS-1:0]      sg_state, sg_next;
  logic [Q-1:0][P-1:0]           resp;
  logic [Q-1:0]                  fire, yedge;

  // Gamma reset from the gamma clock; rst also acts as a gamma reset.
  edge2pulse u_grst (.aclk(aclk), .rst(rst), .edge_in(gclk), .pulse_out(grst_p));
  assign grst = grst_p | rst;

  // Input encoding: edge -> pulse -> 8-cycle window.
  for (genvar i = 0; i < P; i++) begin : g_in
    edge2pulse u_e2p (.aclk(aclk), .rst(rst), .edge_in(x[i]), .pulse_out(x_pulse[i]));
    spike_gen u_sg (
      .curr_state(sg_state[i]), .in_pulse(x_pulse[i]),
      .next_state(sg_next[i]), .out(x_win[i]));
    always_ff @(posedge aclk) begin
      if (rst) sg_state[i] <= '0;
      else     sg_state[i] <= sg_next[i];
    end
  end

  // Synaptic crossbar and neuron bodies.
  for (genvar j = 0; j < Q; j++) begin : g_neuron
    for (genvar i = 0; i < P; i++) begin : g_syn
      synapse u_syn (
        .aclk(aclk), .rst(rst), .grst(grst), .input_spike(x_win[i]),
        .ein(x[i]), .eout(y[j]), .brv(brv),
        .resp(resp[j][i]), .weight(weights[j][i]));
    end
    neuron_body #(.P(P)) u_body (
      .aclk(aclk), .grst(grst), .resp(resp[j]), .theta(theta), .fire(fire[j]));
    pulse2edge u_p2e (.aclk(aclk), .grst(grst), .pulse_in(fire[j]), .edge_out(yedge[j]));
  end

  wta #(.Q(Q)) u_wta (.aclk(aclk), .grst(grst), .yin(yedge), .yout(y));
endmodule
