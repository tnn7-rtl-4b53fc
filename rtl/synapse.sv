// synapse: one synapse of a TNN column, built from the TNN7 macros.
// Inference: a 3-bit weight register is decremented every aclk cycle of the
// input spike window (syn_weight_update) and read out by syn_readout, giving
// `weight` cycles of unary response `resp` - the ramp-no-leak response once
// summed in the neuron body.
// Learning (STDP): less_equal(ein, eout) tells whether the input arrived no
// later than the output; its negation is GREATER for stdp_case_gen. incdec
// combines the case with the BRVs and the two stabilize_func outputs (f_plus
// and f_minus indexed by the weight) into wt_inc/wt_dec. The update is applied
// only in the grst cycle that opens the next gamma cycle, from the edges of
// the gamma cycle that just ended. That timing and the reset weight W_INIT are
// this design's choices. Latency: resp follows input_spike combinationally.
module synapse
  import tnn7_pkg::*;
#(
  parameter logic [W_BITS-1:0] W_INIT = '0
) (
  input  logic              aclk,
  input  logic              rst,
  input  logic              grst,
  input  logic              input_spike,
  input  logic              ein,
  input  logic              eout,
  input  brv_t              brv,
  output logic              resp,
  output logic [W_BITS-1:0] weight
);
  logic [W_BITS-1:0]  nxt_weight;
  logic               le_out, greater;
  logic [N_CASES-1:0] cases;
  logic               f_p, f_m, inc, dec;

  syn_readout u_readout (
    .aclk(aclk), .input_spike(input_spike), .store_weight(weight), .out(resp));

  less_equal u_le (
    .aclk(aclk), .grst(grst), .data_in(ein), .inhibit(eout), .out(le_out));
  assign greater = ~le_out;

  stdp_case_gen u_case (.greater(greater), .ein(ein), .eout(eout), .stdp_cases(cases));

  stabilize_func u_stab_p (.f(brv.f_plus),  .sel(weight), .out(f_p));
  stabilize_func u_stab_m (.f(brv.f_minus), .sel(weight), .out(f_m));

  incdec u_incdec (
    .stdp_cases(cases), .capture(brv.capture), .search(brv.search),
    .backoff(brv.backoff), .f(f_p), .min(f_m), .inc(inc), .dec(dec));

  syn_weight_update u_update (
    .store_weight(weight), .wt_inc(inc & grst), .wt_dec(dec & grst),
    .input_spike(input_spike), .nxt_weight(nxt_weight));

  always_ff @(posedge aclk) begin
    if (rst) weight <= W_INIT;
    else     weight <= nxt_weight;
  end

  // Learning must not fall inside a readout window, or the weight would not
  // wrap back to its stored value.
  a_no_learn_in_window: assert property (@(posedge aclk) disable iff (rst)
    !(grst && input_spike));
endmodule
