// syn_weight_update: next-value logic for a synaptic weight register.
// During the input spike window (input_spike = 1) the weight is decremented
// by one every aclk cycle, wrapping modulo 2**WB, so after the 8-cycle window
// it is back at its stored value; this drives the RNL readout. Outside the
// window, wt_inc or wt_dec (from incdec, at most one at a time) moves the
// weight by one; if both are raised the weight holds. Learning steps
// saturate at 0 and 2**WB-1. That saturation, the hold on a double request and
// the priority of input_spike over learning are this design's choices.
// Purely combinational; the register itself sits in the synapse.
module syn_weight_update
  import tnn7_pkg::*;
#(
  parameter int unsigned WB = W_BITS
) (
  input  logic [WB-1:0] store_weight,
  input  logic          wt_inc,
  input  logic          wt_dec,
  input  logic          input_spike,
  output logic [WB-1:0] nxt_weight
);
  localparam logic [WB-1:0] WMAX = '1;

  always_comb begin
    nxt_weight = store_weight;
    if (input_spike)
      nxt_weight = store_weight - 1'b1;                 // readout, wraps
    else if (wt_inc && !wt_dec && store_weight != WMAX)
      nxt_weight = store_weight + 1'b1;
    else if (wt_dec && !wt_inc && store_weight != '0)
      nxt_weight = store_weight - 1'b1;
  end
endmodule
