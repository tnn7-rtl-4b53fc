// syn_readout: ramp-no-leak (RNL) readout of one synapse.
// While the 8-cycle input spike window (input_spike) is high, the weight
// register is decremented once per aclk cycle by syn_weight_update and wraps
// back to its stored value. This macro asserts `out` from the first cycle of
// the window until the cycle the weight reads zero, then keeps it low for the
// rest of the window, so a weight w gives exactly w cycles of output.
// Structure as in the TNN7 macro: one register clocked by aclk with D tied to
// 1, enabled when the weight is zero and held cleared while input_spike is low
// (the register's active-low reset is input_spike). out is combinational:
// input_spike & (weight != 0) & !zero_seen.
module syn_readout
  import tnn7_pkg::*;
#(
  parameter int unsigned WB = W_BITS
) (
  input  logic          aclk,
  input  logic          input_spike,
  input  logic [WB-1:0] store_weight,
  output logic          out
);
  logic wt_zero;
  logic zero_seen;  // SYNC_REG: set once the weight has reached zero

  assign wt_zero = (store_weight == '0);

  always_ff @(posedge aclk) begin
    if (!input_spike)  zero_seen <= 1'b0;   // RST_B = INPUT_SPIKE
    else if (wt_zero)  zero_seen <= 1'b1;   // EN = weight is zero, D = 1
  end

  assign out = input_spike & ~wt_zero & ~zero_seen;
endmodule
