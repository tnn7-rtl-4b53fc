// spike_gen: next-state and output logic of the 3-bit counter that stretches
// an input pulse of any width into a window of 2**WB (= 8) aclk cycles, the
// input spike window that drives RNL readout.
// State 0 is idle. in_pulse in state 0 starts the window (out = 1, next = 1);
// states 1..7 keep out high and advance to state+1, wrapping to 0 after the
// eighth cycle. The state register is outside the macro (in tnn_column), as in
// the TNN7 cell, which holds only the combinational part. A pulse still high
// when the count returns to 0 starts a new window.
module spike_gen
  import tnn7_pkg::*;
#(
  parameter int unsigned WB = W_BITS
) (
  input  logic [WB-1:0] curr_state,
  input  logic          in_pulse,
  output logic [WB-1:0] next_state,
  output logic          out
);
  always_comb begin
    out        = in_pulse | (curr_state != '0);
    next_state = out ? curr_state + 1'b1 : curr_state;
  end
endmodule
