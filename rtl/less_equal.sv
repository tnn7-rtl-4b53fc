// less_equal: temporal inhibit, the space-time "less than or equal" operator.
// data_in and inhibit are edge-coded (a 0->1 step that stays high until the
// gamma reset). out follows data_in if data_in rose in the same aclk cycle as
// inhibit or earlier; if inhibit rose first, data_in is suppressed for the
// rest of the gamma cycle.
// The TNN7 macro is a transistor pair that stores this on a circuit node; in
// this RTL one flip-flop (`blocked`) remembers that inhibit was high while
// data_in was still low. It is cleared synchronously by grst. out is
// combinational, so it rises in the same cycle as data_in.
module less_equal (
  input  logic aclk,
  input  logic grst,
  input  logic data_in,
  input  logic inhibit,
  output logic out
);
  logic blocked;

  always_ff @(posedge aclk) begin
    if (grst)                      blocked <= 1'b0;
    else if (inhibit && !data_in)  blocked <= 1'b1;
  end

  assign out = data_in & ~blocked;
endmodule
