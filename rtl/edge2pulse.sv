// edge2pulse: outputs a pulse one aclk cycle long in the cycle a 0->1 edge
// arrives on edge_in. A synchronous register (reset by rst, active high)
// holds the inverted edge_in of the previous cycle; pulse_out = edge_in & q.
// It makes the gamma reset pulse grst from gclk, and the start pulse for
// spike_gen from an edge-coded input. After reset the register is 0, so an
// edge that is already high then gives no pulse.
module edge2pulse (
  input  logic aclk,
  input  logic rst,
  input  logic edge_in,
  output logic pulse_out
);
  logic not_prev;

  always_ff @(posedge aclk) begin
    if (rst) not_prev <= 1'b0;
    else     not_prev <= ~edge_in;
  end

  assign pulse_out = edge_in & not_prev;
endmodule
