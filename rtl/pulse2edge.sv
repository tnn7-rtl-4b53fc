// pulse2edge: turns a pulse into an edge-coded signal that stays high until
// the next gamma reset. edge_out = pulse_in | held, so the edge rises in the
// same aclk cycle as the pulse; `held` is set on the next aclk edge and
// cleared by grst. grst clears it synchronously (this design's choice), so the
// edge of the gamma cycle that just ended is still visible during the reset
// cycle, when STDP reads it.
module pulse2edge (
  input  logic aclk,
  input  logic grst,
  input  logic pulse_in,
  output logic edge_out
);
  logic held;

  always_ff @(posedge aclk) begin
    if (grst)          held <= 1'b0;
    else if (pulse_in) held <= 1'b1;
  end

  assign edge_out = pulse_in | held;
endmodule
