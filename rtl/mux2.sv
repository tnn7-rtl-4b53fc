// mux2: 2:1 multiplexer, the leaf cell of stabilize_func (a two-transistor
// GDI mux in the TNN7 macro). y = s ? d1 : d0. Combinational.
module mux2 (
  input  logic d0,
  input  logic d1,
  input  logic s,
  output logic y
);
  assign y = s ? d1 : d0;
endmodule
