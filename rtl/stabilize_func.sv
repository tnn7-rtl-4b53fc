// stabilize_func: picks, by the synaptic weight, one of eight Bernoulli random
// variables f[0..7]; their probabilities, set outside, form the weight
// stabilization function that pushes weights toward 0 or 7.
// It is the TNN7 macro's tree of seven 2:1 multiplexers: the first level on
// sel[2] (the weight's MSB) pairs f[0]/f[4], f[2]/f[6], f[1]/f[5], f[3]/f[7];
// the second level uses sel[1], the last sel[0]. The net result is
// out = f[sel]. (The macro's GDI transistor muxes and restoring buffers are
// circuit-level.) Combinational.
module stabilize_func (
  input  logic [7:0] f,
  input  logic [2:0] sel,
  output logic       out
);
  logic [3:0] l1;
  logic [1:0] l2;

  mux2 u_m0 (.d0(f[0]), .d1(f[4]), .s(sel[2]), .y(l1[0]));
  mux2 u_m1 (.d0(f[2]), .d1(f[6]), .s(sel[2]), .y(l1[1]));
  mux2 u_m2 (.d0(f[1]), .d1(f[5]), .s(sel[2]), .y(l1[2]));
  mux2 u_m3 (.d0(f[3]), .d1(f[7]), .s(sel[2]), .y(l1[3]));
  mux2 u_m4 (.d0(l1[0]), .d1(l1[1]), .s(sel[1]), .y(l2[0]));
  mux2 u_m5 (.d0(l1[2]), .d1(l1[3]), .s(sel[1]), .y(l2[1]));
  mux2 u_m6 (.d0(l2[0]), .d1(l2[1]), .s(sel[0]), .y(out));
endmodule
