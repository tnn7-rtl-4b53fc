// stdp_case_gen: one-hot STDP case from the timing of a synapse's input and
// output spikes. ein and eout are the edge-coded input and output spikes;
// greater is the negated less_equal(ein, eout), i.e. high when the input did
// not arrive at or before the output. Cases (bit index):
//   0 capture  ein & eout & !greater   (input no later than output)
//   1 minus    ein & eout &  greater   (input later than output)
//   2 search   ein & !eout             (input, no output)
//   3 backoff  !ein & eout             (output, no input)
// With neither spike present the vector is zero and no update happens.
// Combinational.
module stdp_case_gen
  import tnn7_pkg::*;
(
  input  logic               greater,
  input  logic               ein,
  input  logic               eout,
  output logic [N_CASES-1:0] stdp_cases
);
  always_comb begin
    stdp_cases               = '0;
    stdp_cases[CASE_CAPTURE] = ein & eout & ~greater;
    stdp_cases[CASE_MINUS]   = ein & eout &  greater;
    stdp_cases[CASE_SEARCH]  = ein & ~eout;
    stdp_cases[CASE_BACKOFF] = ~ein & eout;
  end
endmodule
