// incdec: weight-update direction from the STDP case and the Bernoulli random
// variables (BRVs). inc is raised for cases 0 (capture) and 2 (search), dec for
// cases 1 (minus) and 3 (backoff), each only when its BRV is one:
//   inc = case0 & capture & f   | case2 & search
//   dec = case1 & backoff & min | case3 & backoff
// f and min are the outputs of the two stabilize_func muxes (the stabilization
// BRVs for increment and decrement at the current weight). The port names and
// which case goes with which BRV follow the TNN7 macro; reading f/min as the
// two stabilization terms is this design's interpretation. Combinational.
module incdec
  import tnn7_pkg::*;
(
  input  logic [N_CASES-1:0] stdp_cases,
  input  logic               capture,
  input  logic               search,
  input  logic               backoff,
  input  logic               f,
  input  logic               min,
  output logic               inc,
  output logic               dec
);
  assign inc = (stdp_cases[CASE_CAPTURE] & capture & f)
             | (stdp_cases[CASE_SEARCH]  & search);
  assign dec = (stdp_cases[CASE_MINUS]   & backoff & min)
             | (stdp_cases[CASE_BACKOFF] & backoff);
endmodule
