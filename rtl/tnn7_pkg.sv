// tnn7_pkg: constants and types shared by the TNN7 macro RTL.
// Synaptic weights are 3 bits wide, so an input spike window lasts 2**3 = 8
// unit-clock (aclk) cycles. The STDP case vector is one-hot with the order
// capture, minus, search, backoff (cases 0..3): cases 0 and 2 increment a
// weight, cases 1 and 3 decrement it. The Bernoulli random variables (BRVs)
// that drive learning come from outside the column and are bundled in brv_t.
package tnn7_pkg;
  localparam int unsigned W_BITS = 3;
  localparam int unsigned W_MAX  = (1 << W_BITS) - 1;
  localparam int unsigned N_CASES = 4;

  typedef enum int unsigned {
    CASE_CAPTURE = 0,  // input no later than output: increment
    CASE_MINUS   = 1,  // input after output: decrement
    CASE_SEARCH  = 2,  // input, no output: increment
    CASE_BACKOFF = 3   // output, no input: decrement
  } stdp_case_e;

  // BRVs for one aclk cycle. f_plus/f_minus hold one BRV per weight value;
  // stabilize_func picks the one matching the current weight.
  typedef struct packed {
    logic                    capture;
    logic                    search;
    logic                    backoff;
    logic [W_MAX:0]          f_plus;
    logic [W_MAX:0]          f_minus;
  } brv_t;
endpackage
