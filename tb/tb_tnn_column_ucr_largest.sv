// tb_tnn_column_ucr_largest: the largest single-column clustering design,
// 270 x 25 = 6,750 synapses, over 60 gamma cycles, checked against the same
// reference model as the other column testbenches.
module tb_tnn_column_ucr_largest;
  import tnn7_pkg::*;
  localparam int P = 270, Q = 25, NGAMMA = 60;
  logic aclk = 0, gclk, rst = 1, grst;
  logic [P-1:0] x;
  logic [$clog2(P * 7 + 1)-1:0] theta;
  brv_t brv;
  logic [Q-1:0] y;
  logic [Q-1:0][P-1:0][2:0] weights;

  tnn_column #(.P(P), .Q(Q)) dut (
    .aclk(aclk), .gclk(gclk), .rst(rst), .x(x), .theta(theta), .brv(brv),
    .y(y), .weights(weights), .grst(grst));

  `include "tnn_column_check.svh"

  initial begin
    run_test();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
