// tb_tnn_column: end-to-end test of a reduced 8 x 3 column over 600 gamma
// cycles, checked cycle by cycle against a reference model (see
// tnn_column_check.svh).
module tb_tnn_column;
  import tnn7_pkg::*;
  localparam int P = 8, Q = 3, NGAMMA = 600;
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
