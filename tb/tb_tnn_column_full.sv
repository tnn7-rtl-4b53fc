// tb_tnn_column_full: the column at its default size (82 x 2, 164 synapses)
// over 300 gamma cycles, checked against the same reference model.
module tb_tnn_column_full;
  import tnn7_pkg::*;
  localparam int P = 82, Q = 2, NGAMMA = 300;
  logic aclk = 0, gclk, rst = 1, grst;
  logic [P-1:0] x;
  logic [$clog2(P * 7 + 1)-1:0] theta;
  brv_t brv;
  logic [Q-1:0] y;
  logic [Q-1:0][P-1:0][2:0] weights;

  tnn_column dut (
    .aclk(aclk), .gclk(gclk), .rst(rst), .x(x), .theta(theta), .brv(brv),
    .y(y), .weights(weights), .grst(grst));

  `include "tnn_column_check.svh"

  initial begin
    run_test();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
