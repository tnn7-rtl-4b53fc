// tb_syn_readout: for every weight 0..7 runs an 8-cycle input spike window
// with the weight decremented each cycle (as the synapse does) and checks
// that out is high in exactly the first w cycles, and low outside the window.
module tb_syn_readout;
  import tnn7_pkg::*;
  logic aclk = 0, spike = 0, out;
  logic [2:0] w;
  int checks = 0, failures = 0;

  syn_readout dut (.aclk(aclk), .input_spike(spike), .store_weight(w), .out(out));
  always #5 aclk = ~aclk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ones;
    w = 0;
    repeat (2) @(posedge aclk);
    for (int wv = 0; wv < 8; wv++) begin
      for (int rep = 0; rep < 2; rep++) begin
        @(negedge aclk); w = 3'(wv); spike = 0;
        @(negedge aclk);
        checks++; if (out !== 1'b0) begin failures++; $display("out high outside window"); end
        ones = 0;
        for (int c = 0; c < 8; c++) begin
          spike = 1; w = 3'(wv - c);
          #1;
          checks++;
          if (out !== (c < wv)) begin failures++; $display("w=%0d c=%0d out=%0b", wv, c, out); end
          ones += out;
          @(negedge aclk);
        end
        spike = 0; w = 3'(wv); #1;
        checks++; if (ones != wv) begin failures++; $display("w=%0d ones=%0d", wv, ones); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
