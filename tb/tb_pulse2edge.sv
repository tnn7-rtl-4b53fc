// tb_pulse2edge: pulses of various widths and start times; the edge must rise
// in the pulse's first cycle, stay high to the end of the gamma cycle, still
// be high in the grst cycle and be low after it.
module tb_pulse2edge;
  logic aclk = 0, grst = 0, p = 0, e;
  int checks = 0, failures = 0;

  pulse2edge dut (.aclk(aclk), .grst(grst), .pulse_in(p), .edge_out(e));
  always #5 aclk = ~aclk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge aclk); grst = 1; @(negedge aclk); grst = 0;
    for (int t0 = 0; t0 < 6; t0++)
      for (int wd = 1; wd < 4; wd++) begin
        for (int c = 0; c < 12; c++) begin
          p = (c >= t0) && (c < t0 + wd); #1;
          checks++; if (e !== (c >= t0)) begin failures++; $display("t0=%0d w=%0d c=%0d e=%0b", t0, wd, c, e); end
          @(negedge aclk);
        end
        p = 0; grst = 1; #1;
        checks++; if (e !== 1'b1) begin failures++; $display("edge lost in grst cycle"); end
        @(negedge aclk); grst = 0; #1;
        checks++; if (e !== 1'b0) begin failures++; $display("edge not cleared"); end
      end
    // no pulse, no edge
    repeat (5) begin @(negedge aclk); checks++; if (e !== 1'b0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
