// tb_edge2pulse: edges at different times and of different lengths must each
// give exactly one pulse, in the cycle the edge rises.
module tb_edge2pulse;
  logic aclk = 0, rst = 1, e = 0, p;
  int checks = 0, failures = 0;

  edge2pulse dut (.aclk(aclk), .rst(rst), .edge_in(e), .pulse_out(p));
  always #5 aclk = ~aclk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n;
    @(negedge aclk); @(negedge aclk); rst = 0; @(negedge aclk);
    for (int t0 = 0; t0 < 5; t0++)
      for (int len = 1; len < 5; len++) begin
        n = 0;
        for (int c = 0; c < 12; c++) begin
          e = (c >= t0) && (c < t0 + len); #1;
          checks++; if (p !== (c == t0)) begin failures++; $display("t0=%0d len=%0d c=%0d p=%0b", t0, len, c, p); end
          n += p;
          @(negedge aclk);
        end
        checks++; if (n != 1) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
