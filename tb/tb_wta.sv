// tb_wta: Q = 4 neuron edges with random firing times (or none) per gamma
// cycle. The winner must be the lowest-index neuron among the earliest, its
// edge must appear in the cycle it fires, and no other edge may pass. Counts
// gamma cycles with a tie and with late losers; fails if either never occurs.
module tb_wta;
  localparam int Q = 4;
  logic aclk = 0, grst = 1;
  logic [Q-1:0] yin, yout;
  int checks = 0, failures = 0, ties = 0, late = 0;

  wta #(.Q(Q)) dut (.aclk(aclk), .grst(grst), .yin(yin), .yout(yout));
  always #5 aclk = ~aclk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int tf[Q], tmin, win, nmin;
    logic [Q-1:0] exp;
    yin = '0;
    @(negedge aclk);
    for (int g = 0; g < 300; g++) begin
      grst = 1; yin = '0; @(negedge aclk); grst = 0;
      tmin = 99; win = -1; nmin = 0;
      for (int i = 0; i < Q; i++) begin
        tf[i] = $urandom % 8; if ($urandom % 4 == 0) tf[i] = 99;
        if (tf[i] < tmin) begin tmin = tf[i]; win = i; end
      end
      for (int i = 0; i < Q; i++) if (tf[i] == tmin && tmin < 99) nmin++;
      if (nmin > 1) ties++;
      for (int i = 0; i < Q; i++) if (tf[i] > tmin && tf[i] < 99) begin late++; break; end
      for (int t = 0; t < 10; t++) begin
        for (int i = 0; i < Q; i++) yin[i] = (t >= tf[i]);
        exp = '0;
        if (win >= 0 && t >= tmin) exp[win] = 1'b1;
        #1;
        checks++;
        if (yout !== exp) begin failures++; $display("g=%0d t=%0d yin=%b yout=%b exp=%b", g, t, yin, yout, exp); end
        @(negedge aclk);
      end
    end
    checks++; if (ties == 0) failures++;
    checks++; if (late == 0) failures++;
    $display("ties=%0d late=%0d", ties, late);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
