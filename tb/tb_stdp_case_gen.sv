// tb_stdp_case_gen: all eight input combinations against the STDP case table.
module tb_stdp_case_gen;
  logic g, ei, eo;
  logic [3:0] c;
  int checks = 0, failures = 0;

  stdp_case_gen dut (.greater(g), .ein(ei), .eout(eo), .stdp_cases(c));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [3:0] exp;
    for (int k = 0; k < 8; k++) begin
      {g, ei, eo} = 3'(k); #1;
      if (ei && eo)  exp = g ? 4'b0010 : 4'b0001;  // minus : capture
      else if (ei)   exp = 4'b0100;                 // search
      else if (eo)   exp = 4'b1000;                 // backoff
      else           exp = 4'b0000;
      checks++;
      if (c !== exp) begin failures++; $display("g=%0b ein=%0b eout=%0b cases=%b exp=%b", g, ei, eo, c, exp); end
      checks++;
      if (!$onehot0(c)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
