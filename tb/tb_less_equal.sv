// tb_less_equal: for all arrival times of data_in and inhibit (0..9, or never)
// within a gamma cycle, checks out every cycle against the rule: out follows
// data_in iff data_in rose no later than inhibit.
module tb_less_equal;
  logic aclk = 0, grst = 0, d = 0, inh = 0, out;
  int checks = 0, failures = 0;

  less_equal dut (.aclk(aclk), .grst(grst), .data_in(d), .inhibit(inh), .out(out));
  always #5 aclk = ~aclk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge aclk); grst = 1; @(negedge aclk); grst = 0;
    for (int td = 0; td <= 10; td++)
      for (int ti = 0; ti <= 10; ti++) begin
        for (int t = 0; t < 12; t++) begin
          d   = (td < 10) && (t >= td);
          inh = (ti < 10) && (t >= ti);
          #1;
          checks++;
          if (out !== (d && (ti >= 10 || td <= ti))) begin
            failures++; $display("td=%0d ti=%0d t=%0d out=%0b", td, ti, t, out);
          end
          @(negedge aclk);
        end
        d = 0; inh = 0; grst = 1; @(negedge aclk); grst = 0;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
