// tb_spike_gen: closes spike_gen with a 3-bit state register and checks that
// input pulses of width 1..8 each give an output window of exactly 8 aclk
// cycles starting in the pulse's first cycle, then the counter is idle again.
module tb_spike_gen;
  logic aclk = 0, rst = 1, in_p = 0, out;
  logic [2:0] st, nst;
  int checks = 0, failures = 0;

  spike_gen dut (.curr_state(st), .in_pulse(in_p), .next_state(nst), .out(out));
  always #5 aclk = ~aclk;
  always_ff @(posedge aclk) st <= rst ? 3'd0 : nst;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge aclk); @(negedge aclk); rst = 0;
    for (int wdt = 1; wdt <= 8; wdt++) begin
      for (int c = 0; c < 12; c++) begin
        in_p = (c < wdt);
        #1;
        checks++;
        if (out !== (c < 8)) begin failures++; $display("width=%0d c=%0d out=%0b", wdt, c, out); end
        @(negedge aclk);
      end
      checks++; if (st !== 3'd0) begin failures++; $display("counter not idle"); end
      in_p = 0; @(negedge aclk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
