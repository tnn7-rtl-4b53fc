// tb_syn_weight_update: exhaustive check of the next-weight logic over all
// weights and control combinations, against an independent reference.
module tb_syn_weight_update;
  logic [2:0] w, nw;
  logic inc, dec, spike;
  int checks = 0, failures = 0;

  syn_weight_update dut (.store_weight(w), .wt_inc(inc), .wt_dec(dec),
                         .input_spike(spike), .nxt_weight(nw));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp;
    for (int k = 0; k < 64; k++) begin
      w = 3'(k); {spike, inc, dec} = 3'(k >> 3);
      #1;
      if (spike)                 exp = (k % 8 + 7) % 8;
      else if (inc && dec)       exp = w;
      else if (inc && w < 7)     exp = w + 1;
      else if (inc)              exp = w;
      else if (dec && w > 0)     exp = w - 1;
      else                       exp = w;
      checks++;
      if (nw != 3'(exp)) begin failures++; $display("w=%0d s=%0b i=%0b d=%0b nw=%0d exp=%0d", w, spike, inc, dec, nw, exp); end
    end
    // eight readout decrements bring the weight back
    for (int v = 0; v < 8; v++) begin
      logic [2:0] r; r = 3'(v); spike = 1; inc = 0; dec = 0;
      repeat (8) begin w = r; #1; r = nw; end
      checks++; if (r != 3'(v)) begin failures++; $display("no wrap for %0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
