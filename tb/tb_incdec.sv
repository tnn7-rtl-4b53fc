// tb_incdec: for each one-hot STDP case (and none) and all BRV combinations,
// checks inc/dec against the update rule: capture needs CAPTURE and F, search
// needs SEARCH, minus needs BACKOFF and MIN, backoff needs BACKOFF.
module tb_incdec;
  logic [3:0] cs;
  logic cap, srch, bo, f, mn, inc, dec;
  int checks = 0, failures = 0;

  incdec dut (.stdp_cases(cs), .capture(cap), .search(srch), .backoff(bo),
              .f(f), .min(mn), .inc(inc), .dec(dec));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic ei, ed;
    for (int c = 0; c <= 4; c++)
      for (int b = 0; b < 32; b++) begin
        cs = (c == 4) ? 4'b0 : 4'(1 << c);
        {cap, srch, bo, f, mn} = 5'(b);
        #1;
        case (c)
          0: begin ei = cap & f; ed = 0;    end
          1: begin ei = 0;       ed = bo & mn; end
          2: begin ei = srch;    ed = 0;    end
          3: begin ei = 0;       ed = bo;   end
          default: begin ei = 0; ed = 0;    end
        endcase
        checks++;
        if (inc !== ei || dec !== ed) begin
          failures++; $display("case=%0d brv=%b inc=%0b dec=%0b", c, b[4:0], inc, dec);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
