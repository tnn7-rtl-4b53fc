// tb_synapse: runs 400 gamma cycles of 20 aclk cycles on one synapse with
// random input/output spike times and random BRVs. A reference model in the
// testbench tracks the weight: each gamma cycle the response must be high in
// exactly the first `weight` cycles of the input window, and in the grst
// cycle the weight must move by the STDP rule (capture/minus/search/backoff,
// BRV-gated, saturating at 0 and 7). Counts each STDP case seen and fails if
// one never occurs.
module tb_synapse;
  import tnn7_pkg::*;
  localparam int G = 20;
  logic aclk = 0, rst = 1, grst = 0, win = 0, ein = 0, eout = 0, resp;
  brv_t brv;
  logic [2:0] weight;
  int checks = 0, failures = 0;
  int seen [4];

  synapse dut (.aclk(aclk), .rst(rst), .grst(grst), .input_spike(win), .ein(ein),
               .eout(eout), .brv(brv), .resp(resp), .weight(weight));
  always #5 aclk = ~aclk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int wref, ti, to, ones, c, first_gamma;
    brv = '0;
    @(negedge aclk); @(negedge aclk); rst = 0;
    wref = 0; ti = -1; to = -1; first_gamma = 1;
    for (int g = 0; g < 400; g++) begin
      // cycle 0: grst, STDP update from the previous gamma's edges
      grst = 1; win = 0;
      brv = brv_t'({$urandom, $urandom});
      #1;
      if (!first_gamma) begin
        c = -1;
        if (ti >= 0 && to >= 0) c = (ti <= to) ? 0 : 1;
        else if (ti >= 0)       c = 2;
        else if (to >= 0)       c = 3;
        if (c >= 0) seen[c]++;
        case (c)
          0: if (brv.capture && brv.f_plus[wref] && wref < 7) wref++;
          1: if (brv.backoff && brv.f_minus[wref] && wref > 0) wref--;
          2: if (brv.search && wref < 7) wref++;
          3: if (brv.backoff && wref > 0) wref--;
          default: ;
        endcase
      end
      first_gamma = 0;
      @(negedge aclk);
      grst = 0; ein = 0; eout = 0;
      checks++;
      if (weight != 3'(wref)) begin failures++; $display("g=%0d weight=%0d ref=%0d", g, weight, wref); end
      ti = ($urandom % 10) - 1; if (ti > 7) ti = -1;   // -1: no input
      to = ($urandom % 12) - 1; if (to > 9) to = -1;   // -1: no output
      ones = 0;
      for (int t = 0; t < G - 1; t++) begin
        win  = (ti >= 0) && (t >= ti) && (t < ti + 8);
        ein  = (ti >= 0) && (t >= ti);
        eout = (to >= 0) && (t >= to);
        #1;
        checks++;
        if (resp !== (win && (t - ti) < wref)) begin
          failures++; $display("g=%0d t=%0d ti=%0d w=%0d resp=%0b", g, t, ti, wref, resp);
        end
        ones += resp;
        @(negedge aclk);
      end
      checks++;
      if (ones != ((ti >= 0) ? wref : 0)) begin failures++; $display("g=%0d ones=%0d", g, ones); end
    end
    for (int k = 0; k < 4; k++) begin
      $display("STDP case %0d seen %0d times", k, seen[k]);
      checks++; if (seen[k] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
