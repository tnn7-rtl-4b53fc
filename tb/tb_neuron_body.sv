// tb_neuron_body: P = 6 synapse responses driven with random unary ramps;
// checks every cycle that fire equals (running sum >= theta), and that grst
// clears the potential. Parameter P reduced to keep the stimulus readable.
module tb_neuron_body;
  localparam int P = 6;
  localparam int VW = $clog2(P * 7 + 1);
  logic aclk = 0, grst = 1, fire;
  logic [P-1:0] resp;
  logic [VW-1:0] theta;
  int checks = 0, failures = 0, fires = 0;

  neuron_body #(.P(P)) dut (.aclk(aclk), .grst(grst), .resp(resp), .theta(theta), .fire(fire));
  always #5 aclk = ~aclk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int pot, ti[P], w[P];
    resp = '0; theta = '0;
    @(negedge aclk);
    for (int g = 0; g < 200; g++) begin
      grst = 1; resp = '0; @(negedge aclk); grst = 0;
      theta = VW'(1 + $urandom % 30);
      for (int i = 0; i < P; i++) begin ti[i] = $urandom % 8; w[i] = $urandom % 8; end
      pot = 0;
      for (int t = 0; t < 18; t++) begin
        for (int i = 0; i < P; i++) resp[i] = (t >= ti[i]) && (t < ti[i] + w[i]);
        pot += $countones(resp);
        #1;
        checks++;
        if (fire !== (pot >= int'(theta))) begin failures++; $display("g=%0d t=%0d pot=%0d th=%0d fire=%0b", g, t, pot, theta, fire); end
        fires += fire;
        @(negedge aclk);
      end
    end
    checks++; if (fires == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
