// Shared body of the column testbenches. The including module declares the
// localparams P, Q, NGAMMA and the DUT signals, then includes this file.
// Each gamma cycle lasts G aclk cycles: a grst cycle (gclk rises) followed by
// G-1 cycles of computation. Input i rises at ti[i] in 1..7 (or never) and is
// held through the next grst cycle, so STDP still sees it. A reference model
// computes each neuron's response ramp from its own copy of the weights, the
// first cycle its potential reaches theta, the 1-WTA winner (earliest, lowest
// index), and the STDP update of every synapse in the grst cycle from the BRVs
// sampled there. y and all weights are compared with the model. The
// including module calls run_test(), then prints the result and finishes.
// Mechanisms counted (each must occur): the four STDP cases, a weight step
// clipped at 7 and at 0, a fired gamma cycle, a silent gamma cycle, a WTA tie
// and a WTA suppression of a later neuron.
  localparam int G  = 18;
  localparam int VW = $clog2(P * 7 + 1);
  int checks = 0, failures = 0;
  int n_case[4], n_sat_hi = 0, n_sat_lo = 0, n_fire = 0, n_silent = 0, n_tie = 0, n_supp = 0;
  int wref [Q][P];
  int ti [P];
  int tf [Q];
  int win, tmin;

  always #5 aclk = ~aclk;

  initial begin
    #(10 * G * (NGAMMA + 10) * 2); failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // first cycle the potential of neuron j reaches theta, 99 if never
  function automatic int fire_time(int j, int th);
    int pot = 0;
    for (int t = 0; t < G - 1; t++) begin
      for (int i = 0; i < P; i++)
        if (ti[i] < 99 && t >= ti[i] && t < ti[i] + wref[j][i]) pot++;
      if (pot >= th) return t;
    end
    return 99;
  endfunction

  task automatic stdp_update();
    int c;
    for (int j = 0; j < Q; j++)
      for (int i = 0; i < P; i++) begin
        logic ein, eout;
        int wo;
        ein = ti[i] < 99; eout = (j == win);
        c = -1;
        if (ein && eout)  c = (ti[i] <= tf[j]) ? 0 : 1;
        else if (ein)     c = 2;
        else if (eout)    c = 3;
        if (c >= 0) n_case[c]++;
        wo = wref[j][i];
        case (c)
          0: if (brv.capture && brv.f_plus[wo])  begin if (wo < 7) wref[j][i]++; else n_sat_hi++; end
          1: if (brv.backoff && brv.f_minus[wo]) begin if (wo > 0) wref[j][i]--; else n_sat_lo++; end
          2: if (brv.search)                     begin if (wo < 7) wref[j][i]++; else n_sat_hi++; end
          3: if (brv.backoff)                    begin if (wo > 0) wref[j][i]--; else n_sat_lo++; end
          default: ;
        endcase
      end
  endtask

  task automatic run_test();
    int th, prob_in;
    int unsigned r_sel, r_time;
    logic have_prev;
    x = '0; theta = '0; brv = '0; gclk = 0;
    for (int j = 0; j < Q; j++) for (int i = 0; i < P; i++) wref[j][i] = 0;
    repeat (3) @(negedge aclk);
    rst = 0;
    @(negedge aclk);
    have_prev = 0;
    for (int g = 0; g < NGAMMA; g++) begin
      // grst cycle: gclk rises, inputs of the previous gamma still held
      gclk = 1;
      brv = brv_t'({$urandom, $urandom});
      if (g < NGAMMA / 4) brv.backoff = 1'b0;   // let weights grow first
      #1;
      checks++;
      if (grst !== 1'b1) begin failures++; $display("no grst in gamma %0d", g); end
      if (have_prev) stdp_update();
      have_prev = 1;
      @(negedge aclk);
      x = '0;
      for (int j = 0; j < Q; j++)
        for (int i = 0; i < P; i++) begin
          checks++;
          if (int'(weights[j][i]) != wref[j][i]) begin
            failures++;
            if (failures < 10) $display("g=%0d w[%0d][%0d]=%0d ref=%0d", g, j, i, weights[j][i], wref[j][i]);
          end
        end
      // new input instance
      prob_in = 1 + $urandom % 4;               // 1/4 .. 4/4 of inputs active
      for (int i = 0; i < P; i++) begin
        r_sel  = $urandom;
        r_time = $urandom;
        ti[i] = (int'(r_sel % 4) < prob_in) ? 1 + int'(r_time % 7) : 99;
      end
      th = 1 + $urandom % (P * 2);
      theta = VW'(th);
      tmin = 99; win = -1;
      for (int j = 0; j < Q; j++) begin
        tf[j] = fire_time(j, th);
        if (tf[j] < tmin) begin tmin = tf[j]; win = j; end
      end
      if (win < 0) n_silent++; else n_fire++;
      for (int j = 0; j < Q; j++) begin
        if (j != win && tf[j] == tmin && tmin < 99) begin n_tie++; break; end
      end
      for (int j = 0; j < Q; j++) begin
        if (tf[j] > tmin && tf[j] < 99) begin n_supp++; break; end
      end
      for (int t = 0; t < G - 1; t++) begin
        logic [Q-1:0] exp;
        if (t == 3) gclk = 0;
        for (int i = 0; i < P; i++) x[i] = (ti[i] < 99) && (t >= ti[i]);
        exp = '0;
        if (win >= 0 && t >= tmin) exp[win] = 1'b1;
        #1;
        checks++;
        if (y !== exp) begin
          failures++;
          if (failures < 10) $display("g=%0d t=%0d y=%b exp=%b", g, t, y, exp);
        end
        @(negedge aclk);
      end
    end
    $display("cases capture=%0d minus=%0d search=%0d backoff=%0d", n_case[0], n_case[1], n_case[2], n_case[3]);
    $display("saturate_hi=%0d saturate_lo=%0d fired=%0d silent=%0d tie=%0d suppressed=%0d",
             n_sat_hi, n_sat_lo, n_fire, n_silent, n_tie, n_supp);
    for (int k = 0; k < 4; k++) begin checks++; if (n_case[k] == 0) failures++; end
    checks++; if (n_sat_hi == 0) failures++;
    checks++; if (n_sat_lo == 0) failures++;
    checks++; if (n_fire == 0)   failures++;
    checks++; if (n_silent == 0) failures++;
    checks++; if (n_tie == 0 && Q > 1)  failures++;
    checks++; if (n_supp == 0 && Q > 1) failures++;
  endtask
