// tb_ctrl_clk_gen: checks control-clock generation against a time-stamp
// model of the rule: a flip more than THR cycles after the previous flip or
// pulse gets a pulse in the next cycle; a closer flip is held back and
// released once more than THR cycles pass without a flip. Runs a directed
// sequence (isolated flips, a glitch pair, flips while not running) and
// random traffic of varying density, for THR = 1 (default) and THR = 3.
module tb_ctrl_clk_gen;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int pulses = 0, glitches = 0;

  logic       run;
  logic [7:0] p;
  logic       cc1, gl1, cc3, gl3;

  ctrl_clk_gen dut1 (.clk, .rst_n, .run, .p, .clk_ctrl(cc1), .glitch(gl1));
  ctrl_clk_gen #(.N(8), .THR(3)) dut3 (.clk, .rst_n, .run, .p, .clk_ctrl(cc3), .glitch(gl3));

  // reference state per threshold
  longint cyc = 0;
  longint ref_t [2];
  bit     ref_pend [2];
  bit     exp_cc [2], exp_gl [2];
  logic [7:0] p_last;
  int     thr [2] = '{1, 3};

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model evaluated on the values seen at each rising edge
  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < 2; i++) begin
        bit flip, fire;
        flip = run && (p !== p_last);
        fire = 0;
        exp_gl[i] = 0;
        if (flip) begin
          if (cyc - ref_t[i] > thr[i]) begin fire = 1; ref_pend[i] = 0; end
          else begin ref_pend[i] = 1; exp_gl[i] = 1; end
          ref_t[i] = cyc;
        end else if (run && ref_pend[i] && cyc - ref_t[i] > thr[i]) begin
          fire = 1; ref_pend[i] = 0; ref_t[i] = cyc;
        end
        exp_cc[i] = fire;
      end
      p_last = p;
      cyc++;
    end
  end

  always @(negedge clk) begin
    if (rst_n && cyc > 0) begin
      checks++;
      if (cc1 !== exp_cc[0] || cc3 !== exp_cc[1] || gl1 !== exp_gl[0] || gl3 !== exp_gl[1]) begin
        failures++;
        $display("FAIL cyc %0d: cc1 %b/%b cc3 %b/%b gl1 %b/%b gl3 %b/%b", cyc,
                 cc1, exp_cc[0], cc3, exp_cc[1], gl1, exp_gl[0], gl3, exp_gl[1]);
      end
      pulses += cc1;
      glitches += gl1;
    end
  end

  initial begin
    run = 0; p = 0; p_last = 0;
    ref_t = '{-100, -100}; ref_pend = '{0, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // not running: flips ignored
    @(negedge clk) p = 8'h11;
    repeat (4) @(negedge clk);
    run = 1;
    repeat (4) @(negedge clk);
    // directed: isolated flip, glitch pair, flip
    p = 8'h01; repeat (4) @(negedge clk);
    p = 8'h03; @(negedge clk);
    p = 8'h07; repeat (6) @(negedge clk);
    p = 8'h80; repeat (6) @(negedge clk);
    // random traffic, several densities
    for (int d = 1; d <= 5; d++)
      for (int n = 0; n < 2000; n++) begin
        if ($urandom % d == 0) p = p ^ (8'(1) << ($urandom % 8));
        if ($urandom % 500 == 0) run = ~run;
        @(negedge clk);
      end
    run = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (pulses < 100 || glitches < 10) begin
      failures++;
      $display("FAIL: too few events, pulses %0d glitches %0d", pulses, glitches);
    end
    $display("pulses %0d glitches %0d", pulses, glitches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
