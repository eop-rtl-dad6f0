// tb_eop_sender: runs the sending chip alone. Checks the power-up sequence
// (seed update, key/IV load, warm-up: ready 1 + 161 + 144 cycles after
// reset), the new seed and its digest against the reference, that every
// control-clock pulse is followed one cycle later by the ciphertext
// (p at the pulse) XOR (reference keypad), that the ciphertext never moves
// without a pulse, and that nothing moves outside the execution phase.
module tb_eop_sender;
  import eop_pkg::*;
  import trivium_ref_pkg::*;
  import eop_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  phase_e       phase;
  src_mode_e    mode;
  mhz_t         rate_u;
  mhz_t [7:0]   rate;
  logic [159:0] seed_prev, seed_new;
  logic [31:0]  seed_digest;
  logic         ready, clk_ctrl, glitch;
  logic [7:0]   p, e;

  eop_sender dut (.clk, .rst_n, .phase, .mode, .rate_u, .rate, .seed_prev, .seed_new,
                  .seed_digest, .ready, .p, .e, .clk_ctrl, .glitch);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tstate_t s;
  bit      armed = 0, expect_e = 0;
  logic [7:0] e_exp;
  int      pulses = 0, glitches = 0;

  always @(negedge clk) if (armed) begin
    if (expect_e) begin
      checks++;
      if (e !== e_exp) begin failures++; $display("FAIL: e %h exp %h", e, e_exp); end
    end else begin
      checks++;
      if (e !== e_exp) begin failures++; $display("FAIL: e moved without a pulse"); end
    end
    expect_e = 0;
    if (clk_ctrl) begin
      logic [63:0] kp;
      kp = keypad(s, 8);
      e_exp = p ^ kp[7:0];
      expect_e = 1;
      pulses++;
    end
    glitches += glitch;
  end

  initial begin
    int lat;
    logic [159:0] sn;
    phase = PH_INIT; mode = MODE_UNIFORM; rate_u = 200;
    for (int n = 0; n < 8; n++) rate[n] = mhz_t'(5 + 10 * ($urandom % 20));
    seed_prev = {$urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    lat = 0;
    while (!ready) begin @(negedge clk); lat++; end
    check(lat == 1 + 161 + 144, $sformatf("ready after %0d cycles", lat));
    sn = seed_next(seed_prev);
    check(seed_new == sn, "new seed");
    check(seed_digest == digest(sn), "digest");
    s = cipher_for(sn);
    e_exp = e;
    armed = 1;
    repeat (50) @(negedge clk);
    check(pulses == 0, "no pulses in initialization");
    phase = PH_EXEC;
    repeat (3000) @(negedge clk);
    mode = MODE_RANDOM;
    repeat (3000) @(negedge clk);
    phase = PH_PAUSE;
    begin
      int pp;
      repeat (3) @(negedge clk);
      pp = pulses;
      repeat (100) @(negedge clk);
      check(pulses == pp, "no pulses in pause");
    end
    check(pulses > 1000 && glitches > 10, $sformatf("pulses %0d glitches %0d", pulses, glitches));
    $display("pulses %0d glitches %0d", pulses, glitches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
