// tb_eop_top: end-to-end run of the whole link at its default parameters
// (8 data paths, THR = 1, HOLD = 2, two synchroniser stages).
//
// Sequence: power-up of both chips from the same stored seed; initialization
// phase (nothing may move); execution with all paths at 200 MHz (uniform
// mode), then with eight random rates from 5 to 195 MHz in 10 MHz steps
// (random mode); pause; then the tampering experiments: the ciphertext bus
// and then the control clock grounded for 1, 5, 10 and 100 data periods of
// 5 ns (2 cycles of the 400 MHz sampling clock); a final pause; and a
// power-up with mismatched stored seeds. The same wires also feed the
// obfuscation chip, which relays the permuted word to a fourth chip. The
// bench checks that the relay delivers the permuted last word after clean
// traffic. It also grounds the relay link's clock and checks that only the
// fourth chip counts it.
//
// Checked against reference models: new seeds, the seed check, every
// ciphertext word (plain word at the pulse XOR reference keypad), every
// decrypted word four cycles after its pulse while no tampering has
// happened, violation counts during clean traffic (zero clock-missing; one
// data-missing per pulse whose ciphertext happened to repeat), violation
// counts per tampering run (clock: within one of the number of grounded
// periods; data: the step to ground is itself accepted as the flip of the
// first grounded pulse, and a pulse whose plain word repeats sends nothing,
// and the flip back when the ground is released can answer the last grounded
// pulse if it is still inside its hold window, so up to two fewer plus a
// small allowance),
// and the copy of the counters in pause. Every mechanism must occur at least
// once: pulses, glitch-held flips, deferred pulses, both modes, both
// violation kinds, pause reporting, and both seed-check outcomes.
module tb_eop_top;
  import eop_pkg::*;
  import trivium_ref_pkg::*;
  import eop_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1.25 clk = ~clk;                 // 400 MHz sampling clock
  int checks = 0, failures = 0;

  phase_e       phase_sel;
  src_mode_e    mode;
  mhz_t         rate_u;
  mhz_t [7:0]   rate;
  logic [159:0] tx_seed_prev, rx_seed_prev, tx_seed_new, rx_seed_new;
  logic         tamper_clk, tamper_e;
  logic         seed_ok, tx_ready, rx_ready, clk_ctrl, clk_ctrl_tampered, glitch;
  logic         ver, clk_missing, data_missing;
  logic [7:0]   p, p_dec, enc_msg, enc_msg_tampered;
  logic [15:0]  mon_c, mon_d, out_c, out_d;
  logic [23:0]  pkey;
  logic [159:0] obf_seed_prev;
  logic         tamper_obf_clk, obf_seed_ok, obf_ready;
  logic [7:0]   obf_q, obf_p_dec;
  logic [15:0]  obf_in_c, obf_in_d, obf_out_c, obf_out_d;

  eop_top dut (
    .clk, .rst_n, .phase_sel, .mode, .rate_u, .rate, .tx_seed_prev, .rx_seed_prev,
    .tamper_clk, .tamper_e, .tx_seed_new, .rx_seed_new, .seed_ok, .tx_ready, .rx_ready,
    .p, .p_dec, .clk_ctrl, .enc_msg, .clk_ctrl_tampered, .enc_msg_tampered, .glitch,
    .ver, .clk_missing, .data_missing,
    .clk_ctrl_violation_monitor(mon_c), .counter_enc_msg_monitor(mon_d),
    .clk_ctrl_violation_output(out_c), .enc_msg_violation_output(out_d),
    .pkey, .obf_seed_prev, .tamper_obf_clk, .obf_q, .obf_p_dec, .obf_seed_ok, .obf_ready,
    .obf_in_clk_violation(obf_in_c), .obf_in_data_violation(obf_in_d),
    .obf_out_clk_violation(obf_out_c), .obf_out_data_violation(obf_out_d));

  function automatic logic [7:0] permf(logic [23:0] k, logic [7:0] x);
    logic [7:0] y;
    for (int i = 0; i < 8; i++) y[i] = x[k[3*i +: 3]];
    return y;
  endfunction

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

  // ---------------------------------------------------------------- monitor
  tstate_t    s;
  bit         armed = 0, chk_dec = 0, expect_e = 0;
  longint     cyc = 0;
  logic [7:0] e_exp, e_prev, p_h1, p_h2, p_last_sent;
  int         exp_d_clean = 0;
  int         n_pulse = 0, n_glitch = 0, n_deferred = 0, n_cmiss = 0, n_dmiss = 0;
  int         n_uniform_pulses = 0, n_random_pulses = 0;
  longint     due [$];
  logic [7:0] dval [$];

  always @(negedge clk) begin
    cyc++;
    if (armed) begin
      if (expect_e) begin
        checks++;
        if (enc_msg !== e_exp) begin
          failures++; $display("FAIL: enc_msg %h exp %h at %0d", enc_msg, e_exp, cyc);
        end
      end
      expect_e = 0;
      if (due.size() > 0 && due[0] == cyc) begin
        logic [7:0] v;
        void'(due.pop_front());
        v = dval.pop_front();
        if (chk_dec) begin
          checks++;
          if (p_dec !== v) begin
            failures++; $display("FAIL: p_dec %h exp %h at %0d", p_dec, v, cyc);
          end
        end
      end
      if (clk_ctrl) begin
        logic [63:0] kp;
        kp = keypad(s, 8);
        e_prev = e_exp;
        e_exp = p ^ kp[7:0];
        if (chk_dec && e_exp == e_prev) exp_d_clean++;
        expect_e = 1;
        due.push_back(cyc + 4);
        dval.push_back(p);
        p_last_sent = p;
        n_pulse++;
        if (mode == MODE_UNIFORM) n_uniform_pulses++; else n_random_pulses++;
        if (p_h1 == p_h2) n_deferred++;
      end
      n_glitch += glitch;
      n_cmiss  += clk_missing;
      n_dmiss  += data_missing;
    end
    p_h2 = p_h1;
    p_h1 = p;
  end

  // ---------------------------------------------------------------- helpers
  task automatic power_up(logic [159:0] tx_prev, logic [159:0] rx_prev);
    rst_n = 0; phase_sel = PH_INIT; tamper_clk = 0; tamper_e = 0; tamper_obf_clk = 0;
    tx_seed_prev = tx_prev; rx_seed_prev = rx_prev;
    repeat (4) @(negedge clk);
    rst_n = 1;
    while (!(tx_ready && rx_ready)) @(negedge clk);
  endtask

  task automatic tamper_run(bit on_clk, int periods, output int dc, output int dd);
    int c0, d0;
    repeat (5 + $urandom % 7) @(negedge clk);
    c0 = mon_c; d0 = mon_d;
    if (on_clk) tamper_clk = 1; else tamper_e = 1;
    repeat (2 * periods) @(negedge clk);
    tamper_clk = 0; tamper_e = 0;
    repeat (12) @(negedge clk);
    dc = mon_c - c0; dd = mon_d - d0;
  endtask

  // ---------------------------------------------------------------- stimulus
  initial begin
    logic [159:0] prev, sn;
    int dc, dd;
    int durations [4] = '{1, 5, 10, 100};
    mode = MODE_UNIFORM; rate_u = 200;
    for (int n = 0; n < 8; n++) rate[n] = mhz_t'(5 + 10 * ($urandom % 20));
    prev = {$urandom, $urandom, $urandom, $urandom, $urandom};
    obf_seed_prev = {$urandom, $urandom, $urandom, $urandom, $urandom};
    begin
      int a [8];
      for (int i = 0; i < 8; i++) a[i] = i;
      for (int i = 7; i > 0; i--) begin
        int j, t;
        j = $urandom_range(i, 0);
        t = a[i]; a[i] = a[j]; a[j] = t;
      end
      for (int i = 0; i < 8; i++) pkey[3*i +: 3] = 3'(a[i]);
    end

    // power-up and seed check
    power_up(prev, prev);
    sn = seed_next(prev);
    check(tx_seed_new == sn && rx_seed_new == sn, "new seeds in both chips");
    check(seed_ok, "seed check passes with equal stored seeds");
    check(obf_ready && obf_seed_ok, "relay through the obfuscation chip ready, its seed check passes");
    s = cipher_for(sn);
    e_exp = enc_msg;
    p_h1 = p; p_h2 = p;
    armed = 1; chk_dec = 1;

    // initialization phase: nothing moves
    repeat (50) @(negedge clk);
    check(n_pulse == 0, "no pulses during initialization");

    // execution, uniform 200 MHz
    phase_sel = PH_EXEC;
    repeat (4000) @(negedge clk);
    // execution, random rates
    mode = MODE_RANDOM;
    repeat (4000) @(negedge clk);
    phase_sel = PH_PAUSE;
    repeat (10) @(negedge clk);
    check(mon_c == 0, $sformatf("no clock-missing in clean traffic (%0d)", mon_c));
    check(mon_d == 16'(exp_d_clean),
          $sformatf("data-missing in clean traffic %0d, repeated ciphertexts %0d", mon_d, exp_d_clean));
    check(out_c == mon_c && out_d == mon_d, "counters reported in pause");
    check(p_dec == p_last_sent, "receiver holds the last word in pause");
    check(obf_q == permf(pkey, p_last_sent) && obf_p_dec == permf(pkey, p_last_sent),
          $sformatf("relay: chip 3 %h, chip 4 %h, expected permuted word %h", obf_q, obf_p_dec, permf(pkey, p_last_sent)));
    check(obf_in_c == 0 && obf_out_c == 0,
          $sformatf("relay: no clock-missing in clean traffic (%0d, %0d)", obf_in_c, obf_out_c));
    check(obf_in_d == mon_d, "chip 3 sees the same link as chip 2");

    // ground the clock of the chip 3 -> chip 4 link for 5 periods: only chip 4 counts
    phase_sel = PH_EXEC; mode = MODE_UNIFORM;
    repeat (20) @(negedge clk);
    tamper_obf_clk = 1;
    repeat (10) @(negedge clk);
    tamper_obf_clk = 0;
    repeat (20) @(negedge clk);
    $display("relay link clock grounded 5x5ns: chip 4 clock-missing %0d", obf_out_c);
    check(obf_out_c >= 4 && obf_out_c <= 6, $sformatf("chip 4 clock-missing %0d for 5 grounded periods", obf_out_c));
    check(mon_c == 0 && obf_in_c == 0, "relay-link attack not seen on the first link");

    // tampering on the ciphertext bus: keypads stay aligned
    phase_sel = PH_EXEC; mode = MODE_UNIFORM;
    chk_dec = 0;
    foreach (durations[i]) begin
      tamper_run(0, durations[i], dc, dd);
      $display("data path grounded %0dx5ns: data-missing %0d clock-missing %0d",
               durations[i], dd, dc);
      check(dd + dc >= durations[i] - 2 - durations[i] / 25 && dd + dc <= durations[i] + 1,
            $sformatf("violations for %0d grounded periods", durations[i]));
    end
    // clean traffic again: decryption still correct
    due.delete(); dval.delete();
    repeat (20) @(negedge clk);
    chk_dec = 1;
    repeat (400) @(negedge clk);
    chk_dec = 0;
    // tampering on the control clock: the receiver loses step for good
    foreach (durations[i]) begin
      tamper_run(1, durations[i], dc, dd);
      $display("control clock grounded %0dx5ns: clock-missing %0d data-missing %0d",
               durations[i], dc, dd);
      check(dc >= durations[i] - 1 && dc <= durations[i] + 1,
            $sformatf("clock-missing for %0d grounded periods", durations[i]));
    end
    phase_sel = PH_PAUSE;
    repeat (5) @(negedge clk);
    check(out_c == mon_c && out_d == mon_d && out_c > 0 && out_d > 0,
          "violation counts reported in pause");
    check(obf_in_c == mon_c, $sformatf("chip 3 counts the same clock attacks as chip 2 (%0d, %0d)", obf_in_c, mon_c));

    // power-up with different stored seeds in the two chips
    armed = 0;
    power_up(prev, ~prev);
    check(!seed_ok, "seed check fails with different stored seeds");

    // every mechanism happened
    $display("pulses %0d (uniform %0d random %0d) glitch-held %0d deferred %0d clock-missing %0d data-missing %0d",
             n_pulse, n_uniform_pulses, n_random_pulses, n_glitch, n_deferred, n_cmiss, n_dmiss);
    check(n_uniform_pulses > 0, "uniform mode exercised");
    check(n_random_pulses > 0, "random mode exercised");
    check(n_glitch > 0, "glitch suppression exercised");
    check(n_deferred > 0, "deferred pulse exercised");
    check(n_cmiss > 0, "clock-missing detection exercised");
    check(n_dmiss > 0, "data-missing detection exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
