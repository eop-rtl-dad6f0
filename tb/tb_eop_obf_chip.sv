// tb_eop_obf_chip: three-chip chain for the obfuscation scenarios, at the
// default parameters (8 data paths, THR = 1, HOLD = 2, two synchroniser
// stages, 400 MHz sampling clock).
//
// Chip 1 is an eop_sender. Its ciphertext and control clock feed two chip-3
// instances: one in scenario (d), which re-encrypts towards chip 2 (an
// eop_receiver), and one in scenario (c), which drives the permuted plain
// word out. Link 1 (chip 1 to chip 3) and link 2 (chip 3 to chip 2) use
// different stored seeds. The permutation key is a random permutation.
//
// Checked:
// * All seed checks pass.
// * Uniform traffic at 20 MHz: every word chip 1 sends must reappear, in
//   order and permuted, at chip 3 (both scenarios) and at chip 2.
// * Random rates from 5 to 195 MHz: after a pause, all three agree on the
//   last word.
// * Link 2 carries ciphertext, not the permuted plain word.
// * Clean traffic raises no clock violation on either link.
// * Grounding the link-2 control clock is counted by chip 2 only.
// * Grounding the link-1 control clock is counted by chip 3.
module tb_eop_obf_chip;
  import eop_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1.25 clk = ~clk;
  int checks = 0, failures = 0;

  phase_e       phase;
  src_mode_e    mode;
  mhz_t         rate_u;
  mhz_t [7:0]   rate;
  logic [159:0] seed1, seed2;
  logic [23:0]  pkey;
  logic         t1, t2;

  // chip 1
  logic [159:0] s1_new;
  logic [31:0]  d1;
  logic         c1_ready, c1_clk, c1_glitch;
  logic [7:0]   c1_p, c1_e;
  // chip 3, scenario (d)
  logic [159:0] s3_in, s3_out;
  logic [31:0]  d3;
  logic         c3_ok, c3_in_ready, c3_ver, c3_cm, c3_dm, c3_out_ready, c3_clk, c3_glitch;
  logic [15:0]  c3_mon_c, c3_mon_d, c3_out_c, c3_out_d;
  logic [7:0]   c3_q, c3_e;
  // chip 3, scenario (c)
  logic         cc_ok, cc_in_ready, cc_ver, cc_cm, cc_dm, cc_out_ready, cc_clk, cc_glitch;
  logic [15:0]  cc_mon_c, cc_mon_d, cc_out_c, cc_out_d;
  logic [7:0]   cc_q, cc_e;
  logic [159:0] cc_s_in, cc_s_out;
  logic [31:0]  cc_d;
  // chip 2
  logic [159:0] s2_new;
  logic         c2_ok, c2_ready, c2_ver, c2_cm, c2_dm;
  logic [7:0]   c2_p;
  logic [15:0]  c2_mon_c, c2_mon_d, c2_out_c, c2_out_d;

  eop_sender chip1 (
    .clk, .rst_n, .phase, .mode, .rate_u, .rate, .seed_prev(seed1),
    .seed_new(s1_new), .seed_digest(d1), .ready(c1_ready),
    .p(c1_p), .e(c1_e), .clk_ctrl(c1_clk), .glitch(c1_glitch));

  eop_obf_chip chip3 (
    .clk, .rst_n, .phase, .pkey,
    .in_seed_prev(seed1), .in_digest(d1), .in_e(c1_e), .in_clk_ctrl(c1_clk & ~t1),
    .in_seed_new(s3_in), .in_seed_ok(c3_ok), .in_ready(c3_in_ready),
    .ver(c3_ver), .clk_missing(c3_cm), .data_missing(c3_dm),
    .clk_ctrl_violation_monitor(c3_mon_c), .counter_enc_msg_monitor(c3_mon_d),
    .clk_ctrl_violation_output(c3_out_c), .enc_msg_violation_output(c3_out_d),
    .q(c3_q), .out_seed_prev(seed2), .out_seed_new(s3_out), .out_digest(d3),
    .out_ready(c3_out_ready), .out_e(c3_e), .out_clk_ctrl(c3_clk), .out_glitch(c3_glitch));

  eop_obf_chip #(.ENC_OUT(1'b0)) chip3c (
    .clk, .rst_n, .phase, .pkey,
    .in_seed_prev(seed1), .in_digest(d1), .in_e(c1_e), .in_clk_ctrl(c1_clk),
    .in_seed_new(cc_s_in), .in_seed_ok(cc_ok), .in_ready(cc_in_ready),
    .ver(cc_ver), .clk_missing(cc_cm), .data_missing(cc_dm),
    .clk_ctrl_violation_monitor(cc_mon_c), .counter_enc_msg_monitor(cc_mon_d),
    .clk_ctrl_violation_output(cc_out_c), .enc_msg_violation_output(cc_out_d),
    .q(cc_q), .out_seed_prev(seed2), .out_seed_new(cc_s_out), .out_digest(cc_d),
    .out_ready(cc_out_ready), .out_e(cc_e), .out_clk_ctrl(cc_clk), .out_glitch(cc_glitch));

  eop_receiver chip2 (
    .clk, .rst_n, .phase, .seed_prev(seed2), .digest_in(d3),
    .e_in(c3_e), .clk_ctrl_in(c3_clk & ~t2),
    .seed_new(s2_new), .seed_ok(c2_ok), .ready(c2_ready), .p_dec(c2_p),
    .ver(c2_ver), .clk_missing(c2_cm), .data_missing(c2_dm),
    .clk_ctrl_violation_monitor(c2_mon_c), .counter_enc_msg_monitor(c2_mon_d),
    .clk_ctrl_violation_output(c2_out_c), .enc_msg_violation_output(c2_out_d));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] permf(logic [23:0] k, logic [7:0] x);
    logic [7:0] y;
    for (int i = 0; i < 8; i++) y[i] = x[k[3*i +: 3]];
    return y;
  endfunction

  // ---------------------------------------------------------------- monitor
  bit         track = 0;
  logic [7:0] p_prev, q3_prev, qc_prev, p2_prev;
  logic [7:0] q3 [$], qc [$], q2 [$];
  int         n_words = 0, n_c3 = 0, n_cc = 0, n_c2 = 0, n_e_differs = 0, n_out_pulses = 0;

  always @(negedge clk) begin
    if (track) begin
      // a word equal to the receivers' reset word (00) shows no change there
      if (c1_p != p_prev && !(n_words == 0 && c1_p == 8'h00)) begin
        q3.push_back(c1_p); qc.push_back(c1_p); q2.push_back(c1_p);
        n_words++;
      end
      if (c3_q != q3_prev) begin
        check(q3.size() > 0 && c3_q == permf(pkey, q3[0]),
              $sformatf("chip 3 (d) word %h, expected %h", c3_q, q3.size() ? permf(pkey, q3[0]) : 8'hxx));
        if (q3.size()) void'(q3.pop_front());
        n_c3++;
      end
      if (cc_q != qc_prev) begin
        check(qc.size() > 0 && cc_q == permf(pkey, qc[0]) && cc_e == cc_q,
              $sformatf("chip 3 (c) word %h out %h", cc_q, cc_e));
        if (qc.size()) void'(qc.pop_front());
        n_cc++;
      end
      if (c2_p != p2_prev) begin
        check(q2.size() > 0 && c2_p == permf(pkey, q2[0]),
              $sformatf("chip 2 word %h, expected %h", c2_p, q2.size() ? permf(pkey, q2[0]) : 8'hxx));
        if (q2.size()) void'(q2.pop_front());
        n_c2++;
      end
      if (c3_clk) n_out_pulses++;
      if (c3_e != c3_q) n_e_differs++;
    end
    p_prev = c1_p; q3_prev = c3_q; qc_prev = cc_q; p2_prev = c2_p;
  end

  task automatic cycles(int n);
    repeat (n) @(negedge clk);
  endtask

  initial begin
    int a [8];
    logic [15:0] m2c, m3c, m2d, m3d;
    phase = PH_INIT; mode = MODE_UNIFORM; rate_u = 8'd20;
    for (int i = 0; i < 8; i++) rate[i] = 8'd5 + 8'(10 * $urandom_range(19, 0));
    seed1 = {$urandom, $urandom, $urandom, $urandom, $urandom};
    seed2 = {$urandom, $urandom, $urandom, $urandom, $urandom};
    t1 = 0; t2 = 0;
    for (int i = 0; i < 8; i++) a[i] = i;
    for (int i = 7; i > 0; i--) begin
      int j, t;
      j = $urandom_range(i, 0);
      t = a[i]; a[i] = a[j]; a[j] = t;
    end
    for (int i = 0; i < 8; i++) pkey[3*i +: 3] = 3'(a[i]);
    cycles(3); rst_n = 1;

    // power-up
    cycles(400);
    check(c1_ready && c3_in_ready && c3_out_ready && c2_ready && cc_in_ready, "all ciphers ready");
    check(c3_ok && cc_ok && c2_ok, "seed digests match on both links");
    check(s3_in == s1_new && s2_new == s3_out && s1_new != s3_out, "link seeds shared per link, distinct across links");

    // uniform traffic, every word tracked through the chain
    track = 1;
    phase = PH_EXEC;
    cycles(3000);
    phase = PH_PAUSE;
    cycles(40);
    track = 0;
    check(n_words >= 100, $sformatf("uniform words sent: %0d", n_words));
    check(n_c3 == n_words && n_cc == n_words && n_c2 == n_words,
          $sformatf("words delivered: sent %0d, chip 3 (d) %0d, (c) %0d, chip 2 %0d", n_words, n_c3, n_cc, n_c2));
    check(n_out_pulses == n_words, $sformatf("link-2 pulses %0d for %0d words", n_out_pulses, n_words));
    check(n_e_differs > 2000, $sformatf("link 2 differs from the plain word in %0d cycles", n_e_differs));
    q3.delete(); qc.delete(); q2.delete();

    // random rates; only the settled word is compared
    mode = MODE_RANDOM;
    phase = PH_EXEC;
    cycles(3000);
    phase = PH_PAUSE;
    cycles(40);
    check(c3_q == permf(pkey, c1_p) && cc_q == permf(pkey, c1_p) && c2_p == permf(pkey, c1_p),
          $sformatf("settled word: chip 1 %h, chip 3 %h/%h, chip 2 %h, expected %h",
                    c1_p, c3_q, cc_q, c2_p, permf(pkey, c1_p)));
    check(c3_mon_c == 0 && cc_mon_c == 0 && c2_mon_c == 0,
          $sformatf("no clock violations in clean traffic: %0d %0d %0d", c3_mon_c, cc_mon_c, c2_mon_c));
    check(c3_mon_d <= 8 && c2_mon_d <= 8,
          $sformatf("data-missing only from repeated ciphertext: %0d %0d", c3_mon_d, c2_mon_d));
    check(c3_out_c == c3_mon_c && c2_out_d == c2_mon_d, "counters copied in pause");

    // ground the link-2 control clock for 30 cycles of 20 MHz traffic
    mode = MODE_UNIFORM;
    m2c = c2_mon_c; m3c = c3_mon_c; m2d = c2_mon_d; m3d = c3_mon_d;
    phase = PH_EXEC;
    cycles(200);
    t2 = 1; cycles(30); t2 = 0;
    cycles(200);
    phase = PH_PAUSE;
    cycles(40);
    check(c2_mon_c - m2c >= 1 && c2_mon_c - m2c <= 2,
          $sformatf("link-2 clock grounded: chip 2 counted %0d", c2_mon_c - m2c));
    check(c3_mon_c == m3c, "link-2 attack not seen by chip 3");

    // ground the link-1 control clock
    m3c = c3_mon_c;
    phase = PH_EXEC;
    cycles(200);
    t1 = 1; cycles(30); t1 = 0;
    cycles(200);
    phase = PH_PAUSE;
    cycles(40);
    check(c3_mon_c - m3c >= 1 && c3_mon_c - m3c <= 2,
          $sformatf("link-1 clock grounded: chip 3 counted %0d", c3_mon_c - m3c));
    check(cc_mon_c == 0, "scenario (c) chip on the untampered branch stays clean");

    $display("words %0d, link-2 pulses %0d", n_words, n_out_pulses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
