// tb_eop_attack_trace: replays the published tampering trace on the whole
// link. After initialization (phase 0) the link runs (phase 1) with all 8
// paths at 200 MHz and three attacks are made, each grounding a board wire:
// attack 1 removes one control-clock pulse, attack 2 three pulses, attack 3
// grounds the ciphertext bus across five ciphertext words. The trace
// reports 4 clock violations and 4 data violations once the phase goes to
// pause (phase 2), and 0 on the output counters before that; this bench
// checks the same numbers. The step of the bus to ground is itself a data
// change and is paired with the first grounded word's clock edge, which is
// why five grounded words give four data violations.
module tb_eop_attack_trace;
  import eop_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1.25 clk = ~clk;
  int checks = 0, failures = 0;

  phase_e       phase_sel;
  mhz_t [7:0]   rate;
  logic [159:0] seed_prev, tx_seed_new, rx_seed_new;
  logic         tamper_clk, tamper_e;
  logic         seed_ok, tx_ready, rx_ready, clk_ctrl, clk_ctrl_tampered, glitch;
  logic         ver, clk_missing, data_missing;
  logic [7:0]   p, p_dec, enc_msg, enc_msg_tampered;
  logic [15:0]  mon_c, mon_d, out_c, out_d;

  eop_top dut (
    .clk, .rst_n, .phase_sel, .mode(MODE_UNIFORM), .rate_u(mhz_t'(200)), .rate,
    .tx_seed_prev(seed_prev), .rx_seed_prev(seed_prev),
    .tamper_clk, .tamper_e, .tx_seed_new, .rx_seed_new, .seed_ok, .tx_ready, .rx_ready,
    .p, .p_dec, .clk_ctrl, .enc_msg, .clk_ctrl_tampered, .enc_msg_tampered, .glitch,
    .ver, .clk_missing, .data_missing,
    .clk_ctrl_violation_monitor(mon_c), .counter_enc_msg_monitor(mon_d),
    .clk_ctrl_violation_output(out_c), .enc_msg_violation_output(out_d),
    .pkey(24'hfac688), .obf_seed_prev(~seed_prev), .tamper_obf_clk(1'b0),
    .obf_q(), .obf_p_dec(), .obf_seed_ok(), .obf_ready(),
    .obf_in_clk_violation(), .obf_in_data_violation(),
    .obf_out_clk_violation(), .obf_out_data_violation());

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ground a wire from a pulse cycle for `words` ciphertext words
  task automatic attack(bit on_clk, int words);
    while (!clk_ctrl) @(negedge clk);
    // the clock wire is grounded from a pulse; the bus from the cycle the
    // pulse's ciphertext word appears
    if (!on_clk) @(negedge clk);
    if (on_clk) tamper_clk = 1; else tamper_e = 1;
    repeat (2 * words) @(negedge clk);
    tamper_clk = 0; tamper_e = 0;
    repeat (30) @(negedge clk);
  endtask

  initial begin
    phase_sel = PH_INIT; tamper_clk = 0; tamper_e = 0;
    rate = '0;
    seed_prev = 160'h0123_4567_89ab_cdef_fedc_ba98_7654_3210_0f1e_2d3c;
    repeat (4) @(negedge clk);
    rst_n = 1;
    while (!(tx_ready && rx_ready)) @(negedge clk);
    check(seed_ok, "seeds agree");
    phase_sel = PH_EXEC;
    repeat (40) @(negedge clk);
    attack(1, 1);
    check(mon_c == 1 && mon_d == 0, $sformatf("after attack 1: %0d/%0d", mon_c, mon_d));
    repeat (40) @(negedge clk);
    attack(1, 3);
    check(mon_c == 4 && mon_d == 0, $sformatf("after attack 2: %0d/%0d", mon_c, mon_d));
    repeat (40) @(negedge clk);
    attack(0, 5);
    check(mon_c == 4 && mon_d == 4, $sformatf("after attack 3: %0d/%0d", mon_c, mon_d));
    check(out_c == 0 && out_d == 0, "output counters still 0 before pause");
    repeat (20) @(negedge clk);
    phase_sel = PH_PAUSE;
    repeat (2) @(negedge clk);
    check(out_c == 4 && out_d == 4, $sformatf("reported in pause: %0d/%0d", out_c, out_d));
    $display("clk_ctrl_violation_output %0d enc_msg_violation_output %0d", out_c, out_d);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
