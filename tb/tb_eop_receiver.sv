// tb_eop_receiver: runs the receiving chip against a behavioural sender
// built from the reference models (same seed update, same Trivium; a pulse,
// then the ciphertext one cycle later). Checks the seed check in both
// outcomes, that each plain word comes out four cycles after its clock pulse
// (two synchroniser stages, one keypad step, one output register), that
// held ciphertext and removed pulses are counted as data-missing and
// clock-missing violations, and that the counts reach the outputs in pause.
module tb_eop_receiver;
  import eop_pkg::*;
  import trivium_ref_pkg::*;
  import eop_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  phase_e       phase;
  logic [159:0] seed_prev, seed_new;
  logic [31:0]  digest_in;
  logic [7:0]   e_in, p_dec;
  logic         clk_ctrl_in, seed_ok, ready, ver, clk_missing, data_missing;
  logic [15:0]  mon_c, mon_d, out_c, out_d;

  eop_receiver dut (.clk, .rst_n, .phase, .seed_prev, .digest_in, .e_in, .clk_ctrl_in,
                    .seed_new, .seed_ok, .ready, .p_dec, .ver, .clk_missing, .data_missing,
                    .clk_ctrl_violation_monitor(mon_c), .counter_enc_msg_monitor(mon_d),
                    .clk_ctrl_violation_output(out_c), .enc_msg_violation_output(out_d));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tstate_t s;
  int exp_c = 0, exp_d = 0;

  // one transfer of plain word p; returns nothing, checks p_dec 4 cycles on
  task automatic xfer(logic [7:0] p, bit drop_clk, bit drop_data, bit chk);
    logic [63:0] kp;
    logic [7:0] e_new;
    kp = keypad(s, 8);
    e_new = p ^ kp[7:0];
    clk_ctrl_in = !drop_clk;
    @(negedge clk);
    clk_ctrl_in = 0;
    if (!drop_data) begin
      if (e_new == e_in) exp_d++;       // unchanged ciphertext shows no flip
      e_in = e_new;
    end
    repeat (3) @(negedge clk);
    if (chk) check(p_dec == p, $sformatf("p_dec %h exp %h", p_dec, p));
  endtask

  task automatic power_up(logic [159:0] prev, logic [31:0] dig);
    rst_n = 0; phase = PH_INIT; clk_ctrl_in = 0; e_in = 0;
    seed_prev = prev; digest_in = dig;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);
  endtask

  initial begin
    logic [159:0] prev, sn;
    prev = {$urandom, $urandom, $urandom, $urandom, $urandom};
    sn = seed_next(prev);
    // mismatching seed: the digest from a different previous seed
    power_up(prev, digest(seed_next(~prev)));
    check(!seed_ok, "seed mismatch detected");
    power_up(prev, digest(sn));
    check(seed_ok && seed_new == sn, "seed match");
    s = cipher_for(sn);
    repeat (5) @(negedge clk);
    phase = PH_EXEC;
    repeat (4) @(negedge clk);
    for (int n = 0; n < 1000; n++) xfer(8'($urandom), 0, 0, 1);
    repeat (3) @(negedge clk);
    check(mon_c == 0 && mon_d == 16'(exp_d), $sformatf("clean run counts %0d %0d exp 0 %0d", mon_c, mon_d, exp_d));
    // held ciphertext: keypads stay aligned, one data-missing each
    for (int n = 0; n < 200; n++) begin
      bit dd;
      dd = ($urandom % 5 == 0);
      exp_d += dd;
      xfer(8'($urandom), 0, dd, !dd);
    end
    repeat (3) @(negedge clk);
    check(mon_d == 16'(exp_d), $sformatf("data-missing %0d exp %0d", mon_d, exp_d));
    // removed pulses: each is one clock-missing; decryption is lost after it
    for (int n = 0; n < 50; n++) begin
      bit dc;
      dc = (n % 4 == 1);
      exp_c += dc;
      xfer(8'($urandom), dc, 0, 0);
    end
    repeat (3) @(negedge clk);
    check(mon_c == 16'(exp_c), $sformatf("clock-missing %0d exp %0d", mon_c, exp_c));
    check(out_c == 0 && out_d == 0, "outputs wait for pause");
    phase = PH_PAUSE;
    @(negedge clk);
    check(out_c == mon_c && out_d == mon_d, "outputs copied in pause");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
