// tb_ctrl_clk_ver: drives the verifier with a sender-like stream (a clock
// pulse, the ciphertext changes one cycle later, pulses 2..6 cycles apart)
// and injects the two tampering kinds at random: a removed clock pulse whose
// ciphertext change still arrives (one clock-missing violation each) and a
// ciphertext change that never comes (one data-missing violation each).
// Injections are separated by a clean transfer, since a held data change
// directly followed by a removed pulse looks like one legal transfer.
// Expected counts come from the injection log. Also checks that nothing is
// counted while not running, that the output copies move only in pause,
// and the verdict output.
module tb_ctrl_clk_ver;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        run, pause, cc;
  logic [7:0]  e;
  logic        ver, clk_missing, data_missing;
  logic [15:0] mon_c, mon_d, out_c, out_d;

  ctrl_clk_ver dut (.clk, .rst_n, .run, .pause, .clk_ctrl(cc), .e, .ver,
                    .clk_missing, .data_missing,
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

  int exp_c = 0, exp_d = 0;

  // one transfer: pulse, then data change one cycle later, then a gap
  task automatic xfer(bit drop_clk, bit drop_data, int gap);
    cc = !drop_clk;
    @(negedge clk);
    cc = 0;
    if (!drop_data) e = e ^ 8'(1 + $urandom % 255);
    repeat (gap) @(negedge clk);
  endtask

  initial begin
    run = 0; pause = 0; cc = 0; e = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // not running: tampered-looking traffic is ignored
    xfer(1, 0, 3); xfer(0, 1, 3);
    repeat (4) @(negedge clk);
    check(mon_c == 0 && mon_d == 0, "no counting while not running");
    run = 1;
    repeat (3) @(negedge clk);
    for (int n = 0; n < 3000; n++) begin
      int r;
      bit dc, dd;
      r = $urandom % 20;
      dc = (r == 0);
      dd = (r == 1);
      exp_c += dc;
      exp_d += dd;
      xfer(dc, dd, 1 + $urandom % 5);
      if (dc || dd) begin
        @(negedge clk);
        check(ver == 1'b1, "ver flags tampering");
        repeat (3) @(negedge clk);
        // a clean transfer separates injections: a data-missing edge followed
        // directly by a clock-missing flip pairs up as one legal transfer
        xfer(0, 0, 2);
      end
      if (n % 500 == 0) check(mon_c == 16'(exp_c) && mon_d == 16'(exp_d),
        $sformatf("running counts c %0d/%0d d %0d/%0d", mon_c, exp_c, mon_d, exp_d));
    end
    repeat (6) @(negedge clk);
    check(mon_c == 16'(exp_c), $sformatf("clock-missing count %0d exp %0d", mon_c, exp_c));
    check(mon_d == 16'(exp_d), $sformatf("data-missing count %0d exp %0d", mon_d, exp_d));
    check(out_c == 0 && out_d == 0, "outputs untouched before pause");
    xfer(0, 0, 3);
    check(ver == 1'b0, "ver safe after a clean transfer");
    run = 0; pause = 1;
    @(negedge clk);
    check(out_c == mon_c && out_d == mon_d, "outputs copied in pause");
    $display("clock-missing %0d data-missing %0d", exp_c, exp_d);
    check(exp_c > 10 && exp_d > 10, "both violation kinds exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
