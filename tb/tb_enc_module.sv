// tb_enc_module: checks the encryption module against the reference
// Trivium: after load and warm-up, every control-clock cycle must make the
// ciphertext p XOR (next keypad) one cycle later, and nothing may change
// between pulses. Also checks that pulses before ready are ignored.
module tb_enc_module;
  import trivium_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        load, cc, ready;
  logic [79:0] key, iv;
  logic [7:0]  p, k, e;

  enc_module dut (.clk, .rst_n, .load, .key, .iv, .clk_ctrl(cc), .p, .ready, .k, .e);

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

  initial begin
    tstate_t s;
    logic [63:0] kp;
    logic [7:0] e_exp;
    load = 0; cc = 0; p = 0;
    key = {$urandom, $urandom, $urandom};
    iv  = {$urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    load = 1; @(negedge clk); load = 0;
    // pulses during warm-up are ignored
    cc = 1; p = 8'h5a; @(negedge clk); cc = 0;
    check(e == 0, "no encryption before ready");
    while (!ready) @(negedge clk);
    s = setup(key, iv);
    e_exp = e;
    for (int n = 0; n < 500; n++) begin
      p = 8'($urandom);
      cc = 1;
      kp = keypad(s, 8);
      e_exp = p ^ kp[7:0];
      @(negedge clk);
      cc = 0;
      check(e == e_exp && k == kp[7:0], $sformatf("e %h exp %h", e, e_exp));
      repeat ($urandom % 3) begin
        p = 8'($urandom);
        @(negedge clk);
        check(e == e_exp, "e holds between pulses");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
