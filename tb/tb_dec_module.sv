// tb_dec_module: feeds the decryption module with ciphertext made from the
// reference Trivium (pulse on clk_ctrl, ciphertext one cycle later, as the
// sender does) and checks that the plain word comes back two cycles after
// the ciphertext, that one clock edge steps the cipher once however long
// clk_ctrl stays high, and that a missing edge desynchronises it.
module tb_dec_module;
  import trivium_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        load, cc, ready;
  logic [79:0] key, iv;
  logic [7:0]  e, k, p_dec;

  dec_module dut (.clk, .rst_n, .load, .key, .iv, .clk_ctrl(cc), .e, .ready, .k, .p_dec);

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
    logic [7:0] p;
    int bad;
    load = 0; cc = 0; e = 0;
    key = {$urandom, $urandom, $urandom};
    iv  = {$urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    load = 1; @(negedge clk); load = 0;
    while (!ready) @(negedge clk);
    s = setup(key, iv);
    for (int n = 0; n < 500; n++) begin
      int hi;
      p = 8'($urandom);
      kp = keypad(s, 8);
      hi = 1 + (n % 3);          // pulse widths 1..3 cycles
      cc = 1;
      @(negedge clk);
      e = p ^ kp[7:0];
      repeat (hi - 1) @(negedge clk);
      cc = 0;
      repeat (2) @(negedge clk);
      check(p_dec == p, $sformatf("p_dec %h exp %h", p_dec, p));
    end
    // a lost edge: the sender steps, the receiver does not
    kp = keypad(s, 8);
    bad = 0;
    for (int n = 0; n < 20; n++) begin
      p = 8'($urandom);
      kp = keypad(s, 8);
      cc = 1; @(negedge clk); e = p ^ kp[7:0]; cc = 0;
      repeat (2) @(negedge clk);
      bad += (p_dec != p);
    end
    check(bad > 10, "desynchronised after a lost edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
