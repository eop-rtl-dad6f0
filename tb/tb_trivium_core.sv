// tb_trivium_core: checks the unrolled Trivium core against the bit-serial
// reference model for random keys and IVs, at the 8-bit default width and
// at 64 bits (the widest in the paper's gate-count table). Also checks the
// warm-up latency (1152 rounds at W rounds per cycle), that the keypad only
// moves on step, and that a reload restarts the sequence. Finally checks the
// published eSTREAM known answer for key 80 00 .. 00, IV 00 .. 00: keystream
// bytes 38 eb 86 ff 73 0d 7a 9c. In that convention the key is written as
// bytes k[0..9] and K1..K8 are bits 7..0 of k[9], K9..K16 bits 7..0 of k[8],
// and so on; each keystream byte holds 8 consecutive outputs, first in bit 0.
module tb_trivium_core;
  import trivium_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        load, step8, step64;
  logic [79:0] key, iv;
  logic        rdy8, rdy64;
  logic [7:0]  ks8, ksn8;
  logic [63:0] ks64, ksn64;

  trivium_core dut8 (.clk, .rst_n, .load, .key, .iv, .step(step8),
                     .ready(rdy8), .ks_next(ksn8), .ks(ks8));
  trivium_core #(.W(64)) dut64 (.clk, .rst_n, .load, .key, .iv, .step(step64),
                     .ready(rdy64), .ks_next(ksn64), .ks(ks64));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tstate_t s8, s64;
    logic [63:0] exp, exp8;
    int c8, c64;
    load = 0; step8 = 0; step64 = 0; key = '0; iv = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      @(negedge clk);
      key = {$urandom, $urandom, $urandom};
      iv  = {$urandom, $urandom, $urandom};
      if (trial == 0) begin key = '0; iv = '0; end
      load = 1;
      @(negedge clk);
      load = 0;
      s8  = setup(key, iv);
      s64 = s8;
      // warm-up latency
      c8 = 1; c64 = 1;
      while (!(rdy8 && rdy64)) begin
        @(negedge clk);
        if (!rdy8) c8++;
        if (!rdy64) c64++;
      end
      check(c8 == 1152/8 && c64 == 1152/64,
            $sformatf("warm-up cycles %0d/%0d", c8, c64));
      for (int n = 0; n < 60; n++) begin
        bit do8, do64;
        do8  = ($urandom % 3) != 0;
        do64 = ($urandom % 2) != 0;
        step8 = do8; step64 = do64;
        if (do8) begin
          exp8 = keypad(s8, 8);
          check(ksn8 == exp8[7:0], $sformatf("ks_next8 %h exp %h", ksn8, exp8[7:0]));
        end
        if (do64) begin
          exp = keypad(s64, 64);
          check(ksn64 == exp, $sformatf("ks_next64 %h exp %h", ksn64, exp));
        end
        @(negedge clk);
        step8 = 0; step64 = 0;
        if (do8) check(ks8 == exp8[7:0], "ks8 registered after step");
        if (do64) check(ks64 == exp, "ks64 registered after step");
        @(negedge clk);
      end
    end
    // keypad register holds without step and matches the last step
    begin
      logic [7:0] hold;
      hold = ks8;
      repeat (5) @(negedge clk);
      check(ks8 == hold, "ks8 held without step");
    end
    // known answer
    begin
      logic [79:0] kh;
      logic [63:0] kat;
      kh  = 80'h80000000000000000000;
      kat = 64'h38eb86ff730d7a9c;
      @(negedge clk);
      for (int i = 1; i <= 80; i++) key[i-1] = kh[8*((i-1)/8) + 7 - (i-1)%8];
      iv = '0;
      load = 1; @(negedge clk); load = 0;
      while (!rdy8) @(negedge clk);
      for (int j = 0; j < 8; j++) begin
        step8 = 1; @(negedge clk); step8 = 0;
        check(ks8 == kat[63-8*j -: 8], $sformatf("known answer byte %0d: %h exp %h", j, ks8, kat[63-8*j -: 8]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
