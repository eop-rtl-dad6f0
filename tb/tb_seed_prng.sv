// tb_seed_prng: checks the self-updating seed. For random previous seeds the
// new seed must equal 160 steps of the LFSR x^160+x^159+x^142+x^141 (modelled
// here bit by bit with 1-based indices), done must be seen 161 cycles after
// start (one load cycle, then 160 steps), the digest must be the XOR of the
// five 32-bit words of the seed, and chaining power-ups must give a new seed every time.
module tb_seed_prng;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         start, done;
  logic [159:0] seed_prev, seed;
  logic [31:0]  digest;

  seed_prng dut (.clk, .rst_n, .start, .seed_prev, .done, .seed, .digest);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [159:0] ref_next(logic [159:0] v);
    logic [1:160] s;           // s[i] = bit i-1
    for (int i = 1; i <= 160; i++) s[i] = v[i-1];
    repeat (160) begin
      logic fb;
      fb = s[160] ^ s[159] ^ s[142] ^ s[141];
      for (int i = 160; i >= 2; i--) s[i] = s[i-1];
      s[1] = fb;
    end
    for (int i = 1; i <= 160; i++) v[i-1] = s[i];
    return v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [159:0] prev, exp;
    int lat;
    start = 0; seed_prev = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    prev = {$urandom, $urandom, $urandom, $urandom, $urandom};
    for (int pu = 0; pu < 8; pu++) begin
      seed_prev = prev;
      start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      exp = ref_next(prev);
      check(lat == 161, $sformatf("latency %0d", lat));
      check(seed == exp, "new seed");
      check(digest == (exp[31:0] ^ exp[63:32] ^ exp[95:64] ^ exp[127:96] ^ exp[159:128]), "digest");
      check(seed != prev, "seed changes per power-up");
      prev = seed;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
