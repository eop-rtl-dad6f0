// tb_internal_logic: checks the plain-data source. Each path's LFSR is
// modelled separately (x^16+x^14+x^13+x^11+1, seed 0xACE1 ^ (n << 4)). Over
// a window of T cycles a path set to r MHz must step exactly
// floor(T*r/SYS_MHZ) times from a fresh accumulator, every path's bit must
// follow its model, uniform mode must step all paths together, and nothing
// may move while not running.
module tb_internal_logic;
  import eop_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       run;
  src_mode_e  mode;
  mhz_t       rate_u;
  mhz_t [7:0] rate;
  logic [7:0] p, step_o;

  internal_logic dut (.clk, .rst_n, .run, .mode, .rate_u, .rate, .p, .step_o);

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

  logic [15:0] m [8];
  int cnt [8];
  bit bit_ok = 1;

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < 8; n++) if (step_o[n]) begin
      m[n] = {m[n][14:0], m[n][15] ^ m[n][13] ^ m[n][12] ^ m[n][10]};
      cnt[n]++;
    end
  end
  always @(negedge clk) if (rst_n)
    for (int n = 0; n < 8; n++) if (p[n] !== m[n][0]) bit_ok = 0;

  initial begin
    int T;
    run = 0; mode = MODE_RANDOM; rate_u = 200;
    for (int n = 0; n < 8; n++) begin
      rate[n] = mhz_t'(5 + 10 * ($urandom % 20));
      m[n] = 16'hACE1 ^ 16'(n << 4);
      cnt[n] = 0;
    end
    rate[0] = 200; rate[1] = 5;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    check(cnt.sum() == 0, "idle while not running");
    T = 4000;
    run = 1;
    repeat (T) @(negedge clk);
    run = 0;
    for (int n = 0; n < 8; n++)
      check(cnt[n] == (T * rate[n]) / 400, $sformatf("path %0d rate %0d steps %0d", n, rate[n], cnt[n]));
    // uniform mode (accumulators carry on from where they stopped)
    for (int n = 0; n < 8; n++) cnt[n] = 0;
    mode = MODE_UNIFORM; rate_u = 100;
    run = 1;
    for (int c = 0; c < 1000; c++) begin
      @(negedge clk);
      if (step_o != 8'h00 && step_o != 8'hff) begin
        check(0, "uniform mode steps all paths together");
        break;
      end
    end
    run = 0;
    check(cnt[3] >= 249 && cnt[3] <= 251, $sformatf("uniform 100 MHz steps %0d", cnt[3]));
    check(bit_ok, "path bits follow their LFSRs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
