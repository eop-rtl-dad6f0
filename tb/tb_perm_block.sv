// tb_perm_block: checks the key-controlled permutation block at N = 8 and
// N = 16.
//
// For random keys (both true permutations and keys with repeated fields) and
// random input words, every output bit must equal the input bit named by its
// key field. It also checks the two properties that the obfuscation relies
// on. With a permutation key, the block is a bijection: distinct inputs give
// distinct outputs, and one-hot inputs stay one-hot. With a wrong
// permutation key, at least one one-hot input lands on a different output.
module tb_perm_block;
  int checks = 0, failures = 0;

  logic [23:0] k8;
  logic [7:0]  i8, o8;
  logic [63:0] k16;
  logic [15:0] i16, o16;

  perm_block #(.N(8))  dut8  (.pkey(k8),  .in(i8),  .out(o8));
  perm_block #(.N(16)) dut16 (.pkey(k16), .in(i16), .out(o16));

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

  // Fisher-Yates shuffle packed as 3-bit fields
  function automatic logic [23:0] rand_perm8();
    int a [8];
    logic [23:0] k;
    for (int i = 0; i < 8; i++) a[i] = i;
    for (int i = 7; i > 0; i--) begin
      int j, t;
      j = $urandom_range(i, 0);
      t = a[i]; a[i] = a[j]; a[j] = t;
    end
    for (int i = 0; i < 8; i++) k[3*i +: 3] = 3'(a[i]);
    return k;
  endfunction

  initial begin
    logic [23:0] kgood, kbad;
    // field-wise reference, random keys
    for (int t = 0; t < 2000; t++) begin
      k8  = (t % 2) ? rand_perm8() : 24'($urandom);
      i8  = 8'($urandom);
      k16 = {$urandom, $urandom};
      i16 = 16'($urandom);
      #1;
      for (int b = 0; b < 8; b++)
        check(o8[b] == i8[k8[3*b +: 3]], $sformatf("N=8 key %h in %h out %h bit %0d", k8, i8, o8, b));
      for (int b = 0; b < 16; b++)
        check(o16[b] == i16[k16[4*b +: 4]], $sformatf("N=16 key %h in %h out %h bit %0d", k16, i16, o16, b));
    end
    // bijection under a permutation key
    for (int t = 0; t < 20; t++) begin
      bit seen [256];
      k8 = rand_perm8();
      for (int v = 0; v < 256; v++) seen[v] = 0;
      for (int v = 0; v < 256; v++) begin
        i8 = 8'(v); #1;
        check(!seen[o8], $sformatf("key %h maps two inputs to %h", k8, o8));
        seen[o8] = 1;
        if ($countones(i8) == 1) check($countones(o8) == 1, "one-hot input not one-hot at output");
      end
    end
    // wrong permutation key moves at least one line
    for (int t = 0; t < 50; t++) begin
      int moved;
      kgood = rand_perm8();
      do kbad = rand_perm8(); while (kbad == kgood);
      moved = 0;
      for (int b = 0; b < 8; b++) begin
        logic [7:0] og;
        i8 = 8'(1) << b;
        k8 = kgood; #1; og = o8;
        k8 = kbad;  #1;
        if (o8 != og) moved++;
      end
      check(moved >= 2, $sformatf("wrong key %h vs %h moved %0d lines", kbad, kgood, moved));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
