// eop_ref_pkg: reference models of the seed update shared by the chip-level
// testbenches: 160 steps of the LFSR x^160+x^159+x^142+x^141 written with
// 1-based indices, the 32-bit XOR-fold digest, and the key/IV split.
package eop_ref_pkg;
  import trivium_ref_pkg::*;

  function automatic logic [159:0] seed_next(logic [159:0] v);
    logic [1:160] s;
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

  function automatic logic [31:0] digest(logic [159:0] v);
    return v[31:0] ^ v[63:32] ^ v[95:64] ^ v[127:96] ^ v[159:128];
  endfunction

  function automatic tstate_t cipher_for(logic [159:0] seed);
    return setup(seed[79:0], seed[159:80]);
  endfunction
endpackage
