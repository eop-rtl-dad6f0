// trivium_ref_pkg: bit-serial Trivium reference model for the testbenches.
//
// Written straight from the Trivium specification with 1-based state
// indices (s[1]..s[288]), one round per call, so that it shares no code
// with the unrolled RTL core it checks.
package trivium_ref_pkg;

  typedef logic [1:288] tstate_t;

  // One round: returns z and updates the state.
  function automatic logic round(ref tstate_t s);
    logic t1, t2, t3, z;
    t1 = s[66] ^ s[93];
    t2 = s[162] ^ s[177];
    t3 = s[243] ^ s[288];
    z  = t1 ^ t2 ^ t3;
    t1 = t1 ^ (s[91] & s[92]) ^ s[171];
    t2 = t2 ^ (s[175] & s[176]) ^ s[264];
    t3 = t3 ^ (s[286] & s[287]) ^ s[69];
    for (int i = 93; i >= 2; i--) s[i] = s[i-1];
    s[1] = t3;
    for (int i = 177; i >= 95; i--) s[i] = s[i-1];
    s[94] = t1;
    for (int i = 288; i >= 179; i--) s[i] = s[i-1];
    s[178] = t2;
    return z;
  endfunction

  // Key/IV setup and 4 x 288 warm-up rounds. key[0] = K1, iv[0] = IV1.
  function automatic tstate_t setup(logic [79:0] key, logic [79:0] iv);
    tstate_t s;
    logic z;
    s = '0;
    for (int i = 1; i <= 80; i++) s[i] = key[i-1];
    for (int i = 1; i <= 80; i++) s[93+i] = iv[i-1];
    s[286] = 1'b1; s[287] = 1'b1; s[288] = 1'b1;
    for (int r = 0; r < 4*288; r++) z = round(s);
    return s;
  endfunction

  // w serial rounds packed LSB first.
  function automatic logic [63:0] keypad(ref tstate_t s, input int w);
    logic [63:0] k;
    k = '0;
    for (int i = 0; i < w; i++) k[i] = round(s);
    return k;
  endfunction

endpackage
