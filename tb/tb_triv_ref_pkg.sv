// tb_triv_ref_pkg: bit-serial Trivium reference for the testbenches, written
// straight from the cipher specification with 1-based state bits s[1..288].
// Bit order matches the RTL convention: key bit i -> s_(i+1), IV bit i ->
// s_(94+i), keystream bit z_(j+1) -> word bit j. Also holds the IV slot layout.
package tb_triv_ref_pkg;

  class triv_ref;
    bit s[1:288];

    function bit clock();
      bit t1, t2, t3, z;
      t1 = s[66] ^ s[93];
      t2 = s[162] ^ s[177];
      t3 = s[243] ^ s[288];
      z = t1 ^ t2 ^ t3;
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

    function void init(logic [79:0] k, logic [79:0] v);
      bit z;
      for (int i = 1; i <= 288; i++) s[i] = 0;
      for (int i = 0; i < 80; i++) s[1+i] = k[i];
      for (int i = 0; i < 80; i++) s[94+i] = v[i];
      s[286] = 1; s[287] = 1; s[288] = 1;
      for (int i = 0; i < 1152; i++) z = clock();
    endfunction

    function logic [31:0] word();
      logic [31:0] w;
      for (int j = 0; j < 32; j++) w[j] = clock();
      return w;
    endfunction
  endclass

  // IV slot words as stored in memory
  function automatic logic [31:0] slot_word(logic [79:0] iv, int i);
    return (i == 0) ? iv[31:0] : (i == 1) ? iv[63:32] : {16'h0, iv[79:64]};
  endfunction

endpackage
