// tb_trivium_ref_pkg: bit-serial Trivium reference for the testbenches.
// Follows the cipher's specification one step at a time (state s1..s288,
// key in s1..s80, IV in s94..s173, s286..s288 = 1, 1152 blank steps); key bit
// i-1 is K_i and IV bit i-1 is IV_i, and keystream bit j of a word is the
// j-th output, the same conventions as the RTL core.
package tb_trivium_ref_pkg;
  class trivium_ref;
    bit s [1:288];
    function void init(logic [79:0] key, logic [79:0] iv);
      for (int i = 1; i <= 288; i++) s[i] = 0;
      for (int i = 1; i <= 80; i++) s[i] = key[i-1];
      for (int i = 1; i <= 80; i++) s[93+i] = iv[i-1];
      s[286] = 1; s[287] = 1; s[288] = 1;
      for (int i = 0; i < 1152; i++) void'(step());
    endfunction
    function bit step();
      bit t1, t2, t3, z;
      t1 = s[66] ^ s[93]; t2 = s[162] ^ s[177]; t3 = s[243] ^ s[288];
      z = t1 ^ t2 ^ t3;
      t1 = t1 ^ (s[91] & s[92]) ^ s[171];
      t2 = t2 ^ (s[175] & s[176]) ^ s[264];
      t3 = t3 ^ (s[286] & s[287]) ^ s[69];
      for (int i = 93; i > 1; i--) s[i] = s[i-1];
      s[1] = t3;
      for (int i = 177; i > 94; i--) s[i] = s[i-1];
      s[94] = t1;
      for (int i = 288; i > 178; i--) s[i] = s[i-1];
      s[178] = t2;
      return z;
    endfunction
    function logic [63:0] word();
      logic [63:0] w;
      for (int j = 0; j < 64; j++) w[j] = step();
      return w;
    endfunction
  endclass
endpackage
