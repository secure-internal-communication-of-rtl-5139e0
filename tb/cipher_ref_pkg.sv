// cipher_ref_pkg: bit-serial reference models of Trivium and Grain-128a
// for the testbenches, written straight from the published equations with
// 1-based register numbering (Trivium) and the sequence notation b_i, s_i
// (Grain-128a), one output bit per step. They also give the 32-bit
// keystream words the crypto IP uses: word n, bit j = keystream bit 32n+j.
package cipher_ref_pkg;

  // Trivium: key[i-1] = K_i, iv[i-1] = IV_i. Returns n keystream bits.
  function automatic void trivium_ref(input bit [79:0] key, input bit [79:0] iv,
                                      input int n, ref bit z[$]);
    bit s[1:288];
    bit t1, t2, t3;
    for (int i = 1; i <= 288; i++) s[i] = 0;
    for (int i = 1; i <= 80; i++) s[i] = key[i-1];
    for (int i = 1; i <= 80; i++) s[93+i] = iv[i-1];
    s[286] = 1; s[287] = 1; s[288] = 1;
    z.delete();
    for (int r = 0; r < 1152 + n; r++) begin
      t1 = s[66] ^ s[93];
      t2 = s[162] ^ s[177];
      t3 = s[243] ^ s[288];
      if (r >= 1152) z.push_back(t1 ^ t2 ^ t3);
      t1 = t1 ^ (s[91] & s[92]) ^ s[171];
      t2 = t2 ^ (s[175] & s[176]) ^ s[264];
      t3 = t3 ^ (s[286] & s[287]) ^ s[69];
      for (int i = 93; i >= 2; i--)   s[i] = s[i-1];
      s[1] = t3;
      for (int i = 177; i >= 95; i--) s[i] = s[i-1];
      s[94] = t1;
      for (int i = 288; i >= 179; i--) s[i] = s[i-1];
      s[178] = t2;
    end
  endfunction

  // Grain-128a pre-output keystream (no authentication): b_i = k_i,
  // s_i = IV_i, s_96..126 = 1, s_127 = 0, 256 initialisation steps.
  function automatic void grain_ref(input bit [127:0] key, input bit [95:0] iv,
                                    input int n, ref bit z[$]);
    bit b[], s[];
    int total;
    bit y, h;
    total = 256 + n;
    b = new[128 + total];
    s = new[128 + total];
    for (int i = 0; i < 128; i++) b[i] = key[i];
    for (int i = 0; i < 96; i++)  s[i] = iv[i];
    for (int i = 96; i < 127; i++) s[i] = 1;
    s[127] = 0;
    z.delete();
    for (int i = 0; i < total; i++) begin
      h = (b[i+12] & s[i+8]) ^ (s[i+13] & s[i+20]) ^ (b[i+95] & s[i+42])
        ^ (s[i+60] & s[i+79]) ^ (b[i+12] & b[i+95] & s[i+94]);
      y = h ^ s[i+93] ^ b[i+2] ^ b[i+15] ^ b[i+36] ^ b[i+45] ^ b[i+64]
        ^ b[i+73] ^ b[i+89];
      s[i+128] = s[i] ^ s[i+7] ^ s[i+38] ^ s[i+70] ^ s[i+81] ^ s[i+96];
      b[i+128] = s[i] ^ b[i] ^ b[i+26] ^ b[i+56] ^ b[i+91] ^ b[i+96]
               ^ (b[i+3] & b[i+67]) ^ (b[i+11] & b[i+13]) ^ (b[i+17] & b[i+18])
               ^ (b[i+27] & b[i+59]) ^ (b[i+40] & b[i+48]) ^ (b[i+61] & b[i+65])
               ^ (b[i+68] & b[i+84]) ^ (b[i+88] & b[i+92] & b[i+93] & b[i+95])
               ^ (b[i+22] & b[i+24] & b[i+25]) ^ (b[i+70] & b[i+78] & b[i+82]);
      if (i < 256) begin
        s[i+128] ^= y;
        b[i+128] ^= y;
      end else begin
        z.push_back(y);
      end
    end
  endfunction

  // Word n of a keystream bit queue, bit j = z[32n+j].
  function automatic bit [31:0] ks_word(ref bit z[$], input int n);
    bit [31:0] w;
    for (int j = 0; j < 32; j++) w[j] = z[32*n + j];
    return w;
  endfunction

endpackage
