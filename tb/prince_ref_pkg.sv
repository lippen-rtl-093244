// prince_ref_pkg: a plain software-style reference model of PRINCEv2 and of
// the LIPPEN seal/unseal equations, used by the testbenches to compute
// expected values independently of the RTL. The cipher is written from the
// PRINCEv2 specification with table look-ups and explicit bit matrices; the
// testbenches also check it against the published PRINCEv2 test vectors.
package prince_ref_pkg;

  typedef logic [63:0] u64;

  localparam logic [3:0] SB [16] = '{4'hB,4'hF,4'h3,4'h2,4'hA,4'hC,4'h9,4'h1,
                                     4'h6,4'h7,4'h8,4'h0,4'hE,4'h5,4'hD,4'h4};
  localparam int PERM [16] = '{0,5,10,15,4,9,14,3,8,13,2,7,12,1,6,11};
  localparam u64 RCR [12] = '{
    64'h0000000000000000, 64'h13198a2e03707344, 64'ha4093822299f31d0,
    64'h082efa98ec4e6c89, 64'h452821e638d01377, 64'hbe5466cf34e90c6c,
    64'h7ef84f78fd955cb1, 64'h85840851f1ac43aa, 64'hc882d32f25323c54,
    64'h64a51195e0e3610d, 64'hd3b5a399ca0c2399, 64'hc0ac29b7c97c50dd};
  localparam u64 A_C = 64'hc0ac29b7c97c50dd;
  localparam u64 B_C = 64'h3f84d5b5b5470917;

  function automatic logic [3:0] nib(u64 s, int i); return s[63-4*i -: 4]; endfunction

  function automatic u64 sub(u64 s, bit inv);
    u64 r;
    for (int i = 0; i < 16; i++) begin
      logic [3:0] v;
      v = nib(s, i);
      if (!inv) r[63-4*i -: 4] = SB[v];
      else for (int k = 0; k < 16; k++) if (SB[k] == v) r[63-4*i -: 4] = 4'(k);
    end
    return r;
  endfunction

  // M' as 64 output bits, each the parity of a mask over the input bits.
  function automatic u64 mprime(u64 s);
    u64 r;
    int offs [4] = '{0, 1, 1, 0};
    for (int c = 0; c < 4; c++)
      for (int j = 0; j < 4; j++)
        for (int b = 0; b < 4; b++) begin
          u64 mask;
          mask = '0;
          for (int i = 0; i < 4; i++)
            if ((i + j + offs[c]) % 4 != b) mask[63 - 16*c - 4*i - b] = 1'b1;
          r[63 - 16*c - 4*j - b] = ^(s & mask);
        end
    return r;
  endfunction

  function automatic u64 sr(u64 s, bit inv);
    u64 r;
    for (int i = 0; i < 16; i++)
      if (!inv) r[63-4*i -: 4] = nib(s, PERM[i]);
      else      r[63-4*PERM[i] -: 4] = nib(s, i);
    return r;
  endfunction

  function automatic u64 enc(u64 m, u64 k0, u64 k1);
    u64 s, kk;
    s = m ^ k0;
    for (int i = 1; i <= 5; i++) s = sr(mprime(sub(s, 0)), 0) ^ RCR[i] ^ ((i % 2 == 1) ? k1 : k0);
    s = sub(mprime(sub(s, 0) ^ k0) ^ k1 ^ B_C, 1);
    for (int i = 6; i <= 10; i++) begin
      kk = (i % 2 == 1) ? (k1 ^ A_C ^ B_C) : k0;
      s = sub(mprime(sr(s ^ RCR[i] ^ kk, 1)), 1);
    end
    return s ^ RCR[11] ^ k1 ^ A_C ^ B_C;
  endfunction

  // m1 placement: bits A..63 first, then bits 0 and 1.
  function automatic u64 m1pos(u64 mod, int m1, int va, int tag = 0);
    u64 r;
    int pos [66];
    int n;
    r = '0; n = 0;
    for (int b = va; b < 64 - tag; b++) begin pos[n] = b; n++; end
    pos[n] = 0; pos[n+1] = 1;
    for (int j = 0; j < m1; j++) r[pos[j]] = mod[j];
    return r;
  endfunction

  function automatic logic [127:0] keymod(logic [127:0] key, u64 mod, int m1, int m2);
    logic [127:0] r;
    r = key;
    for (int j = 0; j < m2; j++) if (m1 + j < 64) r[j] ^= mod[m1 + j];
    return r;
  endfunction

  function automatic u64 seal(logic [127:0] key, u64 ptr, u64 mod, int m1, int m2, int va, int tag = 0);
    logic [127:0] k;
    k = keymod(key, mod, m1, m2);
    return enc(ptr ^ m1pos(mod, m1, va, tag), k[127:64], k[63:0]);
  endfunction

endpackage
