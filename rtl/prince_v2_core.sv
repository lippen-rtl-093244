// prince_v2_core: fully unrolled PRINCEv2 block cipher (64-bit block,
// 128-bit key k0 || k1), encryption or decryption in one combinational pass.
//
// The paper selects PRINCEv2 as the pointer-sealing cipher because its
// unrolled datapath completes in a single clock cycle (latency 1, no
// flip-flops). The round structure below is PRINCEv2's published one:
//   s = m ^ k0
//   rounds 1..5 : s = SR(M'(S(s))) ^ RC_i ^ (k1 for odd i, k0 for even i)
//   middle      : s = S^-1( M'( S(s) ^ k0 ) ^ k1 ^ BETA )
//   rounds 6..10: s = S^-1(M'(SR^-1(s ^ RC_i ^ K_i))), K_i = k0 for even i,
//                 k1 ^ ALPHA ^ BETA for odd i
//   c = s ^ RC_11 ^ k1 ^ ALPHA ^ BETA
// Decryption runs the exact inverse of these steps in reverse order. The two
// directions are two separate combinational chains selected by `decrypt`;
// the paper's FPGA numbers are for a shared e/d datapath, whose internal
// sharing it does not describe.
//
// Interface: purely combinational, no clock. `data_o` is valid in the same
// cycle as `data_i`, `key_i` and `decrypt_i`; the caller registers it.
module prince_v2_core
  import lippen_pkg::*;
(
  input  logic  decrypt_i, // 0: encrypt, 1: decrypt
  input  key_t  key_i,     // {k0, k1}
  input  word_t data_i,
  output word_t data_o
);

  word_t k0, k1, k1ab;
  assign k0   = key_i[127:64];
  assign k1   = key_i[63:0];
  assign k1ab = k1 ^ ALPHA ^ BETA;

  // Round key of round i (1..10).
  function automatic word_t rk(input int i, input word_t k0_v, input word_t k1_v, input word_t k1ab_v);
    if (i <= 5) return (i % 2 == 1) ? k1_v : k0_v;
    else        return (i % 2 == 1) ? k1ab_v : k0_v;
  endfunction

  // ---------------- encryption chain ----------------
  word_t enc [12];
  word_t enc_mid;

  always_comb begin
    enc[0] = data_i ^ k0 ^ RC[0];
    for (int i = 1; i <= 5; i++)
      enc[i] = shift_rows(m_prime(s_layer(enc[i-1]))) ^ RC[i] ^ rk(i, k0, k1, k1ab);
    enc_mid = s_layer_inv(m_prime(s_layer(enc[5]) ^ k0) ^ k1 ^ BETA);
    enc[6]  = s_layer_inv(m_prime(shift_rows_inv(enc_mid ^ RC[6] ^ rk(6, k0, k1, k1ab))));
    for (int i = 7; i <= 10; i++)
      enc[i] = s_layer_inv(m_prime(shift_rows_inv(enc[i-1] ^ RC[i] ^ rk(i, k0, k1, k1ab))));
    enc[11] = enc[10] ^ RC[11] ^ k1ab;
  end

  // ---------------- decryption chain (inverse order) ----------------
  // dec[i+1] -> dec[i] undoes round i, so dec[i] equals the encryption
  // state entering round i (dec[6] is the state after the middle layer).
  word_t dec [12];
  word_t dec_mid;

  always_comb begin
    dec[11] = data_i ^ RC[11] ^ k1ab;
    dec[10] = shift_rows(m_prime(s_layer(dec[11]))) ^ RC[10] ^ rk(10, k0, k1, k1ab);
    for (int i = 9; i >= 6; i--)
      dec[i] = shift_rows(m_prime(s_layer(dec[i+1]))) ^ RC[i] ^ rk(i, k0, k1, k1ab);
    dec_mid = s_layer_inv(m_prime(s_layer(dec[6]) ^ k1 ^ BETA) ^ k0);
    dec[5]  = s_layer_inv(m_prime(shift_rows_inv(dec_mid ^ RC[5] ^ rk(5, k0, k1, k1ab))));
    for (int i = 4; i >= 1; i--)
      dec[i] = s_layer_inv(m_prime(shift_rows_inv(dec[i+1] ^ RC[i] ^ rk(i, k0, k1, k1ab))));
    dec[0] = dec[1] ^ k0 ^ RC[0];
  end

  assign data_o = decrypt_i ? dec[0] : enc[11];

endmodule
