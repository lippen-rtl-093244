// lippen_pkg: constants, types and pure functions shared by the LIPPEN
// pointer-encryption datapath.
//
// The cipher layers (S-box, the M' diffusion matrix, ShiftRows) and round
// constants are those of the PRINCE family; PRINCEv2 reuses PRINCE's layers
// and constants and adds the middle constant BETA. They are written here as
// functions so the unrolled cipher core can apply them round after round.
// Nibble 0 is the most significant nibble of the 64-bit state.
//
// The command encoding of the four custom instructions (funct7 values), the
// layout of the SET_M_SIZE operands and the placement of m1/m2 bits are this
// design's own choices; the paper names the instructions but gives no encoding.
package lippen_pkg;

  // Pointer/cipher block width and key width (paper: 64-bit pointers, 128-bit key).
  localparam int unsigned PTR_W = 64;
  localparam int unsigned KEY_W = 128;

  // Width of the field that holds a modifier size (0..64).
  localparam int unsigned MSIZE_W = 7;

  typedef logic [PTR_W-1:0] word_t;
  typedef logic [KEY_W-1:0] key_t;
  typedef logic [MSIZE_W-1:0] msize_t;

  // funct7 codes of the custom instructions on the RoCC interface.
  typedef enum logic [6:0] {
    FN_SET_KEY    = 7'd0,
    FN_SET_M_SIZE = 7'd1,
    FN_PTR_SEAL   = 7'd2,
    FN_PTR_UNSEAL = 7'd3
  } funct_e;

  // Live configuration of the engine.
  typedef struct packed {
    key_t   key;        // K1 || K2, K1 is the upper half (PRINCE k0)
    msize_t m1_size;    // number of modifier bits folded into the pointer
    msize_t m2_size;    // number of modifier bits folded into the key
    logic   protect_en; // 0: debug mode, seal/unseal pass pointers through
  } cfg_t;

  // RoCC instruction word fields used by the accelerator.
  typedef struct packed {
    logic [6:0] funct;
    logic [4:0] rs2;
    logic [4:0] rs1;
    logic       xd;
    logic       xs1;
    logic       xs2;
    logic [4:0] rd;
    logic [6:0] opcode;
  } rocc_inst_t;

  // One request as held in the request queue.
  typedef struct packed {
    funct_e     funct;
    logic       xd;
    logic [4:0] rd;
    word_t      rs1;
    word_t      rs2;
  } req_t;

  // One response as held in the response queue.
  typedef struct packed {
    logic [4:0] rd;
    word_t      data;
    logic       fault; // PTR_UNSEAL found non-zero unused bits
  } resp_t;

  // ---------------------------------------------------------------------
  // PRINCE-family constants.
  // ---------------------------------------------------------------------
  localparam word_t ALPHA = 64'hc0ac29b7c97c50dd;
  localparam word_t BETA  = 64'h3f84d5b5b5470917;

  localparam word_t RC [12] = '{
    64'h0000000000000000, 64'h13198a2e03707344, 64'ha4093822299f31d0,
    64'h082efa98ec4e6c89, 64'h452821e638d01377, 64'hbe5466cf34e90c6c,
    64'h7ef84f78fd955cb1, 64'h85840851f1ac43aa, 64'hc882d32f25323c54,
    64'h64a51195e0e3610d, 64'hd3b5a399ca0c2399, 64'hc0ac29b7c97c50dd
  };

  // 4-bit S-box and its inverse.
  function automatic logic [3:0] sbox4(input logic [3:0] x);
    unique case (x)
      4'h0: return 4'hB; 4'h1: return 4'hF; 4'h2: return 4'h3; 4'h3: return 4'h2;
      4'h4: return 4'hA; 4'h5: return 4'hC; 4'h6: return 4'h9; 4'h7: return 4'h1;
      4'h8: return 4'h6; 4'h9: return 4'h7; 4'hA: return 4'h8; 4'hB: return 4'h0;
      4'hC: return 4'hE; 4'hD: return 4'h5; 4'hE: return 4'hD; default: return 4'h4;
    endcase
  endfunction

  function automatic logic [3:0] sbox4_inv(input logic [3:0] x);
    unique case (x)
      4'h0: return 4'hB; 4'h1: return 4'h7; 4'h2: return 4'h3; 4'h3: return 4'h2;
      4'h4: return 4'hF; 4'h5: return 4'hD; 4'h6: return 4'h8; 4'h7: return 4'h9;
      4'h8: return 4'hA; 4'h9: return 4'h6; 4'hA: return 4'h4; 4'hB: return 4'h0;
      4'hC: return 4'h5; 4'hD: return 4'hE; 4'hE: return 4'hC; default: return 4'h1;
    endcase
  endfunction

  function automatic word_t s_layer(input word_t s);
    word_t r;
    for (int i = 0; i < 16; i++) r[4*i +: 4] = sbox4(s[4*i +: 4]);
    return r;
  endfunction

  function automatic word_t s_layer_inv(input word_t s);
    word_t r;
    for (int i = 0; i < 16; i++) r[4*i +: 4] = sbox4_inv(s[4*i +: 4]);
    return r;
  endfunction

  // One 16-bit block of M'. Output nibble j, bit b (b = 0 is the nibble's MSB)
  // is the XOR of bit b of every input nibble i except the one for which
  // (i + j + off) mod 4 == b. off = 0 gives M^0, off = 1 gives M^1.
  function automatic logic [15:0] mhat(input logic [15:0] a, input int off);
    logic [15:0] r;
    for (int j = 0; j < 4; j++) begin
      for (int b = 0; b < 4; b++) begin
        logic v;
        v = 1'b0;
        for (int i = 0; i < 4; i++) begin
          if (((i + j + off) % 4) != b) v ^= a[15 - 4*i - b];
        end
        r[15 - 4*j - b] = v;
      end
    end
    return r;
  endfunction

  // M' = diag(M^0, M^1, M^1, M^0); an involution.
  function automatic word_t m_prime(input word_t s);
    return {mhat(s[63:48], 0), mhat(s[47:32], 1), mhat(s[31:16], 1), mhat(s[15:0], 0)};
  endfunction

  // ShiftRows: output nibble i takes input nibble (5*i) mod 16.
  function automatic word_t shift_rows(input word_t s);
    word_t r;
    for (int i = 0; i < 16; i++) r[60 - 4*i +: 4] = s[60 - 4*((5*i) % 16) +: 4];
    return r;
  endfunction

  function automatic word_t shift_rows_inv(input word_t s);
    word_t r;
    for (int i = 0; i < 16; i++) r[60 - 4*((5*i) % 16) +: 4] = s[60 - 4*i +: 4];
    return r;
  endfunction

  // Expand the low `size` bits of m1 onto the pointer bits that do not take
  // part in address generation and hold no memory tag: first the free high
  // bits A..63-TAG_W (m1 bit j lands on pointer bit A+j), then the two
  // alignment bits 0 and 1. The top tag_w bits carry a hardware memory tag
  // and are neither modified nor checked. `size` is already clamped to
  // 64-A-TAG_W+2 by the configuration logic.
  function automatic word_t m1_expand(input word_t m, input msize_t size,
                                      input int unsigned va_w, input int unsigned tag_w);
    word_t r;
    int    hi;
    hi = 64 - int'(va_w) - int'(tag_w);
    r  = '0;
    for (int j = 0; j < 66; j++) begin
      if (j < int'(size)) begin
        if (j < hi) r[int'(va_w) + j] = m[j];
        else if (j < hi + 2) r[j - hi] = m[j];
      end
    end
    return r;
  endfunction

  // Mask of the pointer bits that must decrypt to zero: the free high bits
  // always, the two alignment bits only when m1 reaches into them.
  function automatic word_t unused_mask(input msize_t size, input int unsigned va_w,
                                        input int unsigned tag_w);
    word_t r;
    int    hi;
    hi = 64 - int'(va_w) - int'(tag_w);
    r  = '0;
    for (int b = 0; b < 64; b++) if (b >= int'(va_w) && b < 64 - int'(tag_w)) r[b] = 1'b1;
    if (int'(size) > hi)     r[0] = 1'b1;
    if (int'(size) > hi + 1) r[1] = 1'b1;
    return r;
  endfunction

  // m2: the `m2_size` modifier bits above m1, XORed into the low end of the
  // 128-bit key (the low bits of k1).
  function automatic key_t m2_expand(input word_t m, input msize_t m1_size, input msize_t m2_size);
    key_t r;
    r = '0;
    for (int j = 0; j < 64; j++) begin
      if (j < int'(m2_size) && (j + int'(m1_size)) < 64) r[j] = m[j + int'(m1_size)];
    end
    return r;
  endfunction

endpackage
