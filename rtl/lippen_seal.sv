// lippen_seal: the PTR_SEAL datapath (the paper's encryption figure).
//
//   cipher = Enc_{K ^ m2}(ptr ^ m1)
//
// The modifier word is split into m1 (its low m1_size bits) and m2 (the next
// m2_size bits), following the paper's m = m2 || m1. m1 is XORed into the
// pointer bits that take no part in address generation (the unused bits above
// the VA_W-bit virtual address and below the TAG_W memory-tag bits, then the
// two alignment bits), which is the
// placement the paper's security analysis requires. m2 is XORed into the low
// bits of the 128-bit key; which key bits m2 covers is this design's choice.
// With protection disabled (the paper's debug mode) the pointer passes
// through unchanged.
//
// Interface and timing: combinational; the caller registers `cipher_o`.
module lippen_seal
  import lippen_pkg::*;
#(
  parameter int unsigned VA_W  = 48, // virtual-address width A
  parameter int unsigned TAG_W = 0   // memory-tag bits at the top of the pointer
) (
  input  cfg_t  cfg_i,
  input  word_t ptr_i,
  input  word_t mod_i,
  output word_t cipher_o
);

  word_t m1x, plain_x, enc_out;
  key_t  key_x;

  always_comb begin
    m1x     = m1_expand(mod_i, cfg_i.m1_size, VA_W, TAG_W);
    key_x   = cfg_i.key ^ m2_expand(mod_i, cfg_i.m1_size, cfg_i.m2_size);
    plain_x = ptr_i ^ m1x;
  end

  prince_v2_core u_enc (
    .decrypt_i (1'b0),
    .key_i     (key_x),
    .data_i    (plain_x),
    .data_o    (enc_out)
  );

  assign cipher_o = cfg_i.protect_en ? enc_out : ptr_i;

endmodule
