// lippen_unseal: the PTR_UNSEAL datapath (the paper's decryption figure).
//
//   ptr   = Dec_{K ^ m2}(cipher) ^ m1
//   fault = any unused pointer bit of ptr is not zero
//
// m1 and m2 are taken from the modifier word exactly as in lippen_seal. The
// paper states that the unused bits of the decrypted pointer must be all
// zeros and that an exception flag is raised otherwise; here the checked bits
// are the bits above the VA_W-bit virtual address, except the TAG_W
// memory-tag bits at the very top (TAG_W = 0 by default), plus the two
// alignment bits when m1 is long enough to occupy them. A memory tag is
// encrypted with the rest of the pointer and comes back unchanged. The decrypted value is output
// even when `fault_o` is set; what the core does on a fault is outside this
// block. With protection disabled the value passes through and no fault is
// raised.
//
// Interface and timing: combinational; the caller registers the outputs.
module lippen_unseal
  import lippen_pkg::*;
#(
  parameter int unsigned VA_W  = 48, // virtual-address width A
  parameter int unsigned TAG_W = 0   // memory-tag bits at the top of the pointer
) (
  input  cfg_t  cfg_i,
  input  word_t cipher_i,
  input  word_t mod_i,
  output word_t ptr_o,
  output logic  fault_o
);

  word_t m1x, dec_out, plain;
  key_t  key_x;

  always_comb key_x = cfg_i.key ^ m2_expand(mod_i, cfg_i.m1_size, cfg_i.m2_size);

  prince_v2_core u_dec (
    .decrypt_i (1'b1),
    .key_i     (key_x),
    .data_i    (cipher_i),
    .data_o    (dec_out)
  );

  always_comb begin
    m1x   = m1_expand(mod_i, cfg_i.m1_size, VA_W, TAG_W);
    plain = dec_out ^ m1x;
    if (cfg_i.protect_en) begin
      ptr_o   = plain;
      fault_o = |(plain & unused_mask(cfg_i.m1_size, VA_W, TAG_W));
    end else begin
      ptr_o   = cipher_i;
      fault_o = 1'b0;
    end
  end

endmodule
