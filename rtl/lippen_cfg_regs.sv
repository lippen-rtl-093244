// lippen_cfg_regs: the engine's architectural state, written by SET_KEY and
// SET_M_SIZE.
//
// SET_KEY(K1, K2) loads the 128-bit key K1 || K2 (K1 becomes the upper half,
// i.e. PRINCE's k0). SET_M_SIZE(m1, m2) sets how many modifier bits go into
// the pointer (m1) and into the key (m2). Operand layout (this design's own
// choice; the paper gives none): rs1[6:0] = |m1|, rs2[6:0] = |m2|, and
// rs1[63] = 1 turns protection off for debugging, as the paper allows.
// Sizes are clamped so that m1 only ever covers bits that do not form the
// address or a memory tag (|m1| <= 64 - VA_W - TAG_W + 2, the paper's bound)
// and m1 and m2 together
// fit the 64-bit modifier operand.
//
// Reset state: key all zero, |m1| = M1_RESET, |m2| = M2_RESET (the paper's
// prototype uses 16 and 0), protection on. Writes take effect on the clock
// edge at which the write strobe is high.
module lippen_cfg_regs
  import lippen_pkg::*;
#(
  parameter int unsigned VA_W     = 48,
  parameter int unsigned TAG_W    = 0,
  parameter int unsigned M1_RESET = 16,
  parameter int unsigned M2_RESET = 0
) (
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  set_key_i,   // SET_KEY strobe
  input  logic  set_msize_i, // SET_M_SIZE strobe
  input  word_t rs1_i,
  input  word_t rs2_i,
  output cfg_t  cfg_o
);

  localparam int unsigned M1_MAX = 64 - VA_W - TAG_W + 2;

  msize_t m1_req, m2_req, m1_new, m2_new;

  always_comb begin
    m1_req = rs1_i[MSIZE_W-1:0];
    m2_req = rs2_i[MSIZE_W-1:0];
    m1_new = (int'(m1_req) > int'(M1_MAX)) ? msize_t'(M1_MAX) : m1_req;
    m2_new = (int'(m2_req) > 64 - int'(m1_new)) ? msize_t'(64 - int'(m1_new)) : m2_req;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_o.key        <= '0;
      cfg_o.m1_size    <= msize_t'(M1_RESET);
      cfg_o.m2_size    <= msize_t'(M2_RESET);
      cfg_o.protect_en <= 1'b1;
    end else begin
      if (set_key_i) cfg_o.key <= {rs1_i, rs2_i};
      if (set_msize_i) begin
        cfg_o.m1_size    <= m1_new;
        cfg_o.m2_size    <= m2_new;
        cfg_o.protect_en <= ~rs1_i[63];
      end
    end
  end

endmodule
