// tb_lippen_seal: drives the PTR_SEAL datapath with random keys, pointers,
// modifiers and modifier splits (|m1| in 0..18, |m2| in 0..46) and compares
// the sealed value with the reference model. Also checks the debug
// pass-through. Combinational block: inputs applied, output sampled 1 ns later.
module tb_lippen_seal;
  import lippen_pkg::*;
  import prince_ref_pkg::*;

  cfg_t  cfg;
  word_t ptr, md, ct;
  int    checks = 0, failures = 0;

  word_t ct_tag;

  lippen_seal #(.VA_W(48)) dut (.cfg_i(cfg), .ptr_i(ptr), .mod_i(md), .cipher_o(ct));
  // Second instance: 4 memory-tag bits at 63:60, so m1 fits in 59:48 and 1:0.
  lippen_seal #(.VA_W(48), .TAG_W(4)) dut_tag (.cfg_i(cfg), .ptr_i(ptr), .mod_i(md), .cipher_o(ct_tag));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input word_t got, input word_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 300; n++) begin
      int m1, m2;
      m1 = (n < 100) ? 16 : int'($urandom_range(0, 18));
      m2 = (n < 50) ? 0 : int'($urandom_range(0, 64 - m1));
      cfg.key        = {$urandom, $urandom, $urandom, $urandom};
      cfg.m1_size    = msize_t'(m1);
      cfg.m2_size    = msize_t'(m2);
      cfg.protect_en = 1'b1;
      ptr = {16'h0, $urandom, 16'($urandom)};
      md  = {$urandom, $urandom};
      #1ns;
      check(ct, prince_ref_pkg::seal(cfg.key, ptr, md, m1, m2, 48), $sformatf("seal m1=%0d m2=%0d", m1, m2));
      if (m1 <= 14) begin
        ptr[63:60] = 4'($urandom);
        #1ns;
        check(ct_tag, prince_ref_pkg::seal(cfg.key, ptr, md, m1, m2, 48, 4), $sformatf("tagged seal m1=%0d", m1));
      end
    end
    // Zero modifier, zero-size split: plain PRINCEv2 of the pointer.
    cfg.m1_size = 16; cfg.m2_size = 0; md = '0;
    ptr = 64'h0000_7fff_1234_5678;
    #1ns;
    check(ct, prince_ref_pkg::enc(ptr, cfg.key[127:64], cfg.key[63:0]), "zero modifier");
    // Debug mode: no encryption.
    cfg.protect_en = 1'b0;
    for (int n = 0; n < 10; n++) begin
      ptr = {$urandom, $urandom}; md = {$urandom, $urandom};
      #1ns;
      check(ct, ptr, "protection off");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
