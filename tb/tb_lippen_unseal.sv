// tb_lippen_unseal: seals canonical pointers with the reference model and
// checks that the PTR_UNSEAL datapath returns them with no fault; then checks
// that a wrong m1 bit, a wrong m2 bit, a forged random ciphertext and a
// misaligned pointer under an 18-bit m1 all raise the fault flag, and that
// debug mode passes values through without a fault.
module tb_lippen_unseal;
  import lippen_pkg::*;
  import prince_ref_pkg::*;

  cfg_t  cfg;
  word_t ct, md, pt;
  logic  fault;
  int    checks = 0, failures = 0;

  word_t pt_tag;
  logic  fault_tag;

  lippen_unseal #(.VA_W(48)) dut (.cfg_i(cfg), .cipher_i(ct), .mod_i(md), .ptr_o(pt), .fault_o(fault));
  // Second instance: 4 memory-tag bits at 63:60, so m1 fits in 59:48 and 1:0.
  lippen_unseal #(.VA_W(48), .TAG_W(4)) dut_tag (.cfg_i(cfg), .cipher_i(ct), .mod_i(md), .ptr_o(pt_tag), .fault_o(fault_tag));

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
    word_t p;
    int m1, m2;
    for (int n = 0; n < 300; n++) begin
      m1 = (n < 100) ? 16 : int'($urandom_range(0, 18));
      m2 = (n < 50) ? 0 : int'($urandom_range(0, 64 - m1));
      cfg.key        = {$urandom, $urandom, $urandom, $urandom};
      cfg.m1_size    = msize_t'(m1);
      cfg.m2_size    = msize_t'(m2);
      cfg.protect_en = 1'b1;
      p  = {16'h0, $urandom, 16'($urandom)};
      if (m1 > 16) p[1:0] = 2'b00;
      md = {$urandom, $urandom};
      ct = prince_ref_pkg::seal(cfg.key, p, md, m1, m2, 48);
      #1ns;
      check(pt, p, "round trip pointer");
      check(64'(fault), 64'd0, "round trip fault");
      // Flip one m1 bit of the modifier: that pointer bit decrypts to 1.
      if (m1 > 0) begin
        md[$urandom_range(0, m1 - 1)] ^= 1'b1;
        #1ns;
        check(64'(fault), 64'd1, "wrong m1 bit detected");
      end
    end
    // A wrong m2 bit changes the key: the result is random, so the 16 unused
    // bits are non-zero except with probability 2^-16.
    cfg.m1_size = 16; cfg.m2_size = 8;
    for (int n = 0; n < 20; n++) begin
      p  = {16'h0, $urandom, 16'($urandom)};
      md = {$urandom, $urandom};
      ct = prince_ref_pkg::seal(cfg.key, p, md, 16, 8, 48);
      md[16 + $urandom_range(0, 7)] ^= 1'b1;
      #1ns;
      check(64'(fault), 64'd1, "wrong m2 bit detected");
    end
    // Forged ciphertexts.
    for (int n = 0; n < 20; n++) begin
      ct = {$urandom, $urandom}; md = '0;
      #1ns;
      check(64'(fault), 64'd1, "forged pointer detected");
    end
    // With |m1| = 18 the two alignment bits are checked too.
    cfg.m1_size = 18; cfg.m2_size = 0;
    p  = 64'h0000_1234_5678_9ab1;
    md = 64'h3_beef;
    ct = prince_ref_pkg::seal(cfg.key, p, md, 18, 0, 48);
    #1ns;
    check(pt, p, "misaligned pointer value");
    check(64'(fault), 64'd1, "misaligned pointer detected");
    // Tagged pointers: the tag survives the round trip and is not checked;
    // m1 bits 12 and 13 go to the alignment bits.
    for (int n = 0; n < 50; n++) begin
      m1 = int'($urandom_range(0, 14));
      cfg.m1_size = msize_t'(m1); cfg.m2_size = 0;
      p  = {4'($urandom), 12'h0, $urandom, 16'($urandom)};
      if (m1 > 12) p[1:0] = 2'b00;
      md = {$urandom, $urandom};
      ct = prince_ref_pkg::seal(cfg.key, p, md, m1, 0, 48, 4);
      #1ns;
      check(pt_tag, p, "tagged round trip");
      check(64'(fault_tag), 64'd0, "tagged round trip fault");
      if (m1 > 0) begin
        md[$urandom_range(0, m1 - 1)] ^= 1'b1;
        #1ns;
        check(64'(fault_tag), 64'd1, "tagged wrong m1 bit detected");
      end
    end
    // Debug mode.
    cfg.protect_en = 1'b0;
    ct = {$urandom, $urandom};
    #1ns;
    check(pt, ct, "protection off value");
    check(64'(fault), 64'd0, "protection off fault");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
