// tb_prince_v2_core: checks the unrolled PRINCEv2 core against the published
// PRINCEv2 test vectors, against the reference model for random keys and
// blocks, and checks that decryption inverts encryption. The core is
// combinational; each vector is applied and sampled 1 ns later.
module tb_prince_v2_core;
  import lippen_pkg::*;
  import prince_ref_pkg::*;

  logic  decrypt;
  key_t  key;
  word_t din, dout;
  int    checks = 0, failures = 0;

  prince_v2_core dut (.decrypt_i(decrypt), .key_i(key), .data_i(din), .data_o(dout));

  initial begin : watchdog
    #1ms;
    failures++;
    $display("watchdog expired");
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

  task automatic apply(input logic d, input word_t k0, input word_t k1, input word_t x);
    decrypt = d; key = {k0, k1}; din = x;
    #1ns;
  endtask

  // Published PRINCEv2 test vectors: plaintext, k0, k1, ciphertext.
  word_t tv [5][4] = '{
    '{64'h0000000000000000, 64'h0000000000000000, 64'h0000000000000000, 64'h0125fc7359441690},
    '{64'hffffffffffffffff, 64'h0000000000000000, 64'h0000000000000000, 64'h832bd46f108e7857},
    '{64'h0000000000000000, 64'hffffffffffffffff, 64'h0000000000000000, 64'hee873b2ec447944d},
    '{64'h0000000000000000, 64'h0000000000000000, 64'hffffffffffffffff, 64'h0ac6f9cd6e6f275d},
    '{64'h0123456789abcdef, 64'h0123456789abcdef, 64'hfedcba9876543210, 64'h603cd95fa72a8704}};

  initial begin
    for (int i = 0; i < 5; i++) begin
      apply(1'b0, tv[i][1], tv[i][2], tv[i][0]);
      check(dout, tv[i][3], $sformatf("enc vector %0d", i));
      check(prince_ref_pkg::enc(tv[i][0], tv[i][1], tv[i][2]), tv[i][3], $sformatf("reference vector %0d", i));
      apply(1'b1, tv[i][1], tv[i][2], tv[i][3]);
      check(dout, tv[i][0], $sformatf("dec vector %0d", i));
    end
    for (int n = 0; n < 200; n++) begin
      word_t m, k0, k1, c;
      m  = {$urandom, $urandom};
      k0 = {$urandom, $urandom};
      k1 = {$urandom, $urandom};
      apply(1'b0, k0, k1, m);
      c = dout;
      check(c, prince_ref_pkg::enc(m, k0, k1), "random enc");
      apply(1'b1, k0, k1, c);
      check(dout, m, "random dec");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
