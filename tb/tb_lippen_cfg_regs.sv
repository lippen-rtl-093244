// tb_lippen_cfg_regs: checks the reset configuration (|m1| = 16, |m2| = 0,
// protection on, key zero), SET_KEY loading K1 || K2, SET_M_SIZE with and
// without clamping, the debug disable bit, and that nothing changes without
// a write strobe.
module tb_lippen_cfg_regs;
  import lippen_pkg::*;

  logic  clk = 0, rst_n = 0, set_key = 0, set_msize = 0;
  word_t rs1 = '0, rs2 = '0;
  cfg_t  cfg;
  int    checks = 0, failures = 0;

  cfg_t  cfg_tag;

  lippen_cfg_regs #(.TAG_W(4)) dut_tag (.clk_i(clk), .rst_ni(rst_n), .set_key_i(set_key), .set_msize_i(set_msize),
                       .rs1_i(rs1), .rs2_i(rs2), .cfg_o(cfg_tag));
  lippen_cfg_regs dut (.clk_i(clk), .rst_ni(rst_n), .set_key_i(set_key), .set_msize_i(set_msize),
                       .rs1_i(rs1), .rs2_i(rs2), .cfg_o(cfg));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [127:0] got, input logic [127:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic write(input bit k, input word_t a, input word_t b);
    @(negedge clk);
    set_key = k; set_msize = !k; rs1 = a; rs2 = b;
    @(negedge clk);
    set_key = 0; set_msize = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    check(cfg.key, '0, "reset key");
    check(128'(cfg.m1_size), 128'd16, "reset m1");
    check(128'(cfg.m2_size), 128'd0, "reset m2");
    check(128'(cfg.protect_en), 128'd1, "reset enable");
    rst_n = 1;
    write(1, 64'h0123456789abcdef, 64'hfedcba9876543210);
    check(cfg.key, 128'h0123456789abcdef_fedcba9876543210, "SET_KEY");
    write(0, 64'd12, 64'd20);
    check(128'(cfg.m1_size), 128'd12, "m1 = 12");
    check(128'(cfg.m2_size), 128'd20, "m2 = 20");
    write(0, 64'd40, 64'd10);
    check(128'(cfg.m1_size), 128'd18, "m1 clamped to 64-48+2");
    check(128'(cfg_tag.m1_size), 128'd14, "m1 clamped to 64-48-4+2 with a 4-bit tag");
    check(128'(cfg.m2_size), 128'd10, "m2 = 10");
    write(0, 64'd16, 64'd60);
    check(128'(cfg.m2_size), 128'd48, "m2 clamped to 64-m1");
    write(0, 64'h8000_0000_0000_0010, 64'd0);
    check(128'(cfg.protect_en), 128'd0, "debug disable");
    write(0, 64'd16, 64'd0);
    check(128'(cfg.protect_en), 128'd1, "re-enable");
    @(negedge clk); rs1 = '1; rs2 = '1;
    repeat (3) @(negedge clk);
    check(cfg.key, 128'h0123456789abcdef_fedcba9876543210, "key held without strobe");
    check(128'(cfg.m1_size), 128'd16, "m1 held without strobe");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
