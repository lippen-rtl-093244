// tb_lippen_top: end-to-end test of the accelerator at its default
// parameters, driven the way a core drives it over RoCC.
//
// A driver issues SET_KEY, SET_M_SIZE, PTR_SEAL and PTR_UNSEAL commands; a
// model of the architectural state (key, m1/m2 sizes, enable) inside the
// testbench computes every expected response with the reference cipher, in
// command order. The response channel is throttled at random so the response
// queue fills and the command channel stalls. Checked: every response value,
// destination register and fault flag; the two-cycle command-to-response
// latency of an idle engine; one command per cycle throughput; and that each
// mechanism (seal, good unseal, detected tamper, detected forgery, key change,
// m2 in use, debug bypass, command stall, response backpressure) occurred.
module tb_lippen_top;
  import lippen_pkg::*;
  import prince_ref_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       cmd_valid = 0, cmd_ready;
  rocc_inst_t cmd_inst;
  word_t      cmd_rs1, cmd_rs2;
  logic       resp_valid, resp_ready = 0, resp_fault, busy;
  logic [4:0] resp_rd;
  word_t      resp_data;
  cfg_t       cfg;

  lippen_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_inst_i(cmd_inst),
    .cmd_rs1_i(cmd_rs1), .cmd_rs2_i(cmd_rs2),
    .resp_valid_o(resp_valid), .resp_ready_i(resp_ready), .resp_rd_o(resp_rd),
    .resp_data_o(resp_data), .resp_fault_o(resp_fault),
    .busy_o(busy), .cfg_o(cfg));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  longint last_accept = 0;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected responses, in order.
  typedef struct { logic [4:0] rd; word_t data; logic fault; bit data_known; } exp_t;
  exp_t exp_q [$];

  // Architectural state model.
  logic [127:0] m_key = '0;
  int           m_m1 = 16, m_m2 = 0;
  bit           m_en = 1;

  // Pointers sealed under the current configuration.
  typedef struct { word_t p; word_t md; word_t c; } sealed_t;
  sealed_t pool [$];

  // Mechanism counters.
  int n_seal, n_unseal_ok, n_tamper, n_forge, n_setkey, n_m2, n_bypass, n_stall, n_backpr;

  task automatic check(input word_t got, input word_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // Issue one command; returns once it has been accepted.
  task automatic issue(input funct_e f, input bit xd, input logic [4:0] rd, input word_t a, input word_t b);
    @(negedge clk);
    cmd_valid = 1;
    cmd_inst = '{funct: 7'(f), rs2: 5'd11, rs1: 5'd10, xd: xd, xs1: 1'b1, xs2: 1'b1, rd: rd, opcode: 7'b0001011};
    cmd_rs1 = a; cmd_rs2 = b;
    @(posedge clk);
    while (!cmd_ready) begin n_stall++; @(posedge clk); end
    #1 cmd_valid = 0;
    last_accept = cycle;
  endtask

  task automatic expect_resp(input logic [4:0] rd, input word_t data, input logic fault, input bit known);
    exp_t e;
    e.rd = rd; e.data = data; e.fault = fault; e.data_known = known;
    exp_q.push_back(e);
  endtask

  // ---- operations with their expected result ----
  task automatic op_set_key(input word_t k1, input word_t k2, input bit xd);
    issue(FN_SET_KEY, xd, 5'd0, k1, k2);
    m_key = {k1, k2};
    pool.delete();
    n_setkey++;
    if (xd) expect_resp(5'd0, '0, 1'b0, 1);
  endtask

  task automatic op_set_msize(input int m1, input int m2, input bit dis);
    word_t a;
    a = 64'(m1); a[63] = dis;
    issue(FN_SET_M_SIZE, 1'b0, 5'd0, a, 64'(m2));
    m_m1 = (m1 > 18) ? 18 : m1;
    m_m2 = (m2 > 64 - m_m1) ? 64 - m_m1 : m2;
    m_en = !dis;
    pool.delete();
  endtask

  task automatic op_seal(input word_t p, input word_t md, input logic [4:0] rd);
    word_t c;
    issue(FN_PTR_SEAL, 1'b1, rd, p, md);
    c = m_en ? prince_ref_pkg::seal(m_key, p, md, m_m1, m_m2, 48) : p;
    expect_resp(rd, c, 1'b0, 1);
    if (m_en) begin
      sealed_t s;
      s.p = p; s.md = md; s.c = c;
      pool.push_back(s);
      n_seal++;
      if (m_m2 > 0) n_m2++;
    end else n_bypass++;
  endtask

  task automatic op_unseal(input int kind, input logic [4:0] rd);
    if (!m_en) begin
      word_t x;
      x = {$urandom, $urandom};
      issue(FN_PTR_UNSEAL, 1'b1, rd, x, '0);
      expect_resp(rd, x, 1'b0, 1);
      n_bypass++;
    end else if (kind == 0 && pool.size() > 0) begin
      sealed_t s;
      s = pool[$urandom_range(0, pool.size() - 1)];
      issue(FN_PTR_UNSEAL, 1'b1, rd, s.c, s.md);
      expect_resp(rd, s.p, 1'b0, 1);
      n_unseal_ok++;
    end else if (kind == 1 && pool.size() > 0 && m_m1 > 0) begin
      sealed_t s;
      int j;
      s = pool[$urandom_range(0, pool.size() - 1)];
      j = $urandom_range(0, (m_m1 > 16 ? 16 : m_m1) - 1);
      s.md[j] ^= 1'b1;
      issue(FN_PTR_UNSEAL, 1'b1, rd, s.c, s.md);
      expect_resp(rd, s.p ^ (64'd1 << (48 + j)), 1'b1, 1);
      n_tamper++;
    end else begin
      issue(FN_PTR_UNSEAL, 1'b1, rd, {$urandom, $urandom}, {$urandom, $urandom});
      expect_resp(rd, '0, 1'b1, 0);
      n_forge++;
    end
  endtask

  // ---- response monitor ----
  bit throttle = 0;
  always @(negedge clk) resp_ready <= throttle ? ($urandom_range(0, 99) < 35) : 1'b1;

  always @(posedge clk) begin
    if (rst_n && resp_valid && !resp_ready) n_backpr++;
    if (rst_n && resp_valid && resp_ready) begin
      if (exp_q.size() == 0) begin
        checks++; failures++;
        $display("FAIL unexpected response %h", resp_data);
      end else begin
        exp_t e;
        e = exp_q.pop_front();
        check(64'(resp_rd), 64'(e.rd), "resp rd");
        check(64'(resp_fault), 64'(e.fault), "resp fault");
        if (e.data_known) check(resp_data, e.data, "resp data");
      end
    end
  end

  function automatic word_t rand_ptr();
    word_t p;
    p = {16'h0, $urandom, 16'($urandom)};
    if (m_m1 > 16) p[1:0] = 2'b00;
    return p;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    check(64'(cfg.m1_size), 16, "reset |m1| = 16");
    check(64'(cfg.m2_size), 0, "reset |m2| = 0");
    rst_n = 1;
    @(negedge clk);

    // Latency of an idle engine: command accepted at edge t, response valid
    // after edge t+1.
    op_set_key(64'h0123456789abcdef, 64'hfedcba9876543210, 1'b0);
    repeat (3) @(negedge clk);
    cmd_valid = 1;
    cmd_inst = '{funct: 7'(FN_PTR_SEAL), rs2: 5'd11, rs1: 5'd10, xd: 1'b1, xs1: 1'b1, xs2: 1'b1, rd: 5'd5, opcode: 7'b0001011};
    cmd_rs1 = 64'h0000_3fff_dead_bee0; cmd_rs2 = 64'h1234;
    @(posedge clk);
    expect_resp(5'd5, prince_ref_pkg::seal(m_key, cmd_rs1, cmd_rs2, 16, 0, 48), 1'b0, 1);
    n_seal++;
    #1 cmd_valid = 0;
    begin
      int lat;
      lat = 0;
      do begin @(negedge clk); lat++; end while (!resp_valid);
      checks++;
      if (lat != 2) begin failures++; $display("FAIL latency: %0d cycles", lat); end
    end
    repeat (3) @(negedge clk);

    // Throughput: back-to-back seals with the response side always ready
    // are accepted on consecutive clock edges.
    begin
      int gaps;
      longint prev;
      gaps = 0;
      op_seal(rand_ptr(), {$urandom, $urandom}, 5'd0);
      for (int i = 1; i < 16; i++) begin
        prev = last_accept;
        op_seal(rand_ptr(), {$urandom, $urandom}, 5'(i));
        if (last_accept - prev != 1) gaps++;
      end
      check(64'(gaps), 0, "one command per cycle");
    end
    repeat (4) @(negedge clk);

    // Random traffic with response backpressure.
    throttle = 1;
    for (int n = 0; n < 600; n++) begin
      int r;
      r = $urandom_range(0, 99);
      if (r < 3)       op_set_key({$urandom, $urandom}, {$urandom, $urandom}, $urandom_range(0, 1) == 1);
      else if (r < 6)  op_set_msize($urandom_range(0, 24), $urandom_range(0, 50), $urandom_range(0, 5) == 0);
      else if (r < 40) op_seal(rand_ptr(), {$urandom, $urandom}, 5'($urandom));
      else             op_unseal($urandom_range(0, 9) < 6 ? 0 : ($urandom_range(0, 1) == 1 ? 1 : 2), 5'($urandom));
      if (n == 300) begin
        op_set_msize(16, 0, 1'b1);  // debug mode
        op_seal(rand_ptr(), 64'h55, 5'd1);
        op_unseal(0, 5'd2);
        op_set_msize(16, 12, 1'b0); // m2 in use
        op_seal(rand_ptr(), {$urandom, $urandom}, 5'd3);
        op_unseal(0, 5'd4);
        op_unseal(1, 5'd4);
      end
    end
    throttle = 0;
    repeat (20) @(negedge clk);
    check(64'(exp_q.size()), 0, "all responses received");
    check(64'(busy), 0, "idle at end");

    $display("mechanisms: seal=%0d unseal_ok=%0d tamper=%0d forge=%0d set_key=%0d m2_used=%0d bypass=%0d cmd_stall=%0d resp_backpressure=%0d",
             n_seal, n_unseal_ok, n_tamper, n_forge, n_setkey, n_m2, n_bypass, n_stall, n_backpr);
    check(64'(n_seal > 0), 1, "seal happened");
    check(64'(n_unseal_ok > 0), 1, "good unseal happened");
    check(64'(n_tamper > 0), 1, "tampered modifier happened");
    check(64'(n_forge > 0), 1, "forged pointer happened");
    check(64'(n_setkey > 1), 1, "key change happened");
    check(64'(n_m2 > 0), 1, "m2 used");
    check(64'(n_bypass > 0), 1, "debug bypass happened");
    check(64'(n_stall > 0), 1, "command stall happened");
    check(64'(n_backpr > 0), 1, "response backpressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
