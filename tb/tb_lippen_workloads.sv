// tb_lippen_workloads: runs the access patterns of the return-address and
// data-pointer micro-benchmarks through the accelerator at its default
// parameters, with a testbench "core" that waits for each result before it
// issues the next dependent instruction.
//
//  * Deep recursion, depth 4096: every call seals its return address with the
//    stack pointer as modifier and stores it in a stack model; every return
//    unseals it with the same stack pointer. One frame is overwritten by an
//    attacker value before the returns; its unseal must raise the fault.
//  * Nested calls, depth 8, looped 64 times.
//  * Pointer chasing: a 64-node linked list whose next-pointers are stored
//    sealed; 32 dependent unseals per walk, with (a) a zero modifier, (b) one
//    shared modifier, (c) a per-node modifier (the node's own address).
// Every unsealed value is compared with the pointer originally sealed, and
// the cycles per dependent operation are checked against the engine's
// two-cycle command-to-response latency.
module tb_lippen_workloads;
  import lippen_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       cmd_valid = 0, cmd_ready;
  rocc_inst_t cmd_inst;
  word_t      cmd_rs1 = '0, cmd_rs2 = '0;
  logic       resp_valid, resp_fault, busy;
  logic [4:0] resp_rd;
  word_t      resp_data;
  cfg_t       cfg;

  lippen_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_inst_i(cmd_inst),
    .cmd_rs1_i(cmd_rs1), .cmd_rs2_i(cmd_rs2),
    .resp_valid_o(resp_valid), .resp_ready_i(1'b1), .resp_rd_o(resp_rd),
    .resp_data_o(resp_data), .resp_fault_o(resp_fault),
    .busy_o(busy), .cfg_o(cfg));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input word_t got, input word_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // Issue one command and, if it answers, wait for the answer (a dependent
  // instruction stream). Returns the number of cycles from issue to answer.
  task automatic exec(input funct_e f, input bit xd, input word_t a, input word_t b,
                      output word_t data, output logic fault, output int cycles);
    longint t;
    @(negedge clk);
    cmd_valid = 1;
    cmd_inst = '{funct: 7'(f), rs2: 5'd11, rs1: 5'd10, xd: xd, xs1: 1'b1, xs2: 1'b1, rd: 5'd10, opcode: 7'b0001011};
    cmd_rs1 = a; cmd_rs2 = b;
    t = cycle;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    data = '0; fault = 0;
    if (xd) begin
      do @(negedge clk); while (!resp_valid);
      data = resp_data; fault = resp_fault;
    end
    cycles = int'(cycle - t);
  endtask

  word_t stack_mem [4096];
  word_t ra_expect [4096];
  word_t node_addr [64];
  word_t node_next [64];

  initial begin
    word_t d, sp, sp0;
    logic  f;
    int    cyc, max_cyc, n_fault;
    repeat (3) @(negedge clk);
    rst_n = 1;
    exec(FN_SET_KEY, 1'b0, 64'h9e3779b97f4a7c15, 64'hf39cc0605cedc834, d, f, cyc);

    // ---------------- deep recursion ----------------
    sp0 = 64'h0000_7fff_ffff_f000;
    max_cyc = 0;
    for (int i = 0; i < 4096; i++) begin
      sp = sp0 - 64'(i) * 64'd48;
      ra_expect[i] = 64'h0000_0000_0040_0000 + 64'(i) * 64'd4;
      exec(FN_PTR_SEAL, 1'b1, ra_expect[i], sp, stack_mem[i], f, cyc);
      if (cyc > max_cyc) max_cyc = cyc;
    end
    check(64'(max_cyc), 64'd2, "seal: cycles per dependent call");
    stack_mem[1234] = 64'h0000_0000_0066_6000; // attacker overwrites one frame
    n_fault = 0;
    max_cyc = 0;
    for (int i = 4095; i >= 0; i--) begin
      sp = sp0 - 64'(i) * 64'd48;
      exec(FN_PTR_UNSEAL, 1'b1, stack_mem[i], sp, d, f, cyc);
      if (cyc > max_cyc) max_cyc = cyc;
      if (i == 1234) begin
        check(64'(f), 64'd1, "overwritten return address detected");
        n_fault++;
      end else begin
        check(d, ra_expect[i], "return address");
        check(64'(f), 64'd0, "return fault");
      end
    end
    check(64'(max_cyc), 64'd2, "unseal: cycles per dependent return");
    check(64'(n_fault), 64'd1, "one attack seen");

    // ---------------- nested calls, depth 8, looped ----------------
    for (int it = 0; it < 64; it++) begin
      for (int i = 0; i < 8; i++) begin
        sp = sp0 - 64'(i) * 64'd32;
        exec(FN_PTR_SEAL, 1'b1, 64'h0000_0000_0040_1000 + 64'(i), sp, stack_mem[i], f, cyc);
      end
      for (int i = 7; i >= 0; i--) begin
        sp = sp0 - 64'(i) * 64'd32;
        exec(FN_PTR_UNSEAL, 1'b1, stack_mem[i], sp, d, f, cyc);
        check(d, 64'h0000_0000_0040_1000 + 64'(i), "nested return address");
      end
    end

    // ---------------- pointer chasing ----------------
    for (int variant = 0; variant < 3; variant++) begin
      word_t p, md;
      int    t_start, t_total;
      for (int i = 0; i < 64; i++) node_addr[i] = 64'h0000_5555_0000_0000 + 64'((i * 37) % 64) * 64'd64;
      // Store next pointers sealed.
      for (int i = 0; i < 64; i++) begin
        md = (variant == 0) ? '0 : (variant == 1) ? 64'h0000_0000_0000_beef : node_addr[i];
        exec(FN_PTR_SEAL, 1'b1, node_addr[(i + 1) % 64], md, node_next[i], f, cyc);
      end
      // Walk: 32 dependent unseals.
      t_total = 0;
      p = node_addr[0];
      for (int k = 0; k < 32; k++) begin
        int idx;
        idx = -1;
        for (int i = 0; i < 64; i++) if (node_addr[i] == p) idx = i;
        if (idx < 0) begin
          checks++; failures++;
          $display("FAIL chase %0d: lost at %h", variant, p);
          break;
        end
        md = (variant == 0) ? '0 : (variant == 1) ? 64'h0000_0000_0000_beef : node_addr[idx];
        exec(FN_PTR_UNSEAL, 1'b1, node_next[idx], md, p, f, cyc);
        t_total += cyc;
        check(p, node_addr[(idx + 1) % 64], "chased pointer");
        check(64'(f), 64'd0, "chase fault");
      end
      check(64'(t_total), 64'd64, "32 dependent unseals take 64 cycles");
      $display("pointer chase variant %0d: %0d cycles for 32 dependent unseals", variant, t_total);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
