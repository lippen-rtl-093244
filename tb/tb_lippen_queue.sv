// tb_lippen_queue: random enqueue/dequeue traffic against a queue model held
// in the testbench, for depth 2 (the default) and depth 3. Checks data order,
// count, full (enq_ready low) and empty (deq_valid low) every cycle, and that
// both full and empty were reached.
module tb_lippen_queue;
  logic clk = 0, rst_n = 0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        ev [2], er [2], dv [2], dr [2];
  logic [15:0] ed [2], dd [2];
  logic [1:0]  c2;
  logic [1:0]  c3;

  lippen_queue #(.T(logic [15:0])) q2 (.clk_i(clk), .rst_ni(rst_n), .enq_valid_i(ev[0]), .enq_ready_o(er[0]),
    .enq_data_i(ed[0]), .deq_valid_o(dv[0]), .deq_ready_i(dr[0]), .deq_data_o(dd[0]), .count_o(c2));
  lippen_queue #(.T(logic [15:0]), .DEPTH(3)) q3 (.clk_i(clk), .rst_ni(rst_n), .enq_valid_i(ev[1]), .enq_ready_o(er[1]),
    .enq_data_i(ed[1]), .deq_valid_o(dv[1]), .deq_ready_i(dr[1]), .deq_data_o(dd[1]), .count_o(c3));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    logic [15:0] model [2][$];
    static int depth [2] = '{2, 3};
    static int full_seen [2] = '{0, 0};
    static int empty_seen [2] = '{0, 0};
    for (int q = 0; q < 2; q++) begin ev[q] = 0; dr[q] = 0; ed[q] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      for (int q = 0; q < 2; q++) begin
        ev[q] = ($urandom_range(0, 99) < 55);
        dr[q] = ($urandom_range(0, 99) < 45);
        ed[q] = 16'($urandom);
      end
      #1;
      for (int q = 0; q < 2; q++) begin
        check(int'(er[q]), int'(model[q].size() < depth[q]), "enq_ready");
        check(int'(dv[q]), int'(model[q].size() > 0), "deq_valid");
        check(q == 0 ? int'(c2) : int'(c3), model[q].size(), "count");
        if (dv[q]) check(int'(dd[q]), int'(model[q][0]), "head data");
        if (model[q].size() == depth[q]) full_seen[q]++;
        if (model[q].size() == 0) empty_seen[q]++;
      end
      begin
        bit do_deq [2], do_enq [2];
        for (int q = 0; q < 2; q++) begin
          do_deq[q] = dv[q] && dr[q];
          do_enq[q] = ev[q] && er[q];
        end
        @(posedge clk);
        for (int q = 0; q < 2; q++) begin
          if (do_deq[q]) void'(model[q].pop_front());
          if (do_enq[q]) model[q].push_back(ed[q]);
        end
      end
    end
    for (int q = 0; q < 2; q++) begin
      check(int'(full_seen[q] > 0), 1, "full reached");
      check(int'(empty_seen[q] > 0), 1, "empty reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
