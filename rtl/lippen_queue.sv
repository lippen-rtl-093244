// lippen_queue: a small synchronous FIFO, used as the request queue (core to
// engine) and the response queue (engine to core) of the accelerator.
//
// The paper only says the engine talks to the core through tightly coupled
// request and response queues; depth, element type and handshake are this
// design's choices. Both sides use valid/ready: an entry is written on a
// clock edge where enq_valid_i && enq_ready_o, and removed where
// deq_valid_o && deq_ready_i. The head is presented from the storage array
// (no fall-through), so an entry is visible one cycle after it is written.
// A full queue accepts no write even if it is read in the same cycle.
// Reset is asynchronous and active low and empties the queue. The
// handshake assertions are disabled while rst_ni is low, so lint reports
// rst_ni as used both as an asynchronous reset and as a plain signal; that
// use is in the assertions only and adds no logic.
module lippen_queue #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 2
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic enq_valid_i,
  output logic enq_ready_o,
  input  T     enq_data_i,
  output logic deq_valid_o,
  input  logic deq_ready_i,
  output T     deq_data_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                             mem [DEPTH];
  logic [PW-1:0]                rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0]   count;
  logic                         do_enq, do_deq;

  assign enq_ready_o = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign deq_valid_o = (count != '0);
  assign deq_data_o  = mem[rd_ptr];
  assign count_o     = count;
  assign do_enq      = enq_valid_i && enq_ready_o;
  assign do_deq      = deq_valid_o && deq_ready_i;

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_enq) wr_ptr <= next_ptr(wr_ptr);
      if (do_deq) rd_ptr <= next_ptr(rd_ptr);
      unique case ({do_enq, do_deq})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_enq) mem[wr_ptr] <= enq_data_i;
  end

  // Handshake rules: no write into a full queue, no read from an empty one.
  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(do_enq && count == DEPTH[$clog2(DEPTH+1)-1:0]));
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(do_deq && count == '0));

endmodule
