// lippen_top: the LIPPEN pointer-encryption accelerator as it attaches to a
// RISC-V core over the RoCC (Rocket Custom Coprocessor) interface.
//
// The core sends custom instructions on the command channel; funct7 picks
// the operation (encoding is this design's choice, see lippen_pkg):
//   SET_KEY(K1, K2)      load the 128-bit key K1 || K2
//   SET_M_SIZE(m1, m2)   set the modifier split; rs1[63] = 1 turns
//                        protection off (debug mode)
//   PTR_SEAL(ptr, mod)   rd <= Enc_{K ^ m2}(ptr ^ m1)
//   PTR_UNSEAL(ptr, mod) rd <= Dec_{K ^ m2}(ptr) ^ m1, with resp_fault_o set
//                        when the unused pointer bits are not all zero
// Commands go into a request queue and are executed strictly in order, so a
// SET_KEY affects every later seal/unseal and no earlier one. The head of the
// request queue drives the single-cycle unrolled PRINCEv2 seal and unseal
// datapaths; their result is written into the response queue on the next
// clock edge. Every command with xd = 1 produces exactly one response
// (configuration commands answer 0); commands with xd = 0 produce none.
//
// Timing: a command accepted at clock edge t is executed at edge t+1 (if the
// response queue has room) and its response is valid from edge t+1 on, i.e.
// two cycles from cmd_valid to resp_valid with no backpressure. One command
// completes per cycle in steady state. When the response queue is full the
// engine stalls and the request queue fills, which drops cmd_ready_o.
//
// What follows the paper: the cipher (PRINCEv2, one cycle), the seal/unseal
// equations and modifier split, the zero-check exception, the four
// instructions, the request/response queues, M1 = 16 / M2 = 0 at reset.
// This design's own choices: the queue depths, the instruction encoding, the
// m1/m2 bit placement, reporting the exception as a response flag.
// Only funct, xd and rd of the instruction word are used; opcode, xs1, xs2
// and the source register numbers are decoded by the core and are ignored
// here (lint lists them as unused).
module lippen_top
  import lippen_pkg::*;
#(
  parameter int unsigned VA_W       = 48, // virtual-address width A
  parameter int unsigned TAG_W      = 0,  // memory-tag bits at the pointer's top
  parameter int unsigned M1_RESET   = 16, // paper: M1 = 16 bits
  parameter int unsigned M2_RESET   = 0,  // paper: M2 = 0 bits
  parameter int unsigned REQ_DEPTH  = 2,
  parameter int unsigned RESP_DEPTH = 2
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  // RoCC command channel
  input  logic       cmd_valid_i,
  output logic       cmd_ready_o,
  input  rocc_inst_t cmd_inst_i,
  input  word_t      cmd_rs1_i,
  input  word_t      cmd_rs2_i,
  // RoCC response channel
  output logic       resp_valid_o,
  input  logic       resp_ready_i,
  output logic [4:0] resp_rd_o,
  output word_t      resp_data_o,
  output logic       resp_fault_o,
  // status
  output logic       busy_o,
  output cfg_t       cfg_o
);

  // ---------------- request queue ----------------
  req_t req_in, req_head;
  logic req_valid, req_pop;
  logic [$clog2(REQ_DEPTH+1)-1:0] req_count;

  always_comb begin
    req_in.funct = funct_e'(cmd_inst_i.funct);
    req_in.xd    = cmd_inst_i.xd;
    req_in.rd    = cmd_inst_i.rd;
    req_in.rs1   = cmd_rs1_i;
    req_in.rs2   = cmd_rs2_i;
  end

  lippen_queue #(.T(req_t), .DEPTH(REQ_DEPTH)) u_req_q (
    .clk_i, .rst_ni,
    .enq_valid_i (cmd_valid_i),
    .enq_ready_o (cmd_ready_o),
    .enq_data_i  (req_in),
    .deq_valid_o (req_valid),
    .deq_ready_i (req_pop),
    .deq_data_o  (req_head),
    .count_o     (req_count)
  );

  // ---------------- configuration ----------------
  cfg_t cfg;
  logic set_key, set_msize;

  lippen_cfg_regs #(.VA_W(VA_W), .TAG_W(TAG_W), .M1_RESET(M1_RESET), .M2_RESET(M2_RESET)) u_cfg (
    .clk_i, .rst_ni,
    .set_key_i   (set_key),
    .set_msize_i (set_msize),
    .rs1_i       (req_head.rs1),
    .rs2_i       (req_head.rs2),
    .cfg_o       (cfg)
  );
  assign cfg_o = cfg;

  // ---------------- seal / unseal datapaths ----------------
  word_t sealed, unsealed;
  logic  unseal_fault;

  lippen_seal #(.VA_W(VA_W), .TAG_W(TAG_W)) u_seal (
    .cfg_i    (cfg),
    .ptr_i    (req_head.rs1),
    .mod_i    (req_head.rs2),
    .cipher_o (sealed)
  );

  lippen_unseal #(.VA_W(VA_W), .TAG_W(TAG_W)) u_unseal (
    .cfg_i    (cfg),
    .cipher_i (req_head.rs1),
    .mod_i    (req_head.rs2),
    .ptr_o    (unsealed),
    .fault_o  (unseal_fault)
  );

  // ---------------- execute / response queue ----------------
  resp_t resp_in, resp_head;
  logic  resp_room, resp_push;
  logic [$clog2(RESP_DEPTH+1)-1:0] resp_count;

  always_comb begin
    // A command executes when it is at the head and, if it answers, the
    // response queue has room.
    req_pop   = req_valid && (!req_head.xd || resp_room);
    resp_push = req_pop && req_head.xd;
    set_key   = req_pop && (req_head.funct == FN_SET_KEY);
    set_msize = req_pop && (req_head.funct == FN_SET_M_SIZE);

    resp_in.rd    = req_head.rd;
    resp_in.data  = '0;
    resp_in.fault = 1'b0;
    unique case (req_head.funct)
      FN_PTR_SEAL:   resp_in.data = sealed;
      FN_PTR_UNSEAL: begin
        resp_in.data  = unsealed;
        resp_in.fault = unseal_fault;
      end
      default: ;
    endcase
  end

  lippen_queue #(.T(resp_t), .DEPTH(RESP_DEPTH)) u_resp_q (
    .clk_i, .rst_ni,
    .enq_valid_i (resp_push),
    .enq_ready_o (resp_room),
    .enq_data_i  (resp_in),
    .deq_valid_o (resp_valid_o),
    .deq_ready_i (resp_ready_i),
    .deq_data_o  (resp_head),
    .count_o     (resp_count)
  );

  assign resp_rd_o    = resp_head.rd;
  assign resp_data_o  = resp_head.data;
  assign resp_fault_o = resp_head.fault;
  assign busy_o       = (req_count != '0) || (resp_count != '0);

endmodule
