// dec_rocc_accel: decimal-arithmetic RoCC accelerator (top level).
//
// A co-processor for the RoCC port of a Rocket RISC-V core that gives the
// core decimal (BCD-8421) instructions: BCD addition, BCD accumulation,
// 16x16-digit BCD multiplication and binary-to-BCD conversion, plus
// register transfer, binary accumulate and load instructions. The core
// sends commands (instruction word plus up to two 64-bit register values)
// and receives responses for instructions with xd = 1; loads go to the L1
// data cache over a request/response pair.
//
// Structure: every RoCC channel passes through a queue (sync_fifo) -
// command in, response out, memory request out, memory response in. The
// decode-and-interface controller (dec_accel_ctrl, with the register set)
// handles one command at a time and starts the execution unit
// (dec_exec_unit: one BCD carry-lookahead adder, multiples buffer, control
// FSM, binary-to-BCD converter) for the decimal functions.
//
// Interface: all channels are valid/ready, except the memory response,
// which like RoCC's has no ready; only one load is outstanding at a time so
// the memory response queue cannot overflow. busy is high while a command
// is queued or being executed, or a response or memory request is queued.
// Synchronous active-low reset. Each queue adds one cycle in its direction.
//
// The block structure and the queues on the four channels follow the
// paper's block diagram; queue depths, reset and the busy definition are
// this design's choices.
module dec_rocc_accel
  import dec_pkg::*;
#(
  parameter int NREGS     = 32,
  parameter int CMD_DEPTH = 2,
  parameter int RSP_DEPTH = 2,
  parameter int MEM_DEPTH = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  // RoCC command from the core
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  rocc_cmd_t  cmd,
  // RoCC response to the core
  output logic       resp_valid,
  input  logic       resp_ready,
  output rocc_resp_t resp,
  // L1 data cache
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output mem_req_t   mem_req,
  input  logic       mem_resp_valid,
  input  mem_resp_t  mem_resp,
  output logic       busy
);

  logic       q_cmd_valid, q_cmd_ready;
  rocc_cmd_t  q_cmd;
  logic       c_resp_valid, c_resp_ready;
  rocc_resp_t c_resp;
  logic       c_mreq_valid, c_mreq_ready;
  mem_req_t   c_mreq;
  logic       q_mrsp_valid, q_mrsp_ready, mrsp_in_ready;
  mem_resp_t  q_mrsp;
  logic       ctrl_busy;

  logic            ex_start, ex_busy, ex_done;
  exop_e           ex_op;
  logic [XLEN-1:0] ex_a, ex_b, ex_lo, ex_hi;

  sync_fifo #(.WIDTH($bits(rocc_cmd_t)), .DEPTH(CMD_DEPTH)) u_cmd_q (
    .clk(clk), .rst_n(rst_n),
    .in_valid(cmd_valid), .in_ready(cmd_ready), .in_data(cmd),
    .out_valid(q_cmd_valid), .out_ready(q_cmd_ready), .out_data(q_cmd)
  );

  sync_fifo #(.WIDTH($bits(rocc_resp_t)), .DEPTH(RSP_DEPTH)) u_resp_q (
    .clk(clk), .rst_n(rst_n),
    .in_valid(c_resp_valid), .in_ready(c_resp_ready), .in_data(c_resp),
    .out_valid(resp_valid), .out_ready(resp_ready), .out_data(resp)
  );

  sync_fifo #(.WIDTH($bits(mem_req_t)), .DEPTH(MEM_DEPTH)) u_mreq_q (
    .clk(clk), .rst_n(rst_n),
    .in_valid(c_mreq_valid), .in_ready(c_mreq_ready), .in_data(c_mreq),
    .out_valid(mem_req_valid), .out_ready(mem_req_ready), .out_data(mem_req)
  );

  sync_fifo #(.WIDTH($bits(mem_resp_t)), .DEPTH(MEM_DEPTH)) u_mrsp_q (
    .clk(clk), .rst_n(rst_n),
    .in_valid(mem_resp_valid), .in_ready(mrsp_in_ready), .in_data(mem_resp),
    .out_valid(q_mrsp_valid), .out_ready(q_mrsp_ready), .out_data(q_mrsp)
  );

  dec_accel_ctrl #(.NREGS(NREGS)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(q_cmd_valid), .cmd_ready(q_cmd_ready), .cmd(q_cmd),
    .resp_valid(c_resp_valid), .resp_ready(c_resp_ready), .resp(c_resp),
    .mem_req_valid(c_mreq_valid), .mem_req_ready(c_mreq_ready), .mem_req(c_mreq),
    .mem_resp_valid(q_mrsp_valid), .mem_resp_ready(q_mrsp_ready), .mem_resp(q_mrsp),
    .ex_start(ex_start), .ex_op(ex_op), .ex_a(ex_a), .ex_b(ex_b),
    .ex_busy(ex_busy), .ex_done(ex_done), .ex_lo(ex_lo), .ex_hi(ex_hi),
    .busy(ctrl_busy)
  );

  dec_exec_unit u_exec (
    .clk(clk), .rst_n(rst_n),
    .start(ex_start), .op(ex_op), .a(ex_a), .b(ex_b),
    .busy(ex_busy), .done(ex_done), .res_lo(ex_lo), .res_hi(ex_hi),
    .flag()
  );

  assign busy = ctrl_busy || q_cmd_valid || resp_valid || mem_req_valid;

  a_mrsp_no_drop: assert property (@(posedge clk) disable iff (!rst_n)
    mem_resp_valid |-> mrsp_in_ready);

endmodule
