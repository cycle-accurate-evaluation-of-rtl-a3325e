// dec_accel_ctrl: decode-and-interface controller of the decimal accelerator.
//
// Takes one RoCC command at a time, decodes its function7 field, fetches the
// operands, runs the operation and, when the instruction's xd flag is set,
// returns one response (destination core register rd and a 64-bit value).
// It owns the accelerator's register set (acc_regfile) and drives the
// memory-request channel and the execution unit.
//
// Operands. Following the RoCC flag rules, operand A is the core register
// value carried by the command when xs1 = 1, otherwise the accelerator
// register named by the rs1 field; operand B likewise from xs2/rs2. For the
// register-transfer functions the accelerator register address is the low
// five bits of operand B's core value when xs2 = 1, otherwise the rs2 field.
//
//   WR        reg[addr] = A                          response: A
//   RD        (no write)                             response: reg[addr]
//   LD        reg[addr] = mem64[A] (one cache read)  response: loaded value
//   ACCUM     reg[addr] = reg[addr] + A (binary)     response: new value
//   CLR_ALL   all registers = 0                      response: 0
//   DEC_ADD   reg[rd] = A + B (BCD)                  response: sum
//   DEC_ACCUM reg[rd] = reg[rd] + A (BCD)            response: sum
//   DEC_MUL   {reg[rd+1], reg[rd]} = A * B (BCD)     response: low half
//   DEC_CNV   reg[rd] = BCD(A)                       response: BCD value
//   other     (ignored)                              response: 0
//
// FSM. One state per function, as in the published interface FSM (Idle, RD,
// WR, CLR_ALL, ACCUM, DEC_ADD), extended by LD, DEC_ACCUM, DEC_MUL, DEC_CNV
// and an ignore state for the other instructions of the list. Idle accepts
// a command (cmd_ready is high only there) and moves to the function's
// state. That state does its work, waiting (self-loop) on the memory or the
// execution unit where needed, then either returns to Idle (xd = 0) or keeps
// waiting in the same state with the response offered until the response
// channel takes it, then returns to Idle.
//
// Timing, counted in clock edges after the edge that accepts the command:
// WR/RD/ACCUM/CLR_ALL finish at the first edge (back in Idle, or response
// offered from then on); DEC_ADD and DEC_ACCUM offer the response after 2
// edges, DEC_MUL after 26 and DEC_CNV after 67 (one edge to start the
// execution unit, its latency, one edge to write back); LD waits for the
// memory.
//
// The function7 codes, the flag rules and the FSM states come from the
// paper; the register-address convention of WR/RD/LD/ACCUM, the DEC_ACCUM,
// DEC_MUL and DEC_CNV operand and result conventions and the handling of
// unknown codes are this design's choices.
module dec_accel_ctrl
  import dec_pkg::*;
#(
  parameter int NREGS = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  // RoCC command (from the command queue)
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  rocc_cmd_t       cmd,
  // RoCC response (to the response queue)
  output logic            resp_valid,
  input  logic            resp_ready,
  output rocc_resp_t      resp,
  // L1 data cache port
  output logic            mem_req_valid,
  input  logic            mem_req_ready,
  output mem_req_t        mem_req,
  input  logic            mem_resp_valid,
  output logic            mem_resp_ready,
  input  mem_resp_t       mem_resp,
  // Execution unit
  output logic            ex_start,
  output exop_e           ex_op,
  output logic [XLEN-1:0] ex_a,
  output logic [XLEN-1:0] ex_b,
  input  logic            ex_busy,
  input  logic            ex_done,
  input  logic [XLEN-1:0] ex_lo,
  input  logic [XLEN-1:0] ex_hi,
  // Status
  output logic            busy
);

  typedef enum logic [3:0] {
    S_IDLE, S_WR, S_RD, S_LD, S_ACCUM, S_CLR_ALL,
    S_DEC_ADD, S_DEC_ACCUM, S_DEC_MUL, S_DEC_CNV, S_IGNORE
  } state_e;

  state_e            state;
  rocc_inst_t        inst_q;
  logic [XLEN-1:0]   opa_q, opb_q, res_q;
  logic [REG_AW-1:0] addr_q;
  logic              pend_q;      // response offered, waiting for resp_ready
  logic              started_q;   // memory request sent / execution started

  // Register set ports
  logic              rf_clr, rf_we1, rf_we2;
  logic [REG_AW-1:0] rf_ra1, rf_ra2, rf_wa1, rf_wa2;
  logic [XLEN-1:0]   rf_rd1, rf_rd2, rf_wd1, rf_wd2;

  logic              finish;
  logic [XLEN-1:0]   fin_data;

  acc_regfile #(.NREGS(NREGS), .WIDTH(XLEN), .AW(REG_AW)) u_regs (
    .clk(clk), .rst_n(rst_n), .clr_all(rf_clr),
    .ra1(rf_ra1), .rd1(rf_rd1), .ra2(rf_ra2), .rd2(rf_rd2),
    .we1(rf_we1), .wa1(rf_wa1), .wd1(rf_wd1),
    .we2(rf_we2), .wa2(rf_wa2), .wd2(rf_wd2)
  );

  function automatic state_e decode(logic [6:0] f);
    unique case (f)
      F_WR:        return S_WR;
      F_RD:        return S_RD;
      F_LD:        return S_LD;
      F_ACCUM:     return S_ACCUM;
      F_CLR_ALL:   return S_CLR_ALL;
      F_DEC_ADD:   return S_DEC_ADD;
      F_DEC_ACCUM: return S_DEC_ACCUM;
      F_DEC_MUL:   return S_DEC_MUL;
      F_DEC_CNV:   return S_DEC_CNV;
      default:     return S_IGNORE;
    endcase
  endfunction

  assign busy = (state != S_IDLE);

  always_comb begin
    cmd_ready      = 1'b0;
    resp_valid     = pend_q;
    resp.rd        = inst_q.rd;
    resp.data      = res_q;
    mem_req_valid  = 1'b0;
    mem_req.addr   = opa_q;
    mem_req.tag    = addr_q;
    mem_resp_ready = 1'b0;
    ex_start       = 1'b0;
    ex_op          = EX_ADD;
    ex_a           = opa_q;
    ex_b           = opb_q;
    rf_clr         = 1'b0;
    rf_ra1         = addr_q;
    rf_ra2         = inst_q.rd;
    rf_we1         = 1'b0;
    rf_wa1         = inst_q.rd;
    rf_wd1         = ex_lo;
    rf_we2         = 1'b0;
    rf_wa2         = inst_q.rd + 1'b1;
    rf_wd2         = ex_hi;
    finish         = 1'b0;
    fin_data       = '0;

    unique case (state)
      S_IDLE: begin
        cmd_ready = 1'b1;
        rf_ra1    = cmd.inst.rs1;
        rf_ra2    = cmd.inst.rs2;
      end
      S_WR: if (!pend_q) begin
        rf_we1   = 1'b1;
        rf_wa1   = addr_q;
        rf_wd1   = opa_q;
        finish   = 1'b1;
        fin_data = opa_q;
      end
      S_RD: if (!pend_q) begin
        finish   = 1'b1;
        fin_data = rf_rd1;
      end
      S_ACCUM: if (!pend_q) begin
        rf_we1   = 1'b1;
        rf_wa1   = addr_q;
        rf_wd1   = rf_rd1 + opa_q;
        finish   = 1'b1;
        fin_data = rf_rd1 + opa_q;
      end
      S_CLR_ALL: if (!pend_q) begin
        rf_clr   = 1'b1;
        finish   = 1'b1;
      end
      S_LD: if (!pend_q) begin
        if (!started_q) begin
          mem_req_valid = 1'b1;
        end else begin
          mem_resp_ready = 1'b1;
          if (mem_resp_valid) begin
            rf_we1   = 1'b1;
            rf_wa1   = mem_resp.tag;
            rf_wd1   = mem_resp.data;
            finish   = 1'b1;
            fin_data = mem_resp.data;
          end
        end
      end
      S_DEC_ADD, S_DEC_ACCUM, S_DEC_MUL, S_DEC_CNV: if (!pend_q) begin
        unique case (state)
          S_DEC_MUL: ex_op = EX_MUL;
          S_DEC_CNV: ex_op = EX_CNV;
          default:   ex_op = EX_ADD;
        endcase
        if (state == S_DEC_ACCUM) begin
          ex_a = rf_rd2;           // reg[rd]
          ex_b = opa_q;
        end
        if (!started_q) begin
          ex_start = 1'b1;
        end else if (ex_done) begin
          rf_we1   = 1'b1;
          rf_we2   = (state == S_DEC_MUL);
          finish   = 1'b1;
          fin_data = ex_lo;
        end
      end
      S_IGNORE: if (!pend_q) begin
        finish = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      inst_q    <= '0;
      opa_q     <= '0;
      opb_q     <= '0;
      res_q     <= '0;
      addr_q    <= '0;
      pend_q    <= 1'b0;
      started_q <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (cmd_valid) begin
            inst_q    <= cmd.inst;
            opa_q     <= cmd.inst.xs1 ? cmd.rs1 : rf_rd1;
            opb_q     <= cmd.inst.xs2 ? cmd.rs2 : rf_rd2;
            addr_q    <= cmd.inst.xs2 ? cmd.rs2[REG_AW-1:0] : cmd.inst.rs2;
            pend_q    <= 1'b0;
            started_q <= 1'b0;
            state     <= decode(cmd.inst.funct7);
          end
        end
        default: begin
          if ((mem_req_valid && mem_req_ready) || ex_start) started_q <= 1'b1;
          if (finish) begin
            if (inst_q.xd) begin
              pend_q <= 1'b1;
              res_q  <= fin_data;
            end else begin
              state  <= S_IDLE;
            end
          end
          if (pend_q && resp_ready) begin
            pend_q <= 1'b0;
            state  <= S_IDLE;
          end
        end
      endcase
    end
  end

  // Handshake rules: an offered response or memory request holds until taken,
  // and the execution unit is only started when idle.
  a_resp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid && !resp_ready |=> resp_valid && $stable(resp));
  a_mreq_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req));
  a_ex_idle: assert property (@(posedge clk) disable iff (!rst_n)
    ex_start |-> !ex_busy);

endmodule
