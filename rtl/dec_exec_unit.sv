// dec_exec_unit: execution unit of the decimal accelerator.
//
// All decimal arithmetic runs on one BCD carry-lookahead adder of DIGITS+1
// digits, whose two inputs X and Y are chosen by operand multiplexers, with
// a feedback path from the adder output back into a small buffer of
// multiplicand multiples. A control FSM sequences it:
//
//   EX_ADD  res = a + b (BCD). One pass through the adder. res_lo holds the
//           low DIGITS digits, res_hi the carry digit (0 or 1), flag = carry.
//   EX_MUL  res = a * b (BCD), 2*DIGITS-digit product in {res_hi, res_lo}.
//           This is Method-1 of the co-design it serves, moved into hardware:
//           mm[0] = 0 and mm[1] = a, then eight adder passes build
//           mm[i+1] = mm[i] + mm[1], the multiples 2a..9a (up to DIGITS+1
//           digits). Then, for each digit k of b from the least significant
//           one, S = P_hi + mm[k]; the lowest digit of S shifts into the
//           low half of the product and S without it becomes the new P_hi.
//           P_hi + 9a < 10^(DIGITS+1), so the adder never overflows.
//   EX_CNV  res = BCD of binary a, through bin2bcd; flag = value had more
//           than DIGITS decimal digits.
//
// Interface: start (one cycle, when busy is low) with op, a, b. done pulses
// for one cycle when res_lo/res_hi/flag are valid; they hold until the next
// start. Latency, counted in cycles from the cycle in which start is high
// to the cycle in which done is high: EX_ADD 1, EX_MUL 9+DIGITS (25 at 16
// digits: one to load, 8 to form the multiples, one per multiplier digit),
// EX_CNV XLEN+2. A new start is accepted in the cycle done is high.
//
// The paper gives the block diagram (multiplexers in front of one BCD ADD
// with a feedback loop, control logic and an FSM) and the Method-1 flow
// (multiples 1X..9X by repeated addition, then shift-and-add by the digits
// of the multiplier). The least-significant-digit-first accumulation, the
// multiples buffer and all timing are this design's choice; the paper's
// software does the same loop most-significant digit first.
module dec_exec_unit
  import dec_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  exop_e           op,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  output logic            busy,
  output logic            done,
  output logic [XLEN-1:0] res_lo,
  output logic [XLEN-1:0] res_hi,
  output logic            flag
);

  localparam int AD = DIGITS + 1;        // adder digits
  localparam int AW = 4 * AD;

  typedef enum logic [2:0] {S_IDLE, S_GEN, S_ACC, S_CNV, S_DONE} state_e;

  state_e          state;
  logic [AW-1:0]   mm [10];              // multiples 0a..9a
  logic [3:0]      gen_i;                // multiple being formed minus one
  logic [XLEN-1:0] b_q;                  // multiplier digits, shifted right
  logic [$clog2(DIGITS+1)-1:0] acc_j;
  logic [XLEN-1:0] p_hi, p_lo;

  logic [AW-1:0]   x, y, s;
  logic            s_cout;

  logic            cnv_start, cnv_busy, cnv_done, cnv_ovf;
  logic [XLEN-1:0] cnv_bcd;

  // Operand multiplexers in front of the adder.
  always_comb begin
    unique case (state)
      S_GEN:   begin x = mm[gen_i];              y = mm[1];        end
      S_ACC:   begin x = {4'b0, p_hi};           y = mm[b_q[3:0]]; end
      default: begin x = {4'b0, a};              y = {4'b0, b};    end
    endcase
  end

  bcd_cla_adder #(.DIGITS(AD)) u_adder (
    .a(x), .b(y), .cin(1'b0), .sum(s), .cout(s_cout)
  );

  assign cnv_start = !busy && start && (op == EX_CNV);

  bin2bcd #(.BIN_W(XLEN), .DIGITS(DIGITS)) u_cnv (
    .clk(clk), .rst_n(rst_n), .start(cnv_start), .bin(a),
    .busy(cnv_busy), .done(cnv_done), .bcd(cnv_bcd), .overflow(cnv_ovf)
  );

  assign busy = (state != S_IDLE) && (state != S_DONE);
  assign done = (state == S_DONE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      gen_i  <= '0;
      acc_j  <= '0;
      b_q    <= '0;
      p_hi   <= '0;
      p_lo   <= '0;
      res_lo <= '0;
      res_hi <= '0;
      flag   <= 1'b0;
      for (int i = 0; i < 10; i++) mm[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: begin
          state <= S_IDLE;
          if (start) begin
            unique case (op)
              EX_ADD: begin
                res_lo <= s[XLEN-1:0];
                res_hi <= XLEN'(s[AW-1 -: 4]);
                flag   <= (s[AW-1 -: 4] != 4'd0);
                state  <= S_DONE;
              end
              EX_MUL: begin
                mm[0] <= '0;
                mm[1] <= {4'b0, a};
                b_q   <= b;
                gen_i <= 4'd1;
                state <= S_GEN;
              end
              EX_CNV: state <= S_CNV;
              default: state <= S_IDLE;
            endcase
          end
        end
        S_GEN: begin
          mm[gen_i + 4'd1] <= s;
          gen_i            <= gen_i + 4'd1;
          if (gen_i == 4'd8) begin
            p_hi  <= '0;
            p_lo  <= '0;
            acc_j <= '0;
            state <= S_ACC;
          end
        end
        S_ACC: begin
          p_lo  <= {s[3:0], p_lo[XLEN-1:4]};
          p_hi  <= s[AW-1:4];
          b_q   <= b_q >> 4;
          acc_j <= acc_j + 1'b1;
          if (32'(acc_j) == DIGITS - 1) begin
            res_lo <= {s[3:0], p_lo[XLEN-1:4]};
            res_hi <= s[AW-1:4];
            flag   <= 1'b0;
            state  <= S_DONE;
          end
        end
        S_CNV: begin
          if (cnv_done) begin
            res_lo <= cnv_bcd;
            res_hi <= '0;
            flag   <= cnv_ovf;
            state  <= S_DONE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // In the accumulation phase the adder output must fit in DIGITS+1 digits.
  a_acc_no_carry: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_ACC) |-> !s_cout);

endmodule
