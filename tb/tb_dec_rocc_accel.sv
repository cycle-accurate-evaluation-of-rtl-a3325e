// tb_dec_rocc_accel: end-to-end test of the decimal RoCC accelerator at its
// default parameters.
//
// The testbench plays the Rocket core and the L1 data cache.
//
// First the two published instruction words (DEC_ADD 0x08A5F617 and the
// all-zero-field CLR_ALL) are sent as raw 32-bit words.
//
// Phase 1 runs the Method-1 decimal multiplication the way the co-design
// software does it, one instruction at a time: the multiplicand X is
// written into accelerator register 1 and register 0 is zeroed, eight
// DEC_ADDs on accelerator registers build the multiples 2X..9X in registers
// 2..9, then for each multiplier digit, most significant first, the "core"
// shifts its product left by one digit and issues DEC_ADD product + MM[k]
// (product from a core register, xs1 = 1; MM[k] from accelerator register
// k, xs2 = 0; result returned, xd = 1). Operands have 8 digits so that the
// product fits in one 64-bit register, as in the software loop. The result
// is compared with a schoolbook product and with DEC_MUL on the same
// operands (16-digit result, high half read back with RD).
//
// Phase 2 streams random legal commands of every function into the command
// queue as fast as it accepts them, with random backpressure on the
// response and memory-request channels and a memory that answers after 1..4
// cycles. Responses are checked in order against the instruction-level
// model accel_model.
//
// Each mechanism must occur at least once or a failure is counted: command
// queue full, response backpressure, memory request stall, every function7
// (including an unknown code), commands without response, a decimal carry
// out of 16 digits, a DEC_CNV overflow, and Method-1 products.
module tb_dec_rocc_accel;
  import dec_pkg::*;
  import dec_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, resp_valid, resp_ready;
  rocc_cmd_t cmd;
  rocc_resp_t resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req;
  mem_resp_t mem_resp;
  logic busy;
  int checks = 0, failures = 0;
  bit random_bp = 0;

  dec_rocc_accel dut (.*);

  accel_model model = new();
  rocc_resp_t exp_q[$];
  logic [63:0] last_data;
  int n_resp = 0, n_cmd_stall = 0, n_resp_bp = 0, n_mreq_stall = 0, n_noresp = 0, n_m1 = 0;
  longint cycle = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Data cache model: loads answered in order after 1..4 cycles.
  typedef struct { longint due; mem_resp_t r; } pend_t;
  pend_t mq[$];
  always @(posedge clk) begin
    cycle++;
    if (!rst_n) begin
      mem_resp_valid <= 0;
      mq.delete();
    end else begin
      mem_resp_valid <= 0;
      if (mem_req_valid && mem_req_ready) begin
        pend_t p;
        p.due = cycle + longint'($urandom_range(1, 4));
        p.r.tag = mem_req.tag;
        p.r.data = mem_word(mem_req.addr);
        mq.push_back(p);
      end
      if (mq.size() > 0 && mq[0].due <= cycle) begin
        mem_resp_valid <= 1;
        mem_resp <= mq[0].r;
        void'(mq.pop_front());
      end
    end
  end

  // Channel readiness and mechanism counters.
  always @(posedge clk) begin
    if (rst_n) begin
      if (cmd_valid && !cmd_ready) n_cmd_stall++;
      if (resp_valid && !resp_ready) n_resp_bp++;
      if (mem_req_valid && !mem_req_ready) n_mreq_stall++;
    end
    resp_ready    <= random_bp ? 1'($urandom_range(0, 2) != 0) : 1'b1;
    mem_req_ready <= random_bp ? 1'($urandom_range(0, 1)) : 1'b1;
  end

  // Response monitor: responses arrive in command order.
  always @(posedge clk) begin
    if (rst_n && resp_valid && resp_ready) begin
      rocc_resp_t e;
      n_resp++;
      if (exp_q.size() == 0) begin
        chk(0, "unexpected response");
      end else begin
        e = exp_q.pop_front();
        chk(resp == e, $sformatf("resp rd=%0d data=%h expected rd=%0d data=%h",
                                 resp.rd, resp.data, e.rd, e.data));
      end
      last_data = resp.data;
    end
  end

  // Put one command into the command queue; the model predicts its response.
  task automatic send(rocc_cmd_t c);
    rocc_resp_t e;
    cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    e.rd = c.inst.rd;
    e.data = model.apply(c);
    if (c.inst.xd) exp_q.push_back(e); else n_noresp++;
    #1 cmd_valid = 0;
  endtask

  task automatic wait_all();
    int n = 0;
    while ((exp_q.size() != 0 || busy) && n < 5000) begin @(posedge clk); #1; n++; end
    chk(exp_q.size() == 0 && !busy, "drained");
  endtask

  // Method-1 on the accelerator; returns the product of two 8-digit numbers.
  task automatic method1(logic [63:0] x, logic [63:0] y);
    logic [63:0] product, e;
    send(make_cmd(F_WR, 0, 1, 1, 5'd0, 5'd0, 5'd0, x, 64'd1));       // MM[1] = X
    send(make_cmd(F_WR, 0, 1, 1, 5'd0, 5'd0, 5'd0, 64'd0, 64'd0));   // MM[0] = 0
    for (int i = 1; i < 9; i++)                                       // MM[i+1] = MM[i] + MM[1]
      send(make_cmd(F_DEC_ADD, 0, 0, 0, 5'(i + 1), 5'(i), 5'd1, 0, 0));
    product = '0;
    for (int j = 7; j >= 0; j--) begin
      product = product << 4;                                         // one decimal digit
      send(make_cmd(F_DEC_ADD, 1, 1, 0, 5'd12, 5'd10, 5'(y[4*j +: 4]), product, 0));
      wait_all();
      product = last_data;
    end
    e = bcd_mul(x, y)[63:0];
    chk(product == e, $sformatf("Method-1 %h * %h = %h expected %h", x, y, product, e));
    n_m1++;
    // same product by DEC_MUL, high half read back from register 21
    send(make_cmd(F_DEC_MUL, 1, 1, 1, 5'd20, 5'd10, 5'd11, x, y));
    wait_all();
    chk(last_data == e, "DEC_MUL low half");
    send(make_cmd(F_RD, 1, 0, 1, 5'd12, 5'd0, 5'd0, 0, 64'd21));
    wait_all();
    chk(last_data == 64'd0, "DEC_MUL high half of 8x8-digit product");
  endtask

  initial begin
    cmd_valid = 0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // The published instruction words, decoded through the packed struct:
    // 0x08A5F617 = DEC_ADD, sources x11 (rs1) and x10 (rs2), destination x12;
    // 0x0A000017 = CLR_ALL with every other field zero.
    begin
      rocc_cmd_t c;
      c.inst = rocc_inst_t'(32'h08A5F617);
      chk(c.inst.funct7 == F_DEC_ADD && c.inst.rs1 == 5'd11 && c.inst.rs2 == 5'd10 &&
          c.inst.rd == 5'd12 && c.inst.xd && c.inst.xs1 && c.inst.xs2 &&
          c.inst.opcode == OPC_CUSTOM0, "fields of 0x08A5F617");
      c.rs1 = 64'h0000_0000_0000_4999;
      c.rs2 = 64'h0000_0000_0000_0501;
      send(c);
      wait_all();
      chk(last_data == 64'h5500, "0x08A5F617: 4999 + 501");
      send(make_cmd(F_WR, 0, 1, 1, 5'd0, 5'd0, 5'd0, 64'h77, 64'd3));
      c.inst = rocc_inst_t'(32'h0A000017);
      c.rs1 = '0; c.rs2 = '0;
      send(c);
      send(make_cmd(F_RD, 1, 0, 1, 5'd12, 5'd0, 5'd0, 0, 64'd3));
      wait_all();
      chk(last_data == 64'h0, "CLR_ALL word 0x0A000017 cleared r[3]");
    end
    // Phase 1: Method-1
    method1(64'h12345678, 64'h87654321);
    method1(64'h99999999, 64'h99999999);
    for (int k = 0; k < 20; k++) method1(rnd_bcd(8), rnd_bcd(8));
    // full 16-digit DEC_MUL with both halves
    send(make_cmd(F_DEC_MUL, 1, 1, 1, 5'd30, 5'd0, 5'd0, {16{4'h9}}, {16{4'h9}}));
    send(make_cmd(F_RD, 1, 0, 1, 5'd12, 5'd0, 5'd0, 0, 64'd31));
    wait_all();
    chk(last_data == 64'h9999_9999_9999_9998, "16-digit product high half");
    // Phase 2: random stream with backpressure
    random_bp = 1;
    for (int k = 0; k < 3000; k++) send(model.random_cmd());
    wait_all();
    // mechanisms
    for (int f = 0; f < 10; f++)
      chk(model.n_funct[f] > 0, $sformatf("function %0d never ran", f));
    chk(n_cmd_stall > 0, "command queue never full");
    chk(n_resp_bp > 0, "response never back-pressured");
    chk(n_mreq_stall > 0, "memory request never stalled");
    chk(n_noresp > 0, "no command without response");
    chk(model.n_carry > 0, "no decimal carry out");
    chk(model.n_cnv_ovf > 0, "no DEC_CNV overflow");
    chk(n_m1 > 0, "no Method-1 product");
    $display("mechanisms: cmd_full=%0d resp_bp=%0d mreq_stall=%0d no_resp=%0d carry=%0d cnv_ovf=%0d method1=%0d responses=%0d",
             n_cmd_stall, n_resp_bp, n_mreq_stall, n_noresp, model.n_carry, model.n_cnv_ovf, n_m1, n_resp);
    $display("functions: WR=%0d RD=%0d LD=%0d ACCUM=%0d DEC_ADD=%0d CLR_ALL=%0d DEC_CNV=%0d DEC_MUL=%0d DEC_ACCUM=%0d other=%0d",
             model.n_funct[0], model.n_funct[1], model.n_funct[2], model.n_funct[3], model.n_funct[4],
             model.n_funct[5], model.n_funct[6], model.n_funct[7], model.n_funct[8], model.n_funct[9]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
