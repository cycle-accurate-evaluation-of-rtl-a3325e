// tb_dec_accel_ctrl: self-checking test of the decode-and-interface
// controller, connected to the real execution unit.
//
// Presents random legal RoCC commands (all function7 codes, every xd/xs1/xs2
// combination, unknown codes) directly at the controller, with random
// backpressure on the response and memory-request channels and a memory
// model that answers loads after 1..4 cycles. Every response is compared
// with the instruction-level model accel_model (rd and data), and commands
// with xd = 0 must not respond. Also checks the controller's own timing:
// with the response channel ready, the response of DEC_ADD is offered 2
// clock edges, that of DEC_MUL 26 and that of DEC_CNV 67 edges after the
// edge that accepts the command, and a WR with xd = 0 leaves the controller idle 1 edge after it.
module tb_dec_accel_ctrl;
  import dec_pkg::*;
  import dec_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, resp_valid, resp_ready;
  rocc_cmd_t cmd;
  rocc_resp_t resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_req_t mem_req;
  mem_resp_t mem_resp;
  logic ex_start, ex_busy, ex_done, ex_flag, busy;
  exop_e ex_op;
  logic [XLEN-1:0] ex_a, ex_b, ex_lo, ex_hi;
  int checks = 0, failures = 0;
  bit random_bp = 1;

  dec_accel_ctrl dut (.*);
  dec_exec_unit u_exec (.clk(clk), .rst_n(rst_n), .start(ex_start), .op(ex_op),
    .a(ex_a), .b(ex_b), .busy(ex_busy), .done(ex_done), .res_lo(ex_lo),
    .res_hi(ex_hi), .flag(ex_flag));

  accel_model model = new();

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Memory model: one outstanding load, answered after 1..4 cycles.
  logic [2:0] mem_wait;
  logic       mem_pend;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mem_pend <= 0; mem_resp_valid <= 0; mem_wait <= 0;
    end else begin
      if (mem_req_valid && mem_req_ready) begin
        mem_pend <= 1;
        mem_wait <= 3'($urandom_range(0, 3));
        mem_resp.tag  <= mem_req.tag;
        mem_resp.data <= mem_word(mem_req.addr);
      end
      if (mem_pend && mem_wait == 0 && !mem_resp_valid) begin
        mem_resp_valid <= 1; mem_pend <= 0;
      end else if (mem_pend) mem_wait <= mem_wait - 1;
      if (mem_resp_valid && mem_resp_ready) mem_resp_valid <= 0;
    end
  end

  always @(posedge clk) begin
    resp_ready    <= random_bp ? 1'($urandom_range(0, 2) != 0) : 1'b1;
    mem_req_ready <= random_bp ? 1'($urandom_range(0, 1)) : 1'b1;
  end

  // Issue one command and wait for its response (if any); returns the number
  // of cycles from acceptance to the response or to the controller going idle.
  task automatic issue(rocc_cmd_t c, output int lat);
    logic [63:0] e;
    e = model.apply(c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    lat = 0;
    if (c.inst.xd) begin
      while (!(resp_valid && resp_ready)) begin
        @(posedge clk); lat++; #1;
        if (lat > 500) break;
      end
      chk(resp_valid && resp.rd == c.inst.rd && resp.data == e,
          $sformatf("f=%0d resp rd=%0d data=%h expected rd=%0d data=%h",
                    c.inst.funct7, resp.rd, resp.data, c.inst.rd, e));
      @(posedge clk); #1;
    end else begin
      while (busy) begin
        @(posedge clk); lat++; #1;
        chk(!resp_valid, "response for xd=0");
        if (lat > 500) break;
      end
      chk(!busy, "controller idle");
    end
  endtask

  initial begin
    int lat;
    cmd_valid = 0; cmd = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // timing with no backpressure
    random_bp = 0;
    repeat (2) @(posedge clk);
    issue(make_cmd(F_DEC_ADD, 1, 1, 1, 5'd12, 5'd11, 5'd10, 64'h19, 64'h23), lat);
    chk(lat == 2, $sformatf("DEC_ADD latency %0d", lat));
    issue(make_cmd(F_DEC_MUL, 1, 1, 1, 5'd3, 5'd0, 5'd0, 64'h99, 64'h99), lat);
    chk(lat == 26, $sformatf("DEC_MUL latency %0d", lat));
    issue(make_cmd(F_DEC_CNV, 1, 1, 1, 5'd6, 5'd0, 5'd0, 64'd123456789, 0), lat);
    chk(lat == 67, $sformatf("DEC_CNV latency %0d", lat));
    issue(make_cmd(F_WR, 0, 1, 1, 5'd0, 5'd0, 5'd0, 64'h1234, 64'd7), lat);
    chk(lat == 1, $sformatf("WR busy cycles after accept %0d", lat));
    issue(make_cmd(F_RD, 1, 0, 1, 5'd9, 5'd0, 5'd0, 0, 64'd7), lat);
    issue(make_cmd(F_RD, 1, 0, 0, 5'd9, 5'd0, 5'd4, 0, 0), lat);   // reg 4 = high half of 99*99
    random_bp = 1;
    for (int k = 0; k < 1500; k++) issue(model.random_cmd(), lat);
    for (int f = 0; f < 10; f++)
      chk(model.n_funct[f] > 0, $sformatf("function %0d never issued", f));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
