// tb_method1_workload: the decimal64 coefficient-multiplication workload.
//
// Multiplies 8,000 pairs of decimal64 coefficients (up to 16 BCD digits,
// random lengths, plus all-nines and zero cases) on the accelerator at its
// default parameters. Each pair is one DEC_MUL with both operands passed in
// core registers (xs1 = xs2 = 1), whose response returns the low 16 digits,
// followed by an RD of the accelerator register holding the high 16 digits.
// The 32-digit product is compared with a schoolbook reference. The
// testbench also measures the accelerator's cycles per multiplication, from
// the command being presented to the command queue to its response
// appearing at the response queue output, in clock edges, and checks it
// against the expected 29: 1 to enter the command queue, 1 for the
// controller to take it, 26 in the controller and execution unit, 1 to
// enter the response queue.
module tb_method1_workload;
  import dec_pkg::*;
  import dec_ref_pkg::*;

  localparam int SAMPLES = 8000;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, resp_valid, resp_ready;
  rocc_cmd_t cmd;
  rocc_resp_t resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req;
  mem_resp_t mem_resp;
  logic busy;
  int checks = 0, failures = 0;
  longint mul_cycles = 0;

  dec_rocc_accel dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Send one command, wait for its response; returns data and cycle count.
  task automatic xfer(rocc_cmd_t c, output logic [63:0] data, output int cyc);
    cmd = c; cmd_valid = 1;
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!cmd_ready);
    #1 cmd_valid = 0;
    while (!resp_valid) begin @(posedge clk); cyc++; #1; end
    data = resp.data;
    @(posedge clk); #1;
  endtask

  initial begin
    logic [63:0] x, y, lo, hi;
    logic [127:0] e;
    int cyc, c2;
    cmd_valid = 0; cmd = '0; resp_ready = 1; mem_req_ready = 1;
    mem_resp_valid = 0; mem_resp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int k = 0; k < SAMPLES; k++) begin
      if (k == 0)      begin x = {16{4'h9}}; y = {16{4'h9}}; end
      else if (k == 1) begin x = '0;         y = {16{4'h9}}; end
      else begin
        x = rnd_bcd($urandom_range(1, 16));
        y = rnd_bcd($urandom_range(1, 16));
      end
      xfer(make_cmd(F_DEC_MUL, 1, 1, 1, 5'd12, 5'd10, 5'd11, x, y), lo, cyc);
      xfer(make_cmd(F_RD, 1, 0, 1, 5'd13, 5'd0, 5'd0, 0, 64'd13), hi, c2);
      e = bcd_mul(x, y);
      chk({hi, lo} == e, $sformatf("%h * %h = %h_%h expected %h", x, y, hi, lo, e));
      chk(cyc == 29, $sformatf("DEC_MUL took %0d cycles", cyc));
      mul_cycles += longint'(cyc);
    end
    $display("workload: %0d decimal64 coefficient products, %0d accelerator cycles per DEC_MUL on average",
             SAMPLES, mul_cycles / longint'(SAMPLES));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
