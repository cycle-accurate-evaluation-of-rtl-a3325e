// tb_dec_exec_unit: self-checking test of the decimal execution unit.
//
// Runs EX_ADD, EX_MUL and EX_CNV with random and corner-case operands and
// compares the results with the reference models of dec_ref_pkg. Checks the
// latency of each operation (cycles from the start cycle to the done
// cycle): EX_ADD 1, EX_MUL 1 + 8 + 16 = 25, EX_CNV 64 + 2 = 66.
module tb_dec_exec_unit;
  import dec_pkg::*;
  import dec_ref_pkg::*;

  logic clk = 0, rst_n = 0, start, busy, done, flag;
  exop_e op;
  logic [XLEN-1:0] a, b, res_lo, res_hi;
  int checks = 0, failures = 0;

  dec_exec_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(exop_e o, logic [XLEN-1:0] x, logic [XLEN-1:0] y, output int lat);
    @(negedge clk);
    op = o; a = x; b = y; start = 1;
    @(posedge clk);
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done) begin @(posedge clk); lat++; #1; end
  endtask

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic do_add(logic [XLEN-1:0] x, logic [XLEN-1:0] y);
    int lat;
    logic [4*D:0] e;
    run(EX_ADD, x, y, lat);
    e = bcd_add(x, y);
    chk(res_lo == e[4*D-1:0], $sformatf("add %h+%h = %h", x, y, res_lo));
    chk(flag == e[4*D] && res_hi == XLEN'(e[4*D]), "add carry");
    chk(lat == 1, $sformatf("add latency %0d", lat));
  endtask

  task automatic do_mul(logic [XLEN-1:0] x, logic [XLEN-1:0] y);
    int lat;
    logic [8*D-1:0] e;
    run(EX_MUL, x, y, lat);
    e = bcd_mul(x, y);
    chk({res_hi, res_lo} == e, $sformatf("mul %h*%h = %h_%h exp %h", x, y, res_hi, res_lo, e));
    chk(lat == 9 + DIGITS, $sformatf("mul latency %0d", lat));
  endtask

  task automatic do_cnv(logic [XLEN-1:0] x);
    int lat;
    run(EX_CNV, x, 0, lat);
    chk(res_lo == bin_to_bcd(x), $sformatf("cnv %0d = %h", x, res_lo));
    chk(flag == (x >= 64'd10000000000000000), "cnv overflow");
    chk(lat == XLEN + 2, $sformatf("cnv latency %0d", lat));
  endtask

  initial begin
    start = 0; op = EX_ADD; a = 0; b = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    do_add('0, '0);
    do_add({16{4'h9}}, 64'h1);
    do_mul({16{4'h9}}, {16{4'h9}});
    do_mul(64'h1, {16{4'h9}});
    do_mul('0, 64'h1234);
    do_mul(64'h123456789, 64'h987654321);
    for (int k = 0; k < 400; k++) do_add(rnd_bcd(), rnd_bcd());
    for (int k = 0; k < 300; k++) do_mul(rnd_bcd($urandom_range(1, 16)), rnd_bcd($urandom_range(1, 16)));
    do_cnv(0);
    do_cnv(64'd9999999999999999);
    do_cnv(64'd10000000000000000);
    for (int k = 0; k < 50; k++) do_cnv({$urandom, $urandom} >> $urandom_range(0, 63));
    // back-to-back: a new start in the cycle done is high
    begin
      int lat;
      run(EX_ADD, 64'h5, 64'h7, lat);
      op = EX_ADD; a = 64'h19; b = 64'h1; start = 1;
      @(posedge clk);
      #1 start = 0;
      chk(done && res_lo == 64'h20, "back-to-back add");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
