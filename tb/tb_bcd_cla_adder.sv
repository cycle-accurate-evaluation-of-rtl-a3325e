// tb_bcd_cla_adder: self-checking test of the BCD carry-lookahead adder.
//
// Drives random valid BCD operands (plus corner cases: all nines, carry
// chains through every digit, zeros) into a 16-digit and a 3-digit adder and
// compares sum and carry-out with a digit-by-digit ripple reference written
// in the testbench.
module tb_bcd_cla_adder;
  localparam int D  = 16;
  localparam int D3 = 3;

  logic [4*D-1:0]  a, b, s;
  logic            cin, cout;
  logic [4*D3-1:0] a3, b3, s3;
  logic            cout3;
  int checks = 0, failures = 0;

  bcd_cla_adder #(.DIGITS(D))  dut  (.a(a),  .b(b),  .cin(cin),  .sum(s),  .cout(cout));
  bcd_cla_adder #(.DIGITS(D3)) dut3 (.a(a3), .b(b3), .cin(1'b0), .sum(s3), .cout(cout3));

  function automatic logic [4*D:0] ref_add(logic [4*D-1:0] x, logic [4*D-1:0] y, logic c);
    logic [4*D-1:0] r;
    int t;
    int cc;
    cc = int'(c);
    for (int i = 0; i < D; i++) begin
      t  = int'(x[4*i +: 4]) + int'(y[4*i +: 4]) + cc;
      cc = (t >= 10) ? 1 : 0;
      r[4*i +: 4] = 4'(t % 10);
    end
    return {cc[0], r};
  endfunction

  function automatic logic [4*D-1:0] rnd_bcd();
    logic [4*D-1:0] r;
    for (int i = 0; i < D; i++) r[4*i +: 4] = 4'($urandom_range(0, 9));
    return r;
  endfunction

  task automatic check(logic [4*D-1:0] x, logic [4*D-1:0] y, logic c);
    logic [4*D:0] e;
    a = x; b = y; cin = c;
    #1;
    e = ref_add(x, y, c);
    checks++;
    if ({cout, s} !== e) begin
      failures++;
      $display("FAIL %h + %h + %0d: got %0d_%h expected %0d_%h", x, y, c, cout, s, e[4*D], e[4*D-1:0]);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check('0, '0, 0);
    check({D{4'h9}}, 64'h1, 0);                 // carry through all digits
    check({D{4'h9}}, '0, 1);
    check({D{4'h9}}, {D{4'h9}}, 1);
    check(64'h0000_0000_0000_0005, 64'h0000_0000_0000_0005, 0);
    check(64'h4999_9999_9999_9999, 64'h5000_0000_0000_0001, 0);
    for (int k = 0; k < 3000; k++) check(rnd_bcd(), rnd_bcd(), 1'($urandom_range(0, 1)));
    // propagate-heavy operands: digit pairs summing to 9
    for (int k = 0; k < 500; k++) begin
      logic [4*D-1:0] x, y;
      x = rnd_bcd();
      for (int i = 0; i < D; i++) y[4*i +: 4] = 4'(9 - x[4*i +: 4]);
      check(x, y, 1'($urandom_range(0, 1)));
    end
    // exhaustive 3-digit adder
    for (int x = 0; x < 1000; x += 7) begin
      for (int y = 0; y < 1000; y += 3) begin
        int e;
        a3 = {4'(x / 100), 4'((x / 10) % 10), 4'(x % 10)};
        b3 = {4'(y / 100), 4'((y / 10) % 10), 4'(y % 10)};
        #1;
        e = x + y;
        checks++;
        if (cout3 !== (e >= 1000) ||
            s3 !== {4'((e / 100) % 10), 4'((e / 10) % 10), 4'(e % 10)}) begin
          failures++;
          $display("FAIL3 %0d + %0d", x, y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
