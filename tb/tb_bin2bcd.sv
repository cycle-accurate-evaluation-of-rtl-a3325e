// tb_bin2bcd: self-checking test of the binary-to-BCD converter.
//
// Converts random 64-bit values, small values and values around 10^16
// (where the overflow flag must change), comparing the BCD digits with a
// reference built by repeated division by ten, and checks that done is high
// exactly BIN_W+1 cycles after the start cycle.
module tb_bin2bcd;
  localparam int BW = 64, D = 16;
  logic clk = 0, rst_n = 0, start, busy, done, overflow;
  logic [BW-1:0]  bin;
  logic [4*D-1:0] bcd;
  int checks = 0, failures = 0;

  bin2bcd #(.BIN_W(BW), .DIGITS(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic convert(logic [BW-1:0] v);
    logic [4*D-1:0] e;
    logic [BW-1:0]  t;
    int lat;
    t = v;
    for (int i = 0; i < D; i++) begin e[4*i +: 4] = 4'(t % 10); t = t / 10; end
    @(negedge clk);
    bin = v; start = 1;
    @(posedge clk);
    @(negedge clk);
    start = 0;
    lat = 0;
    while (!done) begin @(posedge clk); lat++; #1; end
    checks += 3;
    if (bcd !== e) begin failures++; $display("FAIL %0d -> %h expected %h", v, bcd, e); end
    if (overflow !== (t != 0)) begin failures++; $display("FAIL overflow for %0d", v); end
    if (lat + 1 != BW + 1) begin failures++; $display("FAIL latency %0d", lat + 1); end
  endtask

  initial begin
    start = 0; bin = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    convert(0);
    convert(9);
    convert(10);
    convert(64'd9999999999999999);
    convert(64'd10000000000000000);
    convert('1);
    for (int k = 0; k < 300; k++) convert({$urandom, $urandom});
    for (int k = 0; k < 300; k++) convert(64'($urandom) * 64'($urandom_range(1, 2000000)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
