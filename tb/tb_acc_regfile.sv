// tb_acc_regfile: self-checking test of the accelerator register set.
//
// Random writes on both ports and reads on both ports against an array
// model, including same-address writes (port 1 wins), clear-all and reset.
module tb_acc_regfile;
  localparam int N = 32, W = 64, AW = 5;
  logic clk = 0, rst_n = 0, clr_all;
  logic [AW-1:0] ra1, ra2, wa1, wa2;
  logic [W-1:0]  rd1, rd2, wd1, wd2;
  logic          we1, we2;
  logic [W-1:0]  model [N];
  int checks = 0, failures = 0;

  acc_regfile #(.NREGS(N), .WIDTH(W), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk_reads();
    ra1 = AW'($urandom); ra2 = AW'($urandom);
    #1;
    checks += 2;
    if (rd1 !== model[ra1]) begin failures++; $display("FAIL rd1[%0d]", ra1); end
    if (rd2 !== model[ra2]) begin failures++; $display("FAIL rd2[%0d]", ra2); end
  endtask

  initial begin
    clr_all = 0; we1 = 0; we2 = 0; wa1 = 0; wa2 = 0; wd1 = 0; wd2 = 0; ra1 = 0; ra2 = 0;
    for (int i = 0; i < N; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < N; i++) begin
      ra1 = AW'(i); #1; checks++;
      if (rd1 !== '0) begin failures++; $display("FAIL reset reg %0d", i); end
    end
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      chk_reads();
      we1 = 1'($urandom_range(0, 1)); we2 = 1'($urandom_range(0, 1));
      wa1 = AW'($urandom); wa2 = ($urandom_range(0, 3) == 0) ? wa1 : AW'($urandom);
      wd1 = {$urandom, $urandom}; wd2 = {$urandom, $urandom};
      clr_all = ($urandom_range(0, 99) == 0);
      @(posedge clk);
      if (clr_all) for (int i = 0; i < N; i++) model[i] = '0;
      else begin
        if (we2) model[wa2] = wd2;
        if (we1) model[wa1] = wd1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
