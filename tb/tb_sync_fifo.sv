// tb_sync_fifo: self-checking test of the valid/ready queue.
//
// Random push/pop traffic into a depth-3 queue, compared word by word with a
// queue model in the testbench; also checks full/empty flags and that the
// queue fills to exactly DEPTH words and that reset empties it.
module tb_sync_fifo;
  localparam int W = 16;
  localparam int DEPTH = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [W-1:0] model[$];
  int checks = 0, failures = 0, cycles = 0;
  logic [W-1:0] next_val = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at cycle %0d", msg, cycles); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill without popping
    for (int k = 0; k < DEPTH + 2; k++) begin
      @(negedge clk);
      in_valid = 1; in_data = next_val;
      chk(in_ready == (k < DEPTH), "in_ready while filling");
      @(posedge clk);
      if (in_ready) begin model.push_back(next_val); next_val++; end
    end
    @(negedge clk);
    in_valid = 0;
    chk(model.size() == DEPTH, "filled to DEPTH");
    // random traffic
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      cycles = k;
      chk(out_valid == (model.size() != 0), "out_valid vs model");
      chk(in_ready == (model.size() != DEPTH), "in_ready vs model");
      if (out_valid) chk(out_data == model[0], "out_data vs model");
      in_valid  = 1'($urandom_range(0, 1));
      out_ready = 1'($urandom_range(0, 1));
      in_data   = next_val;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) begin model.push_back(next_val); next_val++; end
    end
    // reset empties
    @(negedge clk);
    rst_n = 0; in_valid = 0; out_ready = 0;
    @(negedge clk);
    rst_n = 1;
    chk(!out_valid && in_ready, "reset empties");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
