// sync_fifo: synchronous valid/ready queue.
//
// Holds up to DEPTH words of WIDTH bits. A word is written when in_valid and
// in_ready are both high at a clock edge, and read when out_valid and
// out_ready are both high. in_ready is low only when the queue is full, and
// out_valid is high whenever it holds a word; there is no bypass, so a word
// written at one edge can be read from the next cycle on (one cycle of
// latency, one word per cycle throughput). Reset (rst_n low, synchronous)
// empties it.
//
// The accelerator puts such a queue on each RoCC channel (cmd, resp, memory
// request and memory response), as the block diagram draws them; the depth
// and the circular-buffer organisation are this design's choice.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      count;
  logic             push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] ptr);
    return (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) begin
        mem[wptr] <= in_data;
        wptr      <= next_ptr(wptr);
      end
      if (pop) rptr <= next_ptr(rptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= (AW+1)'(DEPTH));

endmodule
