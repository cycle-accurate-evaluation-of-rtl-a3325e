// bin2bcd: sequential binary-to-BCD converter (DEC_CNV).
//
// Converts an unsigned BIN_W-bit binary number to DIGITS BCD-8421 digits by
// the shift-and-add-3 ("double dabble") method, one input bit per clock:
// before each left shift, every BCD digit that is 5 or more gets 3 added, so
// the shift doubles the decimal value correctly. A scratch register of
// INT_DIGITS digits holds every digit a BIN_W-bit value can need, so the
// conversion is exact; the result keeps the low DIGITS digits and
// 'overflow' reports that a higher digit was non-zero.
//
// Interface: pulse start for one cycle with bin valid; busy is high while
// converting; done is high for one cycle, BIN_W+1 cycles after the cycle
// in which start was high, with bcd and overflow valid (they hold until the next start).
// A start while busy is ignored.
//
// The paper gives only the function of DEC_CNV ("convert binary number to
// corresponding BCD"); the algorithm and its bit-serial timing are this
// design's choice.
module bin2bcd #(
  parameter int BIN_W  = 64,
  parameter int DIGITS = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [BIN_W-1:0]    bin,
  output logic                busy,
  output logic                done,
  output logic [4*DIGITS-1:0] bcd,
  output logic                overflow
);

  // Decimal digits a BIN_W-bit number can need: ceil(BIN_W*log10(2)),
  // using 77/256 > log10(2); at least DIGITS.
  localparam int NEED       = (BIN_W * 77) / 256 + 1;
  localparam int INT_DIGITS = (NEED > DIGITS) ? NEED : DIGITS;
  localparam int CW         = $clog2(BIN_W + 1);

  logic [4*INT_DIGITS-1:0] acc, adj;
  logic [BIN_W-1:0]        sh;
  logic [CW-1:0]           cnt;

  // Add 3 to every digit that is 5 or more.
  always_comb begin
    for (int i = 0; i < INT_DIGITS; i++) begin
      adj[4*i +: 4] = (acc[4*i +: 4] >= 4'd5) ? acc[4*i +: 4] + 4'd3
                                              : acc[4*i +: 4];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      acc  <= '0;
      sh   <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          acc  <= '0;
          sh   <= bin;
          cnt  <= CW'(BIN_W);
        end
      end else begin
        acc <= {adj[4*INT_DIGITS-2:0], sh[BIN_W-1]};
        sh  <= sh << 1;
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign bcd = acc[4*DIGITS-1:0];
  generate
    if (INT_DIGITS > DIGITS) begin : g_ovf
      assign overflow = |acc[4*INT_DIGITS-1:4*DIGITS];
    end else begin : g_no_ovf
      assign overflow = 1'b0;
    end
  endgenerate

endmodule
