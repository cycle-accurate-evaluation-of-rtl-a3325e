// acc_regfile: the accelerator's internal register set.
//
// NREGS registers of WIDTH bits, addressed by the 5-bit register fields of a
// RoCC instruction. Two combinational read ports (ra1/rd1, ra2/rd2) and two
// synchronous write ports; port 2 is used for the upper half of a
// double-width product and loses to port 1 when both write the same
// register. clr_all zeroes every register at the next edge and has priority
// over the writes; reset does the same.
//
// The paper draws a register set inside the decode-and-interface block and
// says that a register field whose xs/xd flag is 0 addresses "the register
// file in the accelerator"; the number of registers (32, all a 5-bit field
// can reach) and the port arrangement are this design's choice.
module acc_regfile #(
  parameter int NREGS = 32,
  parameter int WIDTH = 64,
  parameter int AW    = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr_all,
  input  logic [AW-1:0]    ra1,
  output logic [WIDTH-1:0] rd1,
  input  logic [AW-1:0]    ra2,
  output logic [WIDTH-1:0] rd2,
  input  logic             we1,
  input  logic [AW-1:0]    wa1,
  input  logic [WIDTH-1:0] wd1,
  input  logic             we2,
  input  logic [AW-1:0]    wa2,
  input  logic [WIDTH-1:0] wd2
);

  logic [WIDTH-1:0] regs [NREGS];

  // Addresses beyond NREGS-1 read as zero and are not written.
  assign rd1 = (32'(ra1) < NREGS) ? regs[ra1] : '0;
  assign rd2 = (32'(ra2) < NREGS) ? regs[ra2] : '0;

  always_ff @(posedge clk) begin
    if (!rst_n || clr_all) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else begin
      if (we2 && 32'(wa2) < NREGS) regs[wa2] <= wd2;
      if (we1 && 32'(wa1) < NREGS) regs[wa1] <= wd1;
    end
  end

endmodule
