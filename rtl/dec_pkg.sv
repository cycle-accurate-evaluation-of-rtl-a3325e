// dec_pkg: types and constants shared by the decimal RoCC accelerator.
//
// The accelerator sits on the RoCC port of a 64-bit RISC-V core. One RoCC
// instruction is a 32-bit word split, from bit 31 down, into function7 (7),
// rs2 (5), rs1 (5), xd (1), xs1 (1), xs2 (1), rd (5) and opcode (7). The
// function7 value selects the operation. The function7 codes of WR, RD, LD,
// ACCUM, DEC_ADD, DEC_CNV, DEC_MUL and DEC_ACCUM come from the published
// instruction list; CLR_ALL = 5 comes from the published encoding example.
// The opcode 7'b0010111 is the value the published encoding example and its
// instruction word 0x08A5F617 carry for "custom-0" (note that the standard
// RISC-V custom-0 major opcode is 7'b0001011); the accelerator does not
// decode the opcode, the core routes the command to it.
//
// Data words are XLEN = 64 bits, i.e. 16 BCD-8421 digits, which holds the
// 16-digit coefficient of a decimal64 (double precision) number.
package dec_pkg;

  parameter int XLEN   = 64;
  parameter int DIGITS = XLEN / 4;     // BCD digits per data word
  parameter int REG_AW = 5;            // width of rs1/rs2/rd fields

  parameter logic [6:0] OPC_CUSTOM0 = 7'b0010111;

  typedef enum logic [6:0] {
    F_WR        = 7'b0000000,
    F_RD        = 7'b0000001,
    F_LD        = 7'b0000010,
    F_ACCUM     = 7'b0000011,
    F_DEC_ADD   = 7'b0000100,
    F_CLR_ALL   = 7'b0000101,
    F_DEC_CNV   = 7'b0000110,
    F_DEC_MUL   = 7'b0000111,
    F_DEC_ACCUM = 7'b0001000
  } funct7_e;

  // Field order follows the instruction word, bit 31 first.
  typedef struct packed {
    logic [6:0]        funct7;
    logic [REG_AW-1:0] rs2;
    logic [REG_AW-1:0] rs1;
    logic              xd;
    logic              xs1;
    logic              xs2;
    logic [REG_AW-1:0] rd;
    logic [6:0]        opcode;
  } rocc_inst_t;

  // Command from the core: the instruction plus the values of the core
  // registers named by rs1/rs2 (meaningful when xs1/xs2 are set).
  typedef struct packed {
    rocc_inst_t      inst;
    logic [XLEN-1:0] rs1;
    logic [XLEN-1:0] rs2;
  } rocc_cmd_t;

  // Response to the core: destination core register and its new value.
  typedef struct packed {
    logic [REG_AW-1:0] rd;
    logic [XLEN-1:0]   data;
  } rocc_resp_t;

  // Read request to the L1 data cache; the tag carries the destination
  // accelerator register.
  typedef struct packed {
    logic [XLEN-1:0]   addr;
    logic [REG_AW-1:0] tag;
  } mem_req_t;

  typedef struct packed {
    logic [REG_AW-1:0] tag;
    logic [XLEN-1:0]   data;
  } mem_resp_t;

  // Operations of the execution unit.
  typedef enum logic [1:0] {
    EX_ADD = 2'd0,   // BCD a + b (DEC_ADD, DEC_ACCUM)
    EX_MUL = 2'd1,   // BCD a * b, 2*DIGITS-digit product (DEC_MUL)
    EX_CNV = 2'd2    // binary a -> BCD (DEC_CNV)
  } exop_e;

endpackage
