// rnsmod_pkg: shared constants and types of the word-size modular arithmetic
// extension (mulmod, addmod, submod).
//
// All three instructions share one R4-like format (32-bit word):
//   [31:27] rs3   [26:25] 2'b00   [24:20] rs2   [19:15] rs1
//   [14:12] funct3   [11:7] rd   [6:0] opcode = 7'b0001011
// The opcode is the RISC-V custom-0 major opcode (bits [6:2] = 00010,
// bits [1:0] = 11) and funct3 selects the operation:
//   000 mulmod  rd <- rs1 * rs2 mod rs3
//   001 addmod  rd <- rs1 + rs2 mod rs3
//   010 submod  rd <- rs1 - rs2 mod rs3
// The field positions and codes follow the published instruction formats;
// the enum encoding of the operation below is this design's own choice.
package rnsmod_pkg;

  localparam int unsigned XLEN_DEFAULT = 64;   // RV64: 64-bit words and moduli

  localparam logic [6:0] OPC_MODARITH = 7'b0001011;  // custom-0
  localparam logic [1:0] FUNCT2_MOD   = 2'b00;
  localparam logic [2:0] F3_MULMOD    = 3'b000;
  localparam logic [2:0] F3_ADDMOD    = 3'b001;
  localparam logic [2:0] F3_SUBMOD    = 3'b010;

  typedef enum logic [1:0] {
    OP_MULMOD = 2'd0,
    OP_ADDMOD = 2'd1,
    OP_SUBMOD = 2'd2
  } modop_e;

  typedef logic [4:0] regidx_t;

  // Decoded form of one instruction word.
  typedef struct packed {
    logic    valid;  // the word is one of the three modular instructions
    modop_e  op;
    regidx_t rd;
    regidx_t rs1;
    regidx_t rs2;
    regidx_t rs3;
  } modinst_t;

endpackage
