// modinst_decoder: recognises the three word-size modular arithmetic
// instructions and extracts their four register fields.
//
// Purely combinational. A word is accepted when its opcode is custom-0
// (7'b0001011), bits [26:25] are 00 and funct3 is 000 (mulmod), 001 (addmod)
// or 010 (submod); every other word gives dec.valid = 0, and the core then
// handles it as one of its own instructions. Register fields sit at the
// standard RISC-V positions (rd [11:7], rs1 [19:15], rs2 [24:20]) and the
// third source register rs3 at [31:27], as in the fused multiply-add format.
// Field positions and codes follow the published formats. Decoding the
// reserved funct3 values 011..111 as "not ours" is this design's choice.
module modinst_decoder
  import rnsmod_pkg::*;
(
  input  logic [31:0] instr,
  output modinst_t    dec
);

  always_comb begin
    dec       = '0;
    dec.rd    = instr[11:7];
    dec.rs1   = instr[19:15];
    dec.rs2   = instr[24:20];
    dec.rs3   = instr[31:27];
    dec.op    = OP_MULMOD;
    if (instr[6:0] == OPC_MODARITH && instr[26:25] == FUNCT2_MOD) begin
      unique case (instr[14:12])
        F3_MULMOD: begin dec.valid = 1'b1; dec.op = OP_MULMOD; end
        F3_ADDMOD: begin dec.valid = 1'b1; dec.op = OP_ADDMOD; end
        F3_SUBMOD: begin dec.valid = 1'b1; dec.op = OP_SUBMOD; end
        default:   dec.valid = 1'b0;
      endcase
    end
  end

endmodule
