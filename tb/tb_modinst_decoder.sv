// tb_modinst_decoder: self-checking test of the instruction decoder.
//
// Builds instruction words field by field from the published format
// (rs3 [31:27], 00 [26:25], rs2 [24:20], rs1 [19:15], funct3 [14:12],
// rd [11:7], opcode 0001011) and checks the decoded register fields and
// operation. It also checks that words with another opcode, a non-zero
// [26:25] field or a reserved funct3 are rejected. Purely combinational;
// a watchdog bounds the run.
module tb_modinst_decoder;
  import rnsmod_pkg::*;

  logic [31:0] instr;
  modinst_t    dec;
  int checks = 0, failures = 0;

  modinst_decoder dut (.instr(instr), .dec(dec));

  function automatic logic [31:0] mk(logic [4:0] rs3, logic [1:0] f2, logic [4:0] rs2,
                                     logic [4:0] rs1, logic [2:0] f3, logic [4:0] rd,
                                     logic [6:0] opc);
    return {rs3, f2, rs2, rs1, f3, rd, opc};
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s instr=%08h", what, instr);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [4:0] rd, rs1, rs2, rs3;
    logic [2:0] f3;
    // Fixed words for the three instructions, e.g. mulmod x5, x6, x7, x8.
    instr = mk(5'd8, 2'b00, 5'd7, 5'd6, 3'b000, 5'd5, 7'b0001011);
    #1;
    check(instr == 32'h407302_8B, "mulmod x5,x6,x7,x8 word");
    check(dec.valid && dec.op == OP_MULMOD && dec.rd == 5 && dec.rs1 == 6 &&
          dec.rs2 == 7 && dec.rs3 == 8, "mulmod fields");
    for (int n = 0; n < 2000; n++) begin
      rd  = 5'($urandom); rs1 = 5'($urandom);
      rs2 = 5'($urandom); rs3 = 5'($urandom);
      f3  = 3'($urandom_range(0, 7));
      instr = mk(rs3, 2'b00, rs2, rs1, f3, rd, 7'b0001011);
      #1;
      if (f3 <= 3'd2) begin
        check(dec.valid == 1'b1, "valid");
        check(dec.rd == rd && dec.rs1 == rs1 && dec.rs2 == rs2 && dec.rs3 == rs3, "fields");
        check((f3 == 3'd0 && dec.op == OP_MULMOD) ||
              (f3 == 3'd1 && dec.op == OP_ADDMOD) ||
              (f3 == 3'd2 && dec.op == OP_SUBMOD), "op");
      end else begin
        check(dec.valid == 1'b0, "reserved funct3 rejected");
      end
      // non-zero bits [26:25]
      instr = mk(rs3, 2'($urandom_range(1, 3)), rs2, rs1, 3'd0, rd, 7'b0001011);
      #1;
      check(dec.valid == 1'b0, "funct2 != 00 rejected");
      // another opcode (standard OP = 0110011, custom-1 = 0101011, random)
      instr = mk(rs3, 2'b00, rs2, rs1, 3'd1, rd, 7'b0110011);
      #1;
      check(dec.valid == 1'b0, "OP opcode rejected");
      instr = mk(rs3, 2'b00, rs2, rs1, 3'd1, rd, 7'b0101011);
      #1;
      check(dec.valid == 1'b0, "custom-1 opcode rejected");
      instr = $urandom;
      #1;
      check(dec.valid == (instr[6:0] == 7'b0001011 && instr[26:25] == 2'b00 &&
                          instr[14:12] <= 3'd2), "random word");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
