// rnsmod_unit: word-size modular arithmetic execution unit for a 64-bit
// RISC-V core, adding the mulmod, addmod and submod instructions.
//
// The core presents one instruction word per cycle on issue_instr together
// with issue_valid. The unit decodes it (modinst_decoder); the register
// indices rs1_idx, rs2_idx and rs3_idx it returns combinationally are meant
// for the core's register file, which needs a third read port for rs3, and
// the three values come back in the same cycle on rs1_val, rs2_val, rs3_val
// (rs3 holds the modulus). issue_accept says the word was one of the three
// modular instructions and has been taken; any other word is left to the
// core and changes nothing here.
//
// Accepted instructions go to one of two independent, fully pipelined units,
// as in the evaluated processor, which has one modular adder and one modular
// multiplier:
//   addmod, submod -> modaddsub_unit, result ADD_LAT cycles later
//   mulmod         -> modmul_unit,    result MUL_LAT cycles later
// Each unit has its own writeback port (valid, rd, data), so results of the
// two units may return in the same cycle and an addmod issued after a
// mulmod may finish before it. Defaults ADD_LAT = 2 and MUL_LAT = 4 are the
// main evaluated latencies; 4 and 9 give the long-delay configuration.
//
// Operand hazards, register writeback arbitration and rd = x0 are left to
// the core: a result is always returned, rd = 0 included. The per-unit
// writeback ports and the same-cycle operand handshake are this design's
// choices; the instructions, their encodings, the word size and the
// latencies follow the paper. The assertion below samples rst_n
// synchronously (disable iff) while the units use it as an asynchronous
// reset; a lint tool may note the mixed use, which is intended.
module rnsmod_unit
  import rnsmod_pkg::*;
#(
  parameter int unsigned XLEN    = XLEN_DEFAULT,
  parameter int unsigned ADD_LAT = 2,
  parameter int unsigned MUL_LAT = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  // issue
  input  logic            issue_valid,
  input  logic [31:0]     issue_instr,
  output logic            issue_accept,
  // register file read (combinational from issue_instr)
  output logic [4:0]      rs1_idx,
  output logic [4:0]      rs2_idx,
  output logic [4:0]      rs3_idx,
  input  logic [XLEN-1:0] rs1_val,
  input  logic [XLEN-1:0] rs2_val,
  input  logic [XLEN-1:0] rs3_val,
  // modular adder writeback
  output logic            add_wb_valid,
  output logic [4:0]      add_wb_rd,
  output logic [XLEN-1:0] add_wb_data,
  // modular multiplier writeback
  output logic            mul_wb_valid,
  output logic [4:0]      mul_wb_rd,
  output logic [XLEN-1:0] mul_wb_data
);

  modinst_t dec;
  logic     add_go, mul_go;

  modinst_decoder u_dec (
    .instr (issue_instr),
    .dec   (dec)
  );

  assign rs1_idx      = dec.rs1;
  assign rs2_idx      = dec.rs2;
  assign rs3_idx      = dec.rs3;
  assign issue_accept = issue_valid && dec.valid;
  assign mul_go       = issue_accept && (dec.op == OP_MULMOD);
  assign add_go       = issue_accept && (dec.op == OP_ADDMOD || dec.op == OP_SUBMOD);

  modaddsub_unit #(
    .XLEN (XLEN),
    .LAT  (ADD_LAT),
    .TAGW (5)
  ) u_add (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (add_go),
    .in_sub    (dec.op == OP_SUBMOD),
    .in_tag    (dec.rd),
    .in_a      (rs1_val),
    .in_b      (rs2_val),
    .in_m      (rs3_val),
    .out_valid (add_wb_valid),
    .out_tag   (add_wb_rd),
    .out_res   (add_wb_data)
  );

  modmul_unit #(
    .XLEN (XLEN),
    .LAT  (MUL_LAT),
    .TAGW (5)
  ) u_mul (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (mul_go),
    .in_tag    (dec.rd),
    .in_a      (rs1_val),
    .in_b      (rs2_val),
    .in_m      (rs3_val),
    .out_valid (mul_wb_valid),
    .out_tag   (mul_wb_rd),
    .out_res   (mul_wb_data)
  );

  // An accepted instruction goes to exactly one unit.
  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n)
    issue_accept |-> (add_go ^ mul_go));

endmodule
