// tb_rnsmod_unit: end-to-end test of the modular execution unit at its
// default parameters (XLEN = 64, modular adder latency 2, modular multiplier
// latency 4).
//
// The testbench plays the core: it owns a 32 x 64-bit register file with
// three read ports (x0 reads as zero), issues one instruction word per cycle
// and writes results back. Registers x1..x8 hold 64-bit pseudo-Mersenne
// moduli 2^64 - c and are never written; the other registers hold residues.
// The instruction stream mixes mulmod, addmod and submod with standard
// RISC-V words the unit must ignore, with occasional idle cycles.
//
// The testbench decodes each word itself from the published field layout,
// computes the expected result from the operand values it supplied (128-bit
// arithmetic and %), and checks that every result comes back on the right
// writeback port, with the right rd, exactly 2 (addmod, submod) or 4
// (mulmod) cycles later. It counts how often each mechanism occurred:
// each of the three instructions, a foreign word left to the core,
// back-to-back issue into each unit, both units writing back in the same
// cycle, and an addmod finishing before an earlier mulmod. A mechanism that
// never occurs counts as a failure.
module tb_rnsmod_unit;
  localparam int unsigned XLEN  = 64;
  localparam int unsigned NINST = 20000;
  localparam int unsigned ALAT  = 2;
  localparam int unsigned MLAT  = 4;

  typedef struct {
    logic [XLEN-1:0] res;
    logic [4:0]      rd;
    longint          cyc;
  } exp_t;

  logic clk = 1'b0, rst_n = 1'b0;
  logic issue_valid, issue_accept;
  logic [31:0] issue_instr;
  logic [4:0]  rs1_idx, rs2_idx, rs3_idx;
  logic [XLEN-1:0] rs1_val, rs2_val, rs3_val;
  logic add_wb_valid, mul_wb_valid;
  logic [4:0] add_wb_rd, mul_wb_rd;
  logic [XLEN-1:0] add_wb_data, mul_wb_data;

  rnsmod_unit dut (.*);

  logic [XLEN-1:0] rf [32];
  assign rs1_val = rf[rs1_idx];
  assign rs2_val = rf[rs2_idx];
  assign rs3_val = rf[rs3_idx];

  int checks = 0, failures = 0;
  longint cyc = 0;
  exp_t qa[$], qm[$];

  // mechanism counters
  int n_mul = 0, n_add = 0, n_sub = 0, n_foreign = 0;
  int n_b2b_add = 0, n_b2b_mul = 0, n_dual_wb = 0, n_overtake = 0;
  logic last_add = 0, last_mul = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [XLEN-1:0] rnd64();
    return {32'($urandom), 32'($urandom)};
  endfunction

  task automatic count(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL cyc=%0d: %s", cyc, what);
    end
  endtask

  task automatic check_wb(logic v, logic [4:0] rd, logic [XLEN-1:0] d,
                          ref exp_t q[$], input int lat, input string unit_name);
    if (v) begin
      if (q.size() == 0) begin
        count(0, {unit_name, ": writeback with nothing in flight"});
      end else begin
        exp_t e = q.pop_front();
        count(e.res == d && e.rd == rd && e.cyc + longint'(lat) == cyc,
              $sformatf("%s: got %h rd%0d, exp %h rd%0d issued %0d", unit_name,
                        d, rd, e.res, e.rd, e.cyc));
      end
    end
  endtask

  initial begin
    repeat (NINST * 2 + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Writeback and checking, between rising edges, before the next issue
  // reads the register file.
  task automatic retire();
    if (add_wb_valid && mul_wb_valid) n_dual_wb++;
    if (add_wb_valid && qm.size() != 0 && qa.size() != 0 && qa[0].cyc > qm[0].cyc)
      n_overtake++;
    check_wb(mul_wb_valid, mul_wb_rd, mul_wb_data, qm, MLAT, "mulmod");
    check_wb(add_wb_valid, add_wb_rd, add_wb_data, qa, ALAT, "add/submod");
    if (mul_wb_valid && mul_wb_rd > 8) rf[mul_wb_rd] = mul_wb_data;
    if (add_wb_valid && add_wb_rd > 8) rf[add_wb_rd] = add_wb_data;
  endtask

  initial begin
    automatic int sent = 0;
    rf[0] = '0;
    for (int i = 1; i <= 8; i++) rf[i] = 64'hFFFF_FFFF_FFFF_FFFF - 64'(i * 58 + 1);
    for (int i = 9; i < 32; i++) rf[i] = rnd64() % rf[1 + (i % 8)];
    issue_valid = 0; issue_instr = 32'h0000_0013;  // nop
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    retire();
    while (sent < NINST) begin
      automatic int kind = $urandom_range(0, 19);
      automatic logic [4:0] rd  = 5'($urandom_range(9, 31));
      automatic logic [4:0] rs1 = 5'($urandom_range(9, 31));
      automatic logic [4:0] rs2 = 5'($urandom_range(9, 31));
      automatic logic [4:0] rs3 = 5'($urandom_range(1, 8));
      automatic logic [2:0] f3;
      automatic logic now_add = 0, now_mul = 0;
      if (kind == 0) begin
        issue_valid = 0;
        issue_instr = $urandom;
      end else if (kind <= 2) begin
        // a standard RV64 word: OP (add/sub/mul ...) or OP-IMM
        issue_valid = 1;
        issue_instr = {7'($urandom), rs2, rs1, 3'($urandom), rd,
                       ($urandom_range(0, 1) != 0) ? 7'b0110011 : 7'b0010011};
        #1;
        count(issue_accept == 1'b0, "foreign word accepted");
        n_foreign++;
        sent++;
      end else begin
        automatic logic [XLEN-1:0] a, b, m;
        automatic exp_t e;
        automatic logic [127:0] p;
        f3 = 3'($urandom_range(0, 2));
        issue_valid = 1;
        issue_instr = {rs3, 2'b00, rs2, rs1, f3, rd, 7'b0001011};
        a = rf[rs1]; b = rf[rs2]; m = rf[rs3];
        #1;
        count(issue_accept == 1'b1, "modular instruction not accepted");
        count(rs1_idx == rs1 && rs2_idx == rs2 && rs3_idx == rs3, "register indices");
        e.rd = rd;
        e.cyc = cyc;
        unique case (f3)
          3'd0: begin
            p = 128'(a) * 128'(b);
            e.res = XLEN'(p % 128'(m));
            qm.push_back(e); n_mul++; now_mul = 1;
          end
          3'd1: begin
            e.res = XLEN'((128'(a % m) + 128'(b % m)) % 128'(m));
            qa.push_back(e); n_add++; now_add = 1;
          end
          default: begin
            e.res = XLEN'((128'(a % m) + 128'(m) - 128'(b % m)) % 128'(m));
            qa.push_back(e); n_sub++; now_add = 1;
          end
        endcase
        sent++;
      end
      if (now_add && last_add) n_b2b_add++;
      if (now_mul && last_mul) n_b2b_mul++;
      last_add = now_add; last_mul = now_mul;
      @(negedge clk);
      retire();
    end
    issue_valid = 0;
    repeat (MLAT + 4) begin
      @(negedge clk);
      retire();
    end
    count(qa.size() == 0 && qm.size() == 0, "results missing at the end");
    $display("mechanisms: mulmod=%0d addmod=%0d submod=%0d foreign=%0d b2b_add=%0d b2b_mul=%0d dual_wb=%0d overtake=%0d",
             n_mul, n_add, n_sub, n_foreign, n_b2b_add, n_b2b_mul, n_dual_wb, n_overtake);
    count(n_mul > 0, "mulmod never issued");
    count(n_add > 0, "addmod never issued");
    count(n_sub > 0, "submod never issued");
    count(n_foreign > 0, "no foreign word seen");
    count(n_b2b_add > 0, "no back-to-back issue to the modular adder");
    count(n_b2b_mul > 0, "no back-to-back issue to the modular multiplier");
    count(n_dual_wb > 0, "never both units writing back in one cycle");
    count(n_overtake > 0, "no addmod finishing before an earlier mulmod");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
