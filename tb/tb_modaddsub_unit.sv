// tb_modaddsub_unit: self-checking test of the pipelined modular
// adder/subtractor.
//
// Three instances run side by side on the same stimulus, one for each
// latency the paper considers for the modular adder: 2 (default), 3 and 4
// (long-delay setting). Every cycle a new
// operation enters with probability 3/4, so the pipelines run full and with
// bubbles. Operands mix reduced residues for 64-bit pseudo-Mersenne moduli
// 2^64 - c, full-range random words, small moduli, edge values (m - 1, 0)
// and the moduli 0 and 1. Expected results come from 128-bit arithmetic
// with the % operator; each result must appear exactly LAT cycles after its
// operation entered, with its tag, and never otherwise.
module tb_modaddsub_unit;
  localparam int unsigned XLEN = 64;
  localparam int unsigned NOPS = 4000;

  typedef struct {
    logic [XLEN-1:0] res;
    logic [4:0]      tag;
    longint          cyc;
  } exp_t;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_sub;
  logic [4:0] in_tag;
  logic [XLEN-1:0] in_a, in_b, in_m;

  int checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;

  function automatic logic [XLEN-1:0] ref_op(logic sub, logic [XLEN-1:0] a,
                                             logic [XLEN-1:0] b, logic [XLEN-1:0] m);
    logic [127:0] ra, rb, mm;
    if (m == 0) return sub ? a - b : a + b;
    mm = 128'(m);
    ra = 128'(a) % mm;
    rb = 128'(b) % mm;
    return sub ? XLEN'((ra + mm - rb) % mm) : XLEN'((ra + rb) % mm);
  endfunction

  function automatic logic [XLEN-1:0] rnd64();
    return {32'($urandom), 32'($urandom)};
  endfunction

  task automatic pick(output logic [XLEN-1:0] a, output logic [XLEN-1:0] b,
                      output logic [XLEN-1:0] m);
    int kind = $urandom_range(0, 9);
    case (kind)
      0, 1, 2: begin  // pseudo-Mersenne modulus, reduced residues
        m = 64'hFFFF_FFFF_FFFF_FFFF - 64'($urandom_range(0, 1 << 20));
        a = rnd64(); if (a >= m) a = a - m;
        b = rnd64(); if (b >= m) b = b - m;
      end
      3, 4: begin     // arbitrary operands and modulus
        m = rnd64(); a = rnd64(); b = rnd64();
      end
      5: begin        // small modulus, unreduced operands
        m = 64'($urandom_range(1, 1000)); a = rnd64(); b = rnd64();
      end
      6: begin        // edges: m-1 and 0
        m = rnd64() | 64'h8000_0000_0000_0000;
        a = ($urandom_range(0, 1) != 0) ? m - 1 : 64'd0;
        b = ($urandom_range(0, 1) != 0) ? m - 1 : 64'd0;
      end
      7: begin        // modulus zero
        m = 64'd0; a = rnd64(); b = rnd64();
      end
      8: begin        // modulus one
        m = 64'd1; a = rnd64(); b = rnd64();
      end
      default: begin  // 32-bit-ish modulus, reduced operands
        m = 64'($urandom) | 64'd1;
        a = 64'($urandom) % m; b = 64'($urandom) % m;
      end
    endcase
  endtask

  task automatic check_out(logic v, logic [4:0] tag, logic [XLEN-1:0] res,
                           ref exp_t q[$], input int lat);
    if (v) begin
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL lat%0d: unexpected output at cycle %0d", lat, cyc);
      end else begin
        exp_t e = q.pop_front();
        if (e.res !== res || e.tag !== tag || e.cyc + longint'(lat) != cyc) begin
          failures++;
          if (failures < 20)
            $display("FAIL lat%0d cyc=%0d: got %h tag %0d, exp %h tag %0d issued %0d",
                     lat, cyc, res, tag, e.res, e.tag, e.cyc);
        end
      end
    end
  endtask

  initial begin
    repeat (NOPS * 2 + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // One instance per latency. Each records what enters it at the rising
  // edge and checks what leaves it between edges.
  localparam int unsigned NL = 3;
  localparam int unsigned LATS [NL] = '{2, 3, 4};
  event ev_end;

  for (genvar g = 0; g < NL; g++) begin : g_lat
    logic            o_valid;
    logic [4:0]      o_tag;
    logic [XLEN-1:0] o_res;
    exp_t            q[$];

    modaddsub_unit #(.XLEN(XLEN), .LAT(LATS[g])) dut (
      .clk, .rst_n, .in_valid, .in_sub, .in_tag, .in_a, .in_b, .in_m,
      .out_valid(o_valid), .out_tag(o_tag), .out_res(o_res));

    always @(posedge clk) if (rst_n && in_valid) begin
      exp_t e;
      e.res = ref_op(in_sub, in_a, in_b, in_m);
      e.tag = in_tag;
      e.cyc = cyc;
      q.push_back(e);
    end

    always @(negedge clk) if (rst_n) check_out(o_valid, o_tag, o_res, q, LATS[g]);

    always @(ev_end) begin
      checks++;
      if (q.size() != 0) begin
        failures++;
        $display("FAIL lat%0d: %0d results missing", LATS[g], q.size());
      end
    end
  end

  initial begin
    automatic int sent = 0;
    in_valid = 0; in_sub = 0; in_tag = 0; in_a = 0; in_b = 0; in_m = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    while (sent < NOPS) begin
      if ($urandom_range(0, 3) != 0) begin
        automatic logic [XLEN-1:0] a, b, m;
        pick(a, b, m);
        in_valid = 1; in_sub = 1'($urandom); in_tag = 5'($urandom);
        in_a = a; in_b = b; in_m = m;
        sent++;
      end else begin
        in_valid = 0; in_a = rnd64();
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (8) @(negedge clk);
    -> ev_end;
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
