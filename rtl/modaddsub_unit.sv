// modaddsub_unit: pipelined word-size modular adder/subtractor, the execution
// unit behind addmod and submod.
//
//   in_sub = 0 : out_res = (in_a + in_b) mod in_m
//   in_sub = 1 : out_res = (in_a - in_b) mod in_m   (result in [0, m))
//
// Operands and modulus are unsigned XLEN-bit words. Any operands are allowed,
// not only reduced residues: the first LAT-1 stages reduce a and b modulo m
// with a restoring remainder (one conditional subtraction per operand bit,
// the XLEN steps spread evenly over those stages), and the last stage adds
// or subtracts the two residues and applies a single correction by m. For
// m = 0 the unit returns the plain wrapping sum or difference, as the RISC-V
// remainder by zero returns the dividend.
//
// Timing: fully pipelined, one operation may enter every cycle, and its
// result leaves exactly LAT cycles later (in_valid sampled at edge t gives
// out_valid after edge t+LAT-1, i.e. LAT register stages). There is no
// back-pressure. in_tag travels with the operation (the destination register
// index). rst_n is an asynchronous active-low reset of the valid bits only.
//
// From the paper: the operations, the word size (RV64) and the latency, 2 by
// default and 4 in the long-delay configuration, and that operators are
// pipelined. The reduction circuit, the stage split, unsigned operands, the
// m = 0 result and the reset are this design's own choices.
module modaddsub_unit #(
  parameter int unsigned XLEN = rnsmod_pkg::XLEN_DEFAULT,
  parameter int unsigned LAT  = 2,
  parameter int unsigned TAGW = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic            in_sub,
  input  logic [TAGW-1:0] in_tag,
  input  logic [XLEN-1:0] in_a,
  input  logic [XLEN-1:0] in_b,
  input  logic [XLEN-1:0] in_m,
  output logic            out_valid,
  output logic [TAGW-1:0] out_tag,
  output logic [XLEN-1:0] out_res
);

  if (LAT < 2) begin : g_bad_lat
    $error("modaddsub_unit: LAT must be at least 2");
  end

  typedef logic [XLEN-1:0] word_t;

  // Reduction steps handled by each of the first LAT-1 stages.
  localparam int unsigned RED_STAGES = (LAT > 1) ? LAT - 1 : 1;
  localparam int unsigned CH = (XLEN + RED_STAGES - 1) / RED_STAGES;

  typedef struct packed {
    logic            sub;
    logic [TAGW-1:0] tag;
    word_t           m;
    word_t           a;    // operand bits still to be shifted into ra
    word_t           b;
    word_t           ra;   // partial remainder of a
    word_t           rb;   // partial remainder of b
    word_t           res;
  } stage_t;

  // One restoring-remainder step: r <- (2r + bit) mod m, assuming r < m.
  function automatic word_t rem_step(word_t r, logic bit_in, word_t m);
    logic [XLEN:0] t;
    t = {r, bit_in};
    if (t >= {1'b0, m}) t = t - {1'b0, m};
    return t[XLEN-1:0];
  endfunction

  // Final stage: combine two residues ra, rb < m.
  function automatic word_t combine(logic sub, word_t ra, word_t rb, word_t m);
    logic [XLEN:0] s;
    if (!sub) begin
      s = {1'b0, ra} + {1'b0, rb};
      if (s >= {1'b0, m}) s = s - {1'b0, m};
    end else begin
      s = {1'b0, ra} - {1'b0, rb};
      if (ra < rb) s = s + {1'b0, m};
    end
    return s[XLEN-1:0];
  endfunction

  logic   v_q [LAT];
  stage_t q   [LAT];
  stage_t d   [LAT];

  always_comb begin
    for (int k = 0; k < LAT; k++) begin
      stage_t s;
      if (k == 0) begin
        s     = '0;
        s.sub = in_sub;
        s.tag = in_tag;
        s.m   = in_m;
        s.a   = in_a;
        s.b   = in_b;
      end else begin
        s = q[k-1];
      end
      if (k < LAT - 1) begin
        for (int j = 0; j < CH; j++) begin
          if (k * CH + j < XLEN) begin
            s.ra = rem_step(s.ra, s.a[XLEN-1], s.m);
            s.rb = rem_step(s.rb, s.b[XLEN-1], s.m);
            s.a  = s.a << 1;
            s.b  = s.b << 1;
          end
        end
      end else begin
        s.res = combine(s.sub, s.ra, s.rb, s.m);
      end
      d[k] = s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LAT; k++) v_q[k] <= 1'b0;
    end else begin
      for (int k = 0; k < LAT; k++) v_q[k] <= (k == 0) ? in_valid : v_q[k-1];
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < LAT; k++) q[k] <= d[k];
  end

  assign out_valid = v_q[LAT-1];
  assign out_tag   = q[LAT-1].tag;
  assign out_res   = q[LAT-1].res;

endmodule
