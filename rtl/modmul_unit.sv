// modmul_unit: pipelined word-size modular multiplier, the execution unit
// behind mulmod.
//
//   out_res = (in_a * in_b) mod in_m
//
// Operands and modulus are unsigned XLEN-bit words; any operands are allowed.
// Stage 0 forms the full 2*XLEN-bit product. The remaining LAT-1 stages
// reduce it with a restoring remainder: the product bits are shifted, most
// significant first, into a partial remainder r that is kept below m by one
// conditional subtraction per bit. The 2*XLEN steps are spread evenly over
// those stages (43 steps per stage for XLEN = 64, LAT = 4). For m = 0 the
// result is the low XLEN bits of the product, as the RISC-V remainder by zero
// returns the dividend.
//
// Timing: fully pipelined, one operation may enter every cycle and its result
// leaves exactly LAT cycles later (LAT register stages). There is no
// back-pressure. in_tag (the destination register index) travels with the
// operation. rst_n is an asynchronous active-low reset of the valid bits only.
//
// From the paper: the operation, the word size (RV64), a latency of 4 by
// default and 9 in the long-delay configuration, and that operators are
// pipelined. The multiply-then-restoring-reduction circuit, the stage split,
// unsigned operands, the m = 0 result and the reset are this design's own.
module modmul_unit #(
  parameter int unsigned XLEN = rnsmod_pkg::XLEN_DEFAULT,
  parameter int unsigned LAT  = 4,
  parameter int unsigned TAGW = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [TAGW-1:0] in_tag,
  input  logic [XLEN-1:0] in_a,
  input  logic [XLEN-1:0] in_b,
  input  logic [XLEN-1:0] in_m,
  output logic            out_valid,
  output logic [TAGW-1:0] out_tag,
  output logic [XLEN-1:0] out_res
);

  if (LAT < 2) begin : g_bad_lat
    $error("modmul_unit: LAT must be at least 2");
  end

  typedef logic [XLEN-1:0]   word_t;
  typedef logic [2*XLEN-1:0] dword_t;

  localparam int unsigned NSTEPS     = 2 * XLEN;
  localparam int unsigned RED_STAGES = (LAT > 1) ? LAT - 1 : 1;
  localparam int unsigned CH = (NSTEPS + RED_STAGES - 1) / RED_STAGES;

  typedef struct packed {
    logic [TAGW-1:0] tag;
    word_t           m;
    dword_t          p;   // product bits still to be shifted into r
    word_t           r;   // partial remainder, r < m
  } stage_t;

  // One restoring-remainder step: r <- (2r + bit) mod m, assuming r < m.
  function automatic word_t rem_step(word_t r, logic bit_in, word_t m);
    logic [XLEN:0] t;
    t = {r, bit_in};
    if (t >= {1'b0, m}) t = t - {1'b0, m};
    return t[XLEN-1:0];
  endfunction

  logic   v_q [LAT];
  stage_t q   [LAT];
  stage_t d   [LAT];

  always_comb begin
    for (int k = 0; k < LAT; k++) begin
      stage_t s;
      if (k == 0) begin
        s.tag = in_tag;
        s.m   = in_m;
        s.p   = dword_t'(in_a) * dword_t'(in_b);
        s.r   = '0;
      end else begin
        s = q[k-1];
        for (int j = 0; j < CH; j++) begin
          if ((k - 1) * CH + j < NSTEPS) begin
            s.r = rem_step(s.r, s.p[2*XLEN-1], s.m);
            s.p = s.p << 1;
          end
        end
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
  assign out_res   = q[LAT-1].r;

endmodule
