// rns_modmul_run: runs one RNS Montgomery modular multiplication
// z = x * y * M^-1 mod p through a rnsmod_unit, once with the Szabo-Tanaka
// (mixed-radix) second base extension and once with the Kawamura et al.
// second base extension, and checks the results. Used by tb_rns_modmul.
//
// Setting: two RNS bases Bm = {m_1..m_N} and Bm' = {m'_1..m'_N} of pairwise
// coprime 64-bit moduli 2^64 - c (small odd c), M and M' their products,
// p an odd modulus of 64*N - 8 bits coprime with both, x, y < 2p.
// Steps (every channel operation is one mulmod/addmod/submod instruction):
//   1  s = x*y in Bm and Bm'
//   2  t = s * (-p^-1) in Bm
//   3  approximate extension of t to Bm' without the k*M correction:
//      xi_i = t_i * (M/m_i)^-1 mod m_i, t'_j = sum_i xi_i * (M/m_i) mod m'_j
//   4-6  w = (s + t' * p) * M^-1 in Bm'
//   7  extension of w from Bm' to Bm:
//      ST: mixed-radix digits of w in Bm', then Horner evaluation in Bm;
//      K:  xi'_j = w_j * (M'/m'_j)^-1 mod m'_j, k = floor(sum xi'_j / 2^64 + 1/2)
//          from the top 32 bits of each xi'_j (plain integer work, done by
//          the core), then w_i = sum_j xi'_j * (M'/m'_j) - k * M' mod m_i.
// The testbench acts as a scalar core: it loads operands into x1..x3 of its
// register file, issues each batch of independent channel operations one per
// cycle and waits for the batch to drain. Every single result is compared
// with 128-bit % arithmetic. At the end the integer W whose residues in Bm'
// are w is rebuilt from its mixed-radix digits (reference arithmetic), the
// extended w in Bm must equal W mod m_i for both extensions, and the exact
// Montgomery identity W * M = x * y + t' * p (which gives W = x*y*M^-1 mod p)
// is checked modulo four independent 64-bit check moduli. Large integers
// (p, x, y) are held as 64-bit limbs; no wide multiply or divide is used.
module rns_modmul_run #(
  parameter int unsigned N       = 8,
  parameter int unsigned ADD_LAT = 2,
  parameter int unsigned MUL_LAT = 4
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   cycles_st,
  output int   cycles_k
);
  localparam int unsigned W  = 64 * N;
  localparam int unsigned NQ = 4;
  typedef logic [63:0]   u64;
  typedef enum int {MUL, ADD, SUB} op_e;

  logic clk = 1'b0, rst_n = 1'b0;
  logic issue_valid, issue_accept;
  logic [31:0] issue_instr;
  logic [4:0]  rs1_idx, rs2_idx, rs3_idx;
  logic [63:0] rs1_val, rs2_val, rs3_val;
  logic add_wb_valid, mul_wb_valid;
  logic [4:0] add_wb_rd, mul_wb_rd;
  logic [63:0] add_wb_data, mul_wb_data;

  rnsmod_unit #(.XLEN(64), .ADD_LAT(ADD_LAT), .MUL_LAT(MUL_LAT)) u_unit (.*);

  u64 rf [32];
  assign rs1_val = rf[rs1_idx];
  assign rs2_val = rf[rs2_idx];
  assign rs3_val = rf[rs3_idx];

  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  u64 resq[$];
  always @(negedge clk) begin
    if (mul_wb_valid) resq.push_back(mul_wb_data);
    if (add_wb_valid) resq.push_back(add_wb_data);
  end

  // ---------------- reference arithmetic (independent of the unit) -------
  function automatic u64 mulm(u64 a, u64 b, u64 m);
    return u64'((128'(a) * 128'(b)) % 128'(m));
  endfunction
  function automatic u64 addm(u64 a, u64 b, u64 m);
    return u64'((128'(a % m) + 128'(b % m)) % 128'(m));
  endfunction
  function automatic u64 subm(u64 a, u64 b, u64 m);
    return u64'((128'(a % m) + 128'(m) - 128'(b % m)) % 128'(m));
  endfunction
  function automatic u64 gcd64(u64 a, u64 b);
    while (b != 0) begin u64 t = a % b; a = b; b = t; end
    return a;
  endfunction
  function automatic u64 inv64(u64 a, u64 m);  // a^-1 mod m, gcd(a, m) = 1
    logic signed [129:0] r0, r1, s0, s1, q, t;
    r0 = 130'(m); r1 = 130'(a % m); s0 = 0; s1 = 1;
    while (r1 != 0) begin
      q = r0 / r1;
      t = r0 - q * r1; r0 = r1; r1 = t;
      t = s0 - q * s1; s0 = s1; s1 = t;
    end
    if (s0 < 0) s0 = s0 + 130'(m);
    return u64'(s0);
  endfunction
  // value of a little-endian N-limb integer modulo m (Horner)
  function automatic u64 limbmod(const ref u64 a[N], input u64 m);
    logic [127:0] r = '0;
    for (int k = N - 1; k >= 0; k--) r = ((r << 64) | 128'(a[k])) % 128'(m);
    return u64'(r);
  endfunction
  // product of base[] except index skip (skip = -1: all), modulo m
  function automatic u64 prodm(const ref u64 base[N], input int skip, input u64 m);
    u64 r = 64'd1 % m;
    for (int k = 0; k < N; k++) if (k != skip) r = mulm(r, base[k] % m, m);
    return r;
  endfunction

  // ---------------- the machine: batches of channel operations -----------
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL N=%0d: %s", N, what);
    end
  endtask

  // r[e] = a[e] op b[e] mod m[e] for e < len, issued back to back.
  task automatic vec(op_e op, int len, const ref u64 a[N], const ref u64 b[N],
                     const ref u64 m[N], ref u64 r[N]);
    u64 exp_r[N];
    for (int e = 0; e < len; e++) begin
      rf[1] = a[e]; rf[2] = b[e]; rf[3] = m[e];
      issue_valid = 1'b1;
      issue_instr = {5'd3, 2'b00, 5'd2, 5'd1,
                     (op == MUL) ? 3'b000 : (op == ADD) ? 3'b001 : 3'b010,
                     5'(4 + e % 28), 7'b0001011};
      exp_r[e] = (op == MUL) ? mulm(a[e], b[e], m[e]) :
                 (op == ADD) ? addm(a[e], b[e], m[e]) : subm(a[e], b[e], m[e]);
      @(negedge clk);
    end
    issue_valid = 1'b0;
    while (resq.size() < len) @(negedge clk);
    for (int e = 0; e < len; e++) begin
      r[e] = resq.pop_front();
      check(r[e] == exp_r[e], $sformatf("op %0d element %0d", op, e));
    end
  endtask

  // ---------------- data -------------------------------------------------
  u64 mb[N], mp[N];                 // the two bases
  u64 negpinv[N], p_mp[N], minv_mp[N], mi_inv[N], mpj_inv[N], mp_m[N];
  u64 mi_mp[N][N];                  // (M/m_i) mod m'_j   [i][j]
  u64 mpj_m[N][N];                  // (M'/m'_j) mod m_i  [j][i]
  u64 mrinv[N][N];                  // m'_l^-1 mod m'_k   [l][k]
  u64 mpk_m[N][N];                  // m'_k mod m_i       [k][i]
  u64 x_m[N], y_m[N], x_p[N], y_p[N];
  u64 P[N], X[N], Y[N];             // 64-bit limbs, little-endian
  u64 chk[NQ];                      // check moduli

  u64 s_m[N], s_p[N], t_m[N], xi[N], tp[N], tmp[N], u_p[N], v_p[N], w_p[N];
  u64 w_st[N], w_k[N];

  function automatic u64 rnd64();
    return {32'($urandom), 32'($urandom)};
  endfunction

  task automatic setup();
    int n = 0;
    u64 c = 1;
    u64 allm[2*N];
    while (n < 2 * N) begin
      u64 cand = 64'hFFFF_FFFF_FFFF_FFFF - c + 1;  // 2^64 - c
      bit ok = 1;
      for (int k = 0; k < n; k++) if (gcd64(cand, allm[k]) != 1) ok = 0;
      if (ok) begin allm[n] = cand; n++; end
      c += 2;
    end
    for (int i = 0; i < N; i++) begin mb[i] = allm[2*i]; mp[i] = allm[2*i+1]; end
    chk[0] = 64'hFFFF_FFFF_FFFF_FFC5;   // 2^64 - 59
    chk[1] = 64'h1FFF_FFFF_FFFF_FFFF;   // 2^61 - 1
    chk[2] = 64'd1000000007;
    chk[3] = 64'h7FFF_FFFF;             // 2^31 - 1
    // p: odd, exactly 64N-8 bits, coprime with every modulus
    forever begin
      bit ok = 1;
      for (int k = 0; k < N; k++) P[k] = rnd64();
      P[N-1] = (P[N-1] >> 8) | (64'd1 << 55);
      P[0]   = P[0] | 64'd1;
      for (int i = 0; i < N; i++)
        if (gcd64(limbmod(P, mb[i]), mb[i]) != 1 || gcd64(limbmod(P, mp[i]), mp[i]) != 1) ok = 0;
      if (ok) break;
    end
    // x, y below 2^(64N-9) <= p
    for (int k = 0; k < N; k++) begin X[k] = rnd64(); Y[k] = rnd64(); end
    X[N-1] = X[N-1] >> 9;
    Y[N-1] = Y[N-1] >> 9;
    for (int i = 0; i < N; i++) begin
      x_m[i] = limbmod(X, mb[i]); y_m[i] = limbmod(Y, mb[i]);
      x_p[i] = limbmod(X, mp[i]); y_p[i] = limbmod(Y, mp[i]);
      negpinv[i] = mb[i] - inv64(limbmod(P, mb[i]), mb[i]);
      p_mp[i]    = limbmod(P, mp[i]);
      minv_mp[i] = inv64(prodm(mb, -1, mp[i]), mp[i]);
      mp_m[i]    = prodm(mp, -1, mb[i]);
      mi_inv[i]  = inv64(prodm(mb, i, mb[i]), mb[i]);
      mpj_inv[i] = inv64(prodm(mp, i, mp[i]), mp[i]);
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        mi_mp[i][j] = prodm(mb, i, mp[j]);
        mpj_m[i][j] = prodm(mp, i, mb[j]);
        mrinv[i][j] = (i == j) ? 64'd0 : inv64(mp[i] % mp[j], mp[j]);
        mpk_m[i][j] = mp[i] % mb[j];
      end
  endtask

  // ---------------- algorithm ---------------------------------------------
  task automatic steps_1_to_6();
    u64 bc[N], row[N];
    vec(MUL, N, x_m, y_m, mb, s_m);
    vec(MUL, N, x_p, y_p, mp, s_p);
    vec(MUL, N, s_m, negpinv, mb, t_m);
    vec(MUL, N, t_m, mi_inv, mb, xi);
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin bc[j] = xi[i]; row[j] = mi_mp[i][j]; end
      if (i == 0) vec(MUL, N, bc, row, mp, tp);
      else begin
        vec(MUL, N, bc, row, mp, tmp);
        vec(ADD, N, tp, tmp, mp, tp);
      end
    end
    vec(MUL, N, tp, p_mp, mp, u_p);
    vec(ADD, N, s_p, u_p, mp, v_p);
    vec(MUL, N, v_p, minv_mp, mp, w_p);
  endtask

  task automatic ext_st();
    u64 r[N], dig[N], a[N], b[N], m[N], o[N], acc[N], bc[N], row[N];
    for (int k = 0; k < N; k++) r[k] = w_p[k];
    dig[0] = r[0];
    for (int l = 0; l < N - 1; l++) begin
      int len = N - 1 - l;
      for (int e = 0; e < len; e++) begin
        a[e] = r[l+1+e]; b[e] = dig[l]; m[e] = mp[l+1+e];
      end
      vec(SUB, len, a, b, m, o);
      for (int e = 0; e < len; e++) begin a[e] = o[e]; b[e] = mrinv[l][l+1+e]; end
      vec(MUL, len, a, b, m, o);
      for (int e = 0; e < len; e++) r[l+1+e] = o[e];
      dig[l+1] = r[l+1];
    end
    for (int i = 0; i < N; i++) acc[i] = dig[N-1];
    for (int k = N - 2; k >= 0; k--) begin
      for (int i = 0; i < N; i++) begin row[i] = mpk_m[k][i]; bc[i] = dig[k]; end
      vec(MUL, N, acc, row, mb, acc);
      vec(ADD, N, acc, bc, mb, acc);
    end
    w_st = acc;
  endtask

  task automatic ext_k();
    u64 xip[N], acc[N], bc[N], row[N], kv[N], corr[N];
    u64 ksum, k;
    vec(MUL, N, w_p, mpj_inv, mp, xip);
    ksum = 64'h8000_0000;   // alpha = 1/2 in units of 2^-32
    for (int j = 0; j < N; j++) ksum += 64'(xip[j][63:32]);
    k = ksum >> 32;
    for (int j = 0; j < N; j++) begin
      for (int i = 0; i < N; i++) begin bc[i] = xip[j]; row[i] = mpj_m[j][i]; end
      if (j == 0) vec(MUL, N, bc, row, mb, acc);
      else begin
        vec(MUL, N, bc, row, mb, kv);
        vec(ADD, N, acc, kv, mb, acc);
      end
    end
    for (int i = 0; i < N; i++) kv[i] = k;
    vec(MUL, N, kv, mp_m, mb, corr);
    vec(SUB, N, acc, corr, mb, acc);
    w_k = acc;
  endtask

  initial begin
    longint t0;
    done = 0; checks = 0; failures = 0; cycles_st = 0; cycles_k = 0;
    issue_valid = 0; issue_instr = 32'h0000_0013;
    for (int i = 0; i < 32; i++) rf[i] = '0;
    setup();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    t0 = cyc;
    steps_1_to_6();
    ext_st();
    cycles_st = int'(cyc - t0);
    t0 = cyc;
    steps_1_to_6();
    ext_k();
    cycles_k = int'(cyc - t0);

    // Reference: mixed-radix digits of W from w_p, then W mod any modulus.
    begin
      u64 r[N], dig[N];
      for (int k = 0; k < N; k++) r[k] = w_p[k];
      for (int l = 0; l < N; l++) begin
        dig[l] = r[l];
        for (int k = l + 1; k < N; k++) r[k] = mulm(subm(r[k], dig[l], mp[k]), mrinv[l][k], mp[k]);
      end
      for (int i = 0; i < N; i++) begin
        automatic u64 wi = dig[N-1] % mb[i];
        for (int k = N - 2; k >= 0; k--) wi = addm(mulm(wi, mp[k] % mb[i], mb[i]), dig[k], mb[i]);
        check(w_st[i] == wi, $sformatf("Szabo-Tanaka extension, channel %0d", i));
        check(w_k[i]  == wi, $sformatf("Kawamura extension, channel %0d", i));
      end
      // W * M == x * y + t' * p, with t' = sum_i xi_i * M/m_i, modulo each check modulus
      for (int c = 0; c < NQ; c++) begin
        automatic u64 q = chk[c];
        u64 wq, tq, lhs, rhs;
        wq = dig[N-1] % q;
        for (int k = N - 2; k >= 0; k--) wq = addm(mulm(wq, mp[k] % q, q), dig[k], q);
        tq = 0;
        for (int i = 0; i < N; i++) tq = addm(tq, mulm(xi[i], prodm(mb, i, q), q), q);
        lhs = mulm(wq, prodm(mb, -1, q), q);
        rhs = addm(mulm(limbmod(X, q), limbmod(Y, q), q), mulm(tq, limbmod(P, q), q), q);
        check(lhs == rhs, $sformatf("Montgomery identity modulo check modulus %0d", c));
      end
    end
    $display("N=%0d channels (%0d-bit p), addmod/mulmod latency %0d/%0d: %0d cycles with Szabo-Tanaka, %0d with Kawamura",
             N, W - 8, ADD_LAT, MUL_LAT, cycles_st, cycles_k);
    done = 1;
  end
endmodule
