// tb_mentt_top: end-to-end test of the accelerator at its full size (1024 columns,
// 32-bit coefficients, 162 rows), with q = 2^32 - 2^20 + 1 (prime, 2^20 | q-1).
// The testbench plays the system memory: it loads and reads coefficients through
// the host row port (coefficient i at address rotate-left(i,1)) and answers the
// twiddle and pointwise-operand requests from tables it computes itself.
//   1. ADD, SUB and MUL commands on random data in all 1024 columns, against
//      integer arithmetic, with their cycle counts.
//   2. A 16-point NTT (8 active columns) against a direct O(n^2) transform, checking
//      that columns outside the transform keep their contents (gated columns).
//   3. The polynomial product c = a (*) s (cyclic, n = 1024): NTT(a) checked
//      against the direct transform; pointwise multiplication with n^-1 * NTT(s);
//      the host puts the product back into natural order; INTT; the result checked
//      against the cyclic convolution computed here. Cycle counts per command are
//      compared with the pass lengths (stage = N^2 + 14N + 5 cycles).
// It counts each mechanism (overflow, underflow, 2q and 4q reduction, routing,
// twiddle fetch, inverse twiddles, pointwise fetch, gated columns) and fails any
// that never happened.
module tb_mentt_top;
  import mentt_pkg::*;
  localparam int unsigned NBITS = 32, COLS = 1024, LOG_AW = 5;
  localparam int unsigned BIT_AW = $clog2(NBITS + 3);
  localparam int unsigned A0 = 0, B0 = NBITS, W0 = 2 * NBITS, S0 = 3 * NBITS, S1 = 4 * NBITS + 1;
  localparam longint unsigned Q = 64'd4293918721;
  localparam longint unsigned GEN = 64'd19;    // generator of the multiplicative group
  localparam int MAXN = 2 * COLS;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  cmd_e cmd = CMD_ADD;
  logic [NBITS-1:0] q = NBITS'(Q);
  logic [BIT_AW-1:0] nbits = BIT_AW'(NBITS);
  logic [LOG_AW-1:0] log_n = '0;
  logic busy, done;
  logic host_wr = 1'b0, host_rd = 1'b0;
  logic [ROW_AW-1:0] host_row = '0;
  logic [COLS-1:0] host_wdata = '0, host_wmask = '0, host_rdata;
  logic ext_req;
  ext_kind_e ext_kind;
  logic [LOG_AW-1:0] ext_stage;
  logic ext_half;
  logic [BIT_AW-1:0] ext_bit;
  logic [COLS-1:0] ext_row, col_ovf1, col_ovf2;

  mentt_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_ovf = 0, n_udf = 0, n_red2 = 0, n_red4 = 0, n_route = 0, n_tw = 0, n_twinv = 0;
  int n_pw = 0, n_gated = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- arithmetic helpers ----------------
  function automatic longint unsigned mulm(input longint unsigned a, input longint unsigned b);
    return (a * b) % Q;
  endfunction
  function automatic longint unsigned powm(input longint unsigned b, input longint unsigned e);
    longint unsigned r = 1, x = b % Q;
    while (e != 0) begin
      if (e[0]) r = mulm(r, x);
      x = mulm(x, x);
      e >>= 1;
    end
    return r;
  endfunction
  function automatic int rotl(input int a, input int l);
    return ((a << 1) | (a >> (l - 1))) & ((1 << l) - 1);
  endfunction
  function automatic int rotr(input int a, input int k, input int l);
    for (int i = 0; i < k; i++) a = (a >> 1) | ((a & 1) << (l - 1));
    return a;
  endfunction
  function automatic int bitrev(input int a, input int l);
    int r = 0;
    for (int i = 0; i < l; i++) r |= ((a >> i) & 1) << (l - 1 - i);
    return r;
  endfunction

  // ---------------- system-memory model for ext requests ----------------
  longint unsigned tw_tab [2][12][COLS];   // [inverse][stage][column]
  longint unsigned pw_tab [2][COLS];       // [half][column]

  // The request changes after a rising edge; the row is ready by the falling edge.
  always @(negedge clk) begin
    for (int c = 0; c < int'(COLS); c++) begin
      unique case (ext_kind)
        EXT_PW:     ext_row[c] = pw_tab[ext_half][c][ext_bit];
        EXT_TW_INV: ext_row[c] = tw_tab[1][ext_stage][c][ext_bit];
        default:    ext_row[c] = tw_tab[0][ext_stage][c][ext_bit];
      endcase
    end
  end

  // Twiddle of column c in stage p: the butterfly of Cooley-Tukey stage p+1 of the
  // bit-reversed-input algorithm, at position bitrev(index of the A operand).
  task automatic make_twiddles(input int l);
    int n = 1 << l;
    longint unsigned wn, wi;
    wn = powm(GEN, (Q - 1) / longint'(n));
    wi = powm(wn, Q - 2);
    for (int p = 0; p < l; p++)
      for (int c = 0; c < n / 2; c++) begin
        int ia, x, jj;
        ia = rotr(2 * c, p + 1, l);
        x  = bitrev(ia, l);
        jj = x & ((1 << p) - 1);
        tw_tab[0][p][c] = powm(wn, longint'((n >> (p + 1)) * jj));
        tw_tab[1][p][c] = powm(wi, longint'((n >> (p + 1)) * jj));
      end
  endtask

  // ---------------- host row access ----------------
  task automatic wr_row(input int r, input logic [COLS-1:0] d, input logic [COLS-1:0] m);
    @(negedge clk);
    host_wr = 1; host_row = ROW_AW'(r); host_wdata = d; host_wmask = m;
    @(negedge clk);
    host_wr = 0;
  endtask
  task automatic rd_row(input int r, output logic [COLS-1:0] d);
    @(negedge clk);
    host_rd = 1; host_row = ROW_AW'(r);
    @(negedge clk);
    host_rd = 0;
    d = host_rdata;
  endtask

  // Values of one region, one per column.
  task automatic put_cols(input int base, input longint unsigned v [COLS]);
    for (int j = 0; j < int'(NBITS); j++) begin
      logic [COLS-1:0] d;
      for (int c = 0; c < int'(COLS); c++) d[c] = v[c][j];
      wr_row(base + j, d, '1);
    end
  endtask
  task automatic get_cols(input int base, output longint unsigned v [COLS]);
    for (int c = 0; c < int'(COLS); c++) v[c] = 0;
    for (int j = 0; j < int'(NBITS); j++) begin
      logic [COLS-1:0] d;
      rd_row(base + j, d);
      for (int c = 0; c < int'(COLS); c++) v[c][j] = d[c];
    end
  endtask

  // Polynomial of n = 2^l coefficients in the resting layout.
  task automatic put_poly(input int l, input longint unsigned a [MAXN]);
    int n = 1 << l;
    logic [COLS-1:0] m = '0;
    for (int c = 0; c < n / 2; c++) m[c] = 1'b1;
    for (int j = 0; j < int'(NBITS); j++) begin
      logic [COLS-1:0] da = '0, db = '0;
      for (int i = 0; i < n; i++) begin
        int ad = rotl(i, l);
        if (ad % 2 == 0) da[ad / 2] = a[i][j];
        else             db[ad / 2] = a[i][j];
      end
      wr_row(A0 + j, da, m);
      wr_row(B0 + j, db, m);
    end
  endtask
  task automatic get_poly(input int l, output longint unsigned a [MAXN]);
    int n = 1 << l;
    for (int i = 0; i < MAXN; i++) a[i] = 0;
    for (int j = 0; j < int'(NBITS); j++) begin
      logic [COLS-1:0] da, db;
      rd_row(A0 + j, da);
      rd_row(B0 + j, db);
      for (int i = 0; i < n; i++) begin
        int ad = rotl(i, l);
        a[i][j] = (ad % 2 == 0) ? da[ad / 2] : db[ad / 2];
      end
    end
  endtask

  // ---------------- command issue with cycle count ----------------
  int run_cycles;
  task automatic run(input cmd_e c, input int l);
    @(negedge clk);
    cmd = c; log_n = LOG_AW'(l); start = 1;
    @(negedge clk);
    start = 0;
    run_cycles = 1;
    while (!done) begin
      @(negedge clk);
      run_cycles++;
    end
    @(negedge clk);
  endtask

  // Mechanism counters, sampled every clock.
  always @(posedge clk) if (rst_n && busy) begin
    if (dut.wsrc == WSRC_ROUTE_A) n_route++;
    if (ext_req && ext_kind == EXT_TW_FWD) n_tw++;
    if (ext_req && ext_kind == EXT_TW_INV) n_twinv++;
    if (ext_req && ext_kind == EXT_PW) n_pw++;
    if (dut.uop.red == RED_MUL && dut.uop.first) begin
      n_red4 += $countones(col_ovf2 & dut.col_en);
      n_red2 += $countones(col_ovf1 & ~col_ovf2 & dut.col_en);
    end
    if (dut.uop.red == RED_SUBQ && dut.uop.first) n_ovf += $countones(col_ovf1 & dut.col_en);
    if (dut.uop.red == RED_ADDQ && dut.uop.first) n_udf += $countones(col_ovf1 & dut.col_en);
  end

  task automatic expect_eq(input longint unsigned got, input longint unsigned exp,
                           input string what, input int idx);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s [%0d]: got %0d expected %0d", what, idx, got, exp);
    end
  endtask

  // Direct transform: X[k] = sum a[i] w^(ik), w an n-th root (inverse if inv).
  task automatic dft(input int l, input bit inv, input longint unsigned a [MAXN],
                     output longint unsigned x [MAXN]);
    int n = 1 << l;
    longint unsigned w, pw [MAXN];
    w = powm(GEN, (Q - 1) / longint'(n));
    if (inv) w = powm(w, Q - 2);
    pw[0] = 1;
    for (int e = 1; e < n; e++) pw[e] = mulm(pw[e - 1], w);
    for (int k = 0; k < n; k++) begin
      longint unsigned s = 0;
      for (int i = 0; i < n; i++) s = (s + mulm(a[i], pw[(i * k) % n])) % Q;
      x[k] = s;
    end
  endtask

  longint unsigned va [COLS], vb [COLS], vw [COLS], vr [COLS];
  longint unsigned pa [MAXN], ps [MAXN], xa [MAXN], xs [MAXN], got [MAXN], cc [MAXN];
  longint unsigned spare [COLS];

  initial begin
    int nb = int'(NBITS);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) foreach (pw_tab[t][c]) pw_tab[t][c] = 0;
    foreach (tw_tab[a, b, c]) tw_tab[a][b][c] = 0;
    // Initialise every cell so nothing undefined is ever read.
    for (int r = 0; r < int'(5 * NBITS + 2); r++)
      wr_row(r, {COLS/32{$urandom}}, '1);

    // ---- 1. element-wise ADD, SUB, MUL in all columns ----
    for (int c = 0; c < int'(COLS); c++) begin
      va[c] = {$urandom, $urandom} % Q;
      vb[c] = (c % 7 == 0) ? Q - 1 : {$urandom, $urandom} % Q;
      vw[c] = {$urandom, $urandom} % Q;
    end
    va[0] = Q - 1; vb[1] = 0; va[2] = 0;
    put_cols(A0, va); put_cols(B0, vb); put_cols(W0, vw);
    run(CMD_ADD, 11);
    expect_eq(run_cycles, 2 * (nb + 1) + 1, "ADD cycles", 0);
    get_cols(S0, vr);
    for (int c = 0; c < int'(COLS); c++) expect_eq(vr[c], (va[c] + vb[c]) % Q, "ADD", c);
    run(CMD_SUB, 11);
    expect_eq(run_cycles, 3 * (nb + 1) + 1, "SUB cycles", 0);
    get_cols(S1, vr);
    for (int c = 0; c < int'(COLS); c++) expect_eq(vr[c], (va[c] + Q - vb[c]) % Q, "SUB", c);
    run(CMD_MUL, 11);
    expect_eq(run_cycles, nb * nb + 4 * nb + 1, "MUL cycles", 0);
    get_cols(W0, vr);
    for (int c = 0; c < int'(COLS); c++) expect_eq(vr[c], mulm(vw[c], vb[c]), "MUL", c);

    // ---- 2. small NTT, 16 points, columns 8.. stay untouched ----
    get_cols(A0, spare);
    for (int i = 0; i < MAXN; i++) pa[i] = (i < 16) ? {$urandom, $urandom} % Q : 0;
    put_poly(4, pa);
    make_twiddles(4);
    run(CMD_NTT, 4);
    expect_eq(run_cycles, 4 * (nb * nb + 14 * nb + 5) + 1, "NTT16 cycles", 0);
    dft(4, 0, pa, xa);
    get_poly(4, got);
    for (int i = 0; i < 16; i++) expect_eq(got[i], xa[bitrev(i, 4)], "NTT16", i);
    get_cols(A0, vr);
    for (int c = 8; c < int'(COLS); c++) begin
      expect_eq(vr[c], spare[c], "gated column", c);
      if (vr[c] == spare[c]) n_gated++;
    end

    // ---- 3. polynomial product, n = 1024 ----
    for (int i = 0; i < MAXN; i++) begin
      pa[i] = (i < 1024) ? {$urandom, $urandom} % Q : 0;
      ps[i] = (i < 1024) ? {$urandom, $urandom} % Q : 0;
    end
    make_twiddles(10);
    put_poly(10, pa);
    run(CMD_NTT, 10);
    expect_eq(run_cycles, 10 * (nb * nb + 14 * nb + 5) + 1, "NTT1024 cycles", 0);
    $display("NTT n=1024 N=32: %0d cycles", run_cycles);
    dft(10, 0, pa, xa);
    get_poly(10, got);
    for (int i = 0; i < 1024; i++) expect_eq(got[i], xa[bitrev(i, 10)], "NTT1024", i);
    // pointwise operand n^-1 * NTT(s), same order as the NTT output
    dft(10, 0, ps, xs);
    begin
      longint unsigned ninv;
      ninv = powm(1024, Q - 2);
      for (int i = 0; i < 1024; i++) begin
        int ad;
        ad = rotl(i, 10);
        pw_tab[ad % 2][ad / 2] = mulm(ninv, xs[bitrev(i, 10)]);
      end
      run(CMD_PWMUL, 10);
      expect_eq(run_cycles, 2 * (nb + nb * nb + 4 * nb + nb) + 1, "PWMUL cycles", 0);
      get_poly(10, got);
      for (int i = 0; i < 1024; i++)
        expect_eq(got[i], mulm(xa[bitrev(i, 10)], mulm(ninv, xs[bitrev(i, 10)])), "PWMUL", i);
    end
    // back to natural order through the host, then the inverse transform
    for (int i = 0; i < 1024; i++) cc[i] = got[bitrev(i, 10)];
    put_poly(10, cc);
    run(CMD_INTT, 10);
    $display("INTT n=1024 N=32: %0d cycles", run_cycles);
    get_poly(10, got);
    for (int k = 0; k < 1024; k++) begin
      longint unsigned s;
      s = 0;
      for (int i = 0; i < 1024; i++) s = (s + mulm(pa[i], ps[(k - i + 1024) % 1024])) % Q;
      cc[k] = s;
    end
    for (int i = 0; i < 1024; i++) expect_eq(got[i], cc[bitrev(i, 10)], "a*s", i);

    $display("mechanisms: overflow=%0d underflow=%0d red2q=%0d red4q=%0d route=%0d",
             n_ovf, n_udf, n_red2, n_red4, n_route);
    $display("            twiddle=%0d inv_twiddle=%0d pointwise=%0d gated=%0d",
             n_tw, n_twinv, n_pw, n_gated);
    checks++;
    if (n_ovf == 0 || n_udf == 0 || n_red2 == 0 || n_red4 == 0 || n_route == 0 ||
        n_tw == 0 || n_twinv == 0 || n_pw == 0 || n_gated == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
