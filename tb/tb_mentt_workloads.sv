// tb_mentt_workloads: runs the transform sizes and bit widths of the published
// evaluation on the accelerator at its full size (1024 columns, NBITS = 32, 162 rows),
// choosing the bit width at run time through the 'nbits' input:
//   - N = 14, n = 128, 256, 512, 1024 with q = 12289 (a 14-bit prime with 2^12 | q-1),
//     checked against a direct O(n^2) transform;
//   - n = 1024, N = 12, 16, 20, 24, 28, 32 with a random N-bit modulus (top bit set)
//     and random twiddles, checked against a software model of the butterfly network
//     (A <- A + W*B, B <- A - W*B in every column, then address a -> rotate-left(a,1));
//   - n = 2048 (all 1024 columns, two points each), N = 32, q = 2^32 - 2^20 + 1,
//     checked against the direct transform;
//   - a product in the ring Z_q[x]/(x^n + 1) of Ring-LWE, n = 1024, N = 14,
//     q = 12289, built from the device's commands: PWMUL by psi^i (psi a 2n-th root,
//     so psi^n = -1), NTT, PWMUL by n^-1 * NTT(psi^i * s_i), reorder through the
//     host, INTT with inverse twiddles, PWMUL by psi^-k. Checked against the
//     negacyclic convolution computed here.
// Every run's cycle count is checked against log2(n) * (N^2 + 14N + 5) + 1 (the +1 is
// the 'done' cycle seen by the issuing task) and printed, so the numbers can be set
// next to the published cycle charts. The testbench plays the system memory in the
// same way as tb_mentt_top: host row port for coefficients, twiddle rows on request.
module tb_mentt_workloads;
  import mentt_pkg::*;
  localparam int unsigned NBITS = 32, COLS = 1024, LOG_AW = 5;
  localparam int unsigned BIT_AW = $clog2(NBITS + 3);
  localparam int unsigned A0 = 0, B0 = NBITS;
  localparam int MAXN = 2 * COLS;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  cmd_e cmd = CMD_NTT;
  logic [NBITS-1:0] q = '0;
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
  int n_runs = 0, n_tw = 0;

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- arithmetic helpers (modulus as argument) ----------------
  function automatic longint unsigned mulm(input longint unsigned a, input longint unsigned b,
                                           input longint unsigned m);
    return (a * b) % m;
  endfunction
  function automatic longint unsigned powm(input longint unsigned b, input longint unsigned e,
                                           input longint unsigned m);
    longint unsigned r = 1, x = b % m;
    while (e != 0) begin
      if (e[0]) r = mulm(r, x, m);
      x = mulm(x, x, m);
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

  // ---------------- system memory: twiddle rows ----------------
  longint unsigned tw_tab [12][COLS];   // [stage][column]
  longint unsigned pw_tab [2][COLS];    // [half][column], pointwise operand rows

  always @(negedge clk) begin
    for (int c = 0; c < int'(COLS); c++)
      ext_row[c] = (ext_kind == EXT_PW) ? pw_tab[ext_half][c][ext_bit]
                                         : tw_tab[ext_stage][c][ext_bit];
  end
  always @(posedge clk) if (rst_n && ext_req) n_tw++;

  // Twiddles of the bit-reversed-output Cooley-Tukey network for root wn.
  task automatic make_twiddles(input int l, input longint unsigned wn, input longint unsigned m);
    int n;
    n = 1 << l;
    for (int p = 0; p < l; p++)
      for (int c = 0; c < n / 2; c++) begin
        int ia, x, jj;
        ia = rotr(2 * c, p + 1, l);
        x  = bitrev(ia, l);
        jj = x & ((1 << p) - 1);
        tw_tab[p][c] = powm(wn, longint'((n >> (p + 1)) * jj), m);
      end
  endtask
  task automatic random_twiddles(input int l, input longint unsigned m);
    for (int p = 0; p < l; p++)
      for (int c = 0; c < int'(COLS); c++) tw_tab[p][c] = {$urandom, $urandom} % m;
  endtask

  // ---------------- host row access ----------------
  task automatic wr_row(input int r, input logic [COLS-1:0] d, input logic [COLS-1:0] msk);
    @(negedge clk);
    host_wr = 1; host_row = ROW_AW'(r); host_wdata = d; host_wmask = msk;
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

  // Polynomial of n = 2^l coefficients, coefficient i at address rotate-left(i,1);
  // address 2c is the A word of column c, 2c+1 its B word.
  task automatic put_poly(input int l, input longint unsigned a [MAXN]);
    int n;
    logic [COLS-1:0] msk;
    n = 1 << l;
    msk = '0;
    for (int c = 0; c < n / 2; c++) msk[c] = 1'b1;
    for (int j = 0; j < int'(NBITS); j++) begin
      logic [COLS-1:0] da, db;
      da = '0; db = '0;
      for (int i = 0; i < n; i++) begin
        int ad;
        ad = rotl(i, l);
        if (ad % 2 == 0) da[ad / 2] = a[i][j];
        else             db[ad / 2] = a[i][j];
      end
      wr_row(A0 + j, da, msk);
      wr_row(B0 + j, db, msk);
    end
  endtask
  task automatic get_poly(input int l, output longint unsigned a [MAXN]);
    int n;
    n = 1 << l;
    for (int i = 0; i < MAXN; i++) a[i] = 0;
    for (int j = 0; j < int'(NBITS); j++) begin
      logic [COLS-1:0] da, db;
      rd_row(A0 + j, da);
      rd_row(B0 + j, db);
      for (int i = 0; i < n; i++) begin
        int ad;
        ad = rotl(i, l);
        a[i][j] = (ad % 2 == 0) ? da[ad / 2] : db[ad / 2];
      end
    end
  endtask

  task automatic expect_eq(input longint unsigned got, input longint unsigned exp,
                           input string what, input int idx);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s [%0d]: got %0d expected %0d", what, idx, got, exp);
    end
  endtask

  // Forward transform command at bit width nb and size 2^l, with its cycle count.
  int run_cycles;
  task automatic run_cmd(input cmd_e cm, input int l, input int nb, input longint unsigned m);
    @(negedge clk);
    cmd = cm; log_n = LOG_AW'(l); nbits = BIT_AW'(nb); q = NBITS'(m); start = 1;
    @(negedge clk);
    start = 0;
    run_cycles = 1;
    while (!done) begin
      @(negedge clk);
      run_cycles++;
    end
    @(negedge clk);
  endtask
  task automatic run_ntt(input int l, input int nb, input longint unsigned m);
    @(negedge clk);
    cmd = CMD_NTT; log_n = LOG_AW'(l); nbits = BIT_AW'(nb); q = NBITS'(m); start = 1;
    @(negedge clk);
    start = 0;
    run_cycles = 1;
    while (!done) begin
      @(negedge clk);
      run_cycles++;
    end
    @(negedge clk);
    n_runs++;
    expect_eq(run_cycles, l * (nb * nb + 14 * nb + 5) + 1, "cycles", (1 << l));
    $display("NTT n=%0d N=%0d q=%0d: %0d cycles", 1 << l, nb, m, run_cycles);
  endtask

  // Direct transform X[k] = sum a[i] w^(ik).
  task automatic dft(input int l, input longint unsigned w, input longint unsigned m,
                     input longint unsigned a [MAXN], output longint unsigned x [MAXN]);
    int n;
    longint unsigned pw [MAXN];
    n = 1 << l;
    pw[0] = 1;
    for (int e = 1; e < n; e++) pw[e] = mulm(pw[e - 1], w, m);
    for (int k = 0; k < n; k++) begin
      longint unsigned s;
      s = 0;
      for (int i = 0; i < n; i++) s = (s + mulm(a[i], pw[(i * k) % n], m)) % m;
      x[k] = s;
    end
  endtask

  // Pointwise operand v[i] for coefficient index i, in the resting layout.
  task automatic set_pw(input int l, input longint unsigned v [MAXN]);
    for (int i = 0; i < (1 << l); i++) begin
      int ad;
      ad = rotl(i, l);
      pw_tab[ad % 2][ad / 2] = v[i];
    end
  endtask

  // Butterfly-network model on the address space, same twiddle table as the device.
  task automatic net_model(input int l, input longint unsigned m,
                           input longint unsigned a [MAXN], output longint unsigned x [MAXN]);
    int n;
    longint unsigned ar [MAXN], nx [MAXN];
    n = 1 << l;
    for (int i = 0; i < n; i++) ar[rotl(i, l)] = a[i];
    for (int p = 0; p < l; p++) begin
      for (int c = 0; c < n / 2; c++) begin
        longint unsigned t, u;
        t = mulm(tw_tab[p][c], ar[2 * c + 1], m);
        u = ar[2 * c];
        ar[2 * c]     = (u + t) % m;
        ar[2 * c + 1] = (u + m - t) % m;
      end
      for (int ad = 0; ad < n; ad++) nx[rotl(ad, l)] = ar[ad];
      for (int ad = 0; ad < n; ad++) ar[ad] = nx[ad];
    end
    for (int i = 0; i < n; i++) x[i] = ar[rotl(i, l)];
  endtask

  longint unsigned pa [MAXN], xa [MAXN], got [MAXN];
  longint unsigned qq, wn;
  int widths [6] = '{12, 16, 20, 24, 28, 32};

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (tw_tab[p, c]) tw_tab[p][c] = 0;
    for (int r = 0; r < int'(5 * NBITS + 2); r++) wr_row(r, '0, '1);

    // ---- N = 14, n = 128 .. 1024, q = 12289 ----
    qq = 12289;
    for (int l = 7; l <= 10; l++) begin
      wn = powm(11, (qq - 1) / longint'(1 << l), qq);     // 11 generates Z_12289^*
      for (int i = 0; i < MAXN; i++) pa[i] = (i < (1 << l)) ? longint'($urandom % 32'(qq)) : 0;
      make_twiddles(l, wn, qq);
      put_poly(l, pa);
      run_ntt(l, 14, qq);
      dft(l, wn, qq, pa, xa);
      get_poly(l, got);
      for (int i = 0; i < (1 << l); i++) expect_eq(got[i], xa[bitrev(i, l)], "N14 NTT", i);
    end

    // ---- n = 1024, N = 12 .. 32, random modulus and twiddles ----
    foreach (widths[k]) begin
      int nb;
      nb = widths[k];
      qq = ({$urandom, $urandom} % (64'd1 << nb)) | (64'd1 << (nb - 1)) | 64'd1;
      for (int i = 0; i < MAXN; i++) pa[i] = (i < 1024) ? {$urandom, $urandom} % qq : 0;
      pa[0] = qq - 1;
      random_twiddles(10, qq);
      put_poly(10, pa);
      run_ntt(10, nb, qq);
      net_model(10, qq, pa, xa);
      get_poly(10, got);
      for (int i = 0; i < 1024; i++) expect_eq(got[i], xa[i], "width sweep", i);
    end

    // ---- n = 2048 over all columns, N = 32 ----
    qq = 64'd4293918721;
    wn = powm(19, (qq - 1) / 2048, qq);
    for (int i = 0; i < MAXN; i++) pa[i] = {$urandom, $urandom} % qq;
    make_twiddles(11, wn, qq);
    put_poly(11, pa);
    run_ntt(11, 32, qq);
    dft(11, wn, qq, pa, xa);
    get_poly(11, got);
    for (int i = 0; i < 2048; i++) expect_eq(got[i], xa[bitrev(i, 11)], "NTT2048", i);

    // ---- negacyclic product, n = 1024, N = 14, q = 12289 ----
    begin
      longint unsigned psi, psii, wi, ninv, ps [MAXN], tv [MAXN], xs [MAXN], cc [MAXN];
      qq = 12289;
      psi = powm(11, (qq - 1) / 2048, qq);
      psii = powm(psi, qq - 2, qq);
      wn = mulm(psi, psi, qq);
      wi = powm(wn, qq - 2, qq);
      ninv = powm(1024, qq - 2, qq);
      for (int i = 0; i < MAXN; i++) begin
        pa[i] = (i < 1024) ? longint'($urandom % 32'(qq)) : 0;
        ps[i] = (i < 1024) ? longint'($urandom % 32'(qq)) : 0;
      end
      // software side: n^-1 * NTT(psi^i * s_i), natural-order index
      for (int i = 0; i < 1024; i++) tv[i] = mulm(ps[i], powm(psi, i, qq), qq);
      dft(10, wn, qq, tv, xs);
      put_poly(10, pa);
      for (int i = 0; i < 1024; i++) tv[i] = powm(psi, i, qq);
      set_pw(10, tv);
      run_cmd(CMD_PWMUL, 10, 14, qq);                 // a_i * psi^i
      make_twiddles(10, wn, qq);
      run_cmd(CMD_NTT, 10, 14, qq);                   // index i holds X[bitrev(i)]
      for (int i = 0; i < 1024; i++) tv[i] = mulm(ninv, xs[bitrev(i, 10)], qq);
      set_pw(10, tv);
      run_cmd(CMD_PWMUL, 10, 14, qq);
      get_poly(10, got);
      for (int i = 0; i < 1024; i++) cc[i] = got[bitrev(i, 10)];
      put_poly(10, cc);                               // natural order for the INTT
      make_twiddles(10, wi, qq);
      run_cmd(CMD_INTT, 10, 14, qq);                  // index i holds y[bitrev(i)]
      for (int i = 0; i < 1024; i++) tv[i] = powm(psii, bitrev(i, 10), qq);
      set_pw(10, tv);
      run_cmd(CMD_PWMUL, 10, 14, qq);
      get_poly(10, got);
      for (int k = 0; k < 1024; k++) begin
        longint unsigned sacc;
        sacc = 0;
        for (int i = 0; i <= k; i++) sacc = (sacc + mulm(pa[i], ps[k - i], qq)) % qq;
        for (int i = k + 1; i < 1024; i++)
          sacc = (sacc + qq - mulm(pa[i], ps[k + 1024 - i], qq)) % qq;
        cc[k] = sacc;
      end
      for (int i = 0; i < 1024; i++) expect_eq(got[i], cc[bitrev(i, 10)], "x^n+1 product", i);
    end

    checks++;
    if (n_runs != 11 || n_tw == 0) begin
      failures++;
      $display("FAIL runs=%0d twiddle rows=%0d", n_runs, n_tw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
