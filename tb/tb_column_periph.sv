// tb_column_periph: one column of near-memory logic on top of a one-column memory
// kept here. The bit lines are formed here from the raised cells (BL = AND,
// BLB = NOR, Tag switch on port A), and the testbench issues, cycle by cycle, the
// passes of modular addition (trial + real, 2*(N+1) cycles), modular subtraction
// (two's complement + trial + real, 3*(N+1) cycles) and the shift-and-add modular
// multiplication (N rounds of a Tag load and N+2 bits, then an N-bit correction).
// Results are compared with (x+y) mod q, (x-y) mod q and (x*y) mod q computed with
// integers, for several moduli including ones close to 2^N, and the cycle count of
// each operation is checked. It also counts that the overflow, underflow and both
// multiplier reductions (2q and 4q) were exercised.
module tb_column_periph;
  import mentt_pkg::*;
  localparam int NB = 8;
  localparam int A0 = 0, B0 = NB, W0 = 2 * NB, S0 = 3 * NB, S1 = 4 * NB + 1;
  localparam int ROWS = 5 * NB + 2;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  uop_t uop;
  logic bl_and, blb_nor, wbit, tag, ovf1, ovf2;
  logic mem [ROWS];
  int checks = 0, failures = 0, cycles = 0;
  int n_ovf = 0, n_udf = 0, n_red2 = 0, n_red4 = 0;
  logic [NB-1:0] q;

  column_periph dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Bit lines from the raised cells.
  always_comb begin
    logic ca, cb;
    ca = uop.ra_en && (!uop.gate_a || tag);
    cb = uop.rb_en;
    bl_and  = !((ca && !mem[uop.ra]) || (cb && !mem[uop.rb]));
    blb_nor = !((ca &&  mem[uop.ra]) || (cb &&  mem[uop.rb]));
  end

  function automatic logic qb(input int i);
    return (i >= 0 && i < NB) ? q[i] : 1'b0;
  endfunction

  // Apply one micro-op for one clock.
  task automatic step(input uop_t u, input int j);
    logic wb;
    u.qb = {qb(j - 2), qb(j - 1), qb(j)};
    @(negedge clk);
    uop = u;
    #1 wb = wbit;           // sample before the clock edge
    @(posedge clk);
    if (u.wr_en) mem[u.wr] <= wb;   // after the column has sampled its inputs
    #1;
    cycles++;
  endtask

  task automatic put(input int base, input int v);
    for (int j = 0; j < NB; j++) mem[base + j] = v[j];
  endtask

  function automatic int get(input int base, input int nbits);
    int v = 0;
    for (int j = 0; j < nbits; j++) v |= int'(mem[base + j]) << j;
    return v;
  endfunction

  task automatic mod_add(output int res, output int ncyc);
    uop_t u;
    int c0 = cycles;
    for (int ph = 0; ph < 2; ph++)
      for (int j = 0; j <= NB; j++) begin
        u = UOP_IDLE; u.first = (j == 0);
        u.ra_en = (j < NB); u.ra = ROW_AW'(A0 + j);
        u.rb_en = (j < NB); u.rb = ROW_AW'(B0 + j);
        if (ph == 0) u.ovf_load = (j == NB);
        else begin u.red = RED_SUBQ; u.wr_en = 1; u.wr = ROW_AW'(S0 + j); end
        step(u, j);
        if (ph == 0 && j == NB && ovf1) n_ovf++;
      end
    res = get(S0, NB + 1);
    ncyc = cycles - c0;
  endtask

  task automatic mod_sub(output int res, output int ncyc);
    uop_t u;
    int c0 = cycles;
    for (int j = 0; j <= NB; j++) begin
      u = UOP_IDLE; u.first = (j == 0); u.inv = 1; u.cin = 1;
      u.ra_en = (j < NB); u.ra = ROW_AW'(B0 + j);
      u.wr_en = 1; u.wr = ROW_AW'(S1 + j);
      step(u, j);
    end
    for (int ph = 0; ph < 2; ph++)
      for (int j = 0; j <= NB; j++) begin
        u = UOP_IDLE; u.first = (j == 0);
        u.ra_en = (j < NB); u.ra = ROW_AW'(A0 + j);
        u.rb_en = 1; u.rb = ROW_AW'(S1 + j);
        if (ph == 0) begin u.ovf_load = (j == NB); u.ovf_data = 1; end
        else begin u.red = RED_ADDQ; u.wr_en = 1; u.wr = ROW_AW'(S1 + j); end
        step(u, j);
        if (ph == 0 && j == NB && ovf1) n_udf++;
      end
    res = get(S1, NB + 1);
    ncyc = cycles - c0;
  endtask

  // W <- W * B mod q
  task automatic mod_mul(output int res, output int ncyc);
    uop_t u;
    int c0 = cycles;
    for (int r = 0; r < NB; r++) begin
      int base = S0 + NB - 1 - r;
      u = UOP_IDLE; u.rb_en = 1; u.rb = ROW_AW'(B0 + NB - 1 - r);
      u.tag_load = 1; u.ovf_clr = (r == 0);
      step(u, 0);
      for (int j = 0; j <= NB + 1; j++) begin
        u = UOP_IDLE; u.first = (j == 0);
        u.ra_en = (j < NB); u.ra = ROW_AW'(W0 + j); u.gate_a = 1;
        u.rb_en = (r != 0 && j != 0); u.rb = ROW_AW'(base + j);
        u.red = RED_MUL; u.wr_en = 1; u.wr = ROW_AW'(base + j);
        u.ovf_load = (j == NB + 1);
        if (j == 0 && ovf2) n_red4++;
        else if (j == 0 && ovf1) n_red2++;
        step(u, j);
      end
    end
    for (int j = 0; j < NB; j++) begin
      u = UOP_IDLE; u.first = (j == 0);
      u.rb_en = 1; u.rb = ROW_AW'(S0 + j); u.red = RED_FIN;
      u.wr_en = 1; u.wr = ROW_AW'(W0 + j);
      step(u, j);
    end
    res = get(W0, NB);
    ncyc = cycles - c0;
  endtask

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s q=%0d got %0d expected %0d", what, q, got, exp);
    end
  endtask

  initial begin
    int qs [5] = '{3, 97, 193, 251, 255};
    int x, y, w, res, ncyc;
    uop = UOP_IDLE;
    for (int r = 0; r < ROWS; r++) mem[r] = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    foreach (qs[qi]) begin
      q = NB'(qs[qi]);
      for (int k = 0; k < 40; k++) begin
        x = (k == 0) ? qs[qi] - 1 : $urandom % qs[qi];
        y = (k == 0) ? qs[qi] - 1 : (k == 1) ? 0 : $urandom % qs[qi];
        w = (k == 0) ? qs[qi] - 1 : $urandom % qs[qi];
        put(A0, x); put(B0, y); put(W0, w);
        mod_add(res, ncyc);
        expect_eq(res, (x + y) % qs[qi], "add");
        expect_eq(ncyc, 2 * (NB + 1), "add cycles");
        mod_sub(res, ncyc);
        expect_eq(res, (x - y + qs[qi]) % qs[qi], "sub");
        expect_eq(ncyc, 3 * (NB + 1), "sub cycles");
        mod_mul(res, ncyc);
        expect_eq(res, (w * y) % qs[qi], "mul");
        expect_eq(ncyc, NB * (NB + 3) + NB, "mul cycles");
      end
    end
    $display("mechanisms: overflow=%0d underflow=%0d red2q=%0d red4q=%0d",
             n_ovf, n_udf, n_red2, n_red4);
    checks++;
    if (n_ovf == 0 || n_udf == 0 || n_red2 == 0 || n_red4 == 0) begin
      failures++;
      $display("FAIL a reduction mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
