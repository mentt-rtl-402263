// tb_pim_sram_array: checks the SRAM bank model against a separate copy of its
// contents kept here. Random rows are written with random column masks; then
// single-row reads (BL = data, BLB = ~data), dual-row reads (BL = AND, BLB = NOR),
// reads with the per-column Tag switch isolating port A, reads with no word line
// raised (both lines precharged), and a same-row read-and-write in one cycle
// (the read must see the old word) are compared with the expected values.
module tb_pim_sram_array;
  import mentt_pkg::*;
  localparam int unsigned ROWS = 22, COLS = 16;
  logic clk = 1'b0;
  logic ra_en, rb_en, gate_en, wr_en;
  logic [ROW_AW-1:0] ra, rb, wr;
  logic [COLS-1:0] a_gate, wdata, wmask, bl_and, blb_nor;
  logic [COLS-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  pim_sram_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [COLS-1:0] exp_and, input logic [COLS-1:0] exp_nor,
                       input string what);
    #1;
    checks++;
    if (bl_and !== exp_and || blb_nor !== exp_nor) begin
      failures++;
      $display("FAIL %s: and %h/%h nor %h/%h", what, bl_and, exp_and, blb_nor, exp_nor);
    end
  endtask

  task automatic write_row(input int r, input logic [COLS-1:0] d, input logic [COLS-1:0] m);
    @(negedge clk);
    ra_en = 0; rb_en = 0; wr_en = 1; wr = ROW_AW'(r); wdata = d; wmask = m;
    @(posedge clk);
    ref_mem[r] = (ref_mem[r] & ~m) | (d & m);
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    ra_en = 0; rb_en = 0; gate_en = 0; wr_en = 0; ra = '0; rb = '0; wr = '0;
    a_gate = '0; wdata = '0; wmask = '0;
    for (int r = 0; r < int'(ROWS); r++) write_row(r, COLS'($urandom), '1);
    for (int k = 0; k < 60; k++)
      write_row($urandom % ROWS, COLS'($urandom), COLS'($urandom));
    for (int k = 0; k < 300; k++) begin
      int x, y;
      logic [COLS-1:0] g, conn;
      x = $urandom % ROWS; y = $urandom % ROWS; g = COLS'($urandom);
      @(negedge clk);
      // single row on port A
      ra_en = 1; ra = ROW_AW'(x); rb_en = 0; gate_en = 0;
      check(ref_mem[x], ~ref_mem[x], "single A");
      // single row on port B
      ra_en = 0; rb_en = 1; rb = ROW_AW'(y);
      check(ref_mem[y], ~ref_mem[y], "single B");
      // dual row
      ra_en = 1;
      check(ref_mem[x] & ref_mem[y], ~(ref_mem[x] | ref_mem[y]), "dual");
      // dual row with Tag switch
      gate_en = 1; a_gate = g; conn = g;
      check((ref_mem[x] | ~conn) & ref_mem[y],
            ~((ref_mem[x] & conn) | ref_mem[y]), "gated");
      gate_en = 0;
      // nothing raised
      ra_en = 0; rb_en = 0;
      check('1, '1, "precharged");
    end
    // read and write the same row in one cycle
    for (int k = 0; k < 20; k++) begin
      int x;
      logic [COLS-1:0] d;
      x = $urandom % ROWS; d = COLS'($urandom);
      @(negedge clk);
      ra_en = 1; ra = ROW_AW'(x); rb_en = 0; wr_en = 1; wr = ROW_AW'(x);
      wdata = d; wmask = '1;
      check(ref_mem[x], ~ref_mem[x], "read-before-write");
      @(posedge clk);
      ref_mem[x] = d;
      @(negedge clk);
      wr_en = 0;
      check(d, ~d, "after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
