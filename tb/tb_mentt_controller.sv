// tb_mentt_controller: the sequencer on its own. For several bit widths and sizes
// every command is issued and the micro-operation stream is checked against the
// pass lengths of the design: busy time per command, the number of row writes,
// the number of external-row requests and their kind, routing captures and writes,
// Tag loads, overflow loads and the rows touched (all inside the 5N+2-row array,
// routing writes only into the A and B rows). It also checks that 'done' pulses
// exactly once per command.
module tb_mentt_controller;
  import mentt_pkg::*;
  localparam int unsigned NBITS = 32, LOG_AW = 5;
  localparam int unsigned BIT_AW = $clog2(NBITS + 3);
  localparam int unsigned ROWS = 5 * NBITS + 2;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  cmd_e cmd = CMD_ADD;
  logic [NBITS-1:0] q = 32'd12289;
  logic [BIT_AW-1:0] nbits;
  logic [LOG_AW-1:0] log_n;
  logic busy, done, rt_lat1, rt_lat2, ext_req, ext_half;
  uop_t uop;
  wsrc_e wsrc;
  ext_kind_e ext_kind;
  logic [LOG_AW-1:0] ext_stage, cfg_log_n;
  logic [BIT_AW-1:0] ext_bit;
  int checks = 0, failures = 0;

  mentt_controller #(.NBITS(NBITS), .LOG_AW(LOG_AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(input cmd_e c, input int nb, input int l);
    int cyc = 0, writes = 0, ext = 0, ext_bad = 0, lat1 = 0, lat2 = 0, rwa = 0, rwb = 0;
    int tags = 0, ovl = 0, bad_row = 0, dones = 0, stages;
    ext_kind_e exp_kind;
    @(negedge clk);
    cmd = c; nbits = BIT_AW'(nb); log_n = LOG_AW'(l); start = 1;
    @(negedge clk);
    start = 0;
    while (busy) begin
      cyc++;
      if (uop.wr_en) writes++;
      if (uop.wr_en && uop.wr >= ROW_AW'(ROWS)) bad_row++;
      if (uop.ra_en && uop.ra >= ROW_AW'(ROWS)) bad_row++;
      if (uop.rb_en && uop.rb >= ROW_AW'(ROWS)) bad_row++;
      if (ext_req) begin
        ext++;
        exp_kind = (c == CMD_PWMUL) ? EXT_PW : (c == CMD_INTT) ? EXT_TW_INV : EXT_TW_FWD;
        if (ext_kind != exp_kind || !uop.wr_en || wsrc != WSRC_EXT) ext_bad++;
      end
      if (rt_lat1) lat1++;
      if (rt_lat2) lat2++;
      if (wsrc == WSRC_ROUTE_A) begin rwa++; if (uop.wr >= ROW_AW'(NBITS)) bad_row++; end
      if (wsrc == WSRC_ROUTE_B) begin
        rwb++;
        if (uop.wr < ROW_AW'(NBITS) || uop.wr >= ROW_AW'(2 * NBITS)) bad_row++;
      end
      if (uop.tag_load) tags++;
      if (uop.ovf_load) ovl++;
      if (done) dones++;
      @(negedge clk);
    end
    stages = (c == CMD_NTT || c == CMD_INTT) ? l : 0;
    unique case (c)
      CMD_ADD: begin
        expect_eq(cyc, 2 * (nb + 1) + 1, "ADD cycles");
        expect_eq(writes, nb + 1, "ADD writes");
        expect_eq(ovl, 1, "ADD overflow loads");
      end
      CMD_SUB: begin
        expect_eq(cyc, 3 * (nb + 1) + 1, "SUB cycles");
        expect_eq(writes, 2 * (nb + 1), "SUB writes");
        expect_eq(ovl, 1, "SUB underflow loads");
      end
      CMD_MUL: begin
        expect_eq(cyc, nb * (nb + 3) + nb + 1, "MUL cycles");
        expect_eq(tags, nb, "MUL tag loads");
        expect_eq(ovl, nb, "MUL overflow loads");
        expect_eq(writes, nb * (nb + 2) + nb, "MUL writes");
      end
      CMD_PWMUL: begin
        expect_eq(cyc, 2 * (nb + nb * (nb + 3) + nb + nb) + 1, "PWMUL cycles");
        expect_eq(ext, 2 * nb, "PWMUL fetches");
        expect_eq(tags, 2 * nb, "PWMUL tag loads");
      end
      default: begin
        expect_eq(cyc, stages * (nb * nb + 14 * nb + 5) + 1, "NTT cycles");
        expect_eq(ext, stages * nb, "twiddle fetches");
        expect_eq(lat1, stages * nb, "route captures 1");
        expect_eq(lat2, stages * nb, "route captures 2");
        expect_eq(rwa, stages * nb, "route A writes");
        expect_eq(rwb, stages * nb, "route B writes");
        expect_eq(cfg_log_n, l, "size latched");
      end
    endcase
    expect_eq(ext_bad, 0, "fetch kind");
    expect_eq(bad_row, 0, "rows in range");
    expect_eq(dones, 1, "done pulses");
  endtask

  initial begin
    nbits = '0; log_n = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++) begin
      int nb = (k == 0) ? 32 : (k == 1) ? 14 : 5;
      run(CMD_ADD, nb, 3);
      run(CMD_SUB, nb, 3);
      run(CMD_MUL, nb, 3);
      run(CMD_PWMUL, nb, 3);
      run(CMD_NTT, nb, 2 + k);
      run(CMD_INTT, nb, 4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
