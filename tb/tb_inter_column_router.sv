// tb_inter_column_router: for every supported size the router must move the result
// held at butterfly address a (2c = sum of column c, 2c+1 = difference) to address
// rotate-left(a, 1) of the next stage. The expected destination is worked out here
// from the address rotation itself; random sum/difference rows are captured
// (two capture cycles) and both output rows are compared bit by bit. Columns outside
// the active n/2 must output 0.
module tb_inter_column_router;
  localparam int unsigned COLS = 16, LOG_AW = 5;
  localparam int unsigned LOG_MAX = $clog2(2 * COLS);
  logic clk = 1'b0, lat1_en = 1'b0, lat2_en = 1'b0;
  logic [LOG_AW-1:0] log_n;
  logic [COLS-1:0] din, out_a, out_b;
  int checks = 0, failures = 0;

  inter_column_router #(.COLS(COLS), .LOG_AW(LOG_AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rotl(input int a, input int l);
    return ((a << 1) | (a >> (l - 1))) & ((1 << l) - 1);
  endfunction

  initial begin
    logic [COLS-1:0] s0, s1, exp_a, exp_b;
    for (int l = 2; l <= int'(LOG_MAX); l++) begin
      for (int k = 0; k < 20; k++) begin
        s0 = COLS'($urandom); s1 = COLS'($urandom);
        @(negedge clk); log_n = LOG_AW'(l); din = s0; lat1_en = 1;
        @(negedge clk); lat1_en = 0; din = s1; lat2_en = 1;
        @(negedge clk); lat2_en = 0; din = '0;
        exp_a = '0; exp_b = '0;
        for (int a = 0; a < (1 << l); a++) begin
          int d;
          logic v;
          v = (a % 2 == 0) ? s0[a / 2] : s1[a / 2];
          d = rotl(a, l);
          if (d % 2 == 0) exp_a[d / 2] = v;
          else            exp_b[d / 2] = v;
        end
        #1;
        checks++;
        if (out_a !== exp_a || out_b !== exp_b) begin
          failures++;
          $display("FAIL l=%0d a %h/%h b %h/%h", l, out_a, exp_a, out_b, exp_b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
