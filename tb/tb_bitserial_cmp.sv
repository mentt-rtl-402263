// tb_bitserial_cmp: random words and constants are streamed LSB first through the
// bit-serial comparator; after the last bit the decision must equal (data >= const),
// both combinationally (cmp_next) and one clock later (cmp_out). Edge cases equal,
// zero and all-ones words are included. Each word takes W clocks.
module tb_bitserial_cmp;
  localparam int W = 12;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, init = 1'b0, data = 1'b0, cbit = 1'b0;
  logic cmp_next, cmp_out;
  int checks = 0, failures = 0;

  bitserial_cmp dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [W-1:0] a, input logic [W-1:0] c);
    for (int i = 0; i < W; i++) begin
      @(negedge clk);
      en = 1'b1; init = (i == 0); data = a[i]; cbit = c[i];
      if (i == W - 1) begin
        #1;
        checks++;
        if (cmp_next !== (a >= c)) begin
          failures++;
          $display("FAIL cmp_next a=%0d c=%0d got %0b", a, c, cmp_next);
        end
      end
    end
    @(negedge clk);
    en = 1'b0;
    checks++;
    if (cmp_out !== (a >= c)) begin
      failures++;
      $display("FAIL cmp_out a=%0d c=%0d got %0b", a, c, cmp_out);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(12'd5, 12'd5);
    run(12'd0, 12'd0);
    run(12'd0, 12'd1);
    run(12'hfff, 12'hffe);
    run(12'h800, 12'h7ff);
    run(12'h7ff, 12'h800);
    for (int k = 0; k < 500; k++) begin
      logic [W-1:0] a, c;
      a = W'($urandom);
      c = (k % 3 == 0) ? a ^ W'(1 << ($urandom % W)) : W'($urandom);
      run(a, c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
