// bitserial_cmp: LSB-first bit-serial magnitude comparator of one SRAM column.
//
// A data word and a constant arrive one bit per clock, least significant bit first.
// Where the two bits differ, the data bit decides the comparison so far (a more
// significant differing bit overrides every lower one); where they are equal the
// previous decision is kept. After the last bit, cmp_out = 1 means data >= constant.
// This is the mux-plus-flip-flop circuit of the paper's comparator figure:
// CMP = (DATA xor q) ? DATA : CMP_OUT.
//
// The 'init' input is this design's addition: on the first bit of a word the kept
// decision is taken as 1 instead of the flip-flop, so equal words compare as ">=".
// This matches the worked examples of the paper (an all-equal prefix shows CMP=1).
// Timing: cmp_next is combinational from the current bits; cmp_out is registered
// on the rising clock edge when 'en' is high.
module bitserial_cmp (
  input  logic clk,
  input  logic rst_n,
  input  logic en,        // consume one bit this cycle
  input  logic init,      // this is bit 0 of a new word
  input  logic data,      // data bit i
  input  logic cbit,      // constant bit i (q shared by all columns)
  output logic cmp_next,  // decision including bit i
  output logic cmp_out    // registered decision (CMP_OUT)
);
  logic prev;

  always_comb begin
    prev     = init ? 1'b1 : cmp_out;
    cmp_next = (data ^ cbit) ? data : prev;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  cmp_out <= 1'b0;
    else if (en) cmp_out <= cmp_next;
  end
endmodule
