// column_periph: the near-memory logic under one SRAM column.
//
// Each clock the array senses the raised word lines of this column and hands over
// BL (AND of the raised cells) and BLB (NOR of them). From these the column forms
// an operand count (0, 1 or 2 ones among the raised cells, or the inverted bit of a
// single row when 'inv' is set, which is how a two's complement is taken), adds the
// carry, subtracts the borrow and adds or subtracts one bit of a reduction constant
// (0, q, 2q or 4q, chosen by the two overflow flip-flops). The low bit of the result
// is the bit written back; the rest becomes the next carry (0..2) or borrow (0..1).
//
// Two bit-serial comparators follow the written bit: comparator 1 against q (bit
// j of q on qb[0]) and comparator 2 against 2q (qb[1]). SUB_LOAD (ovf_load)
// copies them into overflow1/overflow2, which select the constant for the next
// pass: RED_SUBQ/RED_ADDQ use overflow1 with q, RED_MUL uses 4q/2q (the partial sum
// is doubled before it is reduced), RED_FIN uses 2q/q. For modular subtraction the
// underflow is the sign bit of the trial sum, so 'ovf_data' loads overflow1 from
// the data bit. TAG_LOAD copies the single sensed bit into Tag; Tag drives the
// switch that keeps the multiplicand off the bit line when the multiplier bit is 0.
//
// Follows the paper: AND/NOR sensing, carry and borrow, the q/2q/4q mux with two
// overflow bits, two comparators, the Tag flip-flop. This design's choices: the
// signed carry range (the paper's figure draws the constant only on the subtracting
// side; adding q for a subtraction underflow needs a carry of up to 2), and the
// column enable 'en' that freezes the state of power-gated columns.
// Timing: all outputs are combinational in the current sensed bits; state updates
// on the rising clock edge. The micro-operation is the shared broadcast bundle: its
// row-address fields are for the array, so a lint tool reports them unused here.
module column_periph
  import mentt_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,          // column active (not power gated)
  input  uop_t uop,
  input  logic bl_and,      // sense amplifier on BL
  input  logic blb_nor,     // sense amplifier on BLB
  output logic wbit,        // bit to write back
  output logic tag,         // Tag flip-flop, drives the port-A switch
  output logic ovf1,        // overflow flip-flop 1 (>= q, or underflow)
  output logic ovf2         // overflow flip-flop 2 (>= 2q)
);
  logic [1:0] carry;
  logic       borrow;
  logic       a_conn, dual;
  logic [1:0] opnd;
  logic       sbit, s_add, s_sub;
  logic signed [3:0] t;
  logic [1:0] carry_eff;
  logic       borrow_eff;
  logic       cmp1_next, cmp2_next, cmp1_q, cmp2_q;

  always_comb begin
    // The port-A cell is on the bit line unless the Tag switch isolates it.
    a_conn = uop.ra_en & (~uop.gate_a | tag);
    dual   = a_conn & uop.rb_en;
    if (uop.inv)       opnd = {1'b0, blb_nor};
    else if (dual)     opnd = {1'b0, bl_and} + {1'b0, ~blb_nor};
    else               opnd = {1'b0, ~blb_nor};

    sbit  = 1'b0;
    s_add = 1'b0;
    s_sub = 1'b0;
    unique case (uop.red)
      RED_SUBQ: begin sbit = ovf1 & uop.qb[0]; s_sub = 1'b1; end
      RED_ADDQ: begin sbit = ovf1 & uop.qb[0]; s_add = 1'b1; end
      RED_MUL:  begin sbit = ovf2 ? uop.qb[2] : (ovf1 & uop.qb[1]); s_sub = 1'b1; end
      RED_FIN:  begin sbit = ovf2 ? uop.qb[1] : (ovf1 & uop.qb[0]); s_sub = 1'b1; end
      default:  ;
    endcase

    carry_eff  = uop.first ? {1'b0, uop.cin} : carry;
    borrow_eff = uop.first ? 1'b0 : borrow;
    t = $signed({2'b00, opnd}) + $signed({2'b00, carry_eff})
      - $signed({3'b000, borrow_eff})
      + $signed({3'b000, sbit & s_add}) - $signed({3'b000, sbit & s_sub});
    wbit = t[0];
  end

  bitserial_cmp u_cmp1 (
    .clk, .rst_n, .en, .init(uop.first), .data(wbit), .cbit(uop.qb[0]),
    .cmp_next(cmp1_next), .cmp_out(cmp1_q)
  );
  bitserial_cmp u_cmp2 (
    .clk, .rst_n, .en, .init(uop.first), .data(wbit), .cbit(uop.qb[1]),
    .cmp_next(cmp2_next), .cmp_out(cmp2_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      carry  <= '0;
      borrow <= 1'b0;
      tag    <= 1'b0;
      ovf1   <= 1'b0;
      ovf2   <= 1'b0;
    end else if (en) begin
      // Next carry/borrow: t = 2*carry' - 2*borrow' + wbit.
      if (t[3]) begin carry <= '0;      borrow <= 1'b1; end
      else      begin carry <= t[2:1];  borrow <= 1'b0; end
      if (uop.tag_load) tag <= bl_and;
      if (uop.ovf_clr) begin
        ovf1 <= 1'b0;
        ovf2 <= 1'b0;
      end else if (uop.ovf_load) begin
        ovf1 <= uop.ovf_data ? wbit : cmp1_next;
        ovf2 <= cmp2_next;
      end
    end
  end

  // cmp1_q/cmp2_q are the CMP_OUT flip-flops; their value is consumed through
  // cmp*_next on the last bit of a pass.
  logic unused_cmp;
  assign unused_cmp = cmp1_q ^ cmp2_q;
endmodule
