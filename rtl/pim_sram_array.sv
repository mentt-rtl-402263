// pim_sram_array: the 6T SRAM bank used both as storage and as the compute fabric.
//
// The bank has ROWS word lines and COLS columns; row r is stored as one COLS-bit
// word. Raising one or two word lines in a cycle discharges the bit lines of every
// column at once: BL stays high only if all raised cells hold 1 (AND) and BLB stays
// high only if all raised cells hold 0 (NOR). With no word line raised both stay
// precharged (read as 1). The two sense amplifiers per column that turn BL and BLB
// into logic levels are analog; their logical result is what this model returns.
// Each column also has the Tag switch of the paper: when gate_en is set, the cell on
// port A of a column joins the bit lines only where a_gate of that column is 1.
//
// One row is written per cycle, at the rising clock edge, in the columns where
// wmask is 1 (the others are power gated or not addressed). A read of a row that
// is written in the same cycle returns the old contents, so a column can read bit j
// of a word and write its result to the same row in one cycle (used by the
// in-place shift of the multiplier and by the in-place subtraction).
// The cells are not reset; whatever is read must first be written.
// Follows the paper: size 162 x 1024 (drawn as four 162 x 256 tiles folded around
// the controller), dual-row AND/NOR sensing, the Tag switch. This design's choice:
// the read-then-write-in-one-cycle timing of the port.
module pim_sram_array
  import mentt_pkg::*;
#(
  parameter int unsigned ROWS = 162,
  parameter int unsigned COLS = 1024
) (
  input  logic              clk,
  input  logic              ra_en,
  input  logic [ROW_AW-1:0] ra,
  input  logic              rb_en,
  input  logic [ROW_AW-1:0] rb,
  input  logic              gate_en,
  input  logic [COLS-1:0]   a_gate,
  input  logic              wr_en,
  input  logic [ROW_AW-1:0] wr,
  input  logic [COLS-1:0]   wdata,
  input  logic [COLS-1:0]   wmask,
  output logic [COLS-1:0]   bl_and,
  output logic [COLS-1:0]   blb_nor
);
  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] cell_a, cell_b, conn_a, conn_b;

  always_comb begin
    cell_a = (ra_en && ra < ROW_AW'(ROWS)) ? mem[ra] : '0;
    cell_b = (rb_en && rb < ROW_AW'(ROWS)) ? mem[rb] : '0;
    conn_a = (ra_en && ra < ROW_AW'(ROWS)) ? (gate_en ? a_gate : '1) : '0;
    conn_b = (rb_en && rb < ROW_AW'(ROWS)) ? '1 : '0;
    // A disconnected cell neither pulls BL nor BLB down.
    bl_and  = ~((conn_a & ~cell_a) | (conn_b & ~cell_b));
    blb_nor = ~((conn_a &  cell_a) | (conn_b &  cell_b));
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr < ROW_AW'(ROWS))
      mem[wr] <= (mem[wr] & ~wmask) | (wdata & wmask);
  end
endmodule
