// mentt_pkg: types and constants shared by the MeNTT processing-in-memory NTT
// accelerator. The controller drives every column of the array in lock step with
// one micro-operation (uop_t) per clock: which word lines are raised, whether the
// per-column Tag switch isolates the first word line, how the column adder treats
// its inputs, which reduction constant it applies, and which row is written at the
// end of the cycle. The encodings below are this design's own; the paper gives the
// signals (TAG_LOAD, SUB_LOAD, Sub1/Sub2, carry, borrow) but not their coding.
package mentt_pkg;

  // Row address width. 8 bits cover the paper's 162-row array (5*N+2 for N=32).
  localparam int unsigned ROW_AW = 8;

  // Reduction constant applied by the column adder in the current cycle.
  //   RED_NONE : nothing
  //   RED_SUBQ : subtract q   if overflow1 (real phase of modular addition)
  //   RED_ADDQ : add q        if overflow1 (real phase of modular subtraction)
  //   RED_MUL  : subtract 4q if overflow2, else 2q if overflow1 (shift-and-add round)
  //   RED_FIN  : subtract 2q if overflow2, else q  if overflow1 (final correction)
  typedef enum logic [2:0] {
    RED_NONE = 3'd0,
    RED_SUBQ = 3'd1,
    RED_ADDQ = 3'd2,
    RED_MUL  = 3'd3,
    RED_FIN  = 3'd4
  } red_e;

  // One broadcast micro-operation.
  typedef struct packed {
    logic              ra_en;     // raise word line of port A
    logic [ROW_AW-1:0] ra;
    logic              rb_en;     // raise word line of port B
    logic [ROW_AW-1:0] rb;
    logic              gate_a;    // port-A cell joins the bit line only where Tag=1
    logic              inv;       // use BLB (NOR) of a single row as the operand bit
    logic              first;     // first bit of a pass: carry<=cin, borrow<=0, CMP<=1
    logic              cin;       // initial carry (1 for two's complement)
    red_e              red;       // reduction constant
    logic [2:0]        qb;        // {(4q)_j, (2q)_j, q_j}, shared by all columns
    logic              tag_load;  // Tag <= bit of the single row read (TAG_LOAD)
    logic              ovf_load;  // overflow flip-flops <= comparator results (SUB_LOAD)
    logic              ovf_data;  // overflow1 <= data bit instead of comparator 1
    logic              ovf_clr;   // clear both overflow flip-flops
    logic              wr_en;     // write one row at the end of the cycle
    logic [ROW_AW-1:0] wr;
  } uop_t;

  localparam uop_t UOP_IDLE = '{red: RED_NONE, default: '0};

  // Source of the data written into the array.
  typedef enum logic [2:0] {
    WSRC_PERIPH  = 3'd0,   // column adder output
    WSRC_EXT     = 3'd1,   // external row (twiddles, pointwise operands)
    WSRC_ROUTE_A = 3'd2,   // router, operand-A rows of the next stage
    WSRC_ROUTE_B = 3'd3,   // router, operand-B rows of the next stage
    WSRC_HOST    = 3'd4    // host row write
  } wsrc_e;

  // Commands accepted by the controller.
  typedef enum logic [2:0] {
    CMD_ADD   = 3'd0,   // S0 <- (A + B) mod q
    CMD_SUB   = 3'd1,   // S1 <- (A - B) mod q
    CMD_MUL   = 3'd2,   // W  <- (W * B) mod q
    CMD_NTT   = 3'd3,   // log_n forward butterfly stages with routing
    CMD_INTT  = 3'd4,   // same with inverse twiddles
    CMD_PWMUL = 3'd5    // A <- A*P0, B <- B*P1 (pointwise, operands fetched)
  } cmd_e;

  // What the external-row request asks for.
  typedef enum logic [1:0] {
    EXT_TW_FWD = 2'd0,  // forward twiddle row
    EXT_TW_INV = 2'd1,  // inverse twiddle row
    EXT_PW     = 2'd2   // pointwise-multiplication operand row
  } ext_kind_e;

endpackage
