// mentt_top: the MeNTT accelerator - one SRAM bank that stores a whole polynomial
// and computes every butterfly of an NTT stage at once, bit-serially.
//
// Each of the COLS columns is one butterfly unit holding two coefficients (A and B),
// a twiddle W and a scratchpad; its near-memory logic (column_periph) adds,
// subtracts and multiplies modulo q one bit per clock, reducing on the fly. The
// controller broadcasts the same word-line addresses and instruction to all
// columns. Between stages the inter-column router moves the results to the columns
// of the next stage through a fixed wiring, the same for every stage, made possible
// by storing coefficient i of stage s at address rotate-left(i, s+1) (address 2c is
// A of column c, 2c+1 is B). Coefficients therefore rest, between commands, at
// address rotate-left(i, 1) of a log_n-bit address. A forward NTT of natural-order
// input leaves NTT coefficient bitrev(i) at index i (Cooley-Tukey butterflies,
// stage 0 pairing indices n/2 apart).
//
// Interfaces:
//   command  : start/cmd/q/nbits/log_n while !busy; done pulses once at the end.
//   host rows: while idle, host_wr writes one row (bit j of every column, masked by
//              host_wmask); host_rd senses one row, host_rdata is valid the next cycle.
//   ext rows : while busy the controller may raise ext_req for a twiddle or
//              pointwise-operand row (ext_kind, ext_stage, ext_half, ext_bit); the
//              system memory must return it on ext_row in the same cycle.
// Columns at or above n/2 (n = 2^log_n) take no part: their logic is frozen and
// their cells are not written, which stands in for the paper's column power gating.
// The sampler and the system memory of the paper's system figure are outside this
// block; their connections are the host and ext ports.
module mentt_top
  import mentt_pkg::*;
#(
  parameter int unsigned NBITS  = 32,
  parameter int unsigned COLS   = 1024,
  parameter int unsigned ROWS   = 5 * NBITS + 2,
  parameter int unsigned LOG_AW = 5,
  parameter int unsigned BIT_AW = $clog2(NBITS + 3)
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              start,
  input  cmd_e              cmd,
  input  logic [NBITS-1:0]  q,
  input  logic [BIT_AW-1:0] nbits,
  input  logic [LOG_AW-1:0] log_n,
  output logic              busy,
  output logic              done,
  // host row port (system memory side)
  input  logic              host_wr,
  input  logic              host_rd,
  input  logic [ROW_AW-1:0] host_row,
  input  logic [COLS-1:0]   host_wdata,
  input  logic [COLS-1:0]   host_wmask,
  output logic [COLS-1:0]   host_rdata,
  // external row fetch (twiddles, pointwise operands)
  output logic              ext_req,
  output ext_kind_e         ext_kind,
  output logic [LOG_AW-1:0] ext_stage,
  output logic              ext_half,
  output logic [BIT_AW-1:0] ext_bit,
  input  logic [COLS-1:0]   ext_row,
  // observation of the reduction mechanism, one bit per column
  output logic [COLS-1:0]   col_ovf1,
  output logic [COLS-1:0]   col_ovf2
);
  uop_t              cuop, uop;
  wsrc_e             cwsrc, wsrc;
  logic              rt_lat1, rt_lat2;
  logic [LOG_AW-1:0] run_log_n;
  logic [COLS-1:0]   bl_and, blb_nor, wdata, wmask, pe_wbit, tag, col_en;
  logic [COLS-1:0]   rt_a, rt_b;

  mentt_controller #(.NBITS(NBITS), .LOG_AW(LOG_AW), .BIT_AW(BIT_AW)) u_ctrl (
    .clk, .rst_n, .start, .cmd, .q, .nbits, .log_n, .busy, .done,
    .uop(cuop), .wsrc(cwsrc), .rt_lat1, .rt_lat2,
    .ext_req, .ext_kind, .ext_stage, .ext_half, .ext_bit, .cfg_log_n(run_log_n)
  );

  // Host access uses the array only while the controller is idle.
  always_comb begin
    uop  = cuop;
    wsrc = cwsrc;
    if (!busy) begin
      uop       = UOP_IDLE;
      uop.ra_en = host_rd;
      uop.ra    = host_row;
      uop.wr_en = host_wr;
      uop.wr    = host_row;
      wsrc      = WSRC_HOST;
    end
  end

  // Active columns: the first n/2.
  always_comb begin
    for (int unsigned c = 0; c < COLS; c++)
      col_en[c] = (64'(c) < (64'(1) << run_log_n) / 2);
  end

  pim_sram_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk,
    .ra_en(uop.ra_en), .ra(uop.ra), .rb_en(uop.rb_en), .rb(uop.rb),
    .gate_en(uop.gate_a), .a_gate(tag),
    .wr_en(uop.wr_en), .wr(uop.wr), .wdata, .wmask,
    .bl_and, .blb_nor
  );

  for (genvar c = 0; c < COLS; c++) begin : g_col
    column_periph u_pe (
      .clk, .rst_n, .en(col_en[c] & busy), .uop,
      .bl_and(bl_and[c]), .blb_nor(blb_nor[c]),
      .wbit(pe_wbit[c]), .tag(tag[c]), .ovf1(col_ovf1[c]), .ovf2(col_ovf2[c])
    );
  end

  inter_column_router #(.COLS(COLS), .LOG_AW(LOG_AW)) u_router (
    .clk, .log_n(run_log_n), .lat1_en(rt_lat1), .lat2_en(rt_lat2),
    .din(bl_and), .out_a(rt_a), .out_b(rt_b)
  );

  always_comb begin
    unique case (wsrc)
      WSRC_EXT:     wdata = ext_row;
      WSRC_ROUTE_A: wdata = rt_a;
      WSRC_ROUTE_B: wdata = rt_b;
      WSRC_HOST:    wdata = host_wdata;
      default:      wdata = pe_wbit;
    endcase
    wmask = (wsrc == WSRC_HOST) ? host_wmask : col_en;
  end

  always_ff @(posedge clk) begin
    if (!busy && host_rd) host_rdata <= bl_and;
  end
endmodule
