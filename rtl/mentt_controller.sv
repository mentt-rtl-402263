// mentt_controller: the sequencer that turns a command into word-line addresses and
// column instructions, one broadcast micro-operation (uop_t) per clock.
//
// Row map of every column (N = NBITS, nb = run-time bit width <= N):
//   A  rows 0 .. N-1        operand A (butterfly input at even address)
//   B  rows N .. 2N-1       operand B (odd address)
//   W  rows 2N .. 3N-1      twiddle factor, later the product B*W
//   S0 rows 3N .. 4N        scratch half 0: A + B*W (N+1 bits)
//   S1 rows 4N+1 .. 5N+1    scratch half 1: -B*W, then A - B*W (N+1 bits)
// The multiplier uses the whole scratch (2N+2 rows) as a sliding window: round r
// keeps its partial sum at rows S0+nb-1-r .., so reading bit j-1 of the old sum and
// writing bit j of the new one hit the same row and the doubling costs nothing.
//
// Passes (one bit per clock, LSB first):
//   LOADW  nb        W <- external row (twiddle or pointwise operand)
//   MTAG   1         Tag <- bit k of the multiplier (MSB first)
//   MROUND nb+2      psum <- 2*psum + Tag*W - {0,2q,4q}; compare with q and 2q
//   MFIN   nb        W <- psum - {0,q,2q}          (multiplication: nb*(nb+3)+nb)
//   ADDT   nb+1      trial A+Y, compare with q      (modular addition: 2*(nb+1))
//   ADDR   nb+1      S0 <- A+Y - (ovf ? q : 0)
//   NEG    nb+1      S1 <- ~Y + 1 (BLB read, carry-in 1)
//   SUBT   nb+1      trial A+S1, underflow <- sign bit   (subtraction: 3*(nb+1))
//   SUBR   nb+1      S1 <- A+S1 + (ovf ? q : 0)
//   ROUTE  4*nb      S0,S1 -> next-stage A,B through the router
//   COPY   nb        A or B <- W (pointwise multiplication)
// Commands: ADD (S0=A+B), SUB (S1=A-B), MUL (W=W*B), NTT/INTT (log_n stages of
// LOADW, multiply B*W, add, subtract, route), PWMUL (A*=P0, B*=P1).
//
// Interface: 'start' with cmd/q/nbits/log_n is accepted while idle; 'busy' stays
// high until the cycle of the one-cycle 'done' pulse. ext_req asks, in the same
// cycle, for one external row (ext_kind/ext_stage/ext_half/ext_bit) that is written
// into W. Requirements: q odd is not needed, but q < 2^nb and 2 <= log_n.
// Follows the paper: the operation order of a stage (multiply, write, add, sub),
// 2*(N+1) and 3*(N+1) cycle counts, 4*N routing cycles, the shifted-address
// multiplier with two overflow bits. This design's choices: the exact pass
// encoding, one extra Tag-load cycle and two extra bits per multiplier round
// (the paper quotes (N+1)^2 for a multiplication), folding the paper's separate
// "write" step into the final correction pass, and keeping -B*W in S1 (it needs
// N+1 bits, one more than the W rows hold).
// Notes for lint: the top bit of 'wsrc' is always 0 here because the host source is
// selected in the top level; the start-while-busy assertion is disabled by the
// asynchronous reset, which a lint tool reports as a reset used synchronously.
module mentt_controller
  import mentt_pkg::*;
#(
  parameter int unsigned NBITS  = 32,
  parameter int unsigned LOG_AW = 5,
  parameter int unsigned BIT_AW = $clog2(NBITS + 3)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  cmd_e              cmd,
  input  logic [NBITS-1:0]  q,
  input  logic [BIT_AW-1:0] nbits,
  input  logic [LOG_AW-1:0] log_n,
  output logic              busy,
  output logic              done,
  output uop_t              uop,
  output wsrc_e             wsrc,
  output logic              rt_lat1,
  output logic              rt_lat2,
  output logic              ext_req,
  output ext_kind_e         ext_kind,
  output logic [LOG_AW-1:0] ext_stage,
  output logic              ext_half,
  output logic [BIT_AW-1:0] ext_bit,
  output logic [LOG_AW-1:0] cfg_log_n    // size of the running command
);
  localparam int unsigned A0 = 0;
  localparam int unsigned B0 = NBITS;
  localparam int unsigned W0 = 2 * NBITS;
  localparam int unsigned S0 = 3 * NBITS;
  localparam int unsigned S1 = 4 * NBITS + 1;

  typedef enum logic [3:0] {
    ST_IDLE, ST_LOADW, ST_MTAG, ST_MROUND, ST_MFIN, ST_COPY,
    ST_ADDT, ST_ADDR, ST_NEG, ST_SUBT, ST_SUBR, ST_ROUTE, ST_DONE
  } state_e;

  state_e            st;
  cmd_e              cmd_r;
  logic [NBITS-1:0]  q_r;
  logic [BIT_AW-1:0] nb;
  logic [LOG_AW-1:0] logn_r;
  logic [BIT_AW-1:0] j;      // bit counter
  logic [BIT_AW-1:0] r;      // multiplier round
  logic [1:0]        ph;     // routing phase
  logic [LOG_AW-1:0] stage;
  logic              half;

  assign busy      = (st != ST_IDLE);
  assign done      = (st == ST_DONE);
  assign cfg_log_n = logn_r;
  assign ext_stage = stage;
  assign ext_half  = half;
  assign ext_bit   = j;
  assign ext_kind  = (cmd_r == CMD_PWMUL) ? EXT_PW :
                     (cmd_r == CMD_INTT)  ? EXT_TW_INV : EXT_TW_FWD;

  // Bit i of q, zero outside 0..NBITS-1.
  function automatic logic qbit(input int i, input logic [NBITS-1:0] qv);
    return (i >= 0 && i < int'(NBITS)) ? qv[i] : 1'b0;
  endfunction

  function automatic logic [ROW_AW-1:0] row(input int unsigned base, input int unsigned off);
    return ROW_AW'(base + off);
  endfunction

  // Operand regions of the running command.
  int unsigned y_add, y_mul, neg_src, copy_dst;
  int unsigned jj, base_r;

  always_comb begin
    y_add    = (cmd_r == CMD_ADD) ? B0 : W0;
    y_mul    = (cmd_r == CMD_PWMUL && !half) ? A0 : B0;
    neg_src  = (cmd_r == CMD_SUB) ? B0 : W0;
    copy_dst = half ? B0 : A0;
    jj       = int'(j);
    base_r   = S0 + int'(nb) - 1 - int'(r);

    uop      = UOP_IDLE;
    wsrc     = WSRC_PERIPH;
    rt_lat1  = 1'b0;
    rt_lat2  = 1'b0;
    ext_req  = 1'b0;
    uop.qb   = {qbit(jj - 2, q_r), qbit(jj - 1, q_r), qbit(jj, q_r)};
    uop.first = (j == '0);

    unique case (st)
      ST_LOADW: begin
        ext_req    = 1'b1;
        wsrc       = WSRC_EXT;
        uop.wr_en  = 1'b1;
        uop.wr     = row(W0, jj);
      end
      ST_MTAG: begin
        uop.rb_en    = 1'b1;
        uop.rb       = row(y_mul, int'(nb) - 1 - int'(r));
        uop.tag_load = 1'b1;
        uop.ovf_clr  = (r == '0);
      end
      ST_MROUND: begin
        uop.ra_en    = (j < nb);
        uop.ra       = row(W0, jj);
        uop.gate_a   = 1'b1;
        uop.rb_en    = (r != '0) && (j != '0);
        uop.rb       = row(base_r, jj);
        uop.red      = RED_MUL;
        uop.wr_en    = 1'b1;
        uop.wr       = row(base_r, jj);
        uop.ovf_load = (j == nb + 1);
      end
      ST_MFIN: begin
        uop.rb_en = 1'b1;
        uop.rb    = row(S0, jj);
        uop.red   = RED_FIN;
        uop.wr_en = 1'b1;
        uop.wr    = row(W0, jj);
      end
      ST_COPY: begin
        uop.ra_en = 1'b1;
        uop.ra    = row(W0, jj);
        uop.wr_en = 1'b1;
        uop.wr    = row(copy_dst, jj);
      end
      ST_ADDT, ST_ADDR: begin
        uop.ra_en = (j < nb);
        uop.ra    = row(A0, jj);
        uop.rb_en = (j < nb);
        uop.rb    = row(y_add, jj);
        if (st == ST_ADDT) begin
          uop.ovf_load = (j == nb);
        end else begin
          uop.red   = RED_SUBQ;
          uop.wr_en = 1'b1;
          uop.wr    = row(S0, jj);
        end
      end
      ST_NEG: begin
        uop.ra_en = (j < nb);
        uop.ra    = row(neg_src, jj);
        uop.inv   = 1'b1;
        uop.cin   = 1'b1;
        uop.wr_en = 1'b1;
        uop.wr    = row(S1, jj);
      end
      ST_SUBT, ST_SUBR: begin
        uop.ra_en = (j < nb);
        uop.ra    = row(A0, jj);
        uop.rb_en = 1'b1;
        uop.rb    = row(S1, jj);
        if (st == ST_SUBT) begin
          uop.ovf_load = (j == nb);
          uop.ovf_data = 1'b1;
        end else begin
          uop.red   = RED_ADDQ;
          uop.wr_en = 1'b1;
          uop.wr    = row(S1, jj);
        end
      end
      ST_ROUTE: begin
        unique case (ph)
          2'd0: begin uop.ra_en = 1'b1; uop.ra = row(S0, jj); rt_lat1 = 1'b1; end
          2'd1: begin uop.ra_en = 1'b1; uop.ra = row(S1, jj); rt_lat2 = 1'b1; end
          2'd2: begin uop.wr_en = 1'b1; uop.wr = row(A0, jj); wsrc = WSRC_ROUTE_A; end
          default: begin uop.wr_en = 1'b1; uop.wr = row(B0, jj); wsrc = WSRC_ROUTE_B; end
        endcase
      end
      default: ;
    endcase
  end

  // Sequencing.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= ST_IDLE;
      cmd_r  <= CMD_ADD;
      q_r    <= '0;
      nb     <= '0;
      logn_r <= '0;
      j      <= '0;
      r      <= '0;
      ph     <= '0;
      stage  <= '0;
      half   <= 1'b0;
    end else begin
      unique case (st)
        ST_IDLE: if (start) begin
          cmd_r  <= cmd;
          q_r    <= q;
          nb     <= nbits;
          logn_r <= log_n;
          j      <= '0;
          r      <= '0;
          ph     <= '0;
          stage  <= '0;
          half   <= 1'b0;
          unique case (cmd)
            CMD_ADD:  st <= ST_ADDT;
            CMD_SUB:  st <= ST_NEG;
            CMD_MUL:  st <= ST_MTAG;
            default:  st <= ST_LOADW;
          endcase
        end
        ST_LOADW: begin
          j <= j + 1'b1;
          if (j == nb - 1) begin j <= '0; r <= '0; st <= ST_MTAG; end
        end
        ST_MTAG: begin
          j  <= '0;
          st <= ST_MROUND;
        end
        ST_MROUND: begin
          j <= j + 1'b1;
          if (j == nb + 1) begin
            j <= '0;
            if (r == nb - 1) st <= ST_MFIN;
            else begin r <= r + 1'b1; st <= ST_MTAG; end
          end
        end
        ST_MFIN: begin
          j <= j + 1'b1;
          if (j == nb - 1) begin
            j <= '0;
            if (cmd_r == CMD_MUL)        st <= ST_DONE;
            else if (cmd_r == CMD_PWMUL) st <= ST_COPY;
            else                         st <= ST_ADDT;
          end
        end
        ST_COPY: begin
          j <= j + 1'b1;
          if (j == nb - 1) begin
            j <= '0;
            if (!half) begin half <= 1'b1; st <= ST_LOADW; end
            else st <= ST_DONE;
          end
        end
        ST_ADDT, ST_NEG, ST_SUBT: begin
          j <= j + 1'b1;
          if (j == nb) begin
            j  <= '0;
            st <= (st == ST_ADDT) ? ST_ADDR : (st == ST_NEG) ? ST_SUBT : ST_SUBR;
          end
        end
        ST_ADDR: begin
          j <= j + 1'b1;
          if (j == nb) begin
            j  <= '0;
            st <= (cmd_r == CMD_ADD) ? ST_DONE : ST_NEG;
          end
        end
        ST_SUBR: begin
          j <= j + 1'b1;
          if (j == nb) begin
            j  <= '0;
            st <= (cmd_r == CMD_SUB) ? ST_DONE : ST_ROUTE;
          end
        end
        ST_ROUTE: begin
          ph <= ph + 1'b1;
          if (ph == 2'd3) begin
            j <= j + 1'b1;
            if (j == nb - 1) begin
              j <= '0;
              if (stage == logn_r - 1) st <= ST_DONE;
              else begin stage <= stage + 1'b1; st <= ST_LOADW; end
            end
          end
        end
        default: st <= ST_IDLE;   // ST_DONE
      endcase
    end
  end

  // A new command is accepted only while idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("start while busy");
endmodule
