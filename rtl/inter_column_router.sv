// inter_column_router: the fixed stage-to-stage routing between columns.
//
// Between two butterfly stages every result must move to the column that uses it
// in the next stage. The paper's address mapping, addr = rotate-left(index, s), makes
// that move the same for every stage: the result at address a goes to address
// rotate-left(a, 1) of the next stage (addresses are log2(n) bits; address 2c is the
// A operand of column c and 2c+1 its B operand). Solved for the destination, the A
// operand of column d takes the result of column {0, d>>1} (n/2 columns, upper
// half selected by 0) and the B operand of column d takes column {1, d>>1}; in both
// cases the A-result (sum) if d is even and the B-result (difference) if d is odd.
//
// The move is done one bit-row at a time, as in the paper (4 cycles per bit): the
// sum row is sensed and captured in D_OUT1 of every column (lat1_en), the
// difference row is captured in D_OUT2 (lat2_en), then the router drives the
// next-stage A row (out_a) and B row (out_b) for two write cycles.
// log_n, the transform size actually used, selects where the upper half begins
// (n/4 columns further on), so the same wires serve every size up to 2*COLS points;
// columns at and above n/2 are idle and their outputs are 0.
// Follows the paper: constant mapping, D_OUT1/D_OUT2 capture and D_NEXT selection.
// This design's choice: the run-time log_n selection (the paper states that any
// polynomial order within the array size can be processed, but not how).
module inter_column_router #(
  parameter int unsigned COLS   = 1024,
  parameter int unsigned LOG_AW = 5
) (
  input  logic              clk,
  input  logic [LOG_AW-1:0] log_n,    // log2 of points, 2 .. log2(2*COLS)
  input  logic              lat1_en,  // capture sensed row into D_OUT1
  input  logic              lat2_en,  // capture sensed row into D_OUT2
  input  logic [COLS-1:0]   din,      // sensed row (BL of a single raised row)
  output logic [COLS-1:0]   out_a,
  output logic [COLS-1:0]   out_b
);
  logic [COLS-1:0] d_out1, d_out2;

  always_ff @(posedge clk) begin
    if (lat1_en) d_out1 <= din;
    if (lat2_en) d_out2 <= din;
  end

  localparam int unsigned LOG_MAX = $clog2(2 * COLS);

  // One fixed wiring per supported size; log_n picks one of them.
  always_comb begin
    out_a = '0;
    out_b = '0;
    for (int unsigned l = 2; l <= LOG_MAX; l++) begin
      if (log_n == LOG_AW'(l)) begin
        for (int unsigned d = 0; d < (1 << (l - 1)); d++) begin
          out_a[d] = d[0] ? d_out2[d >> 1] : d_out1[d >> 1];
          out_b[d] = d[0] ? d_out2[(d >> 1) + (1 << (l - 2))]
                          : d_out1[(d >> 1) + (1 << (l - 2))];
        end
      end
    end
  end
endmodule
