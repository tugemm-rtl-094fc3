// vector_counter: one of the N replicated units of the parallel engine.
//
// Unit IDX holds the work of step IDX of the serial engine: vector generators
// fixed on column IDX of A and row IDX of B, feeding a column counter and a
// row counter connected exactly as in the serial engine. `start` loads both
// counters; the unit then counts on its own and raises col_done once every
// one of its M column counters is zero (it stays high until the next start).
// It emits M unary/neg column signals and P unary/neg row signals for the
// output adder array. The row counter only runs while a column is non-zero,
// which is this design's choice to keep it quiet once the unit is done.
// Because the index is a constant, the vector generators reduce to wiring.
module vector_counter #(
  parameter int unsigned M   = tugemm_pkg::DEF_M,
  parameter int unsigned N   = tugemm_pkg::DEF_N,
  parameter int unsigned P   = tugemm_pkg::DEF_P,
  parameter int unsigned W   = tugemm_pkg::DEF_W,
  parameter int unsigned IDX = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] a [M][N],
  input  logic signed [W-1:0] b [N][P],
  output logic [M-1:0]        unary_col,
  output logic [M-1:0]        neg_col,
  output logic [P-1:0]        unary_row,
  output logic [P-1:0]        neg_row,
  output logic                col_done
);
  localparam int unsigned IDX_W = $clog2(N + 1);
  localparam logic [IDX_W-1:0] INDEX = IDX_W'(IDX);

  logic signed [W-1:0] a_col [M];
  logic signed [W-1:0] b_row [P];
  logic                row_done, col_zero;

  vector_generator #(.ROWS(M), .COLS(N), .W(W), .BY_COLUMN(1'b1)) u_vgen_a (
    .mat (a), .index (INDEX), .vec (a_col)
  );

  vector_generator #(.ROWS(N), .COLS(P), .W(W), .BY_COLUMN(1'b0)) u_vgen_b (
    .mat (b), .index (INDEX), .vec (b_row)
  );

  row_counter #(.P(P), .W(W)) u_row (
    .clk, .rst_n, .load (start), .run (!col_zero && !start),
    .vec (b_row), .unary_row, .neg_row, .row_done
  );

  column_counter #(.M(M), .W(W)) u_col (
    .clk, .rst_n, .load (start),
    .vec (a_col), .row_done, .unary_col, .neg_col, .step_done (), .col_zero
  );

  assign col_done = col_zero;
endmodule
