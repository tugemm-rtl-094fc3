// tugemm_serial: serial temporal-unary GEMM engine, Y = A*B + C.
//
// A (M x N), B (N x P) and C (M x P) are binary two's-complement matrices held
// on the input ports from `start` until output_ready. The product is formed as
// N outer products ("steps") done one after another:
//   - the index counter selects step i;
//   - two vector generators pick column i of A and row i of B;
//   - the row counter turns row i into temporal-unary pulses (row j high for
//     |b_ij| cycles per pass) and the column counter steps once per pass, so
//     column k stays high for |a_ki| passes;
//   - output counter (k,j) counts while both pulses are high, up or down by the
//     operands' signs, adding a_ki*b_ij to its value, which started at C.
// Step i takes max|A[:,i]| * max|B[i,:]| cycles (1 if column i of A is all
// zero, max|A[:,i]| if row i of B is all zero); the next step's vectors are
// loaded in the last cycle of the current one, so a GEMM takes the sum of its
// step lengths and at most N*(2^(W-1))^2 cycles.
//
// Interface: pulse `start` for one cycle while output_ready is high; Y is valid
// when output_ready is high again. The structure follows the serial tuGEMM
// block diagram; cycle-level details (loading the next step in the last cycle
// of the current one, reload on the last cycle of a pass, ports for the
// matrices) are this design's choices.
module tugemm_serial #(
  parameter int unsigned M     = tugemm_pkg::DEF_M,
  parameter int unsigned N     = tugemm_pkg::DEF_N,
  parameter int unsigned P     = tugemm_pkg::DEF_P,
  parameter int unsigned W     = tugemm_pkg::DEF_W,
  parameter int unsigned OUT_W = tugemm_pkg::out_width(W, N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [W-1:0]     a [M][N],
  input  logic signed [W-1:0]     b [N][P],
  input  logic signed [OUT_W-1:0] c [M][P],
  output logic signed [OUT_W-1:0] y [M][P],
  output logic                    output_ready
);
  localparam int unsigned IDX_W = $clog2(N + 1);

  logic [IDX_W-1:0]    index;
  logic                init, load, run, step_done, row_done;
  logic signed [W-1:0] a_col [M];
  logic signed [W-1:0] b_row [P];
  logic [M-1:0]        unary_col, neg_col;
  logic [P-1:0]        unary_row, neg_row;

  index_counter #(.N(N)) u_index (
    .clk, .rst_n, .start,
    .step_done (run && step_done),
    .index, .init, .load, .run, .output_ready
  );

  vector_generator #(.ROWS(M), .COLS(N), .W(W), .BY_COLUMN(1'b1)) u_vgen_a (
    .mat (a), .index, .vec (a_col)
  );

  vector_generator #(.ROWS(N), .COLS(P), .W(W), .BY_COLUMN(1'b0)) u_vgen_b (
    .mat (b), .index, .vec (b_row)
  );

  row_counter #(.P(P), .W(W)) u_row (
    .clk, .rst_n, .load, .run,
    .vec (b_row), .unary_row, .neg_row, .row_done
  );

  column_counter #(.M(M), .W(W)) u_col (
    .clk, .rst_n, .load,
    .vec (a_col), .row_done, .unary_col, .neg_col, .step_done, .col_zero ()
  );

  output_counter_array #(.M(M), .P(P), .OUT_W(OUT_W)) u_array (
    .clk, .rst_n, .init, .c,
    .unary_col, .neg_col, .unary_row, .neg_row, .y
  );
endmodule
