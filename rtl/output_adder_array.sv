// output_adder_array: the M x P array of output adder cells of the parallel
// engine. Cell (i,j) takes, from every vector counter k, the column signals
// unary_col[k][i]/neg_col[k][i] and the row signals unary_row[k][j]/
// neg_row[k][j]; all cells take C on `init`. Each cycle every cell adds the
// signed count of its active (column, row) pairs, so after the last vector
// counter finishes the array holds A*B + C.
module output_adder_array #(
  parameter int unsigned M     = tugemm_pkg::DEF_M,
  parameter int unsigned N     = tugemm_pkg::DEF_N,
  parameter int unsigned P     = tugemm_pkg::DEF_P,
  parameter int unsigned OUT_W = tugemm_pkg::out_width(tugemm_pkg::DEF_W, N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    init,
  input  logic signed [OUT_W-1:0] c [M][P],
  input  logic [M-1:0]            unary_col [N],
  input  logic [M-1:0]            neg_col   [N],
  input  logic [P-1:0]            unary_row [N],
  input  logic [P-1:0]            neg_row   [N],
  output logic signed [OUT_W-1:0] y [M][P]
);
  for (genvar i = 0; i < M; i++) begin : g_row
    for (genvar j = 0; j < P; j++) begin : g_col
      logic [N-1:0] uc, ur, nc, nr;
      for (genvar k = 0; k < N; k++) begin : g_pair
        assign uc[k] = unary_col[k][i];
        assign nc[k] = neg_col[k][i];
        assign ur[k] = unary_row[k][j];
        assign nr[k] = neg_row[k][j];
      end
      output_adder_cell #(.N(N), .OUT_W(OUT_W)) u_cell (
        .clk, .rst_n, .init,
        .c         (c[i][j]),
        .unary_col (uc),
        .unary_row (ur),
        .neg_col   (nc),
        .neg_row   (nr),
        .y         (y[i][j])
      );
    end
  end
endmodule
