// output_counter_array: the M x P array of output counter cells of the serial
// engine. Cell (i,j) sees unary_col[i]/neg_col[i] from the column counter and
// unary_row[j]/neg_row[j] from the row counter; all cells take C on `init`.
// After the last step the array holds A*B + C in binary, one cycle after the
// final counting cycle.
module output_counter_array #(
  parameter int unsigned M     = tugemm_pkg::DEF_M,
  parameter int unsigned P     = tugemm_pkg::DEF_P,
  parameter int unsigned OUT_W = tugemm_pkg::DEF_OUT_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    init,
  input  logic signed [OUT_W-1:0] c [M][P],
  input  logic [M-1:0]            unary_col,
  input  logic [M-1:0]            neg_col,
  input  logic [P-1:0]            unary_row,
  input  logic [P-1:0]            neg_row,
  output logic signed [OUT_W-1:0] y [M][P]
);
  for (genvar i = 0; i < M; i++) begin : g_row
    for (genvar j = 0; j < P; j++) begin : g_col
      output_counter_cell #(.OUT_W(OUT_W)) u_cell (
        .clk, .rst_n, .init,
        .c         (c[i][j]),
        .unary_col (unary_col[i]),
        .unary_row (unary_row[j]),
        .neg_col   (neg_col[i]),
        .neg_row   (neg_row[j]),
        .y         (y[i][j])
      );
    end
  end
endmodule
