// output_counter_cell: one accumulator of the serial engine's output array.
//
// An OUT_W-bit up/down counter. `init` loads the C entry. The cell is enabled
// when both its column and its row unary signals are high (en = unary_col &
// unary_row) and then counts one per cycle: up when the two operands have the
// same sign, down when they differ (dec = neg_col ^ neg_row). Over a step it
// thus adds a_i * b_j to its count.
module output_counter_cell #(
  parameter int unsigned OUT_W = tugemm_pkg::DEF_OUT_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    init,
  input  logic signed [OUT_W-1:0] c,
  input  logic                    unary_col,
  input  logic                    unary_row,
  input  logic                    neg_col,
  input  logic                    neg_row,
  output logic signed [OUT_W-1:0] y
);
  logic en, dec;

  assign en  = unary_col && unary_row;
  assign dec = neg_col ^ neg_row;

  always_ff @(posedge clk) begin
    if (!rst_n)    y <= '0;
    else if (init) y <= c;
    else if (en)   y <= dec ? y - OUT_W'(1) : y + OUT_W'(1);
  end
endmodule
