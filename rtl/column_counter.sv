// column_counter: turns the M values of one column of A into temporal-unary
// pulses, one step per completed pass of the row counter.
//
// On `load` the M lanes take `vec`. A lane moves one step towards zero on each
// cycle with `row_done` high, so unary_col[i] stays high for |a_i| row passes.
// neg_col[i] is high while lane i is negative. `step_done` marks the last cycle
// of a step: every column lane is in its last pass and the row counter ends
// that pass, or there is nothing left to count (all lanes zero). `col_zero` is
// high when every lane is zero; the parallel engine uses it as col_done.
module column_counter #(
  parameter int unsigned M = tugemm_pkg::DEF_M,
  parameter int unsigned W = tugemm_pkg::DEF_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic signed [W-1:0] vec [M],
  input  logic                row_done,
  output logic [M-1:0]        unary_col,
  output logic [M-1:0]        neg_col,
  output logic                step_done,
  output logic                col_zero
);
  logic [M-1:0] last;

  assign col_zero  = ~|unary_col;
  assign step_done = col_zero || (row_done && (&last));

  for (genvar i = 0; i < M; i++) begin : g_lane
    unary_lane #(.W(W)) u_lane (
      .clk, .rst_n,
      .load  (load),
      .step  (row_done),
      .din   (vec[i]),
      .unary (unary_col[i]),
      .neg   (neg_col[i]),
      .last  (last[i])
    );
  end
endmodule
