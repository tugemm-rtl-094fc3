// output_adder_cell: one accumulator of the parallel engine's output array.
//
// The cell at (i,j) receives N pairs of unary and neg signals, one pair per
// vector counter k: unary_col[k], unary_row[k], neg_col[k], neg_row[k]. Each
// pair contributes +1 when both unary signals are high and the signs agree,
// -1 (two's complement) when both are high and the signs differ, and 0
// otherwise. The N contributions are summed by a binary adder together with
// the register, which is loaded with the C entry on `init`, so one cycle adds
// up to N to the result. The adder is written as a behavioural sum; the
// exact adder structure is left to synthesis.
module output_adder_cell #(
  parameter int unsigned N     = tugemm_pkg::DEF_N,
  parameter int unsigned OUT_W = tugemm_pkg::DEF_OUT_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    init,
  input  logic signed [OUT_W-1:0] c,
  input  logic [N-1:0]            unary_col,
  input  logic [N-1:0]            unary_row,
  input  logic [N-1:0]            neg_col,
  input  logic [N-1:0]            neg_row,
  output logic signed [OUT_W-1:0] y
);
  localparam int unsigned SUM_W = $clog2(N + 1) + 1;

  logic signed [SUM_W-1:0] term [N];
  logic signed [SUM_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int unsigned k = 0; k < N; k++) begin
      // neg block: -1 in two's complement; the multiplexer picks it when the signs differ
      if (unary_col[k] && unary_row[k]) term[k] = (neg_col[k] ^ neg_row[k]) ? '1 : SUM_W'(1);
      else                              term[k] = '0;
      sum = sum + term[k];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)    y <= '0;
    else if (init) y <= c;
    else           y <= y + OUT_W'(sum);
  end
endmodule
