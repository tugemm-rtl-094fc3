// row_counter: turns the P values of one row of B into temporal-unary pulses.
//
// On `load` the P lanes take `vec`. While `run` is high every non-zero lane
// moves one step towards zero each cycle, so lane j keeps unary_row[j] high
// for |b_j| cycles. `row_done` is high in the cycle in which every lane is at
// most one step from zero: this is the last cycle of a pass. In that cycle the
// lanes reload `vec`, so the next pass starts without a gap and one pass lasts
// max_j |b_j| cycles (one cycle when the row is all zero). row_done tells the
// column counter to take its own step; it is low while `run` is low. neg_row[j] is high while lane j is
// negative. Reloading on the last cycle of a pass (rather than one cycle after
// every lane is zero) is this design's choice so that a step takes exactly
// max|a| * max|b| cycles.
module row_counter #(
  parameter int unsigned P = tugemm_pkg::DEF_P,
  parameter int unsigned W = tugemm_pkg::DEF_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic                run,
  input  logic signed [W-1:0] vec [P],
  output logic [P-1:0]        unary_row,
  output logic [P-1:0]        neg_row,
  output logic                row_done
);
  logic [P-1:0] last;

  assign row_done = run && (&last);

  for (genvar j = 0; j < P; j++) begin : g_lane
    unary_lane #(.W(W)) u_lane (
      .clk, .rst_n,
      .load  (load || row_done),
      .step  (run),
      .din   (vec[j]),
      .unary (unary_row[j]),
      .neg   (neg_row[j]),
      .last  (last[j])
    );
  end
endmodule
