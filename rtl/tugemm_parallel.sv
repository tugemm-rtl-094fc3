// tugemm_parallel: parallel temporal-unary GEMM engine, Y = A*B + C.
//
// The N outer-product steps of the serial engine are independent, so here
// they all run at once: N vector counters, unit k converting column k of A
// and row k of B into temporal-unary pulses, drive an M x P array of output
// adder cells, each of which adds up to N signed unit contributions per
// cycle into a register that starts at C. There is no index counter;
// output_ready is the AND of the N col_done flags.
//
// Interface: pulse `start` for one cycle; it loads C into the output
// registers and the operands into every vector counter. output_ready is valid
// from the cycle after start and is high again when Y = A*B + C. The GEMM
// takes max over k of max|A[:,k]| * max|B[k,:]| cycles (at least one), so the
// worst case is (2^(W-1))^2 cycles. After reset output_ready is high and Y is 0.
// Loading C into the adder registers (the serial engine's way of adding C) is
// this design's choice; the start handshake is too.
module tugemm_parallel #(
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
  logic [M-1:0] unary_col [N];
  logic [M-1:0] neg_col   [N];
  logic [P-1:0] unary_row [N];
  logic [P-1:0] neg_row   [N];
  logic [N-1:0] col_done;

  for (genvar k = 0; k < N; k++) begin : g_vc
    vector_counter #(.M(M), .N(N), .P(P), .W(W), .IDX(k)) u_vc (
      .clk, .rst_n, .start, .a, .b,
      .unary_col (unary_col[k]),
      .neg_col   (neg_col[k]),
      .unary_row (unary_row[k]),
      .neg_row   (neg_row[k]),
      .col_done  (col_done[k])
    );
  end

  output_adder_array #(.M(M), .N(N), .P(P), .OUT_W(OUT_W)) u_array (
    .clk, .rst_n, .init (start), .c,
    .unary_col, .neg_col, .unary_row, .neg_row, .y
  );

  assign output_ready = &col_done;
endmodule
