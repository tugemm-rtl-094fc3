// tugemm: top level holding both temporal-unary GEMM engines, serial and
// parallel, on the same operands.
//
// Both engines compute Y = A*B + C for an M x N matrix A, an N x P matrix B
// and an M x P matrix C of two's-complement numbers, with exact results.
// The serial engine (one column/row counter pair, M*P up/down counters) is the
// small one; the parallel engine (N vector counters, M*P N-input adder cells)
// finishes up to N times sooner. Each is a complete unit on its own; this top
// only shares the operand ports and the start pulse between them, so that one
// can be chosen, or both compared, in a system. Sharing the inputs is this
// design's choice, and so is the start gating: `start` is passed to both
// engines only while both report ready, so a start during a running GEMM is
// ignored and the two results always belong to the same operands.
// y_serial/ready_serial and y_parallel/ready_parallel behave as described in
// tugemm_serial and tugemm_parallel.
module tugemm #(
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
  output logic signed [OUT_W-1:0] y_serial [M][P],
  output logic                    ready_serial,
  output logic signed [OUT_W-1:0] y_parallel [M][P],
  output logic                    ready_parallel
);
  logic go;

  assign go = start && ready_serial && ready_parallel;

  tugemm_serial #(.M(M), .N(N), .P(P), .W(W), .OUT_W(OUT_W)) u_serial (
    .clk, .rst_n, .start (go), .a, .b, .c,
    .y (y_serial), .output_ready (ready_serial)
  );

  tugemm_parallel #(.M(M), .N(N), .P(P), .W(W), .OUT_W(OUT_W)) u_parallel (
    .clk, .rst_n, .start (go), .a, .b, .c,
    .y (y_parallel), .output_ready (ready_parallel)
  );
endmodule
