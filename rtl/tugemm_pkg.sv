// tugemm_pkg: sizes and helpers shared by the tuGEMM temporal-unary GEMM engines.
//
// The defaults are the evaluation point used for both engines: 16x16 matrices
// (M = N = P = 16) of 8-bit two's-complement operands. Outputs are kept at
// out_width() bits, wide enough to hold any A*B result without overflow
// (|sum| <= N * 2^(2W-2)). The result width is this design's own choice; C is
// added in at that width and the sum wraps modulo 2^OUT_W.
package tugemm_pkg;
  localparam int unsigned DEF_M = 16;
  localparam int unsigned DEF_N = 16;
  localparam int unsigned DEF_P = 16;
  localparam int unsigned DEF_W = 8;

  // Width of an output cell: 2W bits for one product plus clog2(N) for the sum.
  function automatic int unsigned out_width(int unsigned w, int unsigned n);
    return 2 * w + ((n > 1) ? $clog2(n) : 1);
  endfunction

  localparam int unsigned DEF_OUT_W = out_width(DEF_W, DEF_N);
endpackage
