// vector_generator: picks one column or one row out of a binary matrix.
//
// The serial engine has two of these: one returns column `index` of A
// (ROWS = M values), the other row `index` of B (COLS = P values). The matrix
// arrives as a port held stable for the whole GEMM; the generator is a plain
// combinational multiplexer. How the matrices are stored and delivered is not
// specified for tuGEMM, so keeping them in input ports is this design's choice.
// An index of ROWS/COLS or more (the index counter's final count N) yields zeros.
module vector_generator #(
  parameter int unsigned ROWS      = tugemm_pkg::DEF_M,
  parameter int unsigned COLS      = tugemm_pkg::DEF_N,
  parameter int unsigned W         = tugemm_pkg::DEF_W,
  parameter bit          BY_COLUMN = 1'b1,                 // 1: column of mat, 0: row of mat
  parameter int unsigned LEN       = BY_COLUMN ? ROWS : COLS,
  parameter int unsigned SEL       = BY_COLUMN ? COLS : ROWS,
  parameter int unsigned IDX_W     = $clog2(SEL + 1)
) (
  input  logic signed [W-1:0] mat [ROWS][COLS],
  input  logic [IDX_W-1:0]    index,
  output logic signed [W-1:0] vec [LEN]
);
  always_comb begin
    for (int unsigned e = 0; e < LEN; e++) begin
      vec[e] = '0;
      for (int unsigned s = 0; s < SEL; s++) begin
        if (index == IDX_W'(s)) vec[e] = BY_COLUMN ? mat[e][s] : mat[s][e];
      end
    end
  end
endmodule
