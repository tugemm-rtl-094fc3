// vector_generator_tb: checks column and row selection of the vector generator
// on random 3x4 matrices for every index, and zeros for the out-of-range index.
module vector_generator_tb;
  localparam int unsigned R = 3, C = 4, W = 6;
  int checks = 0, failures = 0;
  logic signed [W-1:0] mat [R][C];
  logic [2:0]          idx_c;   // one of C columns, or C
  logic [2:0]          idx_r;   // one of R rows, or R
  logic signed [W-1:0] col [R];
  logic signed [W-1:0] row [C];

  vector_generator #(.ROWS(R), .COLS(C), .W(W), .BY_COLUMN(1'b1)) u_col (.mat, .index(idx_c), .vec(col));
  vector_generator #(.ROWS(R), .COLS(C), .W(W), .BY_COLUMN(1'b0)) u_row (.mat, .index(idx_r[1:0]), .vec(row));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      foreach (mat[r, c]) mat[r][c] = W'($urandom);
      for (int s = 0; s <= C; s++) begin
        idx_c = 3'(s);
        idx_r = 3'(s % (R + 1));
        #1;
        for (int r = 0; r < R; r++) begin
          checks++;
          if (col[r] !== ((s < C) ? mat[r][s] : '0)) begin
            failures++; $display("FAIL col idx=%0d r=%0d got %0d", s, r, col[r]);
          end
        end
        for (int c = 0; c < C; c++) begin
          checks++;
          if (row[c] !== ((idx_r < R) ? mat[idx_r][c] : '0)) begin
            failures++; $display("FAIL row idx=%0d c=%0d got %0d", idx_r, c, row[c]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
