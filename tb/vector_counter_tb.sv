// vector_counter_tb: starts one vector counter (unit IDX) on random matrices
// and integrates its unary outputs: over the run, the number of cycles in
// which column i and row j are both high, signed by their neg flags, must equal
// a[i][IDX] * b[IDX][j]. col_done must rise after exactly
// max|A[:,IDX]| * max(1, max|B[IDX,:]|) cycles (immediately when the column is zero).
module vector_counter_tb;
  localparam int unsigned M = 3, N = 4, P = 3, W = 4, IDX = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [W-1:0] a [M][N];
  logic signed [W-1:0] b [N][P];
  logic [M-1:0] unary_col, neg_col;
  logic [P-1:0] unary_row, neg_row;
  logic col_done;

  vector_counter #(.M(M), .N(N), .P(P), .W(W), .IDX(IDX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int iabs(int v);
    return v < 0 ? -v : v;
  endfunction

  initial begin
    int acc [M][P];
    int maxa, maxb, expect_cycles, cycles;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 60; trial++) begin
      foreach (a[i, k]) a[i][k] = W'($urandom);
      foreach (b[k, j]) b[k][j] = W'($urandom);
      if (trial % 10 == 1) for (int i = 0; i < M; i++) a[i][IDX] = '0;
      if (trial % 10 == 2) for (int j = 0; j < P; j++) b[IDX][j] = '0;
      if (trial % 10 == 3) begin
        foreach (a[i, k]) a[i][k] = W'(-(2**(W-1)));
        foreach (b[k, j]) b[k][j] = W'(-(2**(W-1)));
      end
      maxa = 0; maxb = 0;
      for (int i = 0; i < M; i++) if (iabs(a[i][IDX]) > maxa) maxa = iabs(a[i][IDX]);
      for (int j = 0; j < P; j++) if (iabs(b[IDX][j]) > maxb) maxb = iabs(b[IDX][j]);
      expect_cycles = maxa * ((maxb == 0) ? 1 : maxb);
      foreach (acc[i, j]) acc[i][j] = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 0;
      while (!col_done && cycles < 1000) begin
        foreach (acc[i, j])
          if (unary_col[i] && unary_row[j]) acc[i][j] += (neg_col[i] ^ neg_row[j]) ? -1 : 1;
        @(negedge clk); cycles++;
      end
      check(cycles == expect_cycles, $sformatf("col_done after %0d cycles, want %0d", cycles, expect_cycles));
      foreach (acc[i, j]) check(acc[i][j] == int'(a[i][IDX]) * int'(b[IDX][j]), "unary product");
      repeat (3) begin
        @(negedge clk);
        check(col_done && unary_col == '0, "stays done");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
