// tugemm_serial_tb: random and corner-case GEMMs on a small serial engine.
// Y is compared with A*B + C computed directly, and the number of cycles from
// start to output_ready with the sum over steps k of S_k, where
// S_k = 1 if column k of A is zero, else max|A[:,k]| * max(1, max|B[k,:]|).
// The all-most-negative case checks the worst case N*(2^(W-1))^2.
module tugemm_serial_tb;
  localparam int unsigned M = 3, N = 4, P = 5, W = 4;
  localparam int unsigned OUT_W = tugemm_pkg::out_width(W, N);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [W-1:0]     a [M][N];
  logic signed [W-1:0]     b [N][P];
  logic signed [OUT_W-1:0] c [M][P];
  logic signed [OUT_W-1:0] y [M][P];
  logic output_ready;

  tugemm_serial #(.M(M), .N(N), .P(P), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50000000;
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
    int expect_cycles, cycles, maxa, maxb, ref_y;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    check(output_ready, "ready after reset");
    for (int trial = 0; trial < 80; trial++) begin
      foreach (a[i, k]) a[i][k] = W'($urandom);
      foreach (b[k, j]) b[k][j] = W'($urandom);
      foreach (c[i, j]) c[i][j] = OUT_W'($urandom_range(0, 200)) - OUT_W'(100);
      if (trial % 8 == 1) for (int i = 0; i < M; i++) a[i][1] = '0;
      if (trial % 8 == 2) for (int j = 0; j < P; j++) b[2][j] = '0;
      if (trial % 8 == 3) begin
        foreach (a[i, k]) a[i][k] = W'(-(2**(W-1)));
        foreach (b[k, j]) b[k][j] = W'(-(2**(W-1)));
      end
      expect_cycles = 0;
      for (int k = 0; k < N; k++) begin
        maxa = 0; maxb = 0;
        for (int i = 0; i < M; i++) if (iabs(a[i][k]) > maxa) maxa = iabs(a[i][k]);
        for (int j = 0; j < P; j++) if (iabs(b[k][j]) > maxb) maxb = iabs(b[k][j]);
        expect_cycles += (maxa == 0) ? 1 : maxa * ((maxb == 0) ? 1 : maxb);
      end
      if (trial % 8 == 3) check(expect_cycles == N * (2**(W-1))**2, "worst-case formula");
      start = 1;
      @(negedge clk); start = 0; cycles = 0;   // cycles after the start edge
      while (!output_ready && cycles < 100000) begin
        @(negedge clk); cycles++;
      end
      check(cycles == expect_cycles, $sformatf("latency %0d, want %0d", cycles, expect_cycles));
      foreach (y[i, j]) begin
        ref_y = int'(c[i][j]);
        for (int k = 0; k < N; k++) ref_y += int'(a[i][k]) * int'(b[k][j]);
        check(y[i][j] == OUT_W'(ref_y), $sformatf("y[%0d][%0d]=%0d want %0d", i, j, y[i][j], ref_y));
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
