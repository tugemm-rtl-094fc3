// tugemm_full_tb: the top level at its default size (16x16x16, 8-bit
// operands, 20-bit results) running complete GEMMs: random full-range
// operands with a random C, operands whose magnitude stays at or below 41
// (about the average largest value of an INT8-quantised ResNet18 feature
// map), and the worst case, every operand -128. Both engines' results are
// compared with A*B + C and both latencies with the step-length formulas of
// tugemm_tb; the worst case must take 16*128*128 cycles on the serial
// engine and 128*128 on the parallel one.
module tugemm_full_tb;
  localparam int unsigned M = tugemm_pkg::DEF_M, N = tugemm_pkg::DEF_N, P = tugemm_pkg::DEF_P;
  localparam int unsigned W = tugemm_pkg::DEF_W;
  localparam int unsigned OUT_W = tugemm_pkg::out_width(W, N);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [W-1:0]     a [M][N];
  logic signed [W-1:0]     b [N][P];
  logic signed [OUT_W-1:0] c [M][P];
  logic signed [OUT_W-1:0] y_serial [M][P];
  logic signed [OUT_W-1:0] y_parallel [M][P];
  logic ready_serial, ready_parallel;

  tugemm dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;   // 2,000,000 cycles
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

  task automatic run_gemm(int kind);
    int exp_s, exp_p, cyc, cyc_s, cyc_p, maxa, maxb, s_k, ref_y;
    foreach (a[i, k]) a[i][k] = (kind == 1) ? W'($urandom_range(0, 82)) - W'(41) : W'($urandom);
    foreach (b[k, j]) b[k][j] = (kind == 1) ? W'($urandom_range(0, 82)) - W'(41) : W'($urandom);
    foreach (c[i, j]) c[i][j] = OUT_W'($urandom_range(0, 2000)) - OUT_W'(1000);
    if (kind == 2) begin
      foreach (a[i, k]) a[i][k] = W'(-128);
      foreach (b[k, j]) b[k][j] = W'(-128);
    end
    exp_s = 0; exp_p = 0;
    for (int k = 0; k < N; k++) begin
      maxa = 0; maxb = 0;
      for (int i = 0; i < M; i++) if (iabs(a[i][k]) > maxa) maxa = iabs(a[i][k]);
      for (int j = 0; j < P; j++) if (iabs(b[k][j]) > maxb) maxb = iabs(b[k][j]);
      s_k = maxa * ((maxb == 0) ? 1 : maxb);
      exp_s += (maxa == 0) ? 1 : s_k;
      if (s_k > exp_p) exp_p = s_k;
    end
    if (kind == 2) begin
      check(exp_s == 16 * 128 * 128, "serial worst case");
      check(exp_p == 128 * 128, "parallel worst case");
    end
    start = 1;
    @(negedge clk); start = 0;
    cyc = 0; cyc_s = -1; cyc_p = -1;
    while (cyc_s < 0 && cyc < 400000) begin
      if (cyc_s < 0 && ready_serial)   cyc_s = cyc;
      if (cyc_p < 0 && ready_parallel) cyc_p = cyc;
      if (cyc_s < 0) begin @(negedge clk); cyc++; end
    end
    $display("GEMM kind %0d: serial %0d cycles, parallel %0d cycles", kind, cyc_s, cyc_p);
    check(cyc_s == exp_s, $sformatf("serial latency %0d, want %0d", cyc_s, exp_s));
    check(cyc_p == exp_p, $sformatf("parallel latency %0d, want %0d", cyc_p, exp_p));
    foreach (y_serial[i, j]) begin
      ref_y = int'(c[i][j]);
      for (int k = 0; k < N; k++) ref_y += int'(a[i][k]) * int'(b[k][j]);
      check(y_serial[i][j]   == OUT_W'(ref_y), $sformatf("serial y[%0d][%0d]", i, j));
      check(y_parallel[i][j] == OUT_W'(ref_y), $sformatf("parallel y[%0d][%0d]", i, j));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    run_gemm(0);
    run_gemm(1);
    run_gemm(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
