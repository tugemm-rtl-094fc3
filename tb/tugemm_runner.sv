// tugemm_runner: testbench helper that instantiates the tugemm top level at
// one size (M, N, P, W) and runs GEMMS complete GEMMs on it with its own
// clock, cycling from kind FIRST_KIND through: 0 random full-range operands,
// 1 operands limited to +-MAXV, 2 the worst case (every operand -2^(W-1)).
// Results of both engines are compared
// with A*B + C computed directly, latencies with
//   serial   = sum_k S_k  (S_k = 1 for a zero column of A)
//   parallel = max_k S_k  (S_k = 0 for a zero column of A)
// with S_k = max|A[:,k]| * max(1, max|B[k,:]|). It reports its counts on
// `checks`/`failures` and raises `done` when finished.
module tugemm_runner #(
  parameter int unsigned M = 4,
  parameter int unsigned N = 4,
  parameter int unsigned P = 4,
  parameter int unsigned W = 4,
  parameter int          MAXV = 1,
  parameter int          GEMMS = 3,
  parameter int          FIRST_KIND = 0
) (
  output int checks,
  output int failures,
  output bit done
);
  localparam int unsigned OUT_W = tugemm_pkg::out_width(W, N);
  localparam int          MOST_NEG = -(2**(W-1));
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [W-1:0]     a [M][N];
  logic signed [W-1:0]     b [N][P];
  logic signed [OUT_W-1:0] c [M][P];
  logic signed [OUT_W-1:0] y_serial [M][P];
  logic signed [OUT_W-1:0] y_parallel [M][P];
  logic ready_serial, ready_parallel;

  tugemm #(.M(M), .N(N), .P(P), .W(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL [%0dx%0dx%0d W=%0d] %s at %0t", M, N, P, W, what, $time);
    end
  endtask

  function automatic int iabs(int v);
    return v < 0 ? -v : v;
  endfunction

  function automatic logic signed [W-1:0] operand(int kind);
    if (kind == 1) return W'($urandom_range(0, 2 * MAXV) - MAXV);
    if (kind == 2) return W'(MOST_NEG);
    return W'($urandom);
  endfunction

  task automatic run_gemm(int kind);
    int exp_s, exp_p, cyc, cyc_s, cyc_p, maxa, maxb, s_k, ref_y;
    foreach (a[i, k]) a[i][k] = operand(kind);
    foreach (b[k, j]) b[k][j] = operand(kind);
    foreach (c[i, j]) c[i][j] = OUT_W'($urandom_range(0, 200)) - OUT_W'(100);
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
      check(exp_s == N * MOST_NEG * MOST_NEG, "serial worst case N*(2^(W-1))^2");
      check(exp_p == MOST_NEG * MOST_NEG, "parallel worst case (2^(W-1))^2");
    end
    start = 1;
    @(negedge clk); start = 0;
    cyc = 0; cyc_s = -1; cyc_p = -1;
    while (cyc_s < 0 && cyc < 2000000) begin
      if (cyc_p < 0 && ready_parallel) cyc_p = cyc;
      if (ready_serial) cyc_s = cyc;
      else begin @(negedge clk); cyc++; end
    end
    $display("[%0dx%0dx%0d W=%0d] GEMM kind %0d: serial %0d cycles, parallel %0d cycles",
             M, N, P, W, kind, cyc_s, cyc_p);
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
    checks = 0; failures = 0; done = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    for (int g = 0; g < GEMMS; g++) run_gemm((g + FIRST_KIND) % 3);
    done = 1;
  end
endmodule
