// tugemm_tb: end-to-end test of the top level with both engines, on reduced
// sizes (M=4, N=5, P=3, 4-bit operands). Each GEMM uses random operands or a
// corner case; both results are compared with A*B + C worked out directly,
// and both latencies with the step-length formulas (serial: sum over k of
// S_k with S_k = 1 for a zero column of A; parallel: max over k of S_k with
// S_k = 0 for a zero column; otherwise S_k = max|A[:,k]| * max(1, max|B[k,:]|)).
// It also counts how often each mechanism occurs and fails if one never does:
// serial steps, row-counter reloads within a step, up- and down-counts of the
// output counters, skipped (zero-column) steps, row passes with a zero row,
// parallel cycles with several contributions to one cell, -1 contributions,
// a non-zero C, the worst case, and a start ignored while busy.
module tugemm_tb;
  localparam int unsigned M = 4, N = 5, P = 3, W = 4;
  localparam int unsigned OUT_W = tugemm_pkg::out_width(W, N);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [W-1:0]     a [M][N];
  logic signed [W-1:0]     b [N][P];
  logic signed [OUT_W-1:0] c [M][P];
  logic signed [OUT_W-1:0] y_serial [M][P];
  logic signed [OUT_W-1:0] y_parallel [M][P];
  logic ready_serial, ready_parallel;

  tugemm #(.M(M), .N(N), .P(P), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters, from the engines' internal signals ----
  typedef enum int {STEP, ROW_RELOAD, COUNT_UP, COUNT_DOWN, ZERO_COL_STEP, ZERO_ROW_PASS,
                    PAR_MULTI, PAR_MINUS, C_NONZERO, WORST_CASE, START_IGNORED, NUM_MECH} mech_e;
  int seen [NUM_MECH];
  string mech_name [NUM_MECH] = '{"serial step", "row reload within a step", "output count up",
      "output count down", "zero-column step", "zero-row pass", "parallel multi-input add",
      "parallel -1 contribution", "non-zero C", "worst-case operands", "start ignored while busy"};

  always @(posedge clk) if (rst_n) begin
    if (dut.u_serial.run && dut.u_serial.step_done) begin
      seen[STEP]++;
      if (dut.u_serial.unary_col == '0) seen[ZERO_COL_STEP]++;
    end
    if (dut.u_serial.run && dut.u_serial.row_done && !dut.u_serial.step_done) seen[ROW_RELOAD]++;
    if (dut.u_serial.run && dut.u_serial.row_done && dut.u_serial.unary_row == '0 &&
        dut.u_serial.unary_col != '0) seen[ZERO_ROW_PASS]++;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < P; j++)
        if (dut.u_serial.unary_col[i] && dut.u_serial.unary_row[j]) begin
          if (dut.u_serial.neg_col[i] ^ dut.u_serial.neg_row[j]) seen[COUNT_DOWN]++;
          else seen[COUNT_UP]++;
        end
    for (int i = 0; i < M; i++)
      for (int j = 0; j < P; j++) begin
        int n;
        n = 0;
        for (int k = 0; k < N; k++)
          if (dut.u_parallel.unary_col[k][i] && dut.u_parallel.unary_row[k][j]) begin
            n++;
            if (dut.u_parallel.neg_col[k][i] ^ dut.u_parallel.neg_row[k][j]) seen[PAR_MINUS]++;
          end
        if (n > 1) seen[PAR_MULTI]++;
      end
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
    bit done_s, done_p;
    foreach (a[i, k]) a[i][k] = W'($urandom);
    foreach (b[k, j]) b[k][j] = W'($urandom);
    foreach (c[i, j]) c[i][j] = (kind == 0) ? '0 : OUT_W'($urandom_range(0, 60)) - OUT_W'(30);
    case (kind)
      1: for (int i = 0; i < M; i++) a[i][2] = '0;                 // one step has nothing to do
      2: for (int j = 0; j < P; j++) b[3][j] = '0;                 // one row is all zero
      3: begin                                                     // worst case
        foreach (a[i, k]) a[i][k] = W'(-(2**(W-1)));
        foreach (b[k, j]) b[k][j] = W'(-(2**(W-1)));
      end
      4: foreach (a[i, k]) a[i][k] = '0;                           // Y = C
      default: ;
    endcase
    foreach (c[i, j]) if (c[i][j] != '0) begin seen[C_NONZERO]++; break; end
    if (kind == 3) seen[WORST_CASE]++;
    exp_s = 0; exp_p = 0;
    for (int k = 0; k < N; k++) begin
      maxa = 0; maxb = 0;
      for (int i = 0; i < M; i++) if (iabs(a[i][k]) > maxa) maxa = iabs(a[i][k]);
      for (int j = 0; j < P; j++) if (iabs(b[k][j]) > maxb) maxb = iabs(b[k][j]);
      s_k = maxa * ((maxb == 0) ? 1 : maxb);
      exp_s += (maxa == 0) ? 1 : s_k;
      if (s_k > exp_p) exp_p = s_k;
    end
    if (kind == 3) begin
      check(exp_s == N * (2**(W-1))**2, "serial worst-case formula");
      check(exp_p == (2**(W-1))**2, "parallel worst-case formula");
    end
    start = 1;
    @(negedge clk); start = 0;
    cyc = 0; cyc_s = -1; cyc_p = -1;
    done_s = 0; done_p = 0;
    while (!(done_s && done_p) && cyc < 100000) begin
      if (!done_s && ready_serial)   begin done_s = 1; cyc_s = cyc; end
      if (!done_p && ready_parallel) begin done_p = 1; cyc_p = cyc; end
      if (cyc == 1) begin            // a second start while busy must be ignored
        start = 1;
        if (!(ready_serial && ready_parallel)) seen[START_IGNORED]++;
      end
      @(negedge clk); cyc++;
      start = 0;
    end
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
    check(ready_serial && ready_parallel, "ready after reset");
    for (int t = 0; t < 40; t++) run_gemm(t % 6);
    for (int m = 0; m < NUM_MECH; m++) begin
      $display("mechanism %-28s seen %0d times", mech_name[m], seen[m]);
      check(seen[m] > 0, {"mechanism never seen: ", mech_name[m]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
