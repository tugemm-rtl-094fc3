// output_adder_array_tb: loads a random C, then drives random unary/neg
// signals from N vector counters for many cycles and checks every cell
// against a model that adds, per cycle, the signed count (+1 same sign, -1
// different sign) of the pairs whose column and row unary signals are both high.
module output_adder_array_tb;
  localparam int unsigned M = 3, N = 4, P = 2, OUT_W = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, init = 0;
  logic signed [OUT_W-1:0] c [M][P];
  logic signed [OUT_W-1:0] y [M][P];
  logic [M-1:0] unary_col [N];
  logic [M-1:0] neg_col   [N];
  logic [P-1:0] unary_row [N];
  logic [P-1:0] neg_row   [N];
  int model [M][P];

  output_adder_array #(.M(M), .N(N), .P(P), .OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string what);
    foreach (y[i, j]) begin
      checks++;
      if (y[i][j] !== OUT_W'(model[i][j])) begin
        failures++; $display("FAIL %s cell %0d,%0d got %0d want %0d", what, i, j, y[i][j], model[i][j]);
      end
    end
  endtask

  task automatic drive(bit active);
    for (int k = 0; k < N; k++) begin
      unary_col[k] = active ? M'($urandom) : '0; neg_col[k] = M'($urandom);
      unary_row[k] = P'($urandom);               neg_row[k] = P'($urandom);
    end
  endtask

  initial begin
    drive(0);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 8; trial++) begin
      @(negedge clk);
      foreach (c[i, j]) begin
        c[i][j] = OUT_W'($urandom_range(0, 2**OUT_W - 1));
        model[i][j] = int'(c[i][j]);
      end
      init = 1;
      @(negedge clk); init = 0;
      compare("after init");
      for (int t = 0; t < 60; t++) begin
        drive(1);
        foreach (model[i, j])
          for (int k = 0; k < N; k++)
            if (unary_col[k][i] && unary_row[k][j]) model[i][j] += (neg_col[k][i] ^ neg_row[k][j]) ? -1 : 1;
        @(negedge clk);
        compare("accumulate");
      end
      drive(0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
