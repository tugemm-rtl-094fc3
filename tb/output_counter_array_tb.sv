// output_counter_array_tb: loads a random C, then drives random unary/neg
// column and row signals for many cycles and checks every cell against a
// model that adds +1 when both unary signals are high and the signs agree,
// -1 when they differ.
module output_counter_array_tb;
  localparam int unsigned M = 3, P = 4, OUT_W = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, init = 0;
  logic signed [OUT_W-1:0] c [M][P];
  logic signed [OUT_W-1:0] y [M][P];
  logic [M-1:0] unary_col = '0, neg_col = '0;
  logic [P-1:0] unary_row = '0, neg_row = '0;
  int model [M][P];

  output_counter_array #(.M(M), .P(P), .OUT_W(OUT_W)) dut (.*);

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

  initial begin
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
        unary_col = M'($urandom); neg_col = M'($urandom);
        unary_row = P'($urandom); neg_row = P'($urandom);
        foreach (model[i, j])
          if (unary_col[i] && unary_row[j]) model[i][j] += (neg_col[i] ^ neg_row[j]) ? -1 : 1;
        @(negedge clk);
        compare("count");
      end
      unary_col = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
