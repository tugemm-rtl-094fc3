// column_counter_tb: loads random columns and drives row_done with a random
// pattern; checks that lane i stays high for exactly |a_i| row_done pulses,
// the neg flags, col_zero, and step_done (high on the row_done that ends the
// last pass, or whenever every lane is zero).
module column_counter_tb;
  localparam int unsigned M = 4, W = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, row_done = 0;
  logic signed [W-1:0] vec [M];
  logic [M-1:0] unary_col, neg_col;
  logic step_done, col_zero;

  column_counter #(.M(M), .W(W)) dut (.*);

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

  initial begin
    int mag [M];
    int maxmag, passes;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 40; trial++) begin
      maxmag = 0;
      for (int i = 0; i < M; i++) begin
        vec[i] = (trial % 9 == 4) ? '0 : W'($urandom_range(0, 2**W - 1));
        mag[i] = (vec[i] < 0) ? -int'(vec[i]) : int'(vec[i]);
        if (mag[i] > maxmag) maxmag = mag[i];
      end
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      passes = 0;
      while (passes <= maxmag + 1) begin
        row_done = ($urandom_range(0, 2) == 0);
        #1;
        for (int i = 0; i < M; i++) begin
          check(unary_col[i] == (passes < mag[i]), "unary_col");
          if (passes < mag[i]) check(neg_col[i] == (vec[i] < 0), "neg_col");
        end
        check(col_zero == (passes >= maxmag), "col_zero");
        check(step_done == ((passes >= maxmag) || (row_done && passes == maxmag - 1)), "step_done");
        @(negedge clk);
        if (row_done) passes++;
      end
      row_done = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
