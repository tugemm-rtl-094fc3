// row_counter_tb: loads random rows into the row counter and checks, cycle by
// cycle over several passes, unary_row (lane j high for the first |b_j| cycles
// of each pass), neg_row, and row_done on the last cycle of each pass; a pass
// lasts max|b_j| cycles (1 when the row is all zero). Also checks that nothing
// moves while run is low.
module row_counter_tb;
  localparam int unsigned P = 4, W = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, run = 0;
  logic signed [W-1:0] vec [P];
  logic [P-1:0] unary_row, neg_row;
  logic row_done;

  row_counter #(.P(P), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int mag [P];
    int len;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 40; trial++) begin
      len = 0;
      for (int j = 0; j < P; j++) begin
        vec[j] = (trial % 7 == 3) ? '0 : W'($urandom_range(0, 2**W - 1));
        mag[j] = (vec[j] < 0) ? -int'(vec[j]) : int'(vec[j]);
        if (mag[j] > len) len = mag[j];
      end
      if (len == 0) len = 1;
      @(negedge clk); load = 1; run = 0;
      @(negedge clk); load = 0;
      repeat (2) begin
        for (int j = 0; j < P; j++) check(unary_row[j] == (mag[j] != 0), "hold unary");
        check(!row_done, "row_done while idle");
        @(negedge clk);
      end
      run = 1; #1;
      for (int pass = 0; pass < 3; pass++) begin
        for (int t = 0; t < len; t++) begin
          for (int j = 0; j < P; j++) begin
            check(unary_row[j] == (t < mag[j]), "unary_row");
            if (t < mag[j]) check(neg_row[j] == (vec[j] < 0), "neg_row");
          end
          check(row_done == (t == len - 1), "row_done");
          @(negedge clk);
        end
      end
      run = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
