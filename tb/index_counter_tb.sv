// index_counter_tb: runs several GEMM sequences with random step lengths and
// checks the index order 0..N-1, init and load with start (index 0), load of
// the next index in the last cycle of each step but the final one, run during
// steps, output_ready only after N steps (count = N), the total cycle count
// (sum of the step lengths), and that start is ignored while busy.
module index_counter_tb;
  localparam int unsigned N = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, step_done = 0;
  logic [2:0] index;
  logic init, load, run, output_ready;

  index_counter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int len, total, cycles;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    check(output_ready && !load && !run, "ready after reset");
    for (int trial = 0; trial < 10; trial++) begin
      start = 1; #1;
      check(init && load && index == 3'(0), "init and load with start");
      @(negedge clk); start = 0; cycles = 0; total = 0;
      for (int s = 0; s < N; s++) begin
        len = $urandom_range(1, 6); total += len;
        for (int t = 0; t < len; t++) begin
          start = (trial == 3 && t == 0);   // must be ignored while busy
          step_done = (t == len - 1);
          #1;
          check(run && !output_ready && !init, "run cycle");
          if (t < len - 1) check(!load && index == 3'(s), "index during step");
          else if (s < N - 1) check(load && index == 3'(s + 1), "load next index at step end");
          else check(!load, "no load after the last step");
          @(negedge clk); cycles++;
          step_done = 0; start = 0;
        end
      end
      check(output_ready && !run, "output_ready after N steps");
      check(cycles == total, "cycle count");
      repeat ($urandom_range(0, 3)) begin
        @(negedge clk); check(output_ready && !run && !load, "ready holds");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
