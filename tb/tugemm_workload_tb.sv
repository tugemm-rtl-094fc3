// tugemm_workload_tb: the GEMM sizes of the architecture's evaluation, beyond
// the default 8-bit 16x16x16 (covered by tugemm_full_tb): 16x16x16 with 2-bit
// and 4-bit operands, and 32x32x32 with 8-bit operands, on both engines at
// once. The 16x16x16 sizes each run a random GEMM, one with small operands
// (|v| <= 1 at 2 bits, <= 3 at 4 bits) and the worst case. The 32x32x32 size,
// whose full-range GEMMs take over 500,000 cycles, runs one GEMM with
// |v| <= 41, about the average largest value of an INT8 ResNet18 feature map.
module tugemm_workload_tb;
  int c2, f2, c4, f4, c32, f32;
  bit d2, d4, d32;
  int checks, failures;

  tugemm_runner #(.M(16), .N(16), .P(16), .W(2), .MAXV(1),  .GEMMS(3)) u_w2  (.checks(c2),  .failures(f2),  .done(d2));
  tugemm_runner #(.M(16), .N(16), .P(16), .W(4), .MAXV(3),  .GEMMS(3)) u_w4  (.checks(c4),  .failures(f4),  .done(d4));
  tugemm_runner #(.M(32), .N(32), .P(32), .W(8), .MAXV(41), .GEMMS(1), .FIRST_KIND(1)) u_w32 (.checks(c32), .failures(f32), .done(d32));

  initial begin
    #30000000;   // 3,000,000 cycles
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c4 + c32, f2 + f4 + f32 + 1);
    $finish;
  end

  initial begin
    wait (d2 && d4 && d32);
    checks = c2 + c4 + c32;
    failures = f2 + f4 + f32;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
