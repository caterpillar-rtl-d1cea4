// tb_fp16_fma: self-checking test of the half-precision fused multiply-add.
// Directed cases (exact products, cancellation to zero, rounding ties,
// overflow, underflow flush, NaN/Inf inputs, zero operands) and 20000 random
// operand triples are compared with the real-valued reference in
// fp16_ref_pkg. Random exponents are kept within [-7, 7] so that the
// reference is exact before its single rounding.
module tb_fp16_fma;
  import fp16_ref_pkg::*;

  logic [15:0] a, b, c, y;
  int checks = 0, failures = 0;

  fp16_fma dut (.a(a), .b(b), .c(c), .y(y));

  task automatic check(input logic [15:0] ta, tb_, tc, input logic [15:0] expv);
    a = ta; b = tb_; c = tc;
    #1;
    checks++;
    if (y !== expv) begin
      failures++;
      if (failures < 10)
        $display("FAIL fma(%h,%h,%h) = %h expected %h", ta, tb_, tc, y, expv);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed, with hand-computed results
    check(16'h3C00, 16'h3C00, 16'h0000, 16'h3C00);  // 1*1+0 = 1
    check(16'h4000, 16'h4200, 16'h3C00, 16'h4700);  // 2*3+1 = 7
    check(16'h4000, 16'h4200, 16'hC600, 16'h0000);  // 2*3-6 = +0
    check(16'h3C01, 16'h3C01, 16'h0000, 16'h3C02);  // (1+2^-10)^2 -> 1+2^-9 (tie bit dropped below)
    check(16'h3C00, 16'h3C00, 16'h1000, 16'h3C00);  // 1 + 2^-11: tie, round to even -> 1
    check(16'h3C01, 16'h3C00, 16'h1000, 16'h3C02);  // 1+2^-10 + 2^-11: tie, round up to even
    check(16'h7800, 16'h7800, 16'h0000, 16'h7C00);  // 2^15*2^15 -> +inf
    check(16'hF800, 16'h7800, 16'h0000, 16'hFC00);  // -> -inf
    check(16'h0400, 16'h0400, 16'h0000, 16'h0000);  // 2^-28 -> flushed
    check(16'h7C00, 16'h0000, 16'h3C00, 16'h7E00);  // inf input -> NaN
    check(16'h0000, 16'h4000, 16'hBC00, 16'hBC00);  // 0*2-1 = -1
    check(16'h0001, 16'h4000, 16'h3C00, 16'h3C00);  // subnormal reads as 0
    check(16'h7BFF, 16'h3C00, 16'h7BFF, 16'h7C00);  // max+max overflows
    check(16'h4000, 16'h3800, 16'hBC00, 16'h0000);  // 2*0.5-1 = 0
    check(16'h3555, 16'h4200, 16'h0000, fma_ref(16'h3555, 16'h4200, 16'h0000));
    // random
    for (int i = 0; i < 20000; i++) begin
      logic [15:0] ra, rb, rc;
      ra = rand_fp16(-7, 7);
      rb = rand_fp16(-7, 7);
      rc = rand_fp16(-7, 7);
      if (i % 7 == 0) rc = {~ra[15] ^ rb[15], rc[14:0]};
      check(ra, rb, rc, fma_ref(ra, rb, rc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
