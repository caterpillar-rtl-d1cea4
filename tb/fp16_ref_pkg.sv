// fp16_ref_pkg: reference binary16 arithmetic for the testbenches, computed
// with double-precision reals and an independent rounding routine. It follows
// the same conventions as the hardware: zero/subnormal inputs read as zero,
// results below 2^-14 flush to +0, overflow to signed infinity, Inf/NaN inputs
// give 0x7E00, round to nearest even. The double result is exact as long as
// the product and addend lie within 2^30 of each other, which the testbenches
// respect when they draw random operands.
package fp16_ref_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    int e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** real'(e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(real v);
    logic [63:0] bits;
    logic        s;
    int          ex;
    logic [9:0]  m10;
    logic        g, st, rup;
    logic [10:0] m11;
    if (v == 0.0) return 16'h0000;
    bits = $realtobits(v);
    s  = bits[63];
    ex = int'(bits[62:52]) - 1023;
    if (ex < -14) return 16'h0000;
    m10 = bits[51:42];
    g   = bits[41];
    st  = |bits[40:0];
    rup = g & (st | m10[0]);
    m11 = {1'b0, m10} + 11'(rup);
    if (m11[10]) begin
      ex  = ex + 1;
      m10 = 10'd0;
    end else begin
      m10 = m11[9:0];
    end
    if (ex + 15 >= 31) return {s, 5'h1f, 10'd0};
    return {s, 5'(ex + 15), m10};
  endfunction

  function automatic logic [15:0] fma_ref(logic [15:0] a, logic [15:0] b, logic [15:0] c);
    if (a[14:10] == 5'h1f || b[14:10] == 5'h1f || c[14:10] == 5'h1f) return 16'h7E00;
    return real_to_fp16(fp16_to_real(a) * fp16_to_real(b) + fp16_to_real(c));
  endfunction

  // Random binary16 with unbiased exponent in [emin, emax] and random sign.
  function automatic logic [15:0] rand_fp16(int emin, int emax);
    int e;
    e = emin + int'($urandom % 32'(emax - emin + 1));
    return {1'($urandom), 5'(e + 15), 10'($urandom)};
  endfunction

  function automatic logic [15:0] relu_ref(logic [15:0] h);
    return (h[15] || h[14:10] == 5'd0) ? 16'h0000 : h;
  endfunction

endpackage
