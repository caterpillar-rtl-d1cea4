// fp16_fma: half-precision fused multiply-add, y = a*b + c.
//
// This is the floating-point multiply-accumulate unit of each PE. The paper
// uses a half-precision FPU but takes its design from elsewhere; this is the
// simplest exact realisation of that function. Every binary16 product and
// addend is an integer multiple of 2^-48 below 2^82, so both are placed in
// an 82-bit fixed-point window, added or subtracted exactly, normalised by a
// leading-one search and rounded once to nearest, ties to even.
//
// Choices of this design (the paper is silent on them): inputs with a zero
// exponent (zero and subnormals) read as zero; results below 2^-14 flush to
// +0; an exact zero result is +0; overflow gives a signed infinity; any input
// with exponent 31 (Inf or NaN) gives the quiet NaN 0x7E00.
//
// Interface: a, b, c in, y out, all binary16. Purely combinational.
module fp16_fma
  import cat_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  input  fp16_t c,
  output fp16_t y
);

  localparam int unsigned FW = 82;  // fixed-point window, LSB weight 2^-48

  logic        sp, sc, rs;
  logic [4:0]  ea, eb, ec;
  logic [10:0] ma, mb, mc;
  logic [21:0] pm;
  logic [FW-1:0] pfix, cfix, mag, norm;
  logic [6:0]  lead;
  logic        nonzero;
  logic [10:0] m11;
  logic        guard, sticky, rup;
  logic [11:0] m12;
  logic signed [8:0] bexp;
  logic        in_special;

  always_comb begin
    ea = a[14:10];
    eb = b[14:10];
    ec = c[14:10];
    in_special = (ea == 5'h1f) || (eb == 5'h1f) || (ec == 5'h1f);
    ma = (ea == 5'd0) ? 11'd0 : {1'b1, a[9:0]};
    mb = (eb == 5'd0) ? 11'd0 : {1'b1, b[9:0]};
    mc = (ec == 5'd0) ? 11'd0 : {1'b1, c[9:0]};
    sp = a[15] ^ b[15];
    sc = c[15];
    pm = ma * mb;
    // product weight 2^(ea+eb-50), addend weight 2^(ec-25); window LSB 2^-48
    pfix = (pm == 22'd0) ? '0 : (FW'(pm) << (7'(ea) + 7'(eb) - 7'd2));
    cfix = (mc == 11'd0) ? '0 : (FW'(mc) << (7'(ec) + 7'd23));

    if (sp == sc) begin
      mag = pfix + cfix;
      rs  = sp;
    end else if (pfix >= cfix) begin
      mag = pfix - cfix;
      rs  = sp;
    end else begin
      mag = cfix - pfix;
      rs  = sc;
    end

    lead = '0;
    nonzero = |mag;
    for (int i = 0; i < FW; i++) begin
      if (mag[i]) lead = 7'(i);
    end

    norm   = mag << (7'(FW - 1) - lead);
    m11    = norm[FW-1 -: 11];
    guard  = norm[FW-12];
    sticky = |norm[FW-13:0];
    rup    = guard & (sticky | m11[0]);
    m12    = {1'b0, m11} + 12'(rup);
    // biased exponent: value = 2^(lead-48), bias 15
    bexp   = $signed({2'b00, lead}) - 9'sd33;

    if (in_special) begin
      y = FP16_QNAN;
    end else if (!nonzero || bexp <= 0) begin
      y = FP16_ZERO;
    end else begin
      if (m12[11]) begin
        bexp = bexp + 9'sd1;
      end
      if (bexp >= 9'sd31) begin
        y = {rs, 5'h1f, 10'd0};
      end else if (m12[11]) begin
        y = {rs, bexp[4:0], m12[10:1]};
      end else begin
        y = {rs, bexp[4:0], m12[9:0]};
      end
    end
  end

endmodule
