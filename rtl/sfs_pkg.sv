// sfs_pkg -- types and arithmetic shared by the 3D-SIMD sparse-filter processor.
//
// Feature values and partial sums are IEEE-754 single-precision floats
// (fp32_t). Filter weights are "virtual weights": a sign and a signed
// power-of-two shift, so a multiplication is an exponent addition
// (fp_shift_mul). Partial sums are accumulated with fp_add, a plain
// single-precision adder with round-to-nearest-even.
//
// Follows the source design: 32-bit floats, multiplications replaced by
// shifts, additions in floating point. Own choices: the 8-bit weight code
// {sign, 7-bit two's complement shift}, flushing of denormals to zero, and the
// simplified Inf/NaN rules (a NaN result is always the quiet NaN 7FC00000).
package sfs_pkg;

  typedef logic [31:0] fp32_t;

  // Virtual weight code: bit 7 is the sign, bits 6:0 the shift in two's complement.
  localparam int unsigned WCODE_W = 8;
  typedef logic [WCODE_W-1:0] wcode_t;

  localparam fp32_t FP_QNAN = 32'h7FC0_0000;

  // v * (-1)^w[7] * 2^w[6:0]
  function automatic fp32_t fp_shift_mul(fp32_t v, wcode_t w);
    logic       s;
    logic [7:0] e;
    int         ne;
    s = v[31] ^ w[7];
    e = v[30:23];
    if (e == 8'hFF) return {s, v[30:0]};          // Inf / NaN keep their payload
    if (e == 8'h00) return {s, 31'd0};            // zero (denormals flushed)
    ne = int'(e) + int'($signed(w[6:0]));
    if (ne <= 0)   return {s, 31'd0};             // underflow -> zero
    if (ne >= 255) return {s, 8'hFF, 23'd0};      // overflow -> infinity
    return {s, 8'(ne), v[22:0]};
  endfunction

  // a + b, round to nearest even, denormal inputs and results flushed to zero.
  function automatic fp32_t fp_add(fp32_t a, fp32_t b);
    logic        sa, sb, sr;
    logic [7:0]  ea, eb;
    logic [23:0] ma, mb;
    logic [26:0] xa, xb, sh;          // 24-bit significand + guard, round, sticky
    logic [27:0] sum;
    logic [24:0] rnd;
    int          d, er, lz;
    logic        sticky;
    sa = a[31]; sb = b[31]; ea = a[30:23]; eb = b[30:23];
    // special operands
    if (ea == 8'hFF || eb == 8'hFF) begin
      if (ea == 8'hFF && a[22:0] != 0) return FP_QNAN;
      if (eb == 8'hFF && b[22:0] != 0) return FP_QNAN;
      if (ea == 8'hFF && eb == 8'hFF) return (sa == sb) ? a : FP_QNAN;
      return (ea == 8'hFF) ? a : b;
    end
    if (ea == 8'h00 && eb == 8'h00) return {sa & sb, 31'd0};
    if (ea == 8'h00) return b;
    if (eb == 8'h00) return a;
    // order by magnitude: |a| >= |b|
    if (b[30:0] > a[30:0]) begin
      {sa, ea, ma} = {b[31], b[30:23], 1'b1, b[22:0]};
      {sb, eb, mb} = {a[31], a[30:23], 1'b1, a[22:0]};
    end else begin
      ma = {1'b1, a[22:0]};
      mb = {1'b1, b[22:0]};
    end
    sr = sa;
    d  = int'(ea) - int'(eb);
    xa = {ma, 3'b000};
    xb = {mb, 3'b000};
    if (d > 26) begin
      sh = 27'd1;                                 // only the sticky bit survives
    end else begin
      sticky = 1'b0;
      for (int i = 0; i < 27; i++) if (i < d && xb[i]) sticky = 1'b1;
      sh = (xb >> d) | {26'd0, sticky};
    end
    er = int'(ea);
    if (sa == sb) begin
      sum = {1'b0, xa} + {1'b0, sh};
      if (sum[27]) begin
        sum = {1'b0, sum[27:1]} | {27'd0, sum[0]};
        er  = er + 1;
      end
    end else begin
      sum = {1'b0, xa} - {1'b0, sh};
      if (sum == 0) return 32'h0000_0000;        // exact cancellation gives +0
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      er  = er - lz;
    end
    // sum[26:3] is the significand, sum[2] guard, sum[1] round, sum[0] sticky
    rnd = {1'b0, sum[26:3]};
    if (sum[2] && (sum[1] || sum[0] || sum[3])) rnd = rnd + 25'd1;
    if (rnd[24]) begin
      rnd = rnd >> 1;
      er  = er + 1;
    end
    if (er <= 0)   return {sr, 31'd0};
    if (er >= 255) return {sr, 8'hFF, 23'd0};
    return {sr, 8'(er), rnd[22:0]};
  endfunction

endpackage
