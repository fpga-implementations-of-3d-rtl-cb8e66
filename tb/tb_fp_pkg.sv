// tb_fp_pkg -- reference conversions between fp32 bit patterns and real
// numbers for the testbenches, written independently of the design's
// arithmetic. r2f rounds a double to single precision (round to nearest
// even, results below the normal range flushed to zero, overflow to
// infinity); f2r is exact.
package tb_fp_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;
    logic [24:0] q;
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    q = {1'b0, m[52:29]};
    g  = m[28];
    st = |m[27:0];
    if (g && (st || q[0])) q = q + 1;
    if (q[24]) begin
      q = q >> 1;
      e = e + 1;
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hFF, 23'd0};
    return {s, 8'(e), q[22:0]};
  endfunction

  function automatic logic [31:0] i2f(int i);
    return r2f(real'(i));
  endfunction

endpackage
