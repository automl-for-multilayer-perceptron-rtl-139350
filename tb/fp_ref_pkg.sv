// fp_ref_pkg: reference single-precision arithmetic for the testbenches,
// written independently of the RTL. Each operation is done exactly enough
// in double precision (53 bits >= 2*24+2, so rounding twice is harmless)
// and the double is then rounded to single, nearest-even, with subnormal
// inputs read as zero and subnormal results flushed to signed zero.
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return $bitstoreal({f[31], 63'd0});
    if (f[30:23] == 8'hFF) begin
      d = {f[31], 11'h7FF, f[22:0], 29'd0};
      return $bitstoreal(d);
    end
    d = {f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [23:0] m;
    logic        g, st;
    logic [24:0] mr;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? 32'h7FC00000 : {s, 8'hFF, 23'd0};
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    mr = {1'b0, m} + {24'd0, g & (st | m[0])};
    if (mr[24]) begin
      e  = e + 1;
      mr = mr >> 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0) return {s, 31'd0};
    return {s, 8'(e), mr[22:0]};
  endfunction

  function automatic logic [31:0] ref_mul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // small integer to single (exact for |v| < 2^24)
  function automatic logic [31:0] i2f(int v);
    return r2f(real'(v));
  endfunction

endpackage
