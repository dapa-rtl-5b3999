// dapa_fp32_ref_pkg: testbench reference for single-precision arithmetic.
//
// Simulator support for shortreal is uneven, so the FP32 testbenches do not
// rely on it. Instead a float word is read exactly into a double (every float
// is a double), the operation is done in double, and the double is rounded
// to single precision here, to nearest with ties to even, by looking at the
// double's bits. A float*float product is exact in double, so it is rounded
// once. A float+float sum in double can be rounded twice, but with 53 >=
// 2*24 + 2 bits that double rounding never changes the result. Subnormals are
// read as zero and flushed to zero, and overflow gives infinity, matching the
// simplifications of the design under test.
package dapa_fp32_ref_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return $bitstoreal({f[31], 63'd0});
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] mr;
    int          fe;
    logic        g, s, inc;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    m  = {1'b1, d[51:0]};
    fe = int'(d[62:52]) - 1023 + 127;
    g  = m[28];
    s  = |m[27:0];
    inc = g & (s | m[29]);
    mr = {1'b0, m[52:29]} + {24'd0, inc};
    if (mr[24]) fe++;
    if (fe >= 255) return {d[63], 8'hFF, 23'd0};
    if (fe <= 0) return {d[63], 31'd0};
    return {d[63], 8'(fe), mr[22:0]};
  endfunction

  // y = round(round(a*x) + b)
  function automatic logic [31:0] mac_ref(logic [31:0] x, logic [31:0] a, logic [31:0] b);
    logic [31:0] p;
    p = r2f(f2r(x) * f2r(a));
    return r2f(f2r(p) + f2r(b));
  endfunction

  function automatic logic is_inf(logic [31:0] f);
    return f[30:23] == 8'hFF;
  endfunction

endpackage
