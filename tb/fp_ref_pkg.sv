// fp_ref_pkg: reference binary32 arithmetic for the testbenches, computed
// through the simulator's double-precision reals. A binary32 product, and a
// binary32 sum whose exponents differ by less than 29, are exact in double;
// to_f32() then rounds to nearest even once. Same conventions as the CU:
// subnormals read and flush as zero, one quiet NaN.
package fp_ref_pkg;

  function automatic real to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return f[31] ? -0.0 : 0.0;
    d = {f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] to_f32(input real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [24:0] m;
    logic [28:0] rem;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e   = int'(d[62:52]) - 1023 + 127;
    m   = {2'b01, d[51:29]};
    rem = d[28:0];
    if (rem > 29'h1000_0000 || (rem == 29'h1000_0000 && m[0])) m = m + 1'b1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hFF, 23'd0};
    return {s, e[7:0], m[22:0]};
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return to_f32(to_real(a) + to_real(b));
  endfunction
  function automatic logic [31:0] fsub(input logic [31:0] a, input logic [31:0] b);
    return to_f32(to_real(a) - to_real(b));
  endfunction
  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return to_f32(to_real(a) * to_real(b));
  endfunction

  // a random normal binary32 with exponent field in [lo, hi]
  function automatic logic [31:0] rnd(input int lo, input int hi);
    return {1'($urandom), 8'($urandom_range(hi, lo)), 23'($urandom)};
  endfunction

endpackage
