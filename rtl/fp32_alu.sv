// fp32_alu: one single-precision floating-point lane of the CU vector unit:
// add, subtract and multiply on IEEE-754 binary32 values.
//
// The architecture's CUs are floating-point SIMD units; the number format is
// not specified, so binary32 is this design's choice, with these
// simplifications common in DSPs: round to nearest even only, subnormal inputs
// read as zero and results that would be subnormal are flushed to zero (sign
// kept), every NaN result is the quiet NaN 0x7FC00000. Infinities follow IEEE
// (inf - inf and 0 * inf give NaN).
//
// Combinational; the CU gives it the E1..E7 execute stages of its pipeline.
//   op = 2'b00 add, 2'b01 subtract (a - b), 2'b10 multiply.
module fp32_alu (
  input  logic [1:0]  op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  localparam logic [31:0] QNAN = 32'h7FC0_0000;

  logic       sa, sb;
  logic [7:0] ea, eb;
  logic [23:0] ma, mb;
  logic       a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    sa = a[31];
    sb = b[31] ^ (op == 2'b01);
    ea = a[30:23];
    eb = b[30:23];
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    ma = a_zero ? 24'd0 : {1'b1, a[22:0]};
    mb = b_zero ? 24'd0 : {1'b1, b[22:0]};
    a_nan = (ea == 8'hFF) && (a[22:0] != '0);
    b_nan = (eb == 8'hFF) && (b[22:0] != '0);
    a_inf = (ea == 8'hFF) && (a[22:0] == '0);
    b_inf = (eb == 8'hFF) && (b[22:0] == '0);
  end

  // pack with round-to-nearest-even; m27 holds 1.xxx (bit 26) plus guard,
  // round and sticky bits; e is the exponent of bit 26
  function automatic logic [31:0] round_pack(input logic s, input logic signed [10:0] e,
                                             input logic [26:0] m27);
    logic [24:0] m;
    logic        up;
    logic signed [10:0] ee;
    up = m27[2] && (m27[1] || m27[0] || m27[3]);
    m  = {1'b0, m27[26:3]} + 25'(up);
    ee = e;
    if (m[24]) begin m = m >> 1; ee = ee + 11'sd1; end
    if (ee <= 0)        return {s, 31'd0};               // flush to zero
    else if (ee >= 255) return {s, 8'hFF, 23'd0};         // overflow to inf
    else                return {s, ee[7:0], m[22:0]};
  endfunction

  // ---------------------------------------------------------------- add/sub
  function automatic logic [31:0] fadd();
    logic        sx, sy;
    logic [7:0]  ex, ey;
    logic [23:0] mx, my;
    logic [7:0]  d;
    logic [26:0] xx, yy;
    logic [27:0] sum;
    logic [26:0] n;
    logic signed [10:0] e;
    int          lz;
    if (a_nan || b_nan)          return QNAN;
    if (a_inf && b_inf)          return (sa != sb) ? QNAN : {sa, 8'hFF, 23'd0};
    if (a_inf)                   return {sa, 8'hFF, 23'd0};
    if (b_inf)                   return {sb, 8'hFF, 23'd0};
    if (a_zero && b_zero)        return {sa & sb, 31'd0};
    // order so that x has the larger magnitude
    if ({ea, ma} >= {eb, mb}) begin sx = sa; ex = ea; mx = ma; sy = sb; ey = eb; my = mb; end
    else                      begin sx = sb; ex = eb; mx = mb; sy = sa; ey = ea; my = ma; end
    if (my == '0) return {sx, ex, mx[22:0]};
    d  = ex - ey;
    xx = {mx, 3'b000};
    yy = {my, 3'b000};
    if (d >= 8'd27) yy = 27'd1;                         // only sticky left
    else if (d != 0) yy = (yy >> d) | 27'((({my, 3'b000} & ((27'd1 << d) - 1'b1)) != 0));
    e = 11'(ex);
    if (sx == sy) begin
      sum = {1'b0, xx} + {1'b0, yy};
      if (sum[27]) begin
        n = sum[27:1] | 27'(sum[0]);
        e = e + 11'sd1;
      end else n = sum[26:0];
    end else begin
      n = xx - yy;
      if (n == '0) return 32'd0;                        // exact cancellation: +0
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (n[i]) break;
        lz++;
      end
      n = n << lz;
      e = e - 11'(lz);
    end
    return round_pack(sx, e, n);
  endfunction

  // ---------------------------------------------------------------- multiply
  function automatic logic [31:0] fmul();
    logic        s;
    logic [47:0] p;
    logic signed [10:0] e;
    logic [26:0] n;
    s = sa ^ b[31];
    if (a_nan || b_nan)                         return QNAN;
    if ((a_inf && b_zero) || (b_inf && a_zero)) return QNAN;
    if (a_inf || b_inf)                         return {s, 8'hFF, 23'd0};
    if (a_zero || b_zero)                       return {s, 31'd0};
    p = ma * mb;
    e = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      n = {p[47:22], (p[21:0] != '0)};
      e = e + 11'sd1;
    end else begin
      n = {p[46:21], (p[20:0] != '0)};
    end
    return round_pack(s, e, n);
  endfunction

  always_comb begin
    unique case (op)
      2'b10:   y = fmul();
      default: y = fadd();
    endcase
  end
endmodule
