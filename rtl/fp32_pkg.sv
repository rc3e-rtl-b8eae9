// fp32_pkg: IEEE-754 single-precision multiply and add as combinational
// functions, used by the matrix multiplication user core.
//
// The example application multiplies 32-bit float matrices. The paper does
// not say how its HLS tool built the float units, so these functions are
// this design's own: round to nearest even, subnormal inputs and results
// flushed to zero, infinities kept, any NaN returned as the quiet NaN
// 32'h7FC00000. Multiply and add are separate operations, each rounded, as
// in C code that writes a*b+c without fused multiply-add.
package fp32_pkg;

  localparam logic [31:0] FP_QNAN = 32'h7FC0_0000;

  function automatic logic is_nan(input logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] != '0);
  endfunction

  function automatic logic is_inf(input logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] == '0);
  endfunction

  // Zero or subnormal (flushed to zero).
  function automatic logic is_zero(input logic [31:0] x);
    return x[30:23] == 8'h00;
  endfunction

  // Round a normalised 24-bit significand with guard and sticky bits and
  // pack it. exp is the biased exponent before rounding.
  function automatic logic [31:0] fp_pack(input logic sign, input logic signed [10:0] exp,
                                          input logic [23:0] mant, input logic guard,
                                          input logic sticky);
    logic [24:0] m;
    logic signed [10:0] e;
    m = {1'b0, mant};
    e = exp;
    if (guard && (sticky || mant[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 11'sd1;
    end
    if (e >= 11'sd255) return {sign, 8'hFF, 23'd0};
    if (e <= 11'sd0)   return {sign, 31'd0};
    return {sign, e[7:0], m[22:0]};
  endfunction

  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic sign;
    logic [47:0] p;
    logic signed [10:0] e;
    sign = a[31] ^ b[31];
    if (is_nan(a) || is_nan(b)) return FP_QNAN;
    if (is_inf(a) || is_inf(b)) begin
      if (is_zero(a) || is_zero(b)) return FP_QNAN;
      return {sign, 8'hFF, 23'd0};
    end
    if (is_zero(a) || is_zero(b)) return {sign, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = 11'(signed'({3'b000, a[30:23]})) + 11'(signed'({3'b000, b[30:23]})) - 11'sd127;
    if (p[47]) return fp_pack(sign, e + 11'sd1, p[47:24], p[23], |p[22:0]);
    return fp_pack(sign, e, p[46:23], p[22], |p[21:0]);
  endfunction

  function automatic logic [31:0] fp32_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;          // |x| >= |y|
    logic [7:0]  d;
    logic [26:0] mx, my;        // 24-bit significand followed by guard, round, sticky
    logic [27:0] s;
    logic signed [10:0] e;
    logic sticky;
    int unsigned lz;
    if (is_nan(a) || is_nan(b)) return FP_QNAN;
    if (is_inf(a) && is_inf(b)) return (a[31] == b[31]) ? a : FP_QNAN;
    if (is_inf(a)) return a;
    if (is_inf(b)) return b;
    if (is_zero(a) && is_zero(b)) return {a[31] & b[31], 31'd0};
    if (is_zero(a)) return b;
    if (is_zero(b)) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d >= 8'd27) begin
      my = 27'd1;  // only the sticky bit survives
    end else begin
      sticky = 1'b0;
      for (int i = 0; i < 27; i++)
        if (i < int'(d) && my[i]) sticky = 1'b1;
      my = my >> d;
      my[0] = my[0] | sticky;
    end
    e = 11'(signed'({3'b000, x[30:23]}));
    if (x[31] == y[31]) begin
      s = {1'b0, mx} + {1'b0, my};
      if (s[27]) begin
        s = {1'b0, s[27:2], s[1] | s[0]};
        e = e + 11'sd1;
      end
    end else begin
      s = {1'b0, mx} - {1'b0, my};
      if (s == '0) return 32'd0;
      lz = 0;
      for (int i = 0; i < 27; i++)
        if (s[i]) lz = 26 - i;   // the highest set bit decides
      s = s << lz;
      e = e - 11'(lz);
    end
    return fp_pack(x[31], e, s[26:3], s[2], |s[1:0]);
  endfunction

endpackage
