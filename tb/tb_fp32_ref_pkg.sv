// tb_fp32_ref_pkg: reference single-precision arithmetic for testbenches,
// built on the simulator's double-precision reals and independent of the
// RTL's fp32 functions. A product of two singles is exact in double, so
// rounding the double result to single (round to nearest even, subnormals
// flushed to zero like the RTL) gives the correctly rounded single result.
package tb_fp32_ref_pkg;

  function automatic real f32_to_real(input logic [31:0] b);
    logic [63:0] d;
    if (b[30:23] == 8'h00) return 0.0;
    d = {b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] real_to_f32(input real r);
    logic [63:0] d;
    int e;
    logic [24:0] m;
    logic guard, sticky;
    d = $realtobits(r);
    if (d[62:0] == '0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    guard  = d[28];
    sticky = |d[27:0];
    if (guard && (sticky || m[0])) m = m + 1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b);
    return real_to_f32(f32_to_real(a) * f32_to_real(b));
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    return real_to_f32(f32_to_real(a) + f32_to_real(b));
  endfunction

  // A random normal single in [-4, 4).
  function automatic logic [31:0] rand_f32();
    return {1'($urandom), 8'($urandom_range(120, 128)), 23'($urandom)};
  endfunction

endpackage
