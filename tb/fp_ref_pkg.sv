// fp_ref_pkg: reference single-precision arithmetic for the testbenches.
//
// Works through the simulator's double-precision `real`: a product of two
// singles is exact in double, and rounding a double sum of two singles to
// single gives the correctly rounded single sum, so f32_mul/f32_add below are
// exact references for round-to-nearest-even. Like the design, they read
// subnormals as zero and flush subnormal results to zero.
package fp_ref_pkg;

  function automatic real f32_to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) return f[31] ? -0.0 : 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] real_to_f32(input real x);
    logic [63:0] d;
    logic        s, g, st, r;
    int          e;
    logic [24:0] m;
    d  = $realtobits(x);
    s  = d[63];
    if (d[62:52] == 11'h000) return {s, 31'd0};
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? 32'h7FC0_0000 : {s, 8'hFF, 23'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    r  = g & (st | m[0]);
    m  = m + 25'(r);
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0) return {s, 31'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] f32_mul(input logic [31:0] a, input logic [31:0] b);
    return real_to_f32(f32_to_real(a) * f32_to_real(b));
  endfunction

  function automatic logic [31:0] f32_add(input logic [31:0] a, input logic [31:0] b);
    return real_to_f32(f32_to_real(a) + f32_to_real(b));
  endfunction

  // Random normal single with exponent in [127-span, 127+span].
  function automatic logic [31:0] rand_f32(input int span);
    int e;
    e = 127 - span + int'($urandom_range(2 * span, 0));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
