// tb_fp_pkg: reference floating-point helpers for the testbenches.
//
// They work through the simulator's double-precision 'real' type, so they
// share no code with the RTL: bfloat16/fp32 bit patterns are widened to
// doubles, a product of two bfloat16 values is exact in double, and a sum of
// two fp32 values rounded once to double and then to fp32 (round to nearest
// even, done here on the double's bit pattern) equals the correctly rounded
// fp32 sum. Like the RTL, values below the normal fp32 range become zero.
package tb_fp_pkg;

  function automatic real fp32_to_real(input logic [31:0] b);
    logic [63:0] d;
    if (b[30:23] == 8'd0) return 0.0;
    d = {b[31], 11'(int'(b[30:23]) - 127 + 1023), b[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic real bf16_to_real(input logic [15:0] b);
    return fp32_to_real({b, 16'd0});
  endfunction

  function automatic logic [31:0] real_to_fp32(input real r);
    logic [63:0] d;
    logic [24:0] keep;
    logic        g, st, up;
    int          e;
    if (r == 0.0) return 32'd0;
    d    = $realtobits(r);
    e    = int'(d[62:52]) - 1023 + 127;
    keep = {2'b01, d[51:29]};
    g    = d[28];
    st   = |d[27:0];
    up   = g && (st || keep[0]);
    keep = keep + 25'(up);
    if (keep[24]) begin
      keep = keep >> 1;
      e    = e + 1;
    end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), keep[22:0]};
  endfunction

  // Random bfloat16 with exponent in [lo, hi] (normal, non-zero).
  function automatic logic [15:0] rand_bf16(input int lo, input int hi);
    logic [7:0] e;
    e = 8'(lo + int'($urandom_range(hi - lo)));
    return {1'($urandom), e, 7'($urandom)};
  endfunction

  // Equal, treating +0 and -0 as the same value.
  function automatic bit fp32_eq(input logic [31:0] a, input logic [31:0] b);
    if (a[30:0] == 31'd0 && b[30:0] == 31'd0) return 1'b1;
    return a == b;
  endfunction

endpackage
