// fp_ref_pkg -- reference single-precision arithmetic for the testbenches.
//
// Works through the simulator's double-precision reals, independently of the
// RTL operators: an fp32 word is widened exactly to a double, the operation is
// done in double precision and the result is rounded back to 24 mantissa bits
// (nearest, ties to even). For one addition or one multiplication of two
// fp32 values this double rounding gives the correctly rounded fp32 result
// (53 >= 2*24 + 2). Conventions match the RTL: subnormals read as zero,
// tiny results flushed to signed zero, exact cancellation gives +0.
package fp_ref_pkg;

  function automatic real fp2real(logic [31:0] x);
    logic [63:0] d;
    if (x[30:23] == 8'd0) return 0.0;
    d = {x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] real2fp(real r);
    logic [63:0] d;
    logic [24:0] m;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    if (d[28] && ((|d[27:0]) || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b);
    real r;
    r = fp2real(a) + fp2real(b);
    if (r == 0.0) return 32'd0;
    return real2fp(r);
  endfunction

  function automatic logic [31:0] ref_sub(logic [31:0] a, logic [31:0] b);
    return ref_add(a, {~b[31], b[30:0]});
  endfunction

  function automatic logic [31:0] ref_mul(logic [31:0] a, logic [31:0] b);
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {a[31] ^ b[31], 31'd0};
    return real2fp(fp2real(a) * fp2real(b));
  endfunction

  function automatic logic [31:0] ref_max0(logic [31:0] x);
    return x[31] ? 32'd0 : x;
  endfunction

  // Pairwise tree sum in the same order as the RTL adder_tree: element k of
  // the next level is element 2k plus element 2k+1; an odd last element is
  // carried up unchanged.
  function automatic logic [31:0] ref_tree(logic [31:0] v[$]);
    logic [31:0] nxt[$];
    while (v.size() > 1) begin
      nxt = {};
      for (int k = 0; k < v.size(); k += 2)
        nxt.push_back((k + 1 < v.size()) ? ref_add(v[k], v[k+1]) : v[k]);
      v = nxt;
    end
    return v[0];
  endfunction

  // Random normal fp32 value with exponent in [127-span, 127+span).
  function automatic logic [31:0] rand_fp(int span);
    logic [7:0] e;
    e = 8'(127 - span + int'($urandom_range(2 * span - 1, 0)));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

endpackage
