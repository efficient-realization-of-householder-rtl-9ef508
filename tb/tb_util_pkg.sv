// tb_util_pkg: helpers shared by the testbenches: random binary64 values
// with a bounded exponent and a reference check that treats subnormal
// reference results as zero (the datapath flushes subnormals).
package tb_util_pkg;

  // Random normal double with unbiased exponent in [-erange, erange].
  function automatic logic [63:0] rand_fp(int erange);
    logic [63:0] v;
    int e;
    e = int'($urandom_range(2 * erange)) - erange;
    v[63]    = 1'($urandom_range(1));
    v[62:52] = 11'(1023 + e);
    v[51:32] = 20'($urandom);
    v[31:0]  = $urandom;
    return v;
  endfunction

  // Reference value as the datapath represents it (subnormal -> signed zero).
  function automatic logic [63:0] ftz(logic [63:0] v);
    if (v[62:52] == 11'd0) return {v[63], 63'd0};
    return v;
  endfunction

  function automatic logic [63:0] r2b(real r);
    return $realtobits(r);
  endfunction

  function automatic real b2r(logic [63:0] b);
    return $bitstoreal(b);
  endfunction

endpackage
