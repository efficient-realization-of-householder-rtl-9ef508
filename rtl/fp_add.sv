// fp_add: combinational IEEE-754 binary64 adder / subtractor.
//
// One of the three '+/-' nodes of the DOT4 reconfigurable data-path. The
// operands are aligned with guard, round and sticky bits, added or
// subtracted, normalised with a leading-zero count and rounded to nearest,
// ties to even. y = a + b when sub = 0 and y = a - b when sub = 1.
//
// Design choices (the paper only says the units are double precision):
// subnormal inputs are read as zero and subnormal results are flushed to a
// signed zero; overflow gives infinity; any NaN input, or inf - inf, gives
// the canonical quiet NaN. Purely combinational, no clock.
module fp_add
  import pe_pkg::*;
(
  input  fp64_t a,
  input  fp64_t b,
  input  logic  sub,
  output fp64_t y
);

  logic        sa, sb;
  logic [10:0] ea, eb;
  logic [51:0] fa, fb;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    sa = a[63];        ea = a[62:52];  fa = a[51:0];
    sb = b[63] ^ sub;  eb = b[62:52];  fb = b[51:0];
    a_nan  = (ea == 11'h7FF) && (fa != '0);
    b_nan  = (eb == 11'h7FF) && (fb != '0);
    a_inf  = (ea == 11'h7FF) && (fa == '0);
    b_inf  = (eb == 11'h7FF) && (fb == '0);
    a_zero = (ea == 11'd0);
    b_zero = (eb == 11'd0);
  end

  // Larger-magnitude operand goes to "x", the other one to "z".
  logic        swap;
  logic        sx, sz;
  logic [10:0] ex, ez;
  logic [52:0] mx, mz;
  logic [11:0] d;
  logic [56:0] ext_x, ext_z, sh_z, sum, norm;
  logic        sticky, eff_sub;
  logic [5:0]  lzc;
  logic signed [13:0] e_res;
  logic [52:0] mant;
  logic [53:0] mant_r;
  logic        g, rs, rnd_up;
  fp64_t       res;

  always_comb begin
    swap = {eb, fb} > {ea, fa};
    sx = swap ? sb : sa;   sz = swap ? sa : sb;
    ex = swap ? eb : ea;   ez = swap ? ea : eb;
    mx = swap ? ((eb == 0) ? 53'd0 : {1'b1, fb}) : ((ea == 0) ? 53'd0 : {1'b1, fa});
    mz = swap ? ((ea == 0) ? 53'd0 : {1'b1, fa}) : ((eb == 0) ? 53'd0 : {1'b1, fb});
    eff_sub = sx ^ sz;
    d = {1'b0, ex} - {1'b0, ez};
    ext_x = {1'b0, mx, 3'b000};
    ext_z = {1'b0, mz, 3'b000};
    if (d >= 12'd57) begin
      sh_z   = '0;
      sticky = (mz != '0);
    end else begin
      sh_z   = ext_z >> d;
      sticky = ((ext_z & ((57'd1 << d) - 57'd1)) != '0);
    end
    sh_z[0] = sh_z[0] | sticky;
    sum = eff_sub ? (ext_x - sh_z) : (ext_x + sh_z);

    // normalise
    lzc = '0;
    for (int i = 0; i <= 55; i++) begin
      if (sum[i]) lzc = 6'(55 - i);
    end
    if (sum[56]) begin
      norm  = {1'b0, sum[56:2], sum[1] | sum[0]};
      e_res = $signed({3'b000, ex}) + 14'sd1;
    end else begin
      norm  = sum << lzc;
      e_res = $signed({3'b000, ex}) - $signed({8'd0, lzc});
    end

    // round to nearest even
    mant   = norm[55:3];
    g      = norm[2];
    rs     = norm[1] | norm[0];
    rnd_up = g & (rs | mant[0]);
    mant_r = {1'b0, mant} + {53'd0, rnd_up};
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 14'sd1;
    end

    if (sum == '0)
      res = {1'b0, 63'd0};
    else if (e_res <= 0)
      res = {sx, 63'd0};
    else if (e_res >= 14'sd2047)
      res = {sx, 11'h7FF, 52'd0};
    else
      res = {sx, e_res[10:0], mant_r[51:0]};

    // special operands
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb)))
      y = FP_QNAN;
    else if (a_inf)
      y = {sa, 11'h7FF, 52'd0};
    else if (b_inf)
      y = {sb, 11'h7FF, 52'd0};
    else if (a_zero && b_zero)
      y = {sa & sb, 63'd0};
    else
      y = res;
  end

endmodule
