// fp_mul: combinational IEEE-754 binary64 multiplier.
//
// One of the four '*' nodes of the DOT4 reconfigurable data-path. The two
// 53-bit significands are multiplied exactly (106-bit product), normalised by
// at most one position and rounded to nearest, ties to even.
//
// Design choices (the paper only says the units are double precision):
// subnormal inputs are read as zero, subnormal results flush to a signed
// zero, overflow gives infinity, NaN or inf*0 gives the canonical quiet NaN.
// Purely combinational, no clock.
module fp_mul
  import pe_pkg::*;
(
  input  fp64_t a,
  input  fp64_t b,
  output fp64_t y
);

  logic               s;
  logic [10:0]        ea, eb;
  logic [105:0]       prod;
  logic [52:0]        mant;
  logic [53:0]        mant_r;
  logic               g, st, rnd_up;
  logic signed [13:0] e_res;
  logic               a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    s  = a[63] ^ b[63];
    ea = a[62:52];
    eb = b[62:52];
    a_nan  = (ea == 11'h7FF) && (a[51:0] != '0);
    b_nan  = (eb == 11'h7FF) && (b[51:0] != '0);
    a_inf  = (ea == 11'h7FF) && (a[51:0] == '0);
    b_inf  = (eb == 11'h7FF) && (b[51:0] == '0);
    a_zero = (ea == 11'd0);
    b_zero = (eb == 11'd0);

    prod  = {1'b1, a[51:0]} * {1'b1, b[51:0]};
    e_res = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 14'sd1023;
    if (prod[105]) begin
      mant  = prod[105:53];
      g     = prod[52];
      st    = (prod[51:0] != '0);
      e_res = e_res + 14'sd1;
    end else begin
      mant  = prod[104:52];
      g     = prod[51];
      st    = (prod[50:0] != '0);
    end
    rnd_up = g & (st | mant[0]);
    mant_r = {1'b0, mant} + {53'd0, rnd_up};
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 14'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = FP_QNAN;
    else if (a_inf || b_inf)
      y = {s, 11'h7FF, 52'd0};
    else if (a_zero || b_zero)
      y = {s, 63'd0};
    else if (e_res <= 0)
      y = {s, 63'd0};
    else if (e_res >= 14'sd2047)
      y = {s, 11'h7FF, 52'd0};
    else
      y = {s, e_res[10:0], mant_r[51:0]};
  end

endmodule
