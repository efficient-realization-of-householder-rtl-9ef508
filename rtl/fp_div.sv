// fp_div: iterative IEEE-754 binary64 divider (the FDIV unit of the
// arithmetic unit).
//
// A restoring radix-2 divider: the 53-bit significands are divided one
// quotient bit per clock for 55 bits (53 result bits, one guard bit and one
// spare for normalisation); the remainder supplies the sticky bit and the
// result is rounded to nearest, ties to even.
//
// Interface: pulse start with a, b while busy is low. done pulses for one
// cycle with y valid QBITS+1 cycles later; busy is high in between. The
// radix, the latency and the handshake are choices of this design: the
// paper names the divider but gives no structure or latency. Subnormals are
// flushed to zero; x/0 gives infinity, 0/0 and inf/inf give quiet NaN.
module fp_div
  import pe_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp64_t a,
  input  fp64_t b,
  output logic  busy,
  output logic  done,
  output fp64_t y
);

  localparam int QBITS = 55;

  typedef enum logic [1:0] {S_IDLE, S_ITER, S_ROUND} state_e;
  state_e state;

  logic [QBITS-1:0]   q;
  logic [53:0]        rem;
  logic [52:0]        divisor;
  logic [5:0]         cnt;
  logic               sign;
  logic signed [13:0] exp_r;
  logic               special;
  fp64_t              special_val;

  // special-case decode at start
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  always_comb begin
    a_nan  = (a[62:52] == 11'h7FF) && (a[51:0] != '0);
    b_nan  = (b[62:52] == 11'h7FF) && (b[51:0] != '0);
    a_inf  = (a[62:52] == 11'h7FF) && (a[51:0] == '0);
    b_inf  = (b[62:52] == 11'h7FF) && (b[51:0] == '0);
    a_zero = (a[62:52] == 11'd0);
    b_zero = (b[62:52] == 11'd0);
  end

  // one restoring step
  logic        ge;
  logic [53:0] rem_sub;
  always_comb begin
    ge      = rem >= {1'b0, divisor};
    rem_sub = ge ? (rem - {1'b0, divisor}) : rem;
  end

  // final normalisation and rounding
  logic [52:0]        mant;
  logic [53:0]        mant_r;
  logic               g, st;
  logic signed [13:0] e_fin;
  fp64_t              y_fin;
  always_comb begin
    e_fin = exp_r;
    if (q[QBITS-1]) begin
      mant = q[54:2]; g = q[1]; st = q[0] | (rem != '0);
    end else begin
      mant = q[53:1]; g = q[0]; st = (rem != '0);
      e_fin = exp_r - 14'sd1;
    end
    mant_r = {1'b0, mant} + {53'd0, g & (st | mant[0])};
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      e_fin  = e_fin + 14'sd1;
    end
    if (special)                  y_fin = special_val;
    else if (e_fin <= 0)          y_fin = {sign, 63'd0};
    else if (e_fin >= 14'sd2047)  y_fin = {sign, 11'h7FF, 52'd0};
    else                          y_fin = {sign, e_fin[10:0], mant_r[51:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      done        <= 1'b0;
      y           <= '0;
      q           <= '0;
      rem         <= '0;
      divisor     <= '0;
      cnt         <= '0;
      sign        <= 1'b0;
      exp_r       <= '0;
      special     <= 1'b0;
      special_val <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          sign    <= a[63] ^ b[63];
          exp_r   <= $signed({3'b000, a[62:52]}) - $signed({3'b000, b[62:52]}) + 14'sd1023;
          rem     <= {1'b0, 1'b1, a[51:0]};
          divisor <= {1'b1, b[51:0]};
          q       <= '0;
          cnt     <= 6'(QBITS);
          special <= 1'b1;
          if (a_nan || b_nan || (a_inf && b_inf) || (a_zero && b_zero))
            special_val <= FP_QNAN;
          else if (a_inf || b_zero)
            special_val <= {a[63] ^ b[63], 11'h7FF, 52'd0};
          else if (a_zero || b_inf)
            special_val <= {a[63] ^ b[63], 63'd0};
          else
            special <= 1'b0;
          state <= S_ITER;
        end
        S_ITER: begin
          q   <= {q[QBITS-2:0], ge};
          rem <= {rem_sub[52:0], 1'b0};
          cnt <= cnt - 6'd1;
          if (cnt == 6'd1) state <= S_ROUND;
        end
        S_ROUND: begin
          // the last shift doubled the remainder; only its non-zero-ness matters
          y     <= y_fin;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
