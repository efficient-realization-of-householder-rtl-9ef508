// fp_sqrt: iterative IEEE-754 binary64 square root (the FSQRT unit of the
// arithmetic unit).
//
// Digit-by-digit restoring square root: the significand, shifted left one
// place when the unbiased exponent is odd, is extended to a 110-bit radicand
// and its integer root is formed one bit per clock for 55 bits (53 result
// bits, guard bit, one spare). The final remainder gives the sticky bit and
// the result is rounded to nearest, ties to even. The exponent is halved.
//
// Interface: pulse start with a while busy is low; done pulses for one cycle
// with y valid RBITS+1 cycles later. The algorithm, latency and handshake are
// choices of this design; the paper names the unit only. sqrt(-0) = -0, a
// negative operand gives quiet NaN, subnormals are read as zero.
module fp_sqrt
  import pe_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp64_t a,
  output logic  busy,
  output logic  done,
  output fp64_t y
);

  localparam int RBITS = 55;

  typedef enum logic [1:0] {S_IDLE, S_ITER, S_ROUND} state_e;
  state_e state;

  logic [109:0]       rad;      // radicand, consumed two bits per step from the top
  logic [RBITS-1:0]   root;
  logic [RBITS+1:0]   rem;
  logic [5:0]         cnt;
  logic signed [13:0] exp_r;
  logic               special;
  fp64_t              special_val;

  // start-time decode
  logic signed [13:0] e_unb;
  logic [53:0]        m_adj;
  logic signed [13:0] e_adj;
  always_comb begin
    e_unb = $signed({3'b000, a[62:52]}) - 14'sd1023;
    if (e_unb[0]) begin
      m_adj = {1'b1, a[51:0], 1'b0};
      e_adj = e_unb - 14'sd1;
    end else begin
      m_adj = {1'b0, 1'b1, a[51:0]};
      e_adj = e_unb;
    end
  end

  // one root step
  logic [RBITS+1:0] rem_sh, trial;
  logic             ge;
  always_comb begin
    rem_sh = {rem[RBITS-1:0], rad[109:108]};
    trial  = {root, 2'b01};
    ge     = rem_sh >= trial;
  end

  // rounding
  logic [52:0] mant;
  logic [53:0] mant_r;
  logic        g, st;
  logic signed [13:0] e_fin;
  always_comb begin
    mant   = root[54:2];
    g      = root[1];
    st     = root[0] | (rem != '0);
    mant_r = {1'b0, mant} + {53'd0, g & (st | mant[0])};
    e_fin  = exp_r;
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      e_fin  = e_fin + 14'sd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      done        <= 1'b0;
      y           <= '0;
      rad         <= '0;
      root        <= '0;
      rem         <= '0;
      cnt         <= '0;
      exp_r       <= '0;
      special     <= 1'b0;
      special_val <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          rad     <= {m_adj, 56'd0};
          root    <= '0;
          rem     <= '0;
          cnt     <= 6'(RBITS);
          exp_r   <= (e_adj >>> 1) + 14'sd1023;
          special <= 1'b1;
          if (a[62:52] == 11'd0)
            special_val <= {a[63], 63'd0};
          else if ((a[62:52] == 11'h7FF) && (a[51:0] != '0))
            special_val <= FP_QNAN;
          else if (a[63])
            special_val <= FP_QNAN;
          else if (a[62:52] == 11'h7FF)
            special_val <= FP_PINF;
          else
            special <= 1'b0;
          state <= S_ITER;
        end
        S_ITER: begin
          rad  <= {rad[107:0], 2'b00};
          rem  <= ge ? (rem_sh - trial) : rem_sh;
          root <= {root[RBITS-2:0], ge};
          cnt  <= cnt - 6'd1;
          if (cnt == 6'd1) state <= S_ROUND;
        end
        S_ROUND: begin
          y     <= special ? special_val : {1'b0, e_fin[10:0], mant_r[51:0]};
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
