// dot4: the reconfigurable DOT4 data-path of the arithmetic unit.
//
// Four binary64 multipliers and three binary64 adders, with a pipeline
// register after every operator level. Multiplexers in front of multiplier
// 3 and of adders 0 and 2 select one of two configurations:
//
//   inner product (mode 0), the classic DOT4 tree, latency 3:
//       stage 1: p0 = op0*op1, p1 = op2*op3, p2 = op4*op5, p3 = op6*op7
//       stage 2: s0 = p0 (+/-) p1 (sub[0]),  s1 = p2 (+/-) p3 (sub[1])
//       stage 3: y  = s0 (+/-) s1 (sub[2])
//   MHT macro operation (mode 1), the configuration added for the modified
//   Householder transform, op = {v1,a1, v2,a2, v3,a3, 2v1, a}, latency 5:
//       stage 1: p0 = v1*a1, p1 = v2*a2, p2 = v3*a3   (multipliers 0..2)
//       stage 2: s1 = p1 + p2                          (adder 1)
//       stage 3: s0 = p0 + s1                          (adder 0)
//       stage 4: t  = 2v1 * s0                         (multiplier 3)
//       stage 5: y  = a - t                            (adder 2)
//
// The operator set, both dataflows and the order of the MHT sum follow the
// paper's DOT4 figure; the per-level pipelining is this design's choice
// (the paper gives no latency). Because multiplier 3 and adders 0 and 2 sit
// at different depths in the two configurations, the data-path holds
// operations of only one configuration at a time: an operation whose mode
// differs from the current one waits (in_ready low) until the pipeline has
// drained, then the configuration register switches in one clock.
//
// Interface: in_valid/in_ready handshake, one operation per clock while the
// configuration stays the same. out_valid pulses with y and out_tag.
module dot4
  import pe_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic             mht,
  input  logic [2:0]       sub,
  input  fp64_t            op [8],
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output fp64_t            y,
  output logic             reconfig     // pulses when the configuration changes
);

  typedef struct packed {
    logic             v;
    logic [TAG_W-1:0] tag;
    logic [2:0]       sub;
    fp64_t            x0, x1, x2, x3;   // stage operands
    fp64_t            two_v1, a;        // carried for the MHT tail
  } stage_t;

  stage_t st1, st2, st3, st4;
  logic   mode_q;                        // 0 = inner product, 1 = MHT
  logic   empty;

  fp64_t m0, m1, m2, m3, m3_a, m3_b;
  fp64_t add0_y, add1_y, add2_y;
  fp64_t a0_a, a0_b, a2_a, a2_b;
  logic  a0_sub, a2_sub;

  assign empty    = !(st1.v || st2.v || st3.v || st4.v);
  assign in_ready = (mht == mode_q);
  logic  accept;
  assign accept   = in_valid && in_ready;

  fp_mul u_mul0 (.a(op[0]), .b(op[1]), .y(m0));
  fp_mul u_mul1 (.a(op[2]), .b(op[3]), .y(m1));
  fp_mul u_mul2 (.a(op[4]), .b(op[5]), .y(m2));
  fp_mul u_mul3 (.a(m3_a),  .b(m3_b),  .y(m3));

  fp_add u_add0 (.a(a0_a),   .b(a0_b),   .sub(a0_sub),     .y(add0_y));
  // Adder 1 sits at stage 2 in both configurations: stage 1 always puts its
  // two operands in x1 and x2 (MHT: p1, p2; inner product: p2, p3) and
  // the inner product's p0, p1 in x0, x3.
  fp_add u_add1 (.a(st1.x1), .b(st1.x2), .sub(!mode_q && st1.sub[1]), .y(add1_y));
  fp_add u_add2 (.a(a2_a),   .b(a2_b),   .sub(a2_sub),     .y(add2_y));

  // configuration multiplexers
  always_comb begin
    if (mode_q) begin
      m3_a = st3.two_v1;  m3_b = st3.x0;                    // stage 4
      a0_a = st2.x0;      a0_b = st2.x1;  a0_sub = 1'b0;    // stage 3
      a2_a = st4.a;       a2_b = st4.x0;  a2_sub = 1'b1;    // stage 5
    end else begin
      m3_a = op[6];       m3_b = op[7];                     // stage 1
      a0_a = st1.x0;      a0_b = st1.x3;  a0_sub = st1.sub[0]; // stage 2
      a2_a = st2.x0;      a2_b = st2.x1;  a2_sub = st2.sub[2]; // stage 3
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st1 <= '0; st2 <= '0; st3 <= '0; st4 <= '0;
      mode_q    <= 1'b0;
      out_valid <= 1'b0;
      out_tag   <= '0;
      y         <= '0;
      reconfig  <= 1'b0;
    end else begin
      reconfig <= 1'b0;
      if (in_valid && !in_ready && empty) begin
        mode_q   <= mht;
        reconfig <= 1'b1;
      end

      // stage 1: multipliers
      st1.v   <= accept;
      st1.tag <= in_tag;
      st1.sub <= sub;
      if (mode_q) begin
        st1.x0 <= m0; st1.x1 <= m1; st1.x2 <= m2; st1.x3 <= '0;
      end else begin
        st1.x0 <= m0; st1.x3 <= m1; st1.x1 <= m2; st1.x2 <= m3;
      end
      st1.two_v1 <= op[6];
      st1.a      <= op[7];

      // stage 2: first-level adders
      st2.v      <= st1.v;
      st2.tag    <= st1.tag;
      st2.sub    <= st1.sub;
      st2.two_v1 <= st1.two_v1;
      st2.a      <= st1.a;
      st2.x2     <= '0;
      st2.x3     <= '0;
      if (mode_q) begin
        st2.x0 <= st1.x0;          // p0 waits for s1
        st2.x1 <= add1_y;          // s1 = p1 + p2
      end else begin
        st2.x0 <= add0_y;          // s0 = p0 +/- p1
        st2.x1 <= add1_y;          // s1 = p2 +/- p3
      end

      // stage 3: second-level adder
      st3.v      <= st2.v && mode_q;
      st3.tag    <= st2.tag;
      st3.sub    <= st2.sub;
      st3.two_v1 <= st2.two_v1;
      st3.a      <= st2.a;
      st3.x0     <= add0_y;        // MHT: s0 = p0 + s1
      st3.x1     <= '0; st3.x2 <= '0; st3.x3 <= '0;

      // stage 4: multiplier 3 (MHT only)
      st4.v      <= st3.v;
      st4.tag    <= st3.tag;
      st4.sub    <= st3.sub;
      st4.two_v1 <= st3.two_v1;
      st4.a      <= st3.a;
      st4.x0     <= m3;            // t = 2v1 * s0
      st4.x1     <= '0; st4.x2 <= '0; st4.x3 <= '0;

      // result: stage 3 in inner-product mode, stage 5 in MHT mode
      if (mode_q) begin
        out_valid <= st4.v;
        out_tag   <= st4.tag;
        if (st4.v) y <= add2_y;
      end else begin
        out_valid <= st2.v;
        out_tag   <= st2.tag;
        if (st2.v) y <= add2_y;
      end
    end
  end

endmodule
