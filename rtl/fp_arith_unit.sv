// fp_arith_unit: the Floating Point Arithmetic Unit of the FPS, holding
// the DOT4 reconfigurable data-path, the divider (FDIV) and the square
// root (FSQRT) - the three resources the paper uses for QR factorization.
//
// One instruction is offered per clock (issue_valid, with its eight operand
// values already read from the register file); issue_ready says whether the
// unit it needs can take it this clock: DOT4 unless it is draining for a
// configuration change, FDIV / FSQRT unless busy with an earlier operation.
// DOT4, FDIV and FSQRT run concurrently and each returns its result on a
// write-back port of its own (wb_*[0] = DOT4, [1] = FDIV, [2] = FSQRT) with
// the destination register number.
//
// FSQRT with sub[0] set returns -copysign(sqrt(op0), op1), the signed norm
// a Householder step needs (alpha = -sign(x1) * ||x||); that sign option is
// this design's addition, the paper's algorithm computes the same quantity.
module fp_arith_unit
  import pe_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             issue_valid,
  output logic             issue_ready,
  input  fps_op_e          op,
  input  logic             mht,
  input  logic [2:0]       sub,
  input  logic [RF_AW-1:0] rd,
  input  fp64_t            opnd [8],
  output logic             wb_valid [3],
  output logic [RF_AW-1:0] wb_rd    [3],
  output fp64_t            wb_data  [3],
  output logic             reconfig
);

  logic dot_ready, dot_valid;
  logic div_busy, div_done, sqrt_busy, sqrt_done;
  logic [RF_AW-1:0] dot_tag, div_rd_q, sqrt_rd_q;
  fp64_t dot_y, div_y, sqrt_y;
  logic  sqrt_neg_q, sqrt_sgn_q;

  always_comb begin
    unique case (op)
      FPS_DOT4:  issue_ready = dot_ready;
      FPS_FDIV:  issue_ready = !div_busy;
      FPS_FSQRT: issue_ready = !sqrt_busy;
      default:   issue_ready = 1'b1;
    endcase
  end

  dot4 #(.TAG_W(RF_AW)) u_dot4 (
    .clk(clk), .rst_n(rst_n),
    .in_valid(issue_valid && op == FPS_DOT4), .in_ready(dot_ready),
    .mht(mht), .sub(sub), .op(opnd), .in_tag(rd),
    .out_valid(dot_valid), .out_tag(dot_tag), .y(dot_y), .reconfig(reconfig)
  );

  fp_div u_fdiv (
    .clk(clk), .rst_n(rst_n), .start(issue_valid && op == FPS_FDIV && !div_busy),
    .a(opnd[0]), .b(opnd[1]), .busy(div_busy), .done(div_done), .y(div_y)
  );

  fp_sqrt u_fsqrt (
    .clk(clk), .rst_n(rst_n), .start(issue_valid && op == FPS_FSQRT && !sqrt_busy),
    .a(opnd[0]), .busy(sqrt_busy), .done(sqrt_done), .y(sqrt_y)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_rd_q   <= '0;
      sqrt_rd_q  <= '0;
      sqrt_neg_q <= 1'b0;
      sqrt_sgn_q <= 1'b0;
    end else begin
      if (issue_valid && op == FPS_FDIV && !div_busy) div_rd_q <= rd;
      if (issue_valid && op == FPS_FSQRT && !sqrt_busy) begin
        sqrt_rd_q  <= rd;
        sqrt_neg_q <= sub[0];
        sqrt_sgn_q <= opnd[1][63];
      end
    end
  end

  always_comb begin
    wb_valid[0] = dot_valid;  wb_rd[0] = dot_tag;   wb_data[0] = dot_y;
    wb_valid[1] = div_done;   wb_rd[1] = div_rd_q;  wb_data[1] = div_y;
    wb_valid[2] = sqrt_done;  wb_rd[2] = sqrt_rd_q;
    wb_data[2]  = sqrt_neg_q ? {~sqrt_sgn_q, sqrt_y[62:0]} : sqrt_y;
  end

endmodule
