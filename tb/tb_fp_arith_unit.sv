// tb_fp_arith_unit: self-checking test of the arithmetic unit. Random DOT4
// (both configurations), FDIV and FSQRT operations, the latter sometimes
// with the -copysign option, are offered every clock; the ones accepted
// (issue_ready) must come back on the right write-back port, with the right
// destination number, bit-exact value and latency (DOT4 3 or 5 clocks,
// FDIV/FSQRT 57 clocks). Busy-unit refusals must occur.
module tb_fp_arith_unit;
  import pe_pkg::*;
  import tb_util_pkg::*;

  logic             clk = 0, rst_n = 0;
  logic             issue_valid = 0, issue_ready, reconfig;
  fps_op_e          op = FPS_NOP;
  logic             mht = 0;
  logic [2:0]       sub = 0;
  logic [RF_AW-1:0] rd = 0;
  fp64_t            opnd [8];
  logic             wb_valid [3];
  logic [RF_AW-1:0] wb_rd [3];
  fp64_t            wb_data [3];
  longint           cycle = 0;
  int checks = 0, failures = 0, refused = 0;

  fp64_t  exp_v [3][$];
  int     exp_rd [3][$];
  longint exp_t [3][$];

  fp_arith_unit dut (.clk(clk), .rst_n(rst_n), .issue_valid(issue_valid), .issue_ready(issue_ready),
    .op(op), .mht(mht), .sub(sub), .rd(rd), .opnd(opnd), .wb_valid(wb_valid), .wb_rd(wb_rd),
    .wb_data(wb_data), .reconfig(reconfig));

  always #5 clk = ~clk;

  function automatic fp64_t dot_model(logic m, logic [2:0] s, fp64_t o [8]);
    real p0, p1, p2, p3, t0, t1;
    p0 = b2r(o[0]) * b2r(o[1]); p1 = b2r(o[2]) * b2r(o[3]); p2 = b2r(o[4]) * b2r(o[5]);
    if (m) begin t1 = p1 + p2; t0 = p0 + t1; return ftz(r2b(b2r(o[7]) - b2r(o[6]) * t0)); end
    p3 = b2r(o[6]) * b2r(o[7]);
    t0 = s[0] ? p0 - p1 : p0 + p1; t1 = s[1] ? p2 - p3 : p2 + p3;
    return ftz(r2b(s[2] ? t0 - t1 : t0 + t1));
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (issue_valid && issue_ready) begin
      case (op)
        FPS_DOT4:  begin exp_v[0].push_back(dot_model(mht, sub, opnd)); exp_rd[0].push_back(int'(rd));
                         exp_t[0].push_back(cycle + (mht ? 5 : 3)); end
        FPS_FDIV:  begin exp_v[1].push_back(ftz(r2b(b2r(opnd[0]) / b2r(opnd[1])))); exp_rd[1].push_back(int'(rd));
                         exp_t[1].push_back(cycle + 57); end
        FPS_FSQRT: begin
          fp64_t r;
          r = r2b($sqrt(b2r(opnd[0])));
          if (sub[0]) r[63] = ~opnd[1][63];
          exp_v[2].push_back(r); exp_rd[2].push_back(int'(rd)); exp_t[2].push_back(cycle + 57);
        end
        default: ;
      endcase
    end
    if (issue_valid && !issue_ready) refused++;
    for (int p = 0; p < 3; p++) if (rst_n && wb_valid[p]) begin
      checks++;
      if (exp_v[p].size() == 0) begin failures++; $display("FAIL spurious write-back on port %0d", p); end
      else begin
        fp64_t e; int r; longint t;
        e = exp_v[p].pop_front(); r = exp_rd[p].pop_front(); t = exp_t[p].pop_front();
        if (wb_data[p] !== e || wb_rd[p] !== RF_AW'(r) || cycle != t) begin
          failures++;
          if (failures < 10) $display("FAIL port %0d got %h r%0d @%0d exp %h r%0d @%0d", p, wb_data[p], wb_rd[p], cycle, e, r, t);
        end
      end
    end
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (opnd[i]) opnd[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      int k;
      @(negedge clk);
      k = $urandom_range(9);
      issue_valid = 1;
      op  = (k < 6) ? FPS_DOT4 : (k < 8) ? FPS_FDIV : FPS_FSQRT;
      if ($urandom_range(7) == 0) mht = ~mht;
      sub = 3'($urandom);
      rd  = RF_AW'($urandom);
      foreach (opnd[j]) opnd[j] = rand_fp(8);
      if (op == FPS_FSQRT) opnd[0][63] = 1'b0;
    end
    @(negedge clk); issue_valid = 0;
    repeat (80) @(negedge clk);
    checks++;
    if (refused == 0 || exp_v[0].size() + exp_v[1].size() + exp_v[2].size() != 0) begin
      failures++; $display("FAIL refused=%0d or results missing", refused);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
