// tb_pe_top: end-to-end test of the PE at its default parameters.
//
// For several matrix shapes (3x3, the paper's running example, then 4x4,
// 5x3 and 8x8, which need the MHT expressions split across DOT4 passes) the
// testbench generates the three programs of a Householder QR factorization
// in the modified (MHT) form, loads them into the PE's instruction
// memories, puts the matrix in the Global Memory model and runs the PE:
//   GM -> LM -> register file -> DOT4/FDIV/FSQRT -> register file -> LM -> GM.
// Per column k, with x the sub-column of length L = M-k:
//   alpha = -sign(x1)*||x||      (DOT4 sums of squares, FSQRT with sign)
//   u = x - alpha*e1, v = u/||u|| (DOT4, FSQRT, FDIV), 2v (DOT4)
//   a_ij <- a_ij - 2v_i (v . a_j) for every trailing element, one MHT
//   macro operation each; for L > 3 the first L-2 products of v . a_j are
//   summed beforehand with inner-product DOT4 passes.
// The generator also evaluates every operation in the same order with the
// simulator's doubles, so the matrix returned to GM must match bit for bit.
// Independently of that model, each column's 2-norm must be preserved by
// the orthogonal transform and the entries below the diagonal must vanish.
// Mechanism counters (RAW stall, busy-unit stall, semaphore wait, DOT4
// reconfiguration, MHT operations, GM back-pressure) must all be non-zero.
module tb_pe_top;
  import pe_pkg::*;
  import tb_util_pkg::*;

  localparam int IAW      = 10;
  localparam int OUT_LM   = 1024;
  localparam int OUT_GM   = 2048;
  localparam fp64_t ZERO_BITS = 64'h0;

  logic              clk = 0, rst_n = 0;
  logic              imem_we = 0, start = 0, done;
  logic [1:0]        imem_sel = 0;
  logic [IAW-1:0]    imem_addr = 0;
  logic [PE_IW-1:0]  imem_wdata = 0;
  logic              gm_req_valid, gm_req_ready, gm_req_we, gm_rsp_valid;
  logic [31:0]       gm_req_addr;
  logic [63:0]       gm_req_wdata, gm_rsp_data;
  logic [5:0]        ev;

  int checks = 0, failures = 0;
  int n_issue = 0, n_mht = 0, n_hazard = 0, n_unit = 0, n_sync = 0, n_reconfig = 0;

  pe_top dut (
    .clk(clk), .rst_n(rst_n), .imem_we(imem_we), .imem_sel(imem_sel), .imem_addr(imem_addr),
    .imem_wdata(imem_wdata), .start(start), .done(done),
    .gm_req_valid(gm_req_valid), .gm_req_ready(gm_req_ready), .gm_req_we(gm_req_we),
    .gm_req_addr(gm_req_addr), .gm_req_wdata(gm_req_wdata),
    .gm_rsp_valid(gm_rsp_valid), .gm_rsp_data(gm_rsp_data), .ev(ev)
  );

  gm_model #(.DEPTH(4096), .LAT(4), .READY_GAP(4)) u_gm (
    .clk(clk), .rst_n(rst_n), .gm_req_valid(gm_req_valid), .gm_req_ready(gm_req_ready),
    .gm_req_we(gm_req_we), .gm_req_addr(gm_req_addr), .gm_req_wdata(gm_req_wdata),
    .gm_rsp_valid(gm_rsp_valid), .gm_rsp_data(gm_rsp_data)
  );

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (ev[0]) n_issue++;
    if (ev[1]) n_mht++;
    if (ev[2]) n_hazard++;
    if (ev[3]) n_unit++;
    if (ev[4]) n_sync++;
    if (ev[5]) n_reconfig++;
  end

  // ------------------------------------------------------------ generator
  fps_instr_t fprog[$];
  gls_instr_t gprog[$];
  lls_instr_t lprog[$];
  logic [63:0] sh [RF_DEPTH];          // reference register contents
  int          loc [8][8];             // register holding element (i,j)
  int          tmp_base, tmp_next;

  localparam int RZ = 0, RONE = 1, RTWO = 2;

  function automatic logic [63:0] dot_model(logic m, logic [2:0] s, logic [63:0] o [8]);
    real p0, p1, p2, p3, t0, t1;
    p0 = b2r(o[0]) * b2r(o[1]);
    p1 = b2r(o[2]) * b2r(o[3]);
    p2 = b2r(o[4]) * b2r(o[5]);
    if (m) begin
      t1 = p1 + p2;
      t0 = p0 + t1;
      return ftz(r2b(b2r(o[7]) - b2r(o[6]) * t0));
    end
    p3 = b2r(o[6]) * b2r(o[7]);
    t0 = s[0] ? p0 - p1 : p0 + p1;
    t1 = s[1] ? p2 - p3 : p2 + p3;
    return ftz(r2b(s[2] ? t0 - t1 : t0 + t1));
  endfunction

  function automatic int tmp();
    int r;
    r = tmp_base + (tmp_next % (RF_DEPTH - tmp_base));
    tmp_next++;
    return r;
  endfunction

  function automatic void emit_dot(int rd, int rs [8], logic mht, logic [2:0] sub);
    fps_instr_t i;
    logic [63:0] o [8];
    i = '0;
    i.op = FPS_DOT4; i.mht = mht; i.sub = sub; i.rd = RF_AW'(rd);
    for (int k = 0; k < 8; k++) begin
      i.rs[k] = RF_AW'(rs[k]);
      o[k] = sh[rs[k]];
    end
    fprog.push_back(i);
    sh[rd] = dot_model(mht, sub, o);
  endfunction

  function automatic void emit_div(int rd, int a, int b);
    fps_instr_t i;
    i = '0; i.op = FPS_FDIV; i.rd = RF_AW'(rd); i.rs[0] = RF_AW'(a); i.rs[1] = RF_AW'(b);
    fprog.push_back(i);
    sh[rd] = ftz(r2b(b2r(sh[a]) / b2r(sh[b])));
  endfunction

  function automatic void emit_sqrt(int rd, int a, logic neg, int sgn);
    fps_instr_t i;
    logic [63:0] r;
    i = '0; i.op = FPS_FSQRT; i.rd = RF_AW'(rd); i.rs[0] = RF_AW'(a); i.rs[1] = RF_AW'(sgn);
    i.sub = {2'b00, neg};
    fprog.push_back(i);
    r = r2b($sqrt(b2r(sh[a])));
    if (neg) r[63] = ~sh[sgn][63];
    sh[rd] = r;
  endfunction

  // sum of products x[i]*y[i] as a chain of inner-product DOT4 passes:
  // the first pass takes four products, each later pass acc*1 + 3 products
  function automatic int dot_chain(int x [$], int y [$]);
    int acc, n, p;
    int rs [8];
    n = x.size();
    p = 0;
    for (int k = 0; k < 8; k++) rs[k] = RZ;
    for (int k = 0; k < 4; k++) if (p < n) begin rs[2*k] = x[p]; rs[2*k+1] = y[p]; p++; end
    acc = tmp();
    emit_dot(acc, rs, 1'b0, 3'b000);
    while (p < n) begin
      for (int k = 0; k < 8; k++) rs[k] = RZ;
      rs[0] = acc; rs[1] = RONE;
      for (int k = 1; k < 4; k++) if (p < n) begin rs[2*k] = x[p]; rs[2*k+1] = y[p]; p++; end
      acc = tmp();
      emit_dot(acc, rs, 1'b0, 3'b000);
    end
    return acc;
  endfunction

  function automatic lls_instr_t lls(lls_op_e op, int lm, int rf, int len, sync_t s);
    lls_instr_t i;
    i = '0; i.op = op; i.lm_addr = LM_AW'(lm); i.rf_addr = RF_AW'(rf); i.len = (RF_AW+1)'(len);
    i.sync = s;
    return i;
  endfunction

  function automatic gls_instr_t gls(gls_op_e op, int gm, int lm, int len, sync_t s);
    gls_instr_t i;
    i = '0; i.op = op; i.gm_addr = GM_AW'(gm); i.lm_addr = LM_AW'(lm); i.len = LEN_W'(len);
    i.sync = s;
    return i;
  endfunction

  function automatic sync_t sw(logic [1:0] s);   // wait on s
    sync_t r; r = '0; r.wait_en = 1'b1; r.wait_sem = s; return r;
  endfunction

  function automatic sync_t sg(logic [1:0] s);   // signal s
    sync_t r; r = '0; r.sig_en = 1'b1; r.sig_sem = s; return r;
  endfunction

  function automatic void gen_qr(int M, int N);
    int a0, a1, vb, tvb;
    int x [$], u [$], vv [$], col [$];
    int nrm2, alpha, u0, uu, nu, tpart, buf_base, L;
    int rs [8];
    fps_instr_t f;
    fprog.delete(); gprog.delete(); lprog.delete();
    a0 = 8; a1 = 8 + M * N; vb = 8 + 2 * M * N; tvb = vb + M;
    tmp_base = tvb + M; tmp_next = 0;
    for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) loc[i][j] = a1 + j * M + i;

    // global LS: constants + matrix in, result out
    gprog.push_back(gls(GLS_LOAD, 0, 0, 3 + M * N, '0));
    gprog.push_back(gls(GLS_NOP, 0, 0, 0, sg(SEM_G2L)));
    gprog.push_back(gls(GLS_STORE, OUT_GM, OUT_LM, M * N, sw(SEM_L2G)));
    gprog.push_back(gls(GLS_HALT, 0, 0, 0, '0));

    // local LS, first half: LM -> registers
    lprog.push_back(lls(LLS_LM2RF, 0, 0, 3, sw(SEM_G2L)));
    lprog.push_back(lls(LLS_LM2RF, 3, a1, M * N, '0));
    lprog.push_back(lls(LLS_NOP, 0, 0, 0, sg(SEM_L2F)));

    // FPS
    f = '0; f.op = FPS_NOP; f.sync = sw(SEM_L2F); fprog.push_back(f);
    for (int k = 0; k < M - 1 && k < N; k++) begin
      L = M - k;
      x.delete(); u.delete(); vv.delete();
      for (int i = 0; i < L; i++) x.push_back(loc[k + i][k]);
      nrm2  = dot_chain(x, x);
      alpha = tmp();
      emit_sqrt(alpha, nrm2, 1'b1, x[0]);
      u0 = tmp();
      rs = '{x[0], RONE, alpha, RONE, RZ, RZ, RZ, RZ};
      emit_dot(u0, rs, 1'b0, 3'b001);
      u.push_back(u0);
      for (int i = 1; i < L; i++) u.push_back(x[i]);
      uu = dot_chain(u, u);
      nu = tmp();
      emit_sqrt(nu, uu, 1'b0, RZ);
      for (int i = 0; i < L; i++) begin
        emit_div(vb + i, u[i], nu);
        vv.push_back(vb + i);
      end
      for (int i = 0; i < L; i++) begin
        rs = '{vb + i, RTWO, RZ, RZ, RZ, RZ, RZ, RZ};
        emit_dot(tvb + i, rs, 1'b0, 3'b000);
      end
      buf_base = (k % 2 == 0) ? a0 : a1;
      for (int j = k; j < N; j++) begin
        col.delete();
        for (int i = 0; i < L; i++) col.push_back(loc[k + i][j]);
        if (L <= 3) begin
          for (int i = 0; i < L; i++) begin
            rs = '{vv[0], col[0], (L > 1) ? vv[1] : RZ, (L > 1) ? col[1] : RZ,
                   (L > 2) ? vv[2] : RZ, (L > 2) ? col[2] : RZ, tvb + i, col[i]};
            emit_dot(buf_base + j * M + k + i, rs, 1'b1, 3'b000);
          end
        end else begin
          int xs [$], ys [$];
          for (int i = 0; i < L - 2; i++) begin xs.push_back(vv[i]); ys.push_back(col[i]); end
          tpart = dot_chain(xs, ys);
          for (int i = 0; i < L; i++) begin
            rs = '{tpart, RONE, vv[L-2], col[L-2], vv[L-1], col[L-1], tvb + i, col[i]};
            emit_dot(buf_base + j * M + k + i, rs, 1'b1, 3'b000);
          end
        end
        for (int i = 0; i < L; i++) loc[k + i][j] = buf_base + j * M + k + i;
      end
    end
    f = '0; f.op = FPS_NOP; f.sync = sg(SEM_F2L); fprog.push_back(f);
    f = '0; f.op = FPS_HALT; fprog.push_back(f);

    // local LS, second half: registers -> LM, one element per instruction
    for (int j = 0; j < N; j++)
      for (int i = 0; i < M; i++)
        lprog.push_back(lls(LLS_RF2LM, OUT_LM + j * M + i, loc[i][j], 1,
                            (i == 0 && j == 0) ? sw(SEM_F2L) : '0));
    lprog.push_back(lls(LLS_NOP, 0, 0, 0, sg(SEM_L2G)));
    lprog.push_back(lls(LLS_HALT, 0, 0, 0, '0));
  endfunction

  task automatic load_prog();
    for (int s = 0; s < 3; s++) begin
      int n;
      n = (s == 0) ? fprog.size() : (s == 1) ? gprog.size() : lprog.size();
      for (int a = 0; a < n; a++) begin
        @(negedge clk);
        imem_we   = 1;
        imem_sel  = 2'(s);
        imem_addr = IAW'(a);
        imem_wdata = (s == 0) ? PE_IW'(fprog[a]) : (s == 1) ? PE_IW'(gprog[a]) : PE_IW'(lprog[a]);
      end
    end
    @(negedge clk);
    imem_we = 0;
  endtask

  task automatic run_qr(int M, int N);
    real a [8][8];
    real r, cn_in, cn_out, err;
    longint t0;
    // matrix and constants in GM
    u_gm.mem[0] = r2b(0.0); u_gm.mem[1] = r2b(1.0); u_gm.mem[2] = r2b(2.0);
    for (int j = 0; j < N; j++)
      for (int i = 0; i < M; i++) begin
        logic [63:0] v;
        v = rand_fp(2);
        a[i][j] = b2r(v);
        u_gm.mem[3 + j * M + i] = v;
      end
    for (int i = 0; i < M * N; i++) u_gm.mem[OUT_GM + i] = 64'hDEAD_BEEF_DEAD_BEEF;
    // reference register contents for the loaded values
    sh[RZ] = r2b(0.0); sh[RONE] = r2b(1.0); sh[RTWO] = r2b(2.0);
    for (int j = 0; j < N; j++)
      for (int i = 0; i < M; i++) sh[8 + M * N + j * M + i] = r2b(a[i][j]);
    gen_qr(M, N);
    load_prog();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t0 = $time;
    while (!done) @(negedge clk);
    $display("QR %0dx%0d: %0d FPS instructions, %0d cycles", M, N, fprog.size(), ($time - t0) / 10);

    for (int j = 0; j < N; j++) begin
      cn_in = 0.0; cn_out = 0.0;
      for (int i = 0; i < M; i++) begin
        logic [63:0] got;
        got = u_gm.mem[OUT_GM + j * M + i];
        checks++;
        if (got !== sh[loc[i][j]]) begin
          failures++;
          if (failures < 10) $display("FAIL R(%0d,%0d) got %h exp %h", i, j, got, sh[loc[i][j]]);
        end
        r = b2r(got);
        cn_in  += a[i][j] * a[i][j];
        cn_out += r * r;
        if (i > j && j < M - 1) begin
          checks++;
          if ((r < 0 ? -r : r) > 1e-12) begin
            failures++; $display("FAIL R(%0d,%0d) = %g not annihilated", i, j, r);
          end
        end
      end
      err = (cn_out - cn_in) / cn_in;
      checks++;
      if ((err < 0 ? -err : err) > 1e-12) begin
        failures++; $display("FAIL column %0d norm not preserved (%g vs %g)", j, cn_out, cn_in);
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_qr(3, 3);
    run_qr(4, 4);
    run_qr(5, 3);
    run_qr(8, 8);
    $display("events: issue=%0d mht=%0d raw/waw-stall=%0d unit-stall=%0d sem-wait=%0d reconfig=%0d gm-backpressure=%0d",
             n_issue, n_mht, n_hazard, n_unit, n_sync, n_reconfig, u_gm.n_backpressure);
    checks++;
    if (n_mht == 0 || n_hazard == 0 || n_unit == 0 || n_sync == 0 || n_reconfig == 0 ||
        u_gm.n_backpressure == 0) begin
      failures++; $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
