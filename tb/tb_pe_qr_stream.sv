// tb_pe_qr_stream: QR factorization of matrices larger than the register
// file, streamed column by column through the local memory, at the PE's
// default parameters. Runs 20x20, 40x40 and 60x60 (the single-PE sizes of
// the published evaluation that fit the 4096-word local memory) and a 7x5
// matrix.
//
// The matrix stays in local memory for the whole factorization. Reflection
// k is cut into phases of at most about 1000 FPS instructions (straight-line
// programs for these sizes do not fit the 1024-entry instruction memories):
// for each phase the host loads three fresh programs and pulses start;
// registers and local memory keep their contents between phases. The
// column jobs (k,k), (k,k+1), ... (k,N-1) of a phase are pipelined:
//   local LS : LM2RF column j+1 into input slot (j+1)%2 while the FPS works
//              on column j, then wait F2L, RF2LM the output slot back to
//              column j, and signal L2F for column j+1.
//   FPS      : wait L2F; for the pivot column form v and 2v (sums of
//              squares, FSQRT with sign, one FDIV for 1/||u||, DOT4
//              scalings); update every element of the column with one MHT
//              operation (after an inner-product partial sum for columns
//              longer than 3); signal F2L.
// The global sequencer loads the matrix in the first phase and
// stores it in the last. Register layout for the L = M-k rows still active:
// constants r0..r2, pivot scalars r3..r6, two input slots at 8 and 8+L, the
// output slot at 8+2L, v at 8+3L, 2v at 8+4L and rotating temporaries above
// 8+5L. Where 2v does not fit (L > 47) only 2v_{L-2} and 2v_{L-1} are kept,
// and the MHT computes a_i - v_i*(2*t + 2v_{L-2}a_{L-2} + 2v_{L-1}a_{L-1}),
// the same value since doubling is exact. Local memory: constants at 0..2,
// the matrix column-major from 3.
// The five-step flow (GM -> LM -> registers -> FPS -> registers -> LM -> GM)
// and the MHT column update follow the source description; the streaming
// schedule, the register layout and the phase split are this testbench's
// own.
// Checks: every element of R returned to global memory equals a model
// that repeats each operation with the simulator's doubles in the same
// order; column norms are preserved; sub-diagonal entries vanish.
module tb_pe_qr_stream;
  import pe_pkg::*;
  import tb_util_pkg::*;

  localparam int IAW    = 10;
  localparam int OUT_GM = 4096;
  localparam int MAXD   = 60;

  logic              clk = 0, rst_n = 0;
  logic              imem_we = 0, start = 0, done;
  logic [1:0]        imem_sel = 0;
  logic [IAW-1:0]    imem_addr = 0;
  logic [PE_IW-1:0]  imem_wdata = 0;
  logic              gm_req_valid, gm_req_ready, gm_req_we, gm_rsp_valid;
  logic [31:0]       gm_req_addr;
  logic [63:0]       gm_req_wdata, gm_rsp_data;
  logic [5:0]        ev;

  int checks = 0, failures = 0, n_mht = 0, n_sync = 0;

  pe_top dut (
    .clk(clk), .rst_n(rst_n), .imem_we(imem_we), .imem_sel(imem_sel), .imem_addr(imem_addr),
    .imem_wdata(imem_wdata), .start(start), .done(done),
    .gm_req_valid(gm_req_valid), .gm_req_ready(gm_req_ready), .gm_req_we(gm_req_we),
    .gm_req_addr(gm_req_addr), .gm_req_wdata(gm_req_wdata),
    .gm_rsp_valid(gm_rsp_valid), .gm_rsp_data(gm_rsp_data), .ev(ev)
  );

  gm_model #(.DEPTH(8192), .LAT(4), .READY_GAP(4)) u_gm (
    .clk(clk), .rst_n(rst_n), .gm_req_valid(gm_req_valid), .gm_req_ready(gm_req_ready),
    .gm_req_we(gm_req_we), .gm_req_addr(gm_req_addr), .gm_req_wdata(gm_req_wdata),
    .gm_rsp_valid(gm_rsp_valid), .gm_rsp_data(gm_rsp_data)
  );

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (ev[1]) n_mht++;
    if (ev[4]) n_sync++;
  end

  // ------------------------------------------------------------ generator
  fps_instr_t fprog[$];
  gls_instr_t gprog[$];
  lls_instr_t lprog[$];
  logic [63:0] sh [RF_DEPTH];          // reference register contents
  logic [63:0] lmv [4096];             // reference local-memory contents
  int          tmp_base, tmp_next;

  localparam int RZ = 0, RONE = 1, RTWO = 2;
  localparam int RALPHA = 3, RU0 = 4, RNU = 5, RINV = 6;   // pivot scalars

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

  function automatic void emit_nop(sync_t s);
    fps_instr_t f;
    f = '0; f.op = FPS_NOP; f.sync = s; fprog.push_back(f);
  endfunction

  // programs for column jobs (k,j0) .. (k,j1-1) of reflection k of an M x N
  // matrix held column-major at LM 3
  function automatic void gen_phase(int M, int N, int k, int j0, int j1, bit first, bit last);
    int L, nj, in_s, out_s, vb, tvb, d0, d1;
    bit full;
    int x [$], u [$], col [$], xs [$], ys [$];
    int nrm2, alpha, u0, uu, nu, inv, tpart;
    int rs [8];
    fps_instr_t f;
    fprog.delete(); gprog.delete(); lprog.delete();
    L  = M - k;
    nj = j1 - j0;
    // registers are laid out for the L rows still active; without room for
    // a 2v array the MHT takes v_i and a doubled sum instead
    full  = (8 + 5 * L + 12 <= RF_DEPTH);
    out_s = 8 + 2 * L;
    vb    = 8 + 3 * L;
    tvb   = 8 + 4 * L;
    d0    = full ? tvb + L - 2 : 8 + 4 * L;
    d1    = full ? tvb + L - 1 : 8 + 4 * L + 1;
    tmp_base = full ? 8 + 5 * L : 8 + 4 * L + 2;
    // global LS
    if (first) gprog.push_back(gls(GLS_LOAD, 0, 0, 3 + M * N, '0));
    gprog.push_back(gls(GLS_NOP, 0, 0, 0, sg(SEM_G2L)));
    if (last) gprog.push_back(gls(GLS_STORE, OUT_GM, 3, M * N, sw(SEM_L2G)));
    else      gprog.push_back(gls(GLS_NOP, 0, 0, 0, sw(SEM_L2G)));
    gprog.push_back(gls(GLS_HALT, 0, 0, 0, '0));
    // local LS: column n+1 is fetched while the FPS works on column n; the
    // single output slot is drained before the FPS may start column n+1
    lprog.push_back(lls(LLS_NOP, 0, 0, 0, sw(SEM_G2L)));
    if (first) lprog.push_back(lls(LLS_LM2RF, 0, 0, 3, '0));
    for (int n = 0; n < nj; n++) begin
      lprog.push_back(lls(LLS_LM2RF, 3 + (j0 + n) * M + k, 8 + (n % 2) * L, L, '0));
      if (n > 0)
        lprog.push_back(lls(LLS_RF2LM, 3 + (j0 + n - 1) * M + k, out_s, L, sw(SEM_F2L)));
      lprog.push_back(lls(LLS_NOP, 0, 0, 0, sg(SEM_L2F)));
    end
    lprog.push_back(lls(LLS_RF2LM, 3 + (j1 - 1) * M + k, out_s, L, sw(SEM_F2L)));
    lprog.push_back(lls(LLS_NOP, 0, 0, 0, sg(SEM_L2G)));
    lprog.push_back(lls(LLS_HALT, 0, 0, 0, '0));
    // FPS, with the reference model following the data movement
    if (first) for (int i = 0; i < 3; i++) sh[i] = lmv[i];
    for (int n = 0; n < nj; n++) begin
      int j;
      j = j0 + n;
      in_s = 8 + (n % 2) * L;
      for (int i = 0; i < L; i++) sh[in_s + i] = lmv[3 + j * M + k + i];
      emit_nop(sw(SEM_L2F));
      col.delete();
      for (int i = 0; i < L; i++) col.push_back(in_s + i);
      if (j == k) begin
        x = col;
        nrm2  = dot_chain(x, x);
        alpha = RALPHA;
        emit_sqrt(alpha, nrm2, 1'b1, x[0]);
        u0 = RU0;
        rs = '{x[0], RONE, alpha, RONE, RZ, RZ, RZ, RZ};
        emit_dot(u0, rs, 1'b0, 3'b001);
        u.delete(); u.push_back(u0);
        for (int i = 1; i < L; i++) u.push_back(x[i]);
        uu = dot_chain(u, u);
        nu = RNU;
        emit_sqrt(nu, uu, 1'b0, RZ);
        inv = RINV;
        emit_div(inv, RONE, nu);
        for (int i = 0; i < L; i++) begin
          rs = '{u[i], inv, RZ, RZ, RZ, RZ, RZ, RZ};
          emit_dot(vb + i, rs, 1'b0, 3'b000);
        end
        if (full)
          for (int i = 0; i < L; i++) begin
            rs = '{vb + i, RTWO, RZ, RZ, RZ, RZ, RZ, RZ};
            emit_dot(tvb + i, rs, 1'b0, 3'b000);
          end
        else begin
          rs = '{vb + L - 2, RTWO, RZ, RZ, RZ, RZ, RZ, RZ};
          emit_dot(d0, rs, 1'b0, 3'b000);
          rs = '{vb + L - 1, RTWO, RZ, RZ, RZ, RZ, RZ, RZ};
          emit_dot(d1, rs, 1'b0, 3'b000);
        end
      end
      if (L <= 3) begin
        for (int i = 0; i < L; i++) begin
          rs = '{vb, col[0], (L > 1) ? vb + 1 : RZ, (L > 1) ? col[1] : RZ,
                 (L > 2) ? vb + 2 : RZ, (L > 2) ? col[2] : RZ, tvb + i, col[i]};
          emit_dot(out_s + i, rs, 1'b1, 3'b000);
        end
      end else begin
        xs.delete(); ys.delete();
        for (int i = 0; i < L - 2; i++) begin xs.push_back(vb + i); ys.push_back(col[i]); end
        tpart = dot_chain(xs, ys);
        for (int i = 0; i < L; i++) begin
          if (full) rs = '{tpart, RONE, vb + L - 2, col[L-2], vb + L - 1, col[L-1], tvb + i, col[i]};
          else      rs = '{tpart, RTWO, d0, col[L-2], d1, col[L-1], vb + i, col[i]};
          emit_dot(out_s + i, rs, 1'b1, 3'b000);
        end
      end
      emit_nop(sg(SEM_F2L));
      for (int i = 0; i < L; i++) lmv[3 + j * M + k + i] = sh[out_s + i];
    end
    f = '0; f.op = FPS_HALT; fprog.push_back(f);
  endfunction

  task automatic load_prog();
    for (int s = 0; s < 3; s++) begin
      int n;
      n = (s == 0) ? fprog.size() : (s == 1) ? gprog.size() : lprog.size();
      if (n > (1 << IAW)) begin failures++; $display("FAIL program of %0d words too long", n); end
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
    real a [MAXD][MAXD];
    real r, cn_in, cn_out, err;
    longint cyc, t0;
    int K, nf, nph;
    u_gm.mem[0] = r2b(0.0); u_gm.mem[1] = r2b(1.0); u_gm.mem[2] = r2b(2.0);
    for (int j = 0; j < N; j++)
      for (int i = 0; i < M; i++) begin
        logic [63:0] v;
        v = rand_fp(2);
        a[i][j] = b2r(v);
        u_gm.mem[3 + j * M + i] = v;
      end
    for (int i = 0; i < 3 + M * N; i++) lmv[i] = u_gm.mem[i];
    for (int i = 0; i < M * N; i++) u_gm.mem[OUT_GM + i] = 64'hDEAD_BEEF_DEAD_BEEF;
    K = (M - 1 < N) ? M - 1 : N;
    cyc = 0; nf = 0; nph = 0;
    for (int k = 0; k < K; k++) begin
      int L, j0, j1, budget;
      L = M - k;
      j0 = k;
      while (j0 < N) begin
        // FPS words: per column L MHT + partial-sum passes + 2 NOPs; the
        // pivot column adds two sums of squares, v, 2v and four more
        budget = 1000 - ((j0 == k) ? 2 * (L / 3 + 2) + 2 * L + 8 : 0);
        j1 = j0 + 1;
        while (j1 < N && (j1 - j0 + 1) * (L + L / 3 + 4) <= budget) j1++;
        gen_phase(M, N, k, j0, j1, k == 0 && j0 == k, k == K - 1 && j1 == N);
        nf += fprog.size();
        nph++;
        load_prog();
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        t0 = $time;
        while (!done) @(negedge clk);
        cyc += ($time - t0) / 10;
        j0 = j1;
      end
    end
    $display("QR %0dx%0d streamed: %0d phases, %0d FPS instructions, %0d cycles of execution",
             M, N, nph, nf, cyc);
    for (int j = 0; j < N; j++) begin
      cn_in = 0.0; cn_out = 0.0;
      for (int i = 0; i < M; i++) begin
        logic [63:0] got;
        got = u_gm.mem[OUT_GM + j * M + i];
        checks++;
        if (got !== lmv[3 + j * M + i]) begin
          failures++;
          if (failures < 10) $display("FAIL R(%0d,%0d) got %h exp %h", i, j, got, lmv[3 + j * M + i]);
        end
        r = b2r(got);
        cn_in  += a[i][j] * a[i][j];
        cn_out += r * r;
        if (i > j) begin
          checks++;
          if ((r < 0 ? -r : r) > 1e-11) begin
            failures++; $display("FAIL R(%0d,%0d) = %g not annihilated", i, j, r);
          end
        end
      end
      err = (cn_out - cn_in) / cn_in;
      checks++;
      if ((err < 0 ? -err : err) > 1e-11) begin
        failures++; $display("FAIL column %0d norm not preserved (%g vs %g)", j, cn_out, cn_in);
      end
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_qr(7, 5);
    run_qr(20, 20);
    run_qr(40, 40);
    run_qr(60, 60);
    $display("events: mht=%0d sem-wait=%0d gm-backpressure=%0d", n_mht, n_sync, u_gm.n_backpressure);
    checks++;
    if (n_mht == 0 || n_sync == 0) begin failures++; $display("FAIL no MHT or no semaphore wait"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
