// tb_fps: self-checking test of the Floating Point Sequencer. Registers
// 0..15 are filled through the local load/store port, a random program of
// DOT4 (both configurations), FDIV and FSQRT instructions with many
// register dependences is loaded and run after a semaphore is given, and
// registers 16..31 are read back through the same port and compared with a
// program-order evaluation in the simulator's doubles. Also checks that the
// program's final signal reaches the semaphore port and that both DOT4
// configurations and the reconfiguration stall occurred.
module tb_fps;
  import pe_pkg::*;
  import tb_util_pkg::*;

  logic              clk = 0, rst_n = 0, start = 0, halted;
  logic              imem_we = 0;
  logic [9:0]        imem_waddr = 0;
  logic [FPS_IW-1:0] imem_wdata = 0;
  logic              lls_we = 0;
  logic [RF_AW-1:0]  lls_waddr = 0, lls_raddr = 0;
  fp64_t             lls_wdata = 0, lls_rdata;
  sem_req_t          sem_req;
  logic              sem_avail [NSEM];
  logic              ev_issue, ev_mht, ev_h, ev_u, ev_s, ev_r;
  int checks = 0, failures = 0, n_mht = 0, n_rc = 0, n_give = 0;
  fp64_t sh [RF_DEPTH];
  fps_instr_t prog [$];

  fps dut (.clk(clk), .rst_n(rst_n), .imem_we(imem_we), .imem_waddr(imem_waddr), .imem_wdata(imem_wdata),
    .start(start), .halted(halted), .lls_we(lls_we), .lls_waddr(lls_waddr), .lls_wdata(lls_wdata),
    .lls_raddr(lls_raddr), .lls_rdata(lls_rdata), .sem_req(sem_req), .sem_avail(sem_avail),
    .ev_issue(ev_issue), .ev_mht(ev_mht), .ev_stall_hazard(ev_h), .ev_stall_unit(ev_u),
    .ev_stall_sync(ev_s), .ev_reconfig(ev_r));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (ev_mht) n_mht++;
    if (ev_r) n_rc++;
    if (sem_req.give && sem_req.give_id == 2'd2) n_give++;
    if (sem_req.take) sem_avail[sem_req.take_id] <= 1'b0;
  end

  function automatic fp64_t dot_model(logic m, logic [2:0] s, fp64_t o [8]);
    real p0, p1, p2, p3, t0, t1;
    p0 = b2r(o[0]) * b2r(o[1]); p1 = b2r(o[2]) * b2r(o[3]); p2 = b2r(o[4]) * b2r(o[5]);
    if (m) begin t1 = p1 + p2; t0 = p0 + t1; return ftz(r2b(b2r(o[7]) - b2r(o[6]) * t0)); end
    p3 = b2r(o[6]) * b2r(o[7]);
    t0 = s[0] ? p0 - p1 : p0 + p1; t1 = s[1] ? p2 - p3 : p2 + p3;
    return ftz(r2b(s[2] ? t0 - t1 : t0 + t1));
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fps_instr_t f;
    foreach (sem_avail[s]) sem_avail[s] = 1'b0;
    for (int r = 0; r < 16; r++) begin
      sh[r] = rand_fp(1);
      if (r < 8) sh[r][63] = 1'b0;        // positive: square-root and divisor sources
    end
    for (int r = 16; r < 32; r++) sh[r] = 64'h0;
    // program
    f = '0; f.op = FPS_NOP; f.sync.wait_en = 1; f.sync.wait_sem = 2'd1; prog.push_back(f);
    for (int i = 0; i < 80; i++) begin
      fp64_t o [8];
      int k;
      f = '0;
      k = $urandom_range(9);
      f.rd = RF_AW'(16 + $urandom_range(15));
      if (k < 7) begin
        f.op = FPS_DOT4; f.mht = 1'((i / 6) % 2); f.sub = 3'($urandom);
        for (int j = 0; j < 8; j++) begin
          f.rs[j] = RF_AW'(($urandom_range(3) == 0) ? 16 + $urandom_range(15) : $urandom_range(15));
          o[j] = sh[f.rs[j]];
        end
        sh[f.rd] = dot_model(f.mht, f.sub, o);
      end else if (k < 9) begin
        f.op = FPS_FDIV; f.rs[0] = RF_AW'(16 + $urandom_range(15)); f.rs[1] = RF_AW'($urandom_range(7));
        sh[f.rd] = ftz(r2b(b2r(sh[f.rs[0]]) / b2r(sh[f.rs[1]])));
      end else begin
        f.op = FPS_FSQRT; f.rs[0] = RF_AW'($urandom_range(7)); f.rs[1] = RF_AW'($urandom_range(31));
        f.sub = {2'b00, 1'($urandom_range(1))};
        sh[f.rd] = r2b($sqrt(b2r(sh[f.rs[0]])));
        if (f.sub[0]) sh[f.rd][63] = ~sh[f.rs[1]][63];
      end
      prog.push_back(f);
    end
    f = '0; f.op = FPS_NOP; f.sync.sig_en = 1; f.sync.sig_sem = 2'd2; prog.push_back(f);
    f = '0; f.op = FPS_HALT; prog.push_back(f);

    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (prog[a]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 10'(a); imem_wdata = FPS_IW'(prog[a]);
    end
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); imem_we = 0; lls_we = 1; lls_waddr = RF_AW'(r);
      lls_wdata = (r < 16) ? sh[r] : 64'h0;
    end
    @(negedge clk); lls_we = 0; start = 1;
    @(negedge clk); start = 0;
    repeat (20) @(negedge clk);
    sem_avail[1] = 1'b1;
    while (!halted) @(negedge clk);
    for (int r = 16; r < 32; r++) begin
      lls_raddr = RF_AW'(r);
      #1;
      checks++;
      if (lls_rdata !== sh[r] && !(sh[r][62:52] == 11'h7FF && sh[r][51:0] != 0 && lls_rdata[62:51] == 12'hFFF)) begin
        failures++;
        if (failures < 10) $display("FAIL r%0d got %h exp %h", r, lls_rdata, sh[r]);
      end
    end
    checks++;
    if (n_give != 1 || n_mht == 0 || n_rc == 0) begin
      failures++; $display("FAIL give=%0d mht=%0d reconfig=%0d", n_give, n_mht, n_rc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
