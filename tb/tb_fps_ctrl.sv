// tb_fps_ctrl: self-checking test of the FPS decoder / issue logic with a
// stand-in arithmetic unit that accepts randomly and returns results after
// random delays. Checks: instructions issue in program order; none issues
// while a register it reads or writes awaits a result; an instruction that
// waits on a semaphore does not issue before the semaphore is given; a
// signalling instruction gives only when nothing is outstanding; halted
// rises only after HALT and after the last result has been written; all
// three stall reasons occur.
module tb_fps_ctrl;
  import pe_pkg::*;

  logic             clk = 0, rst_n = 0, start = 0, halted;
  logic [9:0]       pc;
  fps_instr_t       prog [64];
  fps_instr_t       instr;
  logic             issue_valid, issue_ready;
  logic             wb_valid [3];
  logic [RF_AW-1:0] wb_rd [3];
  sem_req_t         sem_req;
  logic             sem_avail [NSEM];
  logic             st_h, st_u, st_s;
  int checks = 0, failures = 0, n_h = 0, n_u = 0, n_s = 0;
  int exp_idx = 0;
  logic [255:0] pend = '0;
  int     due [256];
  longint cycle = 0;
  longint sem_given_at = -1;

  fps_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .halted(halted), .pc(pc), .instr(instr),
    .issue_valid(issue_valid), .issue_ready(issue_ready), .wb_valid(wb_valid), .wb_rd(wb_rd),
    .sem_req(sem_req), .sem_avail(sem_avail), .stall_hazard(st_h), .stall_unit(st_u), .stall_sync(st_s));

  assign instr = prog[pc[5:0]];

  always #5 clk = ~clk;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL %s (cycle %0d)", s, cycle);
  endtask

  // stand-in unit, semaphores and checks
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (st_h) n_h++;
    if (st_u) n_u++;
    if (st_s) n_s++;
    // write-backs scheduled for this clock were presented before the edge
    for (int p = 0; p < 3; p++) if (wb_valid[p]) pend[wb_rd[p]] = 1'b0;
    if (sem_req.give) begin
      checks++;
      if (pend != '0) fail("signalled with results outstanding");
    end
    if (issue_valid && issue_ready) begin
      checks++;
      while (prog[exp_idx].op == FPS_NOP) exp_idx++;
      if (instr !== prog[exp_idx]) fail("out of order issue");
      for (int i = 0; i < 8; i++)
        if ((instr.op == FPS_DOT4 || i < 2) && pend[instr.rs[i]]) fail("issued with a pending source");
      if (pend[instr.rd]) fail("issued with a pending destination");
      pend[instr.rd] = 1'b1;
      due[instr.rd]  = int'(cycle) + 1 + int'($urandom_range(12)) + ((instr.rd >= 8'd100) ? 4 : 0);
      exp_idx++;
    end
    if (sem_req.take) begin
      checks++;
      if (sem_given_at < 0 || sem_req.take_id != 2'd1) fail("took semaphore before it was given");
    end
    if (cycle == 300) begin sem_avail[1] <= 1'b1; sem_given_at = cycle; end
    if (sem_req.take) sem_avail[1] <= 1'b0;
  end

  // present due write-backs (at most three per clock)
  always @(negedge clk) begin
    int n;
    n = 0;
    for (int p = 0; p < 3; p++) wb_valid[p] = 1'b0;
    for (int r = 0; r < 256; r++) begin
      if (pend[r] && due[r] <= int'(cycle) && n < 3) begin
        wb_valid[n] = 1'b1; wb_rd[n] = 8'(r); n++;
      end
    end
    issue_ready = $urandom_range(3) != 0;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (sem_avail[s]) sem_avail[s] = 1'b0;
    foreach (wb_rd[p]) begin wb_rd[p] = '0; wb_valid[p] = 1'b0; end
    issue_ready = 1'b0;
    for (int i = 0; i < 64; i++) begin
      prog[i] = '0;
      prog[i].op = (i % 5 == 4) ? FPS_FDIV : (i % 7 == 6) ? FPS_FSQRT : FPS_DOT4;
      prog[i].rd = RF_AW'($urandom_range(7));
      for (int k = 0; k < 8; k++) prog[i].rs[k] = RF_AW'($urandom_range(7));
    end
    prog[20] = '0; prog[20].op = FPS_NOP; prog[20].sync.wait_en = 1; prog[20].sync.wait_sem = 2'd1;
    prog[40].sync.sig_en = 1; prog[40].sync.sig_sem = 2'd2;
    // directed: a DOT4 whose only dependence is through its last source
    // (results for registers 100 and up take at least five clocks)
    prog[50] = '0; prog[50].op = FPS_DOT4; prog[50].rd = 8'd100;
    prog[51] = '0; prog[51].op = FPS_DOT4; prog[51].rd = 8'd101;
    for (int k = 0; k < 7; k++) prog[51].rs[k] = 8'd200;
    prog[51].rs[7] = 8'd100;
    prog[63] = '0; prog[63].op = FPS_HALT;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!halted) begin
      @(negedge clk);
      if (exp_idx > 20 && sem_given_at < 0) fail("passed the semaphore wait early");
    end
    checks += 3;
    if (pend != '0) fail("halted with results outstanding");
    if (exp_idx != 63) fail($sformatf("issued up to %0d, expected 63", exp_idx));
    if (n_h == 0 || n_u == 0 || n_s == 0) fail("a stall reason never occurred");
    $display("stalls: hazard=%0d unit=%0d sync=%0d", n_h, n_u, n_s);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
