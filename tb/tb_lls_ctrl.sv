// tb_lls_ctrl: self-checking test of the local load/store sequencer. The
// instruction memory, local memory (one-clock synchronous read) and register
// file (asynchronous read) are modelled in the testbench. The program waits
// for the "data in local memory" semaphore, moves two blocks into the
// register file, signals the FPS, waits for the FPS's reply, moves a block of
// registers back to local memory, signals the global sequencer and halts.
// Checks register and local-memory contents, that each wait held the
// sequencer, that each signal came only after the moves before it had
// finished, and the one-word-per-clock throughput of both directions.
module tb_lls_ctrl;
  import pe_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, halted;
  logic [9:0] pc;
  lls_instr_t instr, prog [1024];
  logic lm_en, lm_we, rf_we;
  logic [11:0] lm_addr;
  fp64_t lm_wdata, lm_rdata = 0, rf_wdata, rf_rdata;
  logic [RF_AW-1:0] rf_waddr, rf_raddr;
  fp64_t lm [4096];
  fp64_t rf [RF_DEPTH];
  sem_req_t sem_req;
  logic sem_avail [NSEM];
  int sc [NSEM];
  int checks = 0, failures = 0, rf_writes = 0, lm_writes = 0;
  int rf_at_sig = -1, lm_at_sig = -1, busy_l2r = 0, busy_r2l = 0;

  lls_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .halted(halted), .pc(pc), .instr(instr),
    .lm_en(lm_en), .lm_we(lm_we), .lm_addr(lm_addr), .lm_wdata(lm_wdata), .lm_rdata(lm_rdata),
    .rf_we(rf_we), .rf_waddr(rf_waddr), .rf_wdata(rf_wdata), .rf_raddr(rf_raddr),
    .rf_rdata(rf_rdata), .sem_req(sem_req), .sem_avail(sem_avail));

  always #5 clk = ~clk;
  assign instr    = prog[pc];
  assign rf_rdata = rf[rf_raddr];
  always_comb foreach (sem_avail[s]) sem_avail[s] = sc[s] > 0;

  always @(posedge clk) begin
    if (lm_en) begin
      if (lm_we) begin lm[lm_addr] <= lm_wdata; lm_writes++; end
      else lm_rdata <= lm[lm_addr];
    end
    if (rf_we) begin rf[rf_waddr] <= rf_wdata; rf_writes++; end
    if (dut.state == dut.S_L2R) busy_l2r++;
    if (dut.state == dut.S_R2L) busy_r2l++;
    if (sem_req.take) sc[sem_req.take_id]--;
    if (sem_req.give) begin
      sc[sem_req.give_id]++;
      if (sem_req.give_id == SEM_L2F) rf_at_sig = rf_writes;
      if (sem_req.give_id == SEM_L2G) lm_at_sig = lm_writes;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_idle(string what);
    int w0;
    w0 = rf_writes + lm_writes;
    repeat (30) @(negedge clk);
    checks++;
    if (rf_writes + lm_writes != w0 || halted) begin failures++; $display("FAIL no wait at %s", what); end
  endtask

  initial begin
    lls_instr_t f;
    fp64_t rf_in [RF_DEPTH];
    foreach (sc[s]) sc[s] = 0;
    foreach (prog[a]) prog[a] = '0;
    foreach (lm[a]) lm[a] = rand_fp(100);
    foreach (rf[r]) begin rf[r] = rand_fp(100); rf_in[r] = rf[r]; end
    f = '0; f.op = LLS_LM2RF; f.lm_addr = 40; f.rf_addr = 8; f.len = 9'd50;
    f.sync.wait_en = 1; f.sync.wait_sem = 2'(SEM_G2L); prog[0] = f;
    f = '0; f.op = LLS_LM2RF; f.lm_addr = 3000; f.rf_addr = 200; f.len = 9'd56; prog[1] = f;
    f = '0; f.op = LLS_NOP; f.sync.sig_en = 1; f.sync.sig_sem = 2'(SEM_L2F); prog[2] = f;
    f = '0; f.op = LLS_RF2LM; f.lm_addr = 1024; f.rf_addr = 100; f.len = 9'd70;
    f.sync.wait_en = 1; f.sync.wait_sem = 2'(SEM_F2L); prog[3] = f;
    f = '0; f.op = LLS_HALT; f.sync.sig_en = 1; f.sync.sig_sem = 2'(SEM_L2G); prog[4] = f;

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    expect_idle("G2L");
    sc[SEM_G2L] = 1;
    while (sc[SEM_L2F] == 0) @(negedge clk);
    checks++;
    if (rf_at_sig != 106) begin failures++; $display("FAIL L2F after %0d writes", rf_at_sig); end
    for (int r = 0; r < RF_DEPTH; r++) begin
      fp64_t e;
      e = rf_in[r];
      if (r >= 8 && r < 58) e = lm[40 + r - 8];
      if (r >= 200 && r < 256) e = lm[3000 + r - 200];
      checks++;
      if (rf[r] !== e) begin failures++; if (failures < 8) $display("FAIL rf[%0d]", r); end
    end
    expect_idle("F2L");
    for (int r = 100; r < 170; r++) rf[r] = rand_fp(10);
    sc[SEM_F2L] = 1;
    while (!halted) @(negedge clk);
    checks++;
    if (lm_at_sig != 70 || sc[SEM_L2G] != 1 || sc[SEM_F2L] != 0 || sc[SEM_G2L] != 0) begin
      failures++; $display("FAIL L2G after %0d lm writes", lm_at_sig);
    end
    for (int a = 0; a < 70; a++) begin
      checks++;
      if (lm[1024 + a] !== rf[100 + a]) begin failures++; if (failures < 8) $display("FAIL lm[%0d]", 1024 + a); end
    end
    // throughput: LM2RF takes len + 1 clocks, RF2LM len clocks
    checks++;
    if (busy_l2r != 51 + 57 || busy_r2l != 70) begin
      failures++; $display("FAIL busy l2r=%0d r2l=%0d", busy_l2r, busy_r2l);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
