// tb_gls_ctrl: self-checking test of the global load/store sequencer.
// The instruction memory and local memory are modelled in the testbench
// (local memory with the one-clock synchronous read of the real one) and
// Global Memory by gm_model with random back-pressure. The program loads two
// blocks, signals on a NOP (a signal is given when its instruction starts,
// after every earlier instruction has finished), waits for a semaphore that
// the testbench gives only after checking the loaded data, stores a block
// back and halts.
// Checks local-memory and GM contents, that the semaphore wait really held
// the sequencer, and that the signal came after the last load word.
module tb_gls_ctrl;
  import pe_pkg::*;
  import tb_util_pkg::*;

  localparam int LMD = 4096;
  logic clk = 0, rst_n = 0, start = 0, halted;
  logic [9:0] pc;
  gls_instr_t instr, prog [1024];
  logic gm_req_valid, gm_req_ready, gm_req_we, gm_rsp_valid;
  logic [GM_AW-1:0] gm_req_addr;
  fp64_t gm_req_wdata, gm_rsp_data;
  logic lm_en, lm_we;
  logic [11:0] lm_addr;
  fp64_t lm_wdata, lm_rdata = 0;
  fp64_t lm [LMD];
  sem_req_t sem_req;
  logic sem_avail [NSEM];
  int sc [NSEM];
  int checks = 0, failures = 0, lm_writes = 0, writes_at_sig = -1, gm_writes_while_waiting = 0;
  bit waiting = 0;

  gls_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .halted(halted), .pc(pc), .instr(instr),
    .gm_req_valid(gm_req_valid), .gm_req_ready(gm_req_ready), .gm_req_we(gm_req_we),
    .gm_req_addr(gm_req_addr), .gm_req_wdata(gm_req_wdata), .gm_rsp_valid(gm_rsp_valid),
    .gm_rsp_data(gm_rsp_data), .lm_en(lm_en), .lm_we(lm_we), .lm_addr(lm_addr),
    .lm_wdata(lm_wdata), .lm_rdata(lm_rdata), .sem_req(sem_req), .sem_avail(sem_avail));
  gm_model #(.DEPTH(4096), .LAT(3), .READY_GAP(3)) u_gm (.clk(clk), .rst_n(rst_n),
    .gm_req_valid(gm_req_valid), .gm_req_ready(gm_req_ready), .gm_req_we(gm_req_we),
    .gm_req_addr(gm_req_addr), .gm_req_wdata(gm_req_wdata), .gm_rsp_valid(gm_rsp_valid),
    .gm_rsp_data(gm_rsp_data));

  always #5 clk = ~clk;
  assign instr = prog[pc];
  always_comb foreach (sem_avail[s]) sem_avail[s] = sc[s] > 0;

  always @(posedge clk) begin
    if (lm_en) begin
      if (lm_we) begin lm[lm_addr] <= lm_wdata; lm_writes++; end
      else lm_rdata <= lm[lm_addr];
    end
    if (sem_req.take) sc[sem_req.take_id]--;
    if (sem_req.give) begin
      sc[sem_req.give_id]++;
      if (sem_req.give_id == SEM_G2L) writes_at_sig = lm_writes + ((lm_en && lm_we) ? 1 : 0);
    end
    if (waiting && gm_req_valid && gm_req_we) gm_writes_while_waiting++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gls_instr_t f;
    foreach (sc[s]) sc[s] = 0;
    foreach (lm[a]) lm[a] = 64'h0;
    foreach (prog[a]) prog[a] = '0;
    for (int a = 0; a < 4096; a++) u_gm.mem[a] = rand_fp(100);
    f = '0; f.op = GLS_LOAD; f.gm_addr = 100; f.lm_addr = 10; f.len = 37; prog[0] = f;
    f = '0; f.op = GLS_LOAD; f.gm_addr = 1000; f.lm_addr = 300; f.len = 64; prog[1] = f;
    f = '0; f.op = GLS_NOP; f.sync.sig_en = 1; f.sync.sig_sem = 2'(SEM_G2L); prog[2] = f;
    f = '0; f.op = GLS_STORE; f.gm_addr = 2000; f.lm_addr = 700; f.len = 50;
    f.sync.wait_en = 1; f.sync.wait_sem = 2'(SEM_L2G); prog[3] = f;
    f = '0; f.op = GLS_HALT; prog[4] = f;
    for (int a = 700; a < 750; a++) lm[a] = rand_fp(100);

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (sc[SEM_G2L] == 0) @(negedge clk);
    waiting = 1;
    checks++;
    if (writes_at_sig != 101) begin failures++; $display("FAIL signal after %0d writes", writes_at_sig); end
    for (int a = 0; a < 37; a++) begin
      checks++; if (lm[10 + a] !== u_gm.mem[100 + a]) failures++;
    end
    for (int a = 0; a < 64; a++) begin
      checks++; if (lm[300 + a] !== u_gm.mem[1000 + a]) failures++;
    end
    repeat (50) @(negedge clk);
    waiting = 0;
    checks++;
    if (gm_writes_while_waiting != 0 || halted) begin failures++; $display("FAIL did not wait"); end
    sc[SEM_L2G] = 1;
    while (!halted) @(negedge clk);
    repeat (5) @(negedge clk);
    for (int a = 0; a < 50; a++) begin
      checks++;
      if (u_gm.mem[2000 + a] !== lm[700 + a]) begin
        failures++; if (failures < 8) $display("FAIL gm[%0d]", 2000 + a);
      end
    end
    checks++;
    if (sc[SEM_L2G] != 0 || u_gm.n_backpressure == 0) begin failures++; $display("FAIL sem/backpressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
