// tb_ls_cfu: self-checking test of the Load-Store CFU with its real
// instruction memories and local memory, the semaphore unit and gm_model
// (random back-pressure). The register file is a testbench array and a small
// process stands in for the FPS: it waits for the "operands in registers"
// semaphore, overwrites a block of registers with new values and signals
// back. The global program loads 100 words, the local program moves them
// into the register file, and after the stand-in's reply 40 registers travel
// back through local memory to GM. Checks register contents, GM contents,
// that the two sequencers really ran in the semaphore order, and that both
// halt.
module tb_ls_cfu;
  import pe_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, gls_halted, lls_halted;
  logic gls_imem_we = 0, lls_imem_we = 0;
  logic [9:0] imem_waddr = 0;
  logic [PE_IW-1:0] imem_wdata = 0;
  logic gm_req_valid, gm_req_ready, gm_req_we, gm_rsp_valid;
  logic [GM_AW-1:0] gm_req_addr;
  fp64_t gm_req_wdata, gm_rsp_data;
  logic rf_we;
  logic [RF_AW-1:0] rf_waddr, rf_raddr;
  fp64_t rf_wdata, rf_rdata;
  fp64_t rf [RF_DEPTH];
  sem_req_t gls_sem_req, lls_sem_req, f_req = '0;
  sem_req_t reqs [3];
  logic sem_avail [NSEM];
  int checks = 0, failures = 0, rf_writes_at_fps = -1;
  int rf_writes = 0;

  ls_cfu dut (.clk(clk), .rst_n(rst_n), .gls_imem_we(gls_imem_we), .lls_imem_we(lls_imem_we),
    .imem_waddr(imem_waddr), .imem_wdata(imem_wdata), .start(start), .gls_halted(gls_halted),
    .lls_halted(lls_halted), .gm_req_valid(gm_req_valid), .gm_req_ready(gm_req_ready),
    .gm_req_we(gm_req_we), .gm_req_addr(gm_req_addr), .gm_req_wdata(gm_req_wdata),
    .gm_rsp_valid(gm_rsp_valid), .gm_rsp_data(gm_rsp_data), .rf_we(rf_we), .rf_waddr(rf_waddr),
    .rf_wdata(rf_wdata), .rf_raddr(rf_raddr), .rf_rdata(rf_rdata), .gls_sem_req(gls_sem_req),
    .lls_sem_req(lls_sem_req), .sem_avail(sem_avail));
  gm_model #(.DEPTH(4096), .LAT(5), .READY_GAP(3)) u_gm (.clk(clk), .rst_n(rst_n),
    .gm_req_valid(gm_req_valid), .gm_req_ready(gm_req_ready), .gm_req_we(gm_req_we),
    .gm_req_addr(gm_req_addr), .gm_req_wdata(gm_req_wdata), .gm_rsp_valid(gm_rsp_valid),
    .gm_rsp_data(gm_rsp_data));
  assign reqs[0] = gls_sem_req;
  assign reqs[1] = lls_sem_req;
  assign reqs[2] = f_req;
  pe_sem #(.NREQ(3)) u_sem (.clk(clk), .rst_n(rst_n), .clear(start), .req(reqs), .avail(sem_avail));

  always #5 clk = ~clk;
  assign rf_rdata = rf[rf_raddr];
  always @(posedge clk) if (rf_we) begin rf[rf_waddr] <= rf_wdata; rf_writes++; end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(input bit lls, input int a, input logic [PE_IW-1:0] w);
    @(negedge clk);
    gls_imem_we = !lls; lls_imem_we = lls; imem_waddr = 10'(a); imem_wdata = w;
  endtask

  initial begin
    gls_instr_t g;
    lls_instr_t l;
    fp64_t newv [40];
    foreach (rf[r]) rf[r] = 64'h0;
    for (int a = 0; a < 4096; a++) u_gm.mem[a] = rand_fp(100);
    foreach (newv[i]) newv[i] = rand_fp(100);
    repeat (3) @(negedge clk);
    rst_n = 1;
    g = '0; g.op = GLS_LOAD; g.gm_addr = 64; g.lm_addr = 0; g.len = 100;        put(0, 0, PE_IW'(g));
    g = '0; g.op = GLS_NOP; g.sync.sig_en = 1; g.sync.sig_sem = 2'(SEM_G2L);     put(0, 1, PE_IW'(g));
    g = '0; g.op = GLS_STORE; g.gm_addr = 3000; g.lm_addr = 2048; g.len = 40;
    g.sync.wait_en = 1; g.sync.wait_sem = 2'(SEM_L2G);                         put(0, 2, PE_IW'(g));
    g = '0; g.op = GLS_HALT;                                                    put(0, 3, PE_IW'(g));
    l = '0; l.op = LLS_LM2RF; l.lm_addr = 0; l.rf_addr = 10; l.len = 9'd100;
    l.sync.wait_en = 1; l.sync.wait_sem = 2'(SEM_G2L);                         put(1, 0, PE_IW'(l));
    l = '0; l.op = LLS_NOP; l.sync.sig_en = 1; l.sync.sig_sem = 2'(SEM_L2F);     put(1, 1, PE_IW'(l));
    l = '0; l.op = LLS_RF2LM; l.lm_addr = 2048; l.rf_addr = 150; l.len = 9'd40;
    l.sync.wait_en = 1; l.sync.wait_sem = 2'(SEM_F2L);                         put(1, 2, PE_IW'(l));
    l = '0; l.op = LLS_NOP; l.sync.sig_en = 1; l.sync.sig_sem = 2'(SEM_L2G);     put(1, 3, PE_IW'(l));
    l = '0; l.op = LLS_HALT;                                                    put(1, 4, PE_IW'(l));
    @(negedge clk); gls_imem_we = 0; lls_imem_we = 0; start = 1;
    @(negedge clk); start = 0;
    // FPS stand-in
    while (!sem_avail[SEM_L2F]) @(negedge clk);
    rf_writes_at_fps = rf_writes;
    f_req.take = 1; f_req.take_id = 2'(SEM_L2F);
    @(negedge clk); f_req = '0;
    for (int i = 0; i < 40; i++) rf[150 + i] = newv[i];
    checks++;
    if (gls_halted || lls_halted) begin failures++; $display("FAIL halted before reply"); end
    repeat (20) @(negedge clk);
    f_req.give = 1; f_req.give_id = 2'(SEM_F2L);
    @(negedge clk); f_req = '0;
    while (!(gls_halted && lls_halted)) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (rf_writes_at_fps != 100) begin failures++; $display("FAIL L2F after %0d writes", rf_writes_at_fps); end
    for (int i = 0; i < 100; i++) begin
      checks++;
      if (rf[10 + i] !== u_gm.mem[64 + i]) begin failures++; if (failures < 8) $display("FAIL rf[%0d]", 10 + i); end
    end
    for (int i = 0; i < 40; i++) begin
      checks++;
      if (u_gm.mem[3000 + i] !== newv[i]) begin failures++; if (failures < 8) $display("FAIL gm[%0d]", 3000 + i); end
    end
    checks++;
    if (u_gm.n_backpressure == 0) begin failures++; $display("FAIL no back-pressure"); end
    foreach (sem_avail[s]) begin
      checks++;
      if (sem_avail[s]) begin failures++; $display("FAIL semaphore %0d left over", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
