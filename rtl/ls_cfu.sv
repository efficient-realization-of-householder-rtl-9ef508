// ls_cfu: the Load-Store CFU, the communication half of the PE.
//
// As in the paper's PE diagram it holds two instruction memories, each with
// its own decoder, around the Local Memory (LM): the global load/store
// sequencer (gls_ctrl) moves blocks between Global Memory and LM through LM
// port A, the local load/store sequencer (lls_ctrl) moves blocks between
// LM and the FPS register file through LM port B. The two sequencers run
// concurrently, so GM traffic for the next block can overlap register-file
// traffic and computation; their order is set by the semaphores (pe_sem).
//
// Program loading: gls_imem_we / lls_imem_we with a shared address and data
// bus, one instruction per clock, before start.
module ls_cfu
  import pe_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned LM_DEPTH   = 4096
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          gls_imem_we,
  input  logic                          lls_imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_waddr,
  input  logic [PE_IW-1:0]              imem_wdata,
  input  logic                          start,
  output logic                          gls_halted,
  output logic                          lls_halted,
  // global memory
  output logic                          gm_req_valid,
  input  logic                          gm_req_ready,
  output logic                          gm_req_we,
  output logic [GM_AW-1:0]              gm_req_addr,
  output fp64_t                         gm_req_wdata,
  input  logic                          gm_rsp_valid,
  input  fp64_t                         gm_rsp_data,
  // register file
  output logic                          rf_we,
  output logic [RF_AW-1:0]              rf_waddr,
  output fp64_t                         rf_wdata,
  output logic [RF_AW-1:0]              rf_raddr,
  input  fp64_t                         rf_rdata,
  // synchronisation
  output sem_req_t                      gls_sem_req,
  output sem_req_t                      lls_sem_req,
  input  logic                          sem_avail [NSEM]
);

  localparam int unsigned IAW = $clog2(IMEM_DEPTH);
  localparam int unsigned LAW = $clog2(LM_DEPTH);

  logic [IAW-1:0]    gls_pc, lls_pc;
  logic [GLS_IW-1:0] gls_word;
  logic [LLS_IW-1:0] lls_word;

  logic           a_en, a_we, b_en, b_we;
  logic [LAW-1:0] a_addr, b_addr;
  fp64_t          a_wdata, a_rdata, b_wdata, b_rdata;

  instr_mem #(.WIDTH(GLS_IW), .DEPTH(IMEM_DEPTH)) u_gls_imem (
    .clk(clk), .we(gls_imem_we), .waddr(imem_waddr), .wdata(imem_wdata[GLS_IW-1:0]),
    .raddr(gls_pc), .rdata(gls_word)
  );

  instr_mem #(.WIDTH(LLS_IW), .DEPTH(IMEM_DEPTH)) u_lls_imem (
    .clk(clk), .we(lls_imem_we), .waddr(imem_waddr), .wdata(imem_wdata[LLS_IW-1:0]),
    .raddr(lls_pc), .rdata(lls_word)
  );

  gls_ctrl #(.IMEM_DEPTH(IMEM_DEPTH), .LM_DEPTH(LM_DEPTH)) u_gls (
    .clk(clk), .rst_n(rst_n), .start(start), .halted(gls_halted), .pc(gls_pc),
    .instr(gls_instr_t'(gls_word)),
    .gm_req_valid(gm_req_valid), .gm_req_ready(gm_req_ready), .gm_req_we(gm_req_we),
    .gm_req_addr(gm_req_addr), .gm_req_wdata(gm_req_wdata),
    .gm_rsp_valid(gm_rsp_valid), .gm_rsp_data(gm_rsp_data),
    .lm_en(a_en), .lm_we(a_we), .lm_addr(a_addr), .lm_wdata(a_wdata), .lm_rdata(a_rdata),
    .sem_req(gls_sem_req), .sem_avail(sem_avail)
  );

  lls_ctrl #(.IMEM_DEPTH(IMEM_DEPTH), .LM_DEPTH(LM_DEPTH)) u_lls (
    .clk(clk), .rst_n(rst_n), .start(start), .halted(lls_halted), .pc(lls_pc),
    .instr(lls_instr_t'(lls_word)),
    .lm_en(b_en), .lm_we(b_we), .lm_addr(b_addr), .lm_wdata(b_wdata), .lm_rdata(b_rdata),
    .rf_we(rf_we), .rf_waddr(rf_waddr), .rf_wdata(rf_wdata),
    .rf_raddr(rf_raddr), .rf_rdata(rf_rdata),
    .sem_req(lls_sem_req), .sem_avail(sem_avail)
  );

  local_mem #(.DEPTH(LM_DEPTH)) u_lm (
    .clk(clk),
    .a_en(a_en), .a_we(a_we), .a_addr(a_addr), .a_wdata(a_wdata), .a_rdata(a_rdata),
    .b_en(b_en), .b_we(b_we), .b_addr(b_addr), .b_wdata(b_wdata), .b_rdata(b_rdata)
  );

endmodule
