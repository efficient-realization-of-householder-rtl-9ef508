// pe_top: the Processing Element (PE) for Householder-transform QR
// factorization: Load-Store CFU + Floating Point Sequencer + the semaphores
// that order them.
//
// Operation (the five steps of the paper): the global load/store sequencer
// brings matrix blocks from Global Memory (GM) into the Local Memory, the
// local load/store sequencer copies them into the 256-entry register file,
// the FPS computes on them with DOT4 (inner-product or MHT configuration),
// FDIV and FSQRT, and the results go back register file -> LM -> GM. The
// three sequencers each run their own program and synchronise through four
// counting semaphores.
//
// Interface:
//   imem_we / imem_sel / imem_addr / imem_wdata : load one instruction per
//       clock into the FPS (sel 0), global LS (sel 1) or local LS (sel 2)
//       instruction memory, before start; the low bits of imem_wdata hold
//       the instruction.
//   start (pulse) runs all three programs from address 0; done is high once
//       all three have executed HALT.
//   gm_* : GM request channel (valid/ready, we, word address, write data)
//       and in-order read responses that the PE always accepts. In the
//       paper's multi-tile system this port reaches GM through the REDEFINE
//       router; here it is brought out directly.
//   ev   : per-clock event flags for performance counting.
module pe_top
  import pe_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned LM_DEPTH   = 4096
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          imem_we,
  input  logic [1:0]                    imem_sel,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  logic [PE_IW-1:0]              imem_wdata,
  input  logic                          start,
  output logic                          done,
  output logic                          gm_req_valid,
  input  logic                          gm_req_ready,
  output logic                          gm_req_we,
  output logic [GM_AW-1:0]              gm_req_addr,
  output fp64_t                         gm_req_wdata,
  input  logic                          gm_rsp_valid,
  input  fp64_t                         gm_rsp_data,
  output logic [5:0]                    ev   // {reconfig, stall_sync, stall_unit, stall_hazard, mht, issue}
);

  logic     fps_halted, gls_halted, lls_halted;
  logic     rf_we;
  logic [RF_AW-1:0] rf_waddr, rf_raddr;
  fp64_t    rf_wdata, rf_rdata;
  sem_req_t sem_req [3];
  logic     sem_avail [NSEM];

  fps #(.IMEM_DEPTH(IMEM_DEPTH)) u_fps (
    .clk(clk), .rst_n(rst_n),
    .imem_we(imem_we && imem_sel == 2'd0), .imem_waddr(imem_addr),
    .imem_wdata(imem_wdata[FPS_IW-1:0]),
    .start(start), .halted(fps_halted),
    .lls_we(rf_we), .lls_waddr(rf_waddr), .lls_wdata(rf_wdata),
    .lls_raddr(rf_raddr), .lls_rdata(rf_rdata),
    .sem_req(sem_req[0]), .sem_avail(sem_avail),
    .ev_issue(ev[0]), .ev_mht(ev[1]), .ev_stall_hazard(ev[2]), .ev_stall_unit(ev[3]),
    .ev_stall_sync(ev[4]), .ev_reconfig(ev[5])
  );

  ls_cfu #(.IMEM_DEPTH(IMEM_DEPTH), .LM_DEPTH(LM_DEPTH)) u_ls (
    .clk(clk), .rst_n(rst_n),
    .gls_imem_we(imem_we && imem_sel == 2'd1), .lls_imem_we(imem_we && imem_sel == 2'd2),
    .imem_waddr(imem_addr), .imem_wdata(imem_wdata),
    .start(start), .gls_halted(gls_halted), .lls_halted(lls_halted),
    .gm_req_valid(gm_req_valid), .gm_req_ready(gm_req_ready), .gm_req_we(gm_req_we),
    .gm_req_addr(gm_req_addr), .gm_req_wdata(gm_req_wdata),
    .gm_rsp_valid(gm_rsp_valid), .gm_rsp_data(gm_rsp_data),
    .rf_we(rf_we), .rf_waddr(rf_waddr), .rf_wdata(rf_wdata),
    .rf_raddr(rf_raddr), .rf_rdata(rf_rdata),
    .gls_sem_req(sem_req[1]), .lls_sem_req(sem_req[2]), .sem_avail(sem_avail)
  );

  pe_sem #(.NREQ(3)) u_sem (
    .clk(clk), .rst_n(rst_n), .clear(start), .req(sem_req), .avail(sem_avail)
  );

  assign done = fps_halted && gls_halted && lls_halted;

endmodule
