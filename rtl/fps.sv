// fps: the Floating Point Sequencer, the compute half of the PE.
//
// Instruction memory -> decoder (fps_ctrl) -> arithmetic unit (DOT4, FDIV,
// FSQRT), all operands coming from and results going to the 256-entry
// register file, as in the paper's PE diagram. The register file has one
// extra read and one extra write port for the local load/store unit of the
// Load-Store CFU (lls_*), which fills it from and drains it to the local
// memory.
//
// Program loading: imem_we / imem_waddr / imem_wdata write one instruction
// per clock before start. start (a pulse) runs the program from address 0;
// halted rises when HALT has retired. Event outputs pulse once per clock in
// which the named condition holds.
module fps
  import pe_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_waddr,
  input  logic [FPS_IW-1:0]             imem_wdata,
  input  logic                          start,
  output logic                          halted,
  // register-file port of the local load/store unit
  input  logic                          lls_we,
  input  logic [RF_AW-1:0]              lls_waddr,
  input  fp64_t                         lls_wdata,
  input  logic [RF_AW-1:0]              lls_raddr,
  output fp64_t                         lls_rdata,
  // synchronisation
  output sem_req_t                      sem_req,
  input  logic                          sem_avail [NSEM],
  // events
  output logic                          ev_issue,
  output logic                          ev_mht,
  output logic                          ev_stall_hazard,
  output logic                          ev_stall_unit,
  output logic                          ev_stall_sync,
  output logic                          ev_reconfig
);

  logic [$clog2(IMEM_DEPTH)-1:0] pc;
  logic [FPS_IW-1:0]             iword;
  fps_instr_t                    instr;
  logic                          issue_valid, issue_ready;
  logic                          wb_valid [3];
  logic [RF_AW-1:0]              wb_rd    [3];
  fp64_t                         wb_data  [3];
  logic [RF_AW-1:0]              raddr [9];
  fp64_t                         rdata [9];
  logic                          rf_we    [4];
  logic [RF_AW-1:0]              rf_waddr [4];
  fp64_t                         rf_wdata [4];
  fp64_t                         opnd [8];

  instr_mem #(.WIDTH(FPS_IW), .DEPTH(IMEM_DEPTH)) u_imem (
    .clk(clk), .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .raddr(pc), .rdata(iword)
  );

  assign instr = fps_instr_t'(iword);

  fps_ctrl #(.IMEM_DEPTH(IMEM_DEPTH)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .halted(halted), .pc(pc), .instr(instr),
    .issue_valid(issue_valid), .issue_ready(issue_ready),
    .wb_valid(wb_valid), .wb_rd(wb_rd),
    .sem_req(sem_req), .sem_avail(sem_avail),
    .stall_hazard(ev_stall_hazard), .stall_unit(ev_stall_unit), .stall_sync(ev_stall_sync)
  );

  always_comb begin
    for (int i = 0; i < 8; i++) begin
      raddr[i] = instr.rs[i];
      opnd[i]  = rdata[i];
    end
    raddr[8]  = lls_raddr;
    lls_rdata = rdata[8];
    for (int w = 0; w < 3; w++) begin
      rf_we[w]    = wb_valid[w];
      rf_waddr[w] = wb_rd[w];
      rf_wdata[w] = wb_data[w];
    end
    rf_we[3]    = lls_we;
    rf_waddr[3] = lls_waddr;
    rf_wdata[3] = lls_wdata;
  end

  reg_file #(.DEPTH(RF_DEPTH), .NR(9), .NW(4)) u_rf (
    .clk(clk), .raddr(raddr), .rdata(rdata), .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata)
  );

  fp_arith_unit u_fau (
    .clk(clk), .rst_n(rst_n), .issue_valid(issue_valid), .issue_ready(issue_ready),
    .op(instr.op), .mht(instr.mht), .sub(instr.sub), .rd(instr.rd), .opnd(opnd),
    .wb_valid(wb_valid), .wb_rd(wb_rd), .wb_data(wb_data), .reconfig(ev_reconfig)
  );

  assign ev_issue = issue_valid && issue_ready;
  assign ev_mht   = issue_valid && issue_ready && instr.op == FPS_DOT4 && instr.mht;

endmodule
