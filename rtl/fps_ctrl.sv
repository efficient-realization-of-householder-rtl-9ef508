// fps_ctrl: instruction decoder and issue logic of the Floating Point
// Sequencer (FPS).
//
// After start, the program counter walks the FPS instruction memory and
// issues one instruction per clock, in order, to the arithmetic unit. An
// instruction waits (and the reason is reported on the stall outputs) when
//   - a register it reads or writes still awaits a result (RAW / WAW hazard,
//     tracked by a 256-bit scoreboard set at issue, cleared at write-back),
//   - the unit it needs is not ready (divider or square root busy, DOT4
//     changing configuration),
//   - its wait semaphore is empty, or it signals a semaphore while results
//     of earlier instructions are still outstanding.
// HALT waits until every result has been written, then raises halted.
// The instruction format and the scoreboard are this design's choices; the
// paper shows only an instruction memory feeding a decoder feeding the
// arithmetic unit.
module fps_ctrl
  import pe_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          halted,
  output logic [$clog2(IMEM_DEPTH)-1:0] pc,
  input  fps_instr_t                    instr,
  // issue to the arithmetic unit
  output logic                          issue_valid,
  input  logic                          issue_ready,
  // write-back ports of the arithmetic unit (clear the scoreboard)
  input  logic                          wb_valid [3],
  input  logic [RF_AW-1:0]              wb_rd    [3],
  // synchronisation
  output sem_req_t                      sem_req,
  input  logic                          sem_avail [NSEM],
  // events, for performance counting
  output logic                          stall_hazard,
  output logic                          stall_unit,
  output logic                          stall_sync
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_HALT} state_e;
  state_e state;

  logic [RF_DEPTH-1:0] pend;
  logic                hazard, sync_ok, any_pend, is_exec, fire;

  always_comb begin
    any_pend = (pend != '0);
    is_exec  = (instr.op == FPS_DOT4) || (instr.op == FPS_FDIV) || (instr.op == FPS_FSQRT);
    hazard   = 1'b0;
    unique case (instr.op)
      FPS_DOT4: begin
        for (int i = 0; i < 8; i++) hazard |= pend[instr.rs[i]];
        hazard |= pend[instr.rd];
      end
      FPS_FDIV:  hazard = pend[instr.rs[0]] | pend[instr.rs[1]] | pend[instr.rd];
      FPS_FSQRT: hazard = pend[instr.rs[0]] | (instr.sub[0] & pend[instr.rs[1]]) | pend[instr.rd];
      FPS_HALT:  hazard = any_pend;
      default:   hazard = 1'b0;
    endcase
    sync_ok = (!instr.sync.wait_en || sem_avail[instr.sync.wait_sem]) &&
              (!instr.sync.sig_en  || !any_pend);
    fire         = (state == S_RUN) && sync_ok && !hazard && (!is_exec || issue_ready);
    issue_valid  = (state == S_RUN) && is_exec && sync_ok && !hazard;
    stall_sync   = (state == S_RUN) && !sync_ok;
    stall_hazard = (state == S_RUN) && sync_ok && hazard;
    stall_unit   = (state == S_RUN) && sync_ok && !hazard && is_exec && !issue_ready;

    sem_req.take    = fire && instr.sync.wait_en;
    sem_req.take_id = instr.sync.wait_sem;
    sem_req.give    = fire && instr.sync.sig_en;
    sem_req.give_id = instr.sync.sig_sem;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
      pend  <= '0;
    end else begin
      logic [RF_DEPTH-1:0] p;
      p = pend;
      for (int w = 0; w < 3; w++) if (wb_valid[w]) p[wb_rd[w]] = 1'b0;
      if (fire && is_exec) p[instr.rd] = 1'b1;
      pend <= p;
      case (state)
        S_IDLE, S_HALT: if (start) begin
          state <= S_RUN;
          pc    <= '0;
        end
        S_RUN: if (fire) begin
          if (instr.op == FPS_HALT) state <= S_HALT;
          else pc <= pc + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign halted = (state == S_HALT);

endmodule
