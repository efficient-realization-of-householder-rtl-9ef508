// lls_ctrl: decoder / sequencer of the local load/store instructions.
//
// Executes, one at a time, the instructions in the local load/store
// instruction memory: LM2RF copies len words from the local memory into
// consecutive registers of the FPS register file (step 2 of the PE's
// operation), RF2LM copies registers back to the local memory (step 4).
// Both move one word per clock: LM2RF reads local-memory port B and writes
// the register the next clock (the local memory reads synchronously), RF2LM
// reads the register asynchronously and writes the local memory in the same
// clock. HALT stops the sequencer. Instruction format and timing are this
// design's choices.
module lls_ctrl
  import pe_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned LM_DEPTH   = 4096
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          halted,
  output logic [$clog2(IMEM_DEPTH)-1:0] pc,
  input  lls_instr_t                    instr,
  // local memory port B
  output logic                          lm_en,
  output logic                          lm_we,
  output logic [$clog2(LM_DEPTH)-1:0]   lm_addr,
  output fp64_t                         lm_wdata,
  input  fp64_t                         lm_rdata,
  // register file
  output logic                          rf_we,
  output logic [RF_AW-1:0]              rf_waddr,
  output fp64_t                         rf_wdata,
  output logic [RF_AW-1:0]              rf_raddr,
  input  fp64_t                         rf_rdata,
  // synchronisation
  output sem_req_t                      sem_req,
  input  logic                          sem_avail [NSEM]
);

  localparam int unsigned LAW = $clog2(LM_DEPTH);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_L2R, S_R2L, S_HALT} state_e;
  state_e state;

  lls_instr_t     cur;
  logic [RF_AW:0] cnt;        // words read (L2R) / moved (R2L)
  logic           rd_pend;    // a local-memory read returns this clock
  logic [RF_AW:0] wcnt;       // words written to the register file (L2R)
  logic           sync_ok, fire;

  always_comb begin
    sync_ok = !instr.sync.wait_en || sem_avail[instr.sync.wait_sem];
    fire    = (state == S_RUN) && sync_ok;
    sem_req.take    = fire && instr.sync.wait_en;
    sem_req.take_id = instr.sync.wait_sem;
    sem_req.give    = fire && instr.sync.sig_en;
    sem_req.give_id = instr.sync.sig_sem;
  end

  always_comb begin
    lm_en    = 1'b0;
    lm_we    = 1'b0;
    lm_addr  = LAW'(cur.lm_addr) + LAW'(cnt);
    lm_wdata = rf_rdata;
    rf_we    = 1'b0;
    rf_waddr = cur.rf_addr + RF_AW'(wcnt);
    rf_wdata = lm_rdata;
    rf_raddr = cur.rf_addr + RF_AW'(cnt);
    case (state)
      S_L2R: begin
        lm_en = (cnt != cur.len);
        rf_we = rd_pend;
      end
      S_R2L: begin
        lm_en = 1'b1;
        lm_we = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pc      <= '0;
      cur     <= '0;
      cnt     <= '0;
      wcnt    <= '0;
      rd_pend <= 1'b0;
    end else begin
      case (state)
        S_IDLE, S_HALT: if (start) begin
          state <= S_RUN;
          pc    <= '0;
        end
        S_RUN: if (fire) begin
          cur     <= instr;
          cnt     <= '0;
          wcnt    <= '0;
          rd_pend <= 1'b0;
          unique case (instr.op)
            LLS_HALT:  state <= S_HALT;
            LLS_LM2RF: begin
              if (instr.len != '0) state <= S_L2R;
              pc <= pc + 1'b1;
            end
            LLS_RF2LM: begin
              if (instr.len != '0) state <= S_R2L;
              pc <= pc + 1'b1;
            end
            default:   pc <= pc + 1'b1;
          endcase
        end
        S_L2R: begin
          rd_pend <= lm_en;
          if (lm_en) cnt <= cnt + 1'b1;
          if (rd_pend) begin
            wcnt <= wcnt + 1'b1;
            if (wcnt + 1'b1 == cur.len) state <= S_RUN;
          end
        end
        S_R2L: begin
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == cur.len) state <= S_RUN;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign halted = (state == S_HALT);

endmodule
