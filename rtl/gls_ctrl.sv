// gls_ctrl: decoder / sequencer of the global load/store instructions.
//
// Executes, one at a time, the instructions in the global load/store
// instruction memory: LOAD copies len words from Global Memory (GM) to the
// local memory (step 1 of the PE's operation), STORE copies len words from
// the local memory back to GM (step 5). HALT stops the sequencer.
//
// GM port (this design's choice, the paper gives no GM protocol): a request
// channel gm_req_valid / gm_req_ready with write enable, word address and
// write data, and an in-order read-response channel gm_rsp_valid /
// gm_rsp_data that the PE always accepts. A LOAD keeps issuing reads while
// earlier responses are in flight, so it streams one word per clock when GM
// does; a STORE moves one word every two clocks (local-memory read, then GM
// write). Local-memory port A is used; its reads return the next clock.
module gls_ctrl
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
  input  gls_instr_t                    instr,
  // global memory
  output logic                          gm_req_valid,
  input  logic                          gm_req_ready,
  output logic                          gm_req_we,
  output logic [GM_AW-1:0]              gm_req_addr,
  output fp64_t                         gm_req_wdata,
  input  logic                          gm_rsp_valid,
  input  fp64_t                         gm_rsp_data,
  // local memory port A
  output logic                          lm_en,
  output logic                          lm_we,
  output logic [$clog2(LM_DEPTH)-1:0]   lm_addr,
  output fp64_t                         lm_wdata,
  input  fp64_t                         lm_rdata,
  // synchronisation
  output sem_req_t                      sem_req,
  input  logic                          sem_avail [NSEM]
);

  localparam int unsigned LAW = $clog2(LM_DEPTH);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_LOAD, S_ST_RD, S_ST_WR, S_HALT} state_e;
  state_e state;

  gls_instr_t       cur;
  logic [LEN_W-1:0] req_cnt, rsp_cnt;
  logic             sync_ok, fire;

  always_comb begin
    sync_ok = !instr.sync.wait_en || sem_avail[instr.sync.wait_sem];
    fire    = (state == S_RUN) && sync_ok;
    sem_req.take    = fire && instr.sync.wait_en;
    sem_req.take_id = instr.sync.wait_sem;
    sem_req.give    = fire && instr.sync.sig_en;
    sem_req.give_id = instr.sync.sig_sem;
  end

  always_comb begin
    gm_req_valid = 1'b0;
    gm_req_we    = 1'b0;
    gm_req_addr  = cur.gm_addr + GM_AW'(req_cnt);
    gm_req_wdata = lm_rdata;
    lm_en        = 1'b0;
    lm_we        = 1'b0;
    lm_addr      = LAW'(cur.lm_addr) + LAW'(rsp_cnt);
    lm_wdata     = gm_rsp_data;
    case (state)
      S_LOAD: begin
        gm_req_valid = (req_cnt != cur.len);
        lm_en        = gm_rsp_valid;
        lm_we        = 1'b1;
      end
      S_ST_RD: begin
        lm_en   = 1'b1;
        lm_addr = LAW'(cur.lm_addr) + LAW'(req_cnt);
      end
      S_ST_WR: begin
        gm_req_valid = 1'b1;
        gm_req_we    = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pc      <= '0;
      cur     <= '0;
      req_cnt <= '0;
      rsp_cnt <= '0;
    end else begin
      case (state)
        S_IDLE, S_HALT: if (start) begin
          state <= S_RUN;
          pc    <= '0;
        end
        S_RUN: if (fire) begin
          cur     <= instr;
          req_cnt <= '0;
          rsp_cnt <= '0;
          unique case (instr.op)
            GLS_HALT:  state <= S_HALT;
            GLS_LOAD:  begin
              if (instr.len != '0) state <= S_LOAD;
              pc <= pc + 1'b1;
            end
            GLS_STORE: begin
              if (instr.len != '0) state <= S_ST_RD;
              pc <= pc + 1'b1;
            end
            default:   pc <= pc + 1'b1;
          endcase
        end
        S_LOAD: begin
          if (gm_req_valid && gm_req_ready) req_cnt <= req_cnt + 1'b1;
          if (gm_rsp_valid) begin
            rsp_cnt <= rsp_cnt + 1'b1;
            if (rsp_cnt + 1'b1 == cur.len) state <= S_RUN;
          end
        end
        S_ST_RD: state <= S_ST_WR;
        S_ST_WR: if (gm_req_ready) begin
          req_cnt <= req_cnt + 1'b1;
          state   <= (req_cnt + 1'b1 == cur.len) ? S_RUN : S_ST_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign halted = (state == S_HALT);

  // the GM must not answer reads that were never issued
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   gm_rsp_valid |-> (state == S_LOAD && rsp_cnt < req_cnt))
    else $error("gls_ctrl: unexpected GM response");

endmodule
