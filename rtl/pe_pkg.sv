// pe_pkg: types and constants shared by the processing element (PE) that
// runs Householder / modified-Householder QR factorization.
//
// The PE has two halves: a Load-Store CFU (global and local load/store
// sequencers around a local memory) and a Floating Point Sequencer (FPS:
// instruction memory, decoder, 256-entry register file and an arithmetic
// unit holding DOT4, a divider and a square root). All arithmetic is IEEE-754
// binary64. The register-file size (256) and the unit mix follow the paper;
// the instruction encodings, the semaphore synchronisation between the three
// sequencers and all memory depths are choices of this design.
package pe_pkg;

  typedef logic [63:0] fp64_t;

  localparam int unsigned RF_DEPTH = 256;          // "Register File is small memory of 256 registers"
  localparam int unsigned RF_AW    = $clog2(RF_DEPTH);
  localparam int unsigned LM_AW    = 16;           // local-memory address field width in instructions
  localparam int unsigned GM_AW    = 32;           // global-memory word address width
  localparam int unsigned LEN_W    = 16;           // block length field width
  localparam int unsigned NSEM     = 4;            // synchronisation semaphores

  // Semaphore numbering used by the shipped programs (any use is legal).
  localparam logic [1:0] SEM_G2L = 2'd0;  // global LS -> local LS : data is in LM
  localparam logic [1:0] SEM_L2F = 2'd1;  // local LS  -> FPS      : data is in RF
  localparam logic [1:0] SEM_F2L = 2'd2;  // FPS       -> local LS : results are in RF
  localparam logic [1:0] SEM_L2G = 2'd3;  // local LS  -> global LS: results are in LM

  // Synchronisation fields carried by every instruction of every sequencer.
  // wait_en: the instruction does not start before semaphore wait_sem is
  //          non-zero, and takes one count from it when it starts.
  // sig_en : the instruction does not start before everything issued ahead
  //          of it in the same sequencer has completed; it then adds one
  //          count to sig_sem.
  typedef struct packed {
    logic       wait_en;
    logic [1:0] wait_sem;
    logic       sig_en;
    logic [1:0] sig_sem;
  } sync_t;

  // Per-sequencer request to the semaphore block, valid for one cycle.
  typedef struct packed {
    logic       take;
    logic [1:0] take_id;
    logic       give;
    logic [1:0] give_id;
  } sem_req_t;

  // ---------------------------------------------------------------- FPS ---
  typedef enum logic [2:0] {
    FPS_NOP   = 3'd0,
    FPS_DOT4  = 3'd1,
    FPS_FDIV  = 3'd2,
    FPS_FSQRT = 3'd3,
    FPS_HALT  = 3'd7
  } fps_op_e;

  // DOT4 configuration
  //   mht = 0 (inner product): y = (rs0*rs1 +/- rs2*rs3) +/- (rs4*rs5 +/- rs6*rs7)
  //                            sub[0], sub[1], sub[2] select '-' in the two
  //                            first-level adders and the final adder.
  //   mht = 1 (MHT macro op) : y = rs7 - rs6 * (rs0*rs1 + (rs2*rs3 + rs4*rs5))
  //                            i.e. a - 2v1*(v1*a1 + (v2*a2 + v3*a3)).
  // FDIV : rd = rs0 / rs1
  // FSQRT: rd = sqrt(rs0); with sub[0] set, rd = -copysign(sqrt(rs0), rs1)
  typedef struct packed {
    fps_op_e               op;
    logic                  mht;
    logic [2:0]            sub;
    logic [RF_AW-1:0]      rd;
    logic [7:0][RF_AW-1:0] rs;
    sync_t                 sync;
  } fps_instr_t;

  // ---------------------------------------------------------- global LS ---
  typedef enum logic [1:0] {
    GLS_NOP   = 2'd0,
    GLS_LOAD  = 2'd1,   // GM[gm_addr +: len] -> LM[lm_addr +: len]
    GLS_STORE = 2'd2,   // LM[lm_addr +: len] -> GM[gm_addr +: len]
    GLS_HALT  = 2'd3
  } gls_op_e;

  typedef struct packed {
    gls_op_e          op;
    logic [GM_AW-1:0] gm_addr;
    logic [LM_AW-1:0] lm_addr;
    logic [LEN_W-1:0] len;
    sync_t            sync;
  } gls_instr_t;

  // ----------------------------------------------------------- local LS ---
  typedef enum logic [1:0] {
    LLS_NOP   = 2'd0,
    LLS_LM2RF = 2'd1,   // LM[lm_addr +: len] -> RF[rf_addr +: len]
    LLS_RF2LM = 2'd2,   // RF[rf_addr +: len] -> LM[lm_addr +: len]
    LLS_HALT  = 2'd3
  } lls_op_e;

  typedef struct packed {
    lls_op_e          op;
    logic [LM_AW-1:0] lm_addr;
    logic [RF_AW-1:0] rf_addr;
    logic [RF_AW:0]   len;
    sync_t            sync;
  } lls_instr_t;

  localparam int unsigned FPS_IW = $bits(fps_instr_t);
  localparam int unsigned GLS_IW = $bits(gls_instr_t);
  localparam int unsigned LLS_IW = $bits(lls_instr_t);
  // Width of the shared instruction-load port of the PE.
  localparam int unsigned PE_IW  = (FPS_IW > GLS_IW) ? ((FPS_IW > LLS_IW) ? FPS_IW : LLS_IW)
                                                     : ((GLS_IW > LLS_IW) ? GLS_IW : LLS_IW);

  // binary64 constants
  localparam fp64_t FP_QNAN = 64'h7FF8_0000_0000_0000;
  localparam fp64_t FP_PINF = 64'h7FF0_0000_0000_0000;

endpackage
