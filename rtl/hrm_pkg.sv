// hrm_pkg: sizes, types and the reliability-mode table shared by the
// heterogeneous-reliability multi-core.
//
// The component sizes follow the processor parameters of the paper's
// vulnerability experiments (192-entry re-order buffer, 64-entry instruction
// queue, 32-entry load and store queues, 256 integer and 256 floating-point
// physical registers, four-issue core, ten cores).  Port counts, data widths
// and payload widths are this design's own choices and are noted where
// defined.  The mode table MODE_HARDEN is the paper's list of reliability
// modes U and RM1..RM9: which component groups a core hardens with triple
// modular redundancy (TMR).
package hrm_pkg;

  // ---- core sizes -------------------------------------------------------
  localparam int XLEN        = 64;   // Alpha is a 64-bit ISA (own knowledge)
  localparam int ISSUE_W     = 4;    // four-issue core (paper)
  localparam int FP_ISSUE_W  = 2;    // FP multiply + FP add pipes (Alpha block diagram)
  localparam int MEM_PORTS   = 2;    // two address paths into the D-cache (Alpha block diagram)
  localparam int RENAME_W    = 4;    // instructions renamed per cycle (assumed = issue width)
  localparam int ROB_ENTRIES = 192;  // paper
  localparam int IQ_ENTRIES  = 64;   // paper
  localparam int LQ_ENTRIES  = 32;   // paper ("Load-Store Queues: 32 entries", taken per queue)
  localparam int SQ_ENTRIES  = 32;
  localparam int INT_PREGS   = 256;  // paper
  localparam int FP_PREGS    = 256;  // paper
  localparam int ARCH_REGS   = 32;   // Alpha has 32 integer and 32 FP registers (own knowledge)
  localparam int NUM_CORES   = 10;   // paper: 10-core HMC, one core per mode
  localparam int NUM_MODES   = 10;
  localparam int NUM_APPS    = 4;    // Bit-counts, Dijkstra, Patricia, SHA
  localparam int MAX_TASKS   = 8;    // largest workload mix has 8 tasks

  localparam int PREG_W      = 8;
  localparam int AREG_W      = 5;
  localparam int ROB_IDX_W   = 8;
  localparam int LQ_IDX_W    = 5;
  localparam int SQ_IDX_W    = 5;

  // read/write ports (own choice: two sources per issued op, one result per
  // pipe plus one load return per memory port)
  localparam int INT_RF_RD   = 2 * ISSUE_W;
  localparam int INT_RF_WR   = ISSUE_W + MEM_PORTS;
  localparam int FP_RF_RD    = 2 * FP_ISSUE_W;
  localparam int FP_RF_WR    = FP_ISSUE_W + MEM_PORTS;
  localparam int RM_LOOKUPS  = 3 * RENAME_W;    // two sources + old destination
  localparam int ROB_CMP_W   = ISSUE_W + FP_ISSUE_W;
  localparam int COMMIT_W    = 4;

  // opaque payload widths carried by queue entries (own choice)
  localparam int IQ_PAYLOAD_W  = 32;
  localparam int ROB_PAYLOAD_W = 32;

  // ---- reliability modes -----------------------------------------------
  typedef enum logic [3:0] {
    MODE_U   = 4'd0,
    MODE_RM1 = 4'd1,
    MODE_RM2 = 4'd2,
    MODE_RM3 = 4'd3,
    MODE_RM4 = 4'd4,
    MODE_RM5 = 4'd5,
    MODE_RM6 = 4'd6,
    MODE_RM7 = 4'd7,
    MODE_RM8 = 4'd8,
    MODE_RM9 = 4'd9
  } rel_mode_e;

  // component groups that a mode hardens
  typedef struct packed {
    logic rf;   // integer and FP register files
    logic iq;   // integer and FP issue queues
    logic lq;   // load queue
    logic sq;   // store queue
    logic rm;   // integer and FP rename maps
    logic rob;  // re-order buffer
  } harden_t;

  // Table of the ten modes (U = unprotected).
  function automatic harden_t mode_harden(rel_mode_e m);
    harden_t h;
    h = '0;
    unique case (m)
      MODE_U:   h = '0;
      MODE_RM1: h.rf = 1'b1;
      MODE_RM2: begin h.iq = 1'b1; h.rm = 1'b1; end
      MODE_RM3: begin h.iq = 1'b1; h.lq = 1'b1; h.sq = 1'b1; end
      MODE_RM4: begin h.iq = 1'b1; h.lq = 1'b1; h.sq = 1'b1; h.rm = 1'b1; h.rob = 1'b1; end
      MODE_RM5: begin h.rf = 1'b1; h.iq = 1'b1; h.lq = 1'b1; h.sq = 1'b1; end
      MODE_RM6: begin h.rf = 1'b1; h.rm = 1'b1; end
      MODE_RM7: begin h.rf = 1'b1; h.rm = 1'b1; h.rob = 1'b1; end
      MODE_RM8: begin h.rm = 1'b1; h.rob = 1'b1; end
      MODE_RM9: begin h.rf = 1'b1; h.iq = 1'b1; h.lq = 1'b1; h.sq = 1'b1; h.rm = 1'b1; end
      default:  h = '0;
    endcase
    return h;
  endfunction

  // ---- fault injection (single-bit transient flip into one replica) ----
  typedef enum logic [3:0] {
    C_RF_INT = 4'd0,
    C_RF_FP  = 4'd1,
    C_RM_INT = 4'd2,
    C_RM_FP  = 4'd3,
    C_IQ_INT = 4'd4,
    C_IQ_FP  = 4'd5,
    C_LQ     = 4'd6,
    C_SQ     = 4'd7,
    C_ROB    = 4'd8
  } comp_e;
  localparam int NUM_COMPS = 9;

  typedef struct packed {
    logic        en;      // flip one bit this cycle
    comp_e       comp;    // target component (used above component level)
    logic [1:0]  rep;     // replica 0..2 (only 0 exists when unhardened)
    logic [15:0] idx;     // entry / register / map index
    logic [15:0] bitpos;  // bit within the stored entry
  } fault_t;

  // ---- queue entry formats ----------------------------------------------
  typedef struct packed {
    logic [PREG_W-1:0]       src1;
    logic                    src1_rdy;
    logic [PREG_W-1:0]       src2;
    logic                    src2_rdy;
    logic [PREG_W-1:0]       dst;
    logic [IQ_PAYLOAD_W-1:0] payload;   // opcode, ROB index etc., not interpreted
  } iq_entry_t;
  localparam int IQ_ENTRY_W = $bits(iq_entry_t);


  // ---- per-component port bundles of one core ---------------------------
  // Each bundle carries the signals a core's pipeline exchanges with one
  // hardenable component; the pipeline itself lies outside this design.
  localparam int ROB_CNT_W = $clog2(ROB_ENTRIES + 1);
  localparam int IQ_CNT_W  = $clog2(IQ_ENTRIES + 1);
  localparam int LQ_CNT_W  = $clog2(LQ_ENTRIES + 1);
  localparam int SQ_CNT_W  = $clog2(SQ_ENTRIES + 1);
  localparam int RET_N_W   = $clog2(COMMIT_W + 1);

  typedef struct packed {
    logic [INT_RF_RD-1:0][PREG_W-1:0] rd_addr;
    logic [INT_RF_WR-1:0]             wr_en;
    logic [INT_RF_WR-1:0][PREG_W-1:0] wr_addr;
    logic [INT_RF_WR-1:0][XLEN-1:0]   wr_data;
  } int_rf_in_t;
  typedef struct packed {
    logic [INT_RF_RD-1:0][XLEN-1:0]   rd_data;
  } int_rf_out_t;

  typedef struct packed {
    logic [FP_RF_RD-1:0][PREG_W-1:0]  rd_addr;
    logic [FP_RF_WR-1:0]              wr_en;
    logic [FP_RF_WR-1:0][PREG_W-1:0]  wr_addr;
    logic [FP_RF_WR-1:0][XLEN-1:0]    wr_data;
  } fp_rf_in_t;
  typedef struct packed {
    logic [FP_RF_RD-1:0][XLEN-1:0]    rd_data;
  } fp_rf_out_t;

  typedef struct packed {
    logic [RM_LOOKUPS-1:0][AREG_W-1:0] lk_areg;
    logic [RENAME_W-1:0]               up_en;
    logic [RENAME_W-1:0][AREG_W-1:0]   up_areg;
    logic [RENAME_W-1:0][PREG_W-1:0]   up_preg;
  } rm_in_t;
  typedef struct packed {
    logic [RM_LOOKUPS-1:0][PREG_W-1:0] lk_preg;
  } rm_out_t;

  typedef struct packed {
    logic      [RENAME_W-1:0]               ins_valid;
    iq_entry_t [RENAME_W-1:0]               ins_entry;
    logic      [INT_RF_WR-1:0]              wake_valid;
    logic      [INT_RF_WR-1:0][PREG_W-1:0]  wake_tag;
    logic      [ISSUE_W-1:0]                fu_ready;
  } int_iq_in_t;
  typedef struct packed {
    logic                       ins_ready;
    logic      [ISSUE_W-1:0]    iss_valid;
    iq_entry_t [ISSUE_W-1:0]    iss_entry;
    logic      [IQ_CNT_W-1:0]   count;
  } int_iq_out_t;

  typedef struct packed {
    logic      [RENAME_W-1:0]               ins_valid;
    iq_entry_t [RENAME_W-1:0]               ins_entry;
    logic      [FP_RF_WR-1:0]               wake_valid;
    logic      [FP_RF_WR-1:0][PREG_W-1:0]   wake_tag;
    logic      [FP_ISSUE_W-1:0]             fu_ready;
  } fp_iq_in_t;
  typedef struct packed {
    logic                        ins_ready;
    logic      [FP_ISSUE_W-1:0]  iss_valid;
    iq_entry_t [FP_ISSUE_W-1:0]  iss_entry;
    logic      [IQ_CNT_W-1:0]    count;
  } fp_iq_out_t;

  typedef struct packed {
    logic [RENAME_W-1:0]                    disp_valid;
    logic [RENAME_W-1:0][ROB_PAYLOAD_W-1:0] disp_payload;
    logic [ROB_CMP_W-1:0]                   cmp_valid;
    logic [ROB_CMP_W-1:0][ROB_IDX_W-1:0]    cmp_idx;
  } rob_in_t;
  typedef struct packed {
    logic                                   disp_ready;
    logic [RENAME_W-1:0][ROB_IDX_W-1:0]     disp_idx;
    logic [COMMIT_W-1:0]                    commit_valid;
    logic [COMMIT_W-1:0][ROB_PAYLOAD_W-1:0] commit_payload;
    logic [ROB_CNT_W-1:0]                   count;
  } rob_out_t;

  typedef struct packed {
    logic [RENAME_W-1:0]                  alloc_valid;
    logic [MEM_PORTS-1:0]                 addr_en;
    logic [MEM_PORTS-1:0][LQ_IDX_W-1:0]   addr_idx;
    logic [MEM_PORTS-1:0][XLEN-1:0]       addr;
    logic [MEM_PORTS-1:0]                 chk_valid;
    logic [MEM_PORTS-1:0][XLEN-1:0]       chk_addr;
    logic [MEM_PORTS-1:0][LQ_IDX_W-1:0]   chk_pos;
    logic [RET_N_W-1:0]                   retire_n;
  } lq_in_t;
  typedef struct packed {
    logic                                 alloc_ready;
    logic [RENAME_W-1:0][LQ_IDX_W-1:0]    alloc_idx;
    logic [LQ_IDX_W-1:0]                  tail_pos;
    logic [MEM_PORTS-1:0]                 violation;
    logic [MEM_PORTS-1:0][LQ_IDX_W-1:0]   viol_idx;
    logic [LQ_CNT_W-1:0]                  count;
  } lq_out_t;

  typedef struct packed {
    logic [RENAME_W-1:0]                  alloc_valid;
    logic [MEM_PORTS-1:0]                 wr_en;
    logic [MEM_PORTS-1:0][SQ_IDX_W-1:0]   wr_idx;
    logic [MEM_PORTS-1:0][XLEN-1:0]       wr_addr;
    logic [MEM_PORTS-1:0][XLEN-1:0]       wr_data;
    logic [RET_N_W-1:0]                   commit_n;
    logic                                 drain_ready;
    logic [MEM_PORTS-1:0]                 fwd_valid;
    logic [MEM_PORTS-1:0][XLEN-1:0]       fwd_addr;
    logic [MEM_PORTS-1:0][SQ_IDX_W-1:0]   fwd_pos;
  } sq_in_t;
  typedef struct packed {
    logic                                 alloc_ready;
    logic [RENAME_W-1:0][SQ_IDX_W-1:0]    alloc_idx;
    logic [SQ_IDX_W-1:0]                  tail_pos;
    logic                                 drain_valid;
    logic [XLEN-1:0]                      drain_addr;
    logic [XLEN-1:0]                      drain_data;
    logic [MEM_PORTS-1:0]                 fwd_hit;
    logic [MEM_PORTS-1:0][XLEN-1:0]       fwd_data;
    logic [SQ_CNT_W-1:0]                  count;
  } sq_out_t;

  // everything one core's pipeline drives into, and receives from, the
  // hardenable components
  typedef struct packed {
    logic        flush;      // squash: empties IQs, ROB, LQ, uncommitted SQ
    int_rf_in_t  int_rf;
    fp_rf_in_t   fp_rf;
    rm_in_t      int_rm;
    rm_in_t      fp_rm;
    int_iq_in_t  int_iq;
    fp_iq_in_t   fp_iq;
    rob_in_t     rob;
    lq_in_t      lq;
    sq_in_t      sq;
    fault_t      fault;      // soft-error injection port
  } core_in_t;

  typedef struct packed {
    int_rf_out_t            int_rf;
    fp_rf_out_t             fp_rf;
    rm_out_t                int_rm;
    rm_out_t                fp_rm;
    int_iq_out_t            int_iq;
    fp_iq_out_t             fp_iq;
    rob_out_t               rob;
    lq_out_t                lq;
    sq_out_t                sq;
    logic [NUM_COMPS-1:0]   mismatch;  // voter saw disagreeing replicas, indexed by comp_e
  } core_out_t;

endpackage
