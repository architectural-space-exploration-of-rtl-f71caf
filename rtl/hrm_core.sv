// hrm_core: the hardenable components of one processor core PC_j, built in
// one reliability mode.
//
// A core holds the components whose vulnerability the reliability modes
// target: integer and FP register files, integer and FP rename maps,
// integer and FP issue queues, the re-order buffer, the load queue and the
// store queue.  The MODE parameter (U, RM1..RM9) selects, through
// hrm_pkg::mode_harden, which component groups are built as three replicas
// behind a majority voter and which as a single unprotected copy; the ports
// are identical in every mode, so cores of different modes are
// interchangeable iso-ISA cores that differ only in area, power and
// vulnerability.  This follows the paper's reliability-mode table; the
// grouping of integer and FP copies of a structure under one table entry
// follows its block diagrams (RM1 hardens both register files, RM2 both
// rename maps and both issue queues).
//
// The fetch stage, execution units and caches of the out-of-order core are
// not part of this design; their connections are the core_in/core_out
// bundles.  core_en is the run-time on/off switch of the core: while it is
// low the core accepts no new work (every write, insert, allocate and
// dispatch input is masked) and work in flight drains.  Timing is that of
// the components (one edge from input to state).  The fault field of core_in
// flips one bit in one replica of the component it names.
module hrm_core
  import hrm_pkg::*;
#(
  parameter rel_mode_e MODE = MODE_RM7
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      core_en,
  input  core_in_t  core_in,
  output core_out_t core_out
);
  localparam harden_t H = mode_harden(MODE);

  core_in_t ci;

  // mask new work while the core is switched off
  always_comb begin
    ci = core_in;
    if (!core_en) begin
      ci.int_rf.wr_en      = '0;
      ci.fp_rf.wr_en       = '0;
      ci.int_rm.up_en      = '0;
      ci.fp_rm.up_en       = '0;
      ci.int_iq.ins_valid  = '0;
      ci.int_iq.fu_ready   = '0;
      ci.fp_iq.ins_valid   = '0;
      ci.fp_iq.fu_ready    = '0;
      ci.rob.disp_valid    = '0;
      ci.lq.alloc_valid    = '0;
      ci.lq.addr_en        = '0;
      ci.sq.alloc_valid    = '0;
      ci.sq.wr_en          = '0;
    end
  end

  function automatic logic fi_on(logic en, comp_e sel, comp_e c);
    return en && sel == c;
  endfunction

  reg_file #(.NREGS(INT_PREGS), .W(XLEN), .NR(INT_RF_RD), .NW(INT_RF_WR), .HARDEN(H.rf)) u_int_rf (
    .clk, .rst_n,
    .rd_addr(ci.int_rf.rd_addr), .rd_data(core_out.int_rf.rd_data),
    .wr_en(ci.int_rf.wr_en), .wr_addr(ci.int_rf.wr_addr), .wr_data(ci.int_rf.wr_data),
    .fi_en(fi_on(ci.fault.en, ci.fault.comp, C_RF_INT)), .fi_rep(ci.fault.rep), .fi_idx(ci.fault.idx),
    .fi_bitpos(ci.fault.bitpos), .mismatch(core_out.mismatch[C_RF_INT])
  );

  reg_file #(.NREGS(FP_PREGS), .W(XLEN), .NR(FP_RF_RD), .NW(FP_RF_WR), .HARDEN(H.rf)) u_fp_rf (
    .clk, .rst_n,
    .rd_addr(ci.fp_rf.rd_addr), .rd_data(core_out.fp_rf.rd_data),
    .wr_en(ci.fp_rf.wr_en), .wr_addr(ci.fp_rf.wr_addr), .wr_data(ci.fp_rf.wr_data),
    .fi_en(fi_on(ci.fault.en, ci.fault.comp, C_RF_FP)), .fi_rep(ci.fault.rep), .fi_idx(ci.fault.idx),
    .fi_bitpos(ci.fault.bitpos), .mismatch(core_out.mismatch[C_RF_FP])
  );

  rename_map #(.ARCH(ARCH_REGS), .PW(PREG_W), .NL(RM_LOOKUPS), .NU(RENAME_W), .HARDEN(H.rm)) u_int_rm (
    .clk, .rst_n,
    .lk_areg(ci.int_rm.lk_areg), .lk_preg(core_out.int_rm.lk_preg),
    .up_en(ci.int_rm.up_en), .up_areg(ci.int_rm.up_areg), .up_preg(ci.int_rm.up_preg),
    .fi_en(fi_on(ci.fault.en, ci.fault.comp, C_RM_INT)), .fi_rep(ci.fault.rep), .fi_idx(ci.fault.idx),
    .fi_bitpos(ci.fault.bitpos), .mismatch(core_out.mismatch[C_RM_INT])
  );

  rename_map #(.ARCH(ARCH_REGS), .PW(PREG_W), .NL(RM_LOOKUPS), .NU(RENAME_W), .HARDEN(H.rm)) u_fp_rm (
    .clk, .rst_n,
    .lk_areg(ci.fp_rm.lk_areg), .lk_preg(core_out.fp_rm.lk_preg),
    .up_en(ci.fp_rm.up_en), .up_areg(ci.fp_rm.up_areg), .up_preg(ci.fp_rm.up_preg),
    .fi_en(fi_on(ci.fault.en, ci.fault.comp, C_RM_FP)), .fi_rep(ci.fault.rep), .fi_idx(ci.fault.idx),
    .fi_bitpos(ci.fault.bitpos), .mismatch(core_out.mismatch[C_RM_FP])
  );

  issue_queue #(.ENTRIES(IQ_ENTRIES), .DISP_W(RENAME_W), .ISSUE_W(ISSUE_W),
                .WAKE_W(INT_RF_WR), .HARDEN(H.iq)) u_int_iq (
    .clk, .rst_n, .flush(ci.flush),
    .ins_valid(ci.int_iq.ins_valid), .ins_entry(ci.int_iq.ins_entry),
    .ins_ready(core_out.int_iq.ins_ready),
    .wake_valid(ci.int_iq.wake_valid), .wake_tag(ci.int_iq.wake_tag),
    .fu_ready(ci.int_iq.fu_ready),
    .iss_valid(core_out.int_iq.iss_valid), .iss_entry(core_out.int_iq.iss_entry),
    .count(core_out.int_iq.count),
    .fi_en(fi_on(ci.fault.en, ci.fault.comp, C_IQ_INT)), .fi_rep(ci.fault.rep), .fi_idx(ci.fault.idx),
    .fi_bitpos(ci.fault.bitpos), .mismatch(core_out.mismatch[C_IQ_INT])
  );

  issue_queue #(.ENTRIES(IQ_ENTRIES), .DISP_W(RENAME_W), .ISSUE_W(FP_ISSUE_W),
                .WAKE_W(FP_RF_WR), .HARDEN(H.iq)) u_fp_iq (
    .clk, .rst_n, .flush(ci.flush),
    .ins_valid(ci.fp_iq.ins_valid), .ins_entry(ci.fp_iq.ins_entry),
    .ins_ready(core_out.fp_iq.ins_ready),
    .wake_valid(ci.fp_iq.wake_valid), .wake_tag(ci.fp_iq.wake_tag),
    .fu_ready(ci.fp_iq.fu_ready),
    .iss_valid(core_out.fp_iq.iss_valid), .iss_entry(core_out.fp_iq.iss_entry),
    .count(core_out.fp_iq.count),
    .fi_en(fi_on(ci.fault.en, ci.fault.comp, C_IQ_FP)), .fi_rep(ci.fault.rep), .fi_idx(ci.fault.idx),
    .fi_bitpos(ci.fault.bitpos), .mismatch(core_out.mismatch[C_IQ_FP])
  );

  rob #(.ENTRIES(ROB_ENTRIES), .DISP_W(RENAME_W), .CMP_W(ROB_CMP_W), .COMMIT_W(COMMIT_W),
        .PW(ROB_PAYLOAD_W), .HARDEN(H.rob)) u_rob (
    .clk, .rst_n, .flush(ci.flush),
    .disp_valid(ci.rob.disp_valid), .disp_payload(ci.rob.disp_payload),
    .disp_ready(core_out.rob.disp_ready), .disp_idx(core_out.rob.disp_idx),
    .cmp_valid(ci.rob.cmp_valid), .cmp_idx(ci.rob.cmp_idx),
    .commit_valid(core_out.rob.commit_valid), .commit_payload(core_out.rob.commit_payload),
    .count(core_out.rob.count),
    .fi_en(fi_on(ci.fault.en, ci.fault.comp, C_ROB)), .fi_rep(ci.fault.rep), .fi_idx(ci.fault.idx),
    .fi_bitpos(ci.fault.bitpos), .mismatch(core_out.mismatch[C_ROB])
  );

  load_queue #(.ENTRIES(LQ_ENTRIES), .ALLOC_W(RENAME_W), .AP(MEM_PORTS), .CP(MEM_PORTS),
               .RET_W(COMMIT_W), .AW(XLEN), .HARDEN(H.lq)) u_lq (
    .clk, .rst_n, .flush(ci.flush),
    .alloc_valid(ci.lq.alloc_valid), .alloc_ready(core_out.lq.alloc_ready),
    .alloc_idx(core_out.lq.alloc_idx), .tail_pos(core_out.lq.tail_pos),
    .addr_en(ci.lq.addr_en), .addr_idx(ci.lq.addr_idx), .addr(ci.lq.addr),
    .chk_valid(ci.lq.chk_valid), .chk_addr(ci.lq.chk_addr), .chk_pos(ci.lq.chk_pos),
    .violation(core_out.lq.violation), .viol_idx(core_out.lq.viol_idx),
    .retire_n(ci.lq.retire_n), .count(core_out.lq.count),
    .fi_en(fi_on(ci.fault.en, ci.fault.comp, C_LQ)), .fi_rep(ci.fault.rep), .fi_idx(ci.fault.idx),
    .fi_bitpos(ci.fault.bitpos), .mismatch(core_out.mismatch[C_LQ])
  );

  store_queue #(.ENTRIES(SQ_ENTRIES), .ALLOC_W(RENAME_W), .AP(MEM_PORTS), .FWD_P(MEM_PORTS),
                .COMMIT_W(COMMIT_W), .AW(XLEN), .DW(XLEN), .HARDEN(H.sq)) u_sq (
    .clk, .rst_n, .flush(ci.flush),
    .alloc_valid(ci.sq.alloc_valid), .alloc_ready(core_out.sq.alloc_ready),
    .alloc_idx(core_out.sq.alloc_idx), .tail_pos(core_out.sq.tail_pos),
    .wr_en(ci.sq.wr_en), .wr_idx(ci.sq.wr_idx), .wr_addr(ci.sq.wr_addr), .wr_data(ci.sq.wr_data),
    .commit_n(ci.sq.commit_n),
    .drain_valid(core_out.sq.drain_valid), .drain_addr(core_out.sq.drain_addr),
    .drain_data(core_out.sq.drain_data), .drain_ready(ci.sq.drain_ready),
    .fwd_valid(ci.sq.fwd_valid), .fwd_addr(ci.sq.fwd_addr), .fwd_pos(ci.sq.fwd_pos),
    .fwd_hit(core_out.sq.fwd_hit), .fwd_data(core_out.sq.fwd_data),
    .count(core_out.sq.count),
    .fi_en(fi_on(ci.fault.en, ci.fault.comp, C_SQ)), .fi_rep(ci.fault.rep), .fi_idx(ci.fault.idx),
    .fi_bitpos(ci.fault.bitpos), .mismatch(core_out.mismatch[C_SQ])
  );
endmodule
