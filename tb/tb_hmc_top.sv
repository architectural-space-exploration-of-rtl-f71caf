// tb_hmc_top: end-to-end, full-size test of the reliability-heterogeneous
// multi-core.  The top is used with its default parameters (ten cores in
// modes U, RM1..RM9; paper-sized components in every core).
//
// What it does:
//  * loads the mapper tables: power overhead per core and FPVF per
//    (application, core).  U = 0 %, RM1 = 70 % and RM2 = 80 % power are the
//    values printed in the paper's Fig. 12 and RM9 = 185 % the highest
//    overhead printed in Fig. 13; every other number here is illustrative,
//    chosen only so that more hardening means lower FPVF;
//  * maps the five workload mixes of the paper's Table 6 (Bit-counts,
//    Dijkstra, Patricia, SHA) under both policies, with a 100 % power budget
//    per task for the power-constrained policy, plus an unconstrained and a
//    very strict run, and compares every result with a loop-level reference
//    of the two flowcharts and with the cycle bound;
//  * checks that exactly the mapped cores are switched on and that a core
//    left off ignores new work;
//  * after every mapping, runs a sweep on the active cores: flush, register
//    write/read, rename update, issue-queue wakeup and issue, ROB dispatch,
//    completion and commit, load-queue order violation, store-queue
//    forwarding, commit and drain, each with a one-bit upset in the stored
//    value.  An upset must be masked (and flagged by the voter) exactly when
//    the core's mode hardens that component, and visible otherwise.
// Each mechanism is counted; a mechanism that never happened is a failure,
// and so is a core that was never swept.
module tb_hmc_top;
  import hrm_pkg::*;
  localparam int NC = NUM_CORES, NA = NUM_APPS, MT = MAX_TASKS;
  localparam int CIW = $clog2(NC), AIW = $clog2(NA), TIW = $clog2(MT + 1), SW = 16 + $clog2(NC + 1);
  localparam int APP_BC = 0, APP_DIJ = 1, APP_PAT = 2, APP_SHA = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  core_in_t  [NC-1:0] core_in;
  core_out_t [NC-1:0] core_out;
  logic      [NC-1:0] core_active;
  rel_mode_e [NC-1:0] core_mode;
  logic cfg_we, cfg_is_pwr; logic [AIW-1:0] cfg_app; logic [CIW-1:0] cfg_core; logic [15:0] cfg_data;
  logic map_start, map_policy; logic [TIW-1:0] num_tasks; logic [MT-1:0][AIW-1:0] task_app;
  logic [15:0] vul_const; logic [SW-1:0] power_budget;
  logic map_busy, map_done; logic [MT-1:0] task_mapped; logic [MT-1:0][CIW-1:0] task_core;
  logic [TIW-1:0] mapped_count; logic [SW-1:0] total_power; logic [SW+TIW-1:0] total_fpvf;

  hmc_top dut (
    .clk, .rst_n, .core_in, .core_out, .core_active, .core_mode,
    .cfg_we, .cfg_is_pwr, .cfg_app, .cfg_core, .cfg_data,
    .map_start, .map_policy, .num_tasks, .task_app, .vul_const, .power_budget,
    .map_busy, .map_done, .task_mapped, .task_core, .mapped_count, .total_power, .total_fpvf);

  // common stimulus; store-queue slots differ per core, so they are patched in
  core_in_t ci;
  logic [NC-1:0][SQ_IDX_W-1:0] sq_t;
  always_comb
    for (int j = 0; j < NC; j++) begin
      core_in[j] = ci;
      core_in[j].sq.wr_idx[0]  = sq_t[j];
      core_in[j].sq.fwd_pos[0] = sq_t[j] + 1'b1;
      if (ci.fault.comp == C_SQ) core_in[j].fault.idx = 16'(sq_t[j]);
    end

  int checks = 0, failures = 0;
  int fv [NA][NC], pw [NC];
  bit exp_used [NC];
  // mechanism counters
  int m_vcpm, m_pcvm, m_unmapped, m_core_off, m_masked, m_visible, m_flush, m_rename,
      m_wake_issue, m_rob_commit, m_lq_viol, m_sq_fwd, m_sq_drain;
  logic [NC-1:0] swept;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit hard(int j, comp_e c);
    harden_t h;
    h = mode_harden(rel_mode_e'(j % NUM_MODES));
    case (c)
      C_RF_INT, C_RF_FP: return h.rf;
      C_RM_INT, C_RM_FP: return h.rm;
      C_IQ_INT, C_IQ_FP: return h.iq;
      C_LQ:              return h.lq;
      C_SQ:              return h.sq;
      default:           return h.rob;
    endcase
  endfunction

  // one upset outcome on core j: clean value read back iff hardened
  task automatic upset_chk(int j, comp_e c, logic clean, string what);
    chk(clean == hard(j, c), what);
    chk(core_out[j].mismatch[c] == hard(j, c), {what, ": voter flag"});
    if (clean) m_masked++; else m_visible++;
  endtask

  // ---------------- reference mapper (the two flowcharts) ----------------
  function automatic void sort_cores(input int key [NC], output int ord [NC]);
    int tmp;
    for (int j = 0; j < NC; j++) ord[j] = j;
    for (int a = 0; a < NC; a++)
      for (int b = 0; b < NC - 1 - a; b++)
        if (key[ord[b]] > key[ord[b + 1]]) begin
          tmp = ord[b]; ord[b] = ord[b + 1]; ord[b + 1] = tmp;
        end
  endfunction

  task automatic map_and_check(input bit pol, input int nt, input int apps [MT],
                               input int vc, input int pb);
    int ord [NC], key [NC];
    int emap [MT], ecore [MT], ecount, epow, efv, cyc;
    for (int j = 0; j < NC; j++) exp_used[j] = 0;
    ecount = 0; epow = 0; efv = 0;
    if (!pol) begin
      for (int j = 0; j < NC; j++) key[j] = pw[j];
      sort_cores(key, ord);
    end
    for (int a = 0; a < MT; a++) begin emap[a] = 0; ecore[a] = 0; end
    for (int a = 0; a < nt; a++) begin
      if (pol) begin
        for (int j = 0; j < NC; j++) key[j] = fv[apps[a]][j];
        sort_cores(key, ord);
      end
      for (int b = 0; b < NC; b++) begin
        int c;
        c = ord[b];
        if (!exp_used[c] && (pol ? (epow + pw[c] <= pb) : (fv[apps[a]][c] <= vc))) begin
          exp_used[c] = 1; emap[a] = 1; ecore[a] = c; ecount++; epow += pw[c]; efv += fv[apps[a]][c];
          break;
        end
      end
    end
    @(negedge clk);
    map_policy = pol; num_tasks = TIW'(nt); vul_const = 16'(vc); power_budget = SW'(pb);
    for (int a = 0; a < MT; a++) task_app[a] = AIW'(apps[a]);
    map_start = 1;
    @(negedge clk); map_start = 0;
    cyc = 1;
    while (!map_done && cyc < 1000) begin @(negedge clk); cyc++; end
    chk(map_done, "mapping finishes");
    chk(cyc <= 2 + nt * (1 + NC) + 1, "mapping within 2 + T*(1 + cores) cycles");
    for (int a = 0; a < MT; a++) begin
      chk(task_mapped[a] == emap[a], "task mapped or not");
      if (emap[a]) chk(int'(task_core[a]) == ecore[a], "task core");
    end
    chk(int'(mapped_count) == ecount, "mapped count");
    chk(int'(total_power) == epow, "total power overhead");
    chk(int'(total_fpvf) == efv, "total FPVF");
    if (pol) chk(epow <= pb, "power budget respected");
    if (ecount < nt) m_unmapped++;
    if (pol) m_pcvm++; else m_vcpm++;
    @(negedge clk);
    for (int j = 0; j < NC; j++) chk(core_active[j] == exp_used[j], "mapped cores switched on");
  endtask

  // ---------------- component sweep with upsets ---------------------------
  task automatic quiet();
    ci = '0;
  endtask

  task automatic sweep(input int n);
    logic [63:0] iv, fvv;
    iv  = {16'hdead, 16'(n), 32'h0000_1234};
    fvv = {16'h4000, 16'(n), 32'h0};
    // flush everything in flight
    @(negedge clk); quiet(); ci.flush = 1;
    @(negedge clk); quiet(); #1;
    for (int j = 0; j < NC; j++)
      if (core_active[j]) begin
        chk(core_out[j].rob.count == 0 && core_out[j].int_iq.count == 0 &&
            core_out[j].fp_iq.count == 0 && core_out[j].lq.count == 0, "flush empties the core");
        m_flush++;
      end
    for (int j = 0; j < NC; j++) sq_t[j] = core_out[j].sq.tail_pos;

    // register files
    ci.int_rf.wr_en[2] = 1; ci.int_rf.wr_addr[2] = 8'd10;  ci.int_rf.wr_data[2] = iv;
    ci.fp_rf.wr_en[3]  = 1; ci.fp_rf.wr_addr[3]  = 8'd200; ci.fp_rf.wr_data[3]  = fvv;
    // rename update, IQ insert (src1 waits for a tag), ROB dispatch, LQ and SQ allocation
    ci.int_rm.up_en[1] = 1; ci.int_rm.up_areg[1] = 5'd4; ci.int_rm.up_preg[1] = 8'd100;
    ci.fp_rm.up_en[0]  = 1; ci.fp_rm.up_areg[0]  = 5'd9; ci.fp_rm.up_preg[0]  = 8'd150;
    ci.int_iq.ins_valid[0] = 1; ci.int_iq.ins_entry[0].src1 = 8'd77; ci.int_iq.ins_entry[0].src2_rdy = 1;
    ci.int_iq.ins_entry[0].payload = 32'ha5;
    ci.fp_iq.ins_valid[0]  = 1; ci.fp_iq.ins_entry[0].src1 = 8'd33;  ci.fp_iq.ins_entry[0].src2_rdy = 1;
    ci.fp_iq.ins_entry[0].payload = 32'h5a;
    ci.rob.disp_valid = 4'b0001; ci.rob.disp_payload[0] = 32'h0f0f;
    ci.lq.alloc_valid = 4'b0001;
    ci.sq.alloc_valid = 4'b0001;
    @(negedge clk); quiet();
    ci.int_rf.rd_addr[5] = 8'd10; ci.fp_rf.rd_addr[1] = 8'd200;
    ci.int_rm.lk_areg[7] = 5'd4;  ci.fp_rm.lk_areg[2] = 5'd9;
    ci.int_iq.fu_ready = '1; ci.fp_iq.fu_ready = '1;
    #1;
    for (int j = 0; j < NC; j++)
      if (core_active[j]) begin
        chk(core_out[j].int_rf.rd_data[5] == iv && core_out[j].fp_rf.rd_data[1] == fvv, "RF write/read");
        chk(core_out[j].int_rm.lk_preg[7] == 8'd100 && core_out[j].fp_rm.lk_preg[2] == 8'd150,
            "rename update");
        m_rename++;
        chk(!core_out[j].int_iq.iss_valid[0] && !core_out[j].fp_iq.iss_valid[0], "waiting op not issued");
        chk(core_out[j].int_iq.count == 1 && core_out[j].fp_iq.count == 1, "op queued");
        chk(core_out[j].rob.count == 1, "ROB holds one op");
      end else begin
        chk(core_out[j].int_rf.rd_data[5] != iv, "switched-off core ignores register write");
        chk(core_out[j].rob.count == 0 && core_out[j].int_iq.count == 0, "switched-off core takes no ops");
        m_core_off++;
      end
    // wake the waiting sources; store address and data; load address
    @(negedge clk); quiet();
    ci.int_iq.wake_valid[3] = 1; ci.int_iq.wake_tag[3] = 8'd77;
    ci.fp_iq.wake_valid[1]  = 1; ci.fp_iq.wake_tag[1]  = 8'd33;
    ci.lq.addr_en[1] = 1; ci.lq.addr_idx[1] = '0; ci.lq.addr[1] = 64'h1000;
    ci.sq.wr_en[0] = 1; ci.sq.wr_addr[0] = 64'h2000; ci.sq.wr_data[0] = 64'h77;
    // upsets, one component per cycle, all in replica 0
    @(negedge clk); quiet(); ci.fault = '{en: 1'b1, comp: C_RF_INT, rep: 2'd0, idx: 16'd10,  bitpos: 16'd4};
    @(negedge clk); quiet(); ci.fault = '{en: 1'b1, comp: C_RF_FP,  rep: 2'd0, idx: 16'd200, bitpos: 16'd62};
    @(negedge clk); quiet(); ci.fault = '{en: 1'b1, comp: C_RM_INT, rep: 2'd0, idx: 16'd4,   bitpos: 16'd0};
    @(negedge clk); quiet(); ci.fault = '{en: 1'b1, comp: C_RM_FP,  rep: 2'd0, idx: 16'd9,   bitpos: 16'd7};
    @(negedge clk); quiet(); ci.fault = '{en: 1'b1, comp: C_IQ_INT, rep: 2'd0, idx: 16'd0,   bitpos: 16'd1};
    @(negedge clk); quiet(); ci.fault = '{en: 1'b1, comp: C_IQ_FP,  rep: 2'd0, idx: 16'd0,   bitpos: 16'd2};
    @(negedge clk); quiet(); ci.fault = '{en: 1'b1, comp: C_ROB,    rep: 2'd0, idx: 16'd0,   bitpos: 16'd8};
    @(negedge clk); quiet(); ci.fault = '{en: 1'b1, comp: C_LQ,     rep: 2'd0, idx: 16'd0,   bitpos: 16'd12};
    @(negedge clk); quiet(); ci.fault = '{en: 1'b1, comp: C_SQ,     rep: 2'd0, idx: 16'd0,   bitpos: 16'd0};
    // read everything back; issue the woken ops; complete the ROB op;
    // a store to the load's address checks the load queue; a younger load
    // searches the store queue
    @(negedge clk); quiet();
    ci.int_rf.rd_addr[0] = 8'd10; ci.fp_rf.rd_addr[3] = 8'd200;
    ci.int_rm.lk_areg[0] = 5'd4;  ci.fp_rm.lk_areg[11] = 5'd9;
    ci.int_iq.fu_ready = 4'b0100; ci.fp_iq.fu_ready = 2'b10;
    ci.rob.cmp_valid[5] = 1; ci.rob.cmp_idx[5] = 8'd0;
    ci.lq.chk_valid[0] = 1; ci.lq.chk_addr[0] = 64'h1004; ci.lq.chk_pos[0] = '0;
    ci.sq.fwd_valid[0] = 1; ci.sq.fwd_addr[0] = 64'h2000;
    #1;
    for (int j = 0; j < NC; j++)
      if (core_active[j]) begin
        upset_chk(j, C_RF_INT, core_out[j].int_rf.rd_data[0] == iv, "int RF upset");
        upset_chk(j, C_RF_FP,  core_out[j].fp_rf.rd_data[3] == fvv, "fp RF upset");
        upset_chk(j, C_RM_INT, core_out[j].int_rm.lk_preg[0] == 8'd100, "int RM upset");
        upset_chk(j, C_RM_FP,  core_out[j].fp_rm.lk_preg[11] == 8'd150, "fp RM upset");
        chk(core_out[j].int_iq.iss_valid[2] && core_out[j].fp_iq.iss_valid[1], "woken ops issue on free units");
        if (core_out[j].int_iq.iss_valid[2] && core_out[j].fp_iq.iss_valid[1]) m_wake_issue++;
        upset_chk(j, C_IQ_INT, core_out[j].int_iq.iss_entry[2].payload == 32'ha5, "int IQ upset");
        upset_chk(j, C_IQ_FP,  core_out[j].fp_iq.iss_entry[1].payload == 32'h5a, "fp IQ upset");
        // the load address bit 12 upset moves it away from the store
        upset_chk(j, C_LQ, core_out[j].lq.violation[0], "LQ upset");
        if (core_out[j].lq.violation[0]) m_lq_viol++;
        chk(core_out[j].sq.fwd_hit[0], "older store forwards to the load");
        if (core_out[j].sq.fwd_hit[0]) m_sq_fwd++;
        upset_chk(j, C_SQ, core_out[j].sq.fwd_data[0] == 64'h77, "SQ upset");
      end
    // the completed op commits; the store commits
    @(negedge clk); quiet();
    ci.sq.commit_n = 1;
    #1;
    for (int j = 0; j < NC; j++)
      if (core_active[j]) begin
        chk(core_out[j].rob.commit_valid[0], "ROB commits the completed op");
        if (core_out[j].rob.commit_valid[0]) m_rob_commit++;
        upset_chk(j, C_ROB, core_out[j].rob.commit_payload[0] == 32'h0f0f, "ROB upset");
      end
    // the committed store drains to memory
    @(negedge clk); quiet(); ci.sq.drain_ready = 1; #1;
    for (int j = 0; j < NC; j++)
      if (core_active[j]) begin
        chk(core_out[j].sq.drain_valid && core_out[j].sq.drain_addr == 64'h2000, "committed store drains");
        if (core_out[j].sq.drain_valid) m_sq_drain++;
        swept[j] = 1'b1;
      end
    @(negedge clk); quiet();
  endtask

  // ---------------- main ------------------------------------------------------
  initial begin
    int mix [5][MT], mix_n [5];
    int base_fv [NC], fac [NA], base_pw [NC];
    int apps [MT];
    int nsw;
    mix[0] = '{APP_BC, APP_DIJ, APP_SHA, APP_PAT, APP_BC, APP_DIJ, APP_SHA, APP_PAT}; mix_n[0] = 8;
    mix[1] = '{APP_BC, APP_BC, APP_BC, APP_BC, APP_DIJ, APP_DIJ, APP_DIJ, APP_DIJ};   mix_n[1] = 8;
    mix[2] = '{APP_BC, APP_SHA, APP_PAT, APP_BC, APP_SHA, APP_PAT, APP_BC, APP_PAT};  mix_n[2] = 8;
    mix[3] = '{APP_SHA, APP_PAT, APP_SHA, APP_PAT, APP_SHA, APP_PAT, 0, 0};           mix_n[3] = 6;
    mix[4] = '{APP_SHA, APP_SHA, APP_SHA, APP_SHA, APP_SHA, APP_DIJ, 0, 0};           mix_n[4] = 6;
    //           U     RM1  RM2  RM3  RM4  RM5  RM6  RM7  RM8  RM9
    base_pw = '{ 0,    70,  80,  60,  150, 130, 100, 120, 90,  185};
    base_fv = '{ 1000, 650, 800, 700, 300, 420, 560, 380, 600, 150};
    fac     = '{ 100, 120, 90, 110 };          // Bit-counts, Dijkstra, Patricia, SHA
    m_vcpm = 0; m_pcvm = 0; m_unmapped = 0; m_core_off = 0; m_masked = 0; m_visible = 0;
    m_flush = 0; m_rename = 0; m_wake_issue = 0; m_rob_commit = 0; m_lq_viol = 0;
    m_sq_fwd = 0; m_sq_drain = 0; swept = '0; nsw = 0;
    quiet(); sq_t = '0;
    cfg_we = 0; cfg_is_pwr = 0; cfg_app = 0; cfg_core = 0; cfg_data = 0;
    map_start = 0; map_policy = 0; num_tasks = 0; task_app = '0; vul_const = 0; power_budget = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    for (int j = 0; j < NC; j++) chk(core_mode[j] == rel_mode_e'(j % NUM_MODES), "core j runs mode j");
    chk(core_active == '0, "all cores off after reset");

    for (int c = 0; c < NC; c++) begin
      pw[c] = base_pw[c % NUM_MODES];
      @(negedge clk); cfg_we = 1; cfg_is_pwr = 1; cfg_core = CIW'(c); cfg_data = 16'(pw[c]);
      for (int a = 0; a < NA; a++) begin
        fv[a][c] = base_fv[c % NUM_MODES] * fac[a] / 100;
        @(negedge clk); cfg_we = 1; cfg_is_pwr = 0; cfg_app = AIW'(a); cfg_core = CIW'(c);
        cfg_data = 16'(fv[a][c]);
      end
    end
    @(negedge clk); cfg_we = 0;

    for (int m = 0; m < 5; m++) begin
      map_and_check(1'b0, mix_n[m], mix[m], 700, 0);
      sweep(nsw++);
      map_and_check(1'b1, mix_n[m], mix[m], 0, 100 * mix_n[m]);
      sweep(nsw++);
    end
    // no vulnerability limit: the lowest-power cores (U included) are used
    map_and_check(1'b0, mix_n[0], mix[0], 65535, 0);
    sweep(nsw++);
    // a limit only the most hardened core meets: most tasks stay unmapped
    map_and_check(1'b0, mix_n[1], mix[1], 200, 0);
    sweep(nsw++);

    chk(m_vcpm > 0,       "mechanism: vulnerability-constrained power minimisation");
    chk(m_pcvm > 0,       "mechanism: power-constrained vulnerability minimisation");
    chk(m_unmapped > 0,   "mechanism: task left unmapped by its constraint");
    chk(m_core_off > 0,   "mechanism: switched-off core ignores work");
    chk(m_masked > 0,     "mechanism: upset masked by TMR");
    chk(m_visible > 0,    "mechanism: upset visible in an unprotected component");
    chk(m_flush > 0,      "mechanism: flush");
    chk(m_rename > 0,     "mechanism: rename update and lookup");
    chk(m_wake_issue > 0, "mechanism: wakeup and issue");
    chk(m_rob_commit > 0, "mechanism: in-order commit");
    chk(m_lq_viol > 0,    "mechanism: load-order violation");
    chk(m_sq_fwd > 0,     "mechanism: store-to-load forwarding");
    chk(m_sq_drain > 0,   "mechanism: store drain");
    chk(swept == '1,      "every core (every mode) was swept with upsets");
    $display("mechanisms: vcpm=%0d pcvm=%0d unmapped=%0d core_off=%0d masked=%0d visible=%0d flush=%0d",
             m_vcpm, m_pcvm, m_unmapped, m_core_off, m_masked, m_visible, m_flush);
    $display("            rename=%0d wake_issue=%0d commit=%0d lq_viol=%0d sq_fwd=%0d sq_drain=%0d swept=%b",
             m_rename, m_wake_issue, m_rob_commit, m_lq_viol, m_sq_fwd, m_sq_drain, swept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
