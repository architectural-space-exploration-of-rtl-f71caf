// tb_hrm_core: self-checking test of the reliability-mode core shell.
// Three cores built in modes U, RM4 and RM7 receive identical stimulus.  For
// each of the nine components the test stores a known value, flips one bit
// of it in replica 1 (replica 0 for the unprotected builds, the only copy),
// and reads it back: a core whose mode hardens that component must return
// the clean value, a core whose mode does not must return the flipped one.
// The expectation is taken from the mode table, so the test checks that
// each mode hardens exactly its components.  It also checks that a switched
// off core (core_en low) ignores new work.
module tb_hrm_core;
  import hrm_pkg::*;
  localparam int NCORE = 3;
  localparam rel_mode_e MODES [NCORE] = '{MODE_U, MODE_RM4, MODE_RM7};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NCORE-1:0] core_en;
  core_in_t  ci;
  core_out_t co [NCORE];
  int checks = 0, failures = 0;

  for (genvar j = 0; j < NCORE; j++) begin : g_dut
    hrm_core #(.MODE(MODES[j])) dut (.clk, .rst_n, .core_en(core_en[j]), .core_in(ci), .core_out(co[j]));
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic quiet();
    ci = '0;
    ci.sq.drain_ready = 1'b0;
  endtask

  // request a one-bit upset; the caller chooses the replica
  task automatic inject(input comp_e c, input int idx, input int b);
    ci.fault.en = 1'b1; ci.fault.comp = c; ci.fault.idx = 16'(idx); ci.fault.bitpos = 16'(b);
  endtask

  function automatic bit hard(int j, comp_e c);
    harden_t h;
    h = mode_harden(MODES[j]);
    case (c)
      C_RF_INT, C_RF_FP: return h.rf;
      C_RM_INT, C_RM_FP: return h.rm;
      C_IQ_INT, C_IQ_FP: return h.iq;
      C_LQ:              return h.lq;
      C_SQ:              return h.sq;
      default:           return h.rob;
    endcase
  endfunction

  // Upsets hit replica 0, the only copy of an unprotected component; the
  // register-file section also hits replica 1, which exists only when
  // hardened, so an unprotected core must then read a clean value.
  initial begin
    logic [63:0] v;
    quiet(); core_en = '1;
    repeat (2) @(posedge clk); rst_n = 1;

    // ---- integer and FP register files -------------------------------
    @(negedge clk); quiet();
    ci.int_rf.wr_en[0] = 1; ci.int_rf.wr_addr[0] = 8'd10; ci.int_rf.wr_data[0] = 64'hdead_beef_0000_1234;
    ci.fp_rf.wr_en[1] = 1;  ci.fp_rf.wr_addr[1] = 8'd200; ci.fp_rf.wr_data[1] = 64'h4000_0000_0000_0000;
    @(negedge clk); quiet();
    ci.int_rf.rd_addr[3] = 8'd10; ci.fp_rf.rd_addr[2] = 8'd200; #1;
    for (int j = 0; j < NCORE; j++) begin
      chk(co[j].int_rf.rd_data[3] == 64'hdead_beef_0000_1234, "int RF write/read");
      chk(co[j].fp_rf.rd_data[2] == 64'h4000_0000_0000_0000, "fp RF write/read");
    end
    for (int pass = 0; pass < 2; pass++) begin
      // pass 0 hits replica 0 of every core, pass 1 scrubs and hits replica 1
      @(negedge clk); quiet();
      if (pass == 1) begin
        ci.int_rf.wr_en[0] = 1; ci.int_rf.wr_addr[0] = 8'd10; ci.int_rf.wr_data[0] = 64'hdead_beef_0000_1234;
        ci.fp_rf.wr_en[0] = 1;  ci.fp_rf.wr_addr[0] = 8'd200; ci.fp_rf.wr_data[0] = 64'h4000_0000_0000_0000;
        @(negedge clk); quiet();
      end
      inject(C_RF_INT, 10, 4); ci.fault.rep = 2'(pass);
      @(negedge clk); quiet();
      inject(C_RF_FP, 200, 62); ci.fault.rep = 2'(pass);
      @(negedge clk); quiet();
      ci.int_rf.rd_addr[3] = 8'd10; ci.fp_rf.rd_addr[2] = 8'd200; #1;
      for (int j = 0; j < NCORE; j++) begin
        bit exp_clean;
        exp_clean = hard(j, C_RF_INT) || pass == 1;
        chk((co[j].int_rf.rd_data[3] == 64'hdead_beef_0000_1234) == exp_clean,
            "int RF upset masked exactly when hardened");
        chk((co[j].fp_rf.rd_data[2] == 64'h4000_0000_0000_0000) == exp_clean,
            "fp RF upset masked exactly when hardened");
        chk(co[j].mismatch[C_RF_INT] == hard(j, C_RF_INT), "int RF voter flag");
      end
    end

    // ---- rename maps ----------------------------------------------------
    @(negedge clk); quiet();
    inject(C_RM_INT, 4, 0); ci.fault.rep = 2'd0;
    @(negedge clk); quiet();
    inject(C_RM_FP, 9, 7); ci.fault.rep = 2'd0;
    @(negedge clk); quiet();
    ci.int_rm.lk_areg[5] = 5'd4; ci.fp_rm.lk_areg[0] = 5'd9; #1;
    for (int j = 0; j < NCORE; j++) begin
      chk((co[j].int_rm.lk_preg[5] == 8'd4) == hard(j, C_RM_INT), "int RM upset masked exactly when hardened");
      chk((co[j].fp_rm.lk_preg[0] == 8'd9) == hard(j, C_RM_FP), "fp RM upset masked exactly when hardened");
    end

    // ---- issue queues: insert a ready op, upset its payload, see it issue --
    @(negedge clk); quiet();
    ci.int_iq.ins_valid[0] = 1; ci.int_iq.ins_entry[0].src1_rdy = 1; ci.int_iq.ins_entry[0].src2_rdy = 1;
    ci.int_iq.ins_entry[0].payload = 32'h0000_00a5;
    ci.fp_iq.ins_valid[0] = 1;  ci.fp_iq.ins_entry[0].src1_rdy = 1;  ci.fp_iq.ins_entry[0].src2_rdy = 1;
    ci.fp_iq.ins_entry[0].payload = 32'h0000_005a;
    @(negedge clk); quiet();
    inject(C_IQ_INT, 0, 1); ci.fault.rep = 2'd0;           // payload bit 1 of slot 0
    @(negedge clk); quiet();
    inject(C_IQ_FP, 0, 2); ci.fault.rep = 2'd0;
    @(negedge clk); quiet();
    ci.int_iq.fu_ready = '1; ci.fp_iq.fu_ready = '1; #1;
    for (int j = 0; j < NCORE; j++) begin
      chk(co[j].int_iq.iss_valid[0] && co[j].fp_iq.iss_valid[0], "queued ops issue");
      chk((co[j].int_iq.iss_entry[0].payload == 32'ha5) == hard(j, C_IQ_INT),
          "int IQ upset masked exactly when hardened");
      chk((co[j].fp_iq.iss_entry[0].payload == 32'h5a) == hard(j, C_IQ_FP),
          "fp IQ upset masked exactly when hardened");
    end

    // ---- re-order buffer: dispatch, upset payload, complete, commit -------
    @(negedge clk); quiet();
    ci.rob.disp_valid = 4'b0001; ci.rob.disp_payload[0] = 32'h0000_0f0f; #1;
    for (int j = 0; j < NCORE; j++) chk(co[j].rob.disp_idx[0] == 8'd0, "ROB slot 0");
    @(negedge clk); quiet();
    inject(C_ROB, 0, 8); ci.fault.rep = 2'd0;
    ci.rob.cmp_valid[0] = 1; ci.rob.cmp_idx[0] = 8'd0;
    @(negedge clk); quiet(); #1;
    for (int j = 0; j < NCORE; j++) begin
      chk(co[j].rob.commit_valid[0], "ROB commits the completed op");
      chk((co[j].rob.commit_payload[0] == 32'h0f0f) == hard(j, C_ROB), "ROB upset masked exactly when hardened");
    end

    // ---- load queue: executed load, upset its address, store checks it ----
    @(negedge clk); quiet();
    ci.lq.alloc_valid = 4'b0001;
    @(negedge clk); quiet();
    ci.lq.addr_en[0] = 1; ci.lq.addr_idx[0] = '0; ci.lq.addr[0] = 64'h1000;
    @(negedge clk); quiet();
    inject(C_LQ, 0, 12); ci.fault.rep = 2'd0;
    @(negedge clk); quiet();
    ci.lq.chk_valid[0] = 1; ci.lq.chk_addr[0] = 64'h1000; ci.lq.chk_pos[0] = '0; #1;
    for (int j = 0; j < NCORE; j++)
      chk(co[j].lq.violation[0] == hard(j, C_LQ), "LQ upset masked exactly when hardened");

    // ---- store queue: executed store, upset its data, forward to a load ---
    @(negedge clk); quiet();
    ci.sq.alloc_valid = 4'b0001;
    @(negedge clk); quiet();
    ci.sq.wr_en[0] = 1; ci.sq.wr_idx[0] = '0; ci.sq.wr_addr[0] = 64'h2000; ci.sq.wr_data[0] = 64'h77;
    @(negedge clk); quiet();
    inject(C_SQ, 0, 0); ci.fault.rep = 2'd0;
    @(negedge clk); quiet();
    ci.sq.fwd_valid[0] = 1; ci.sq.fwd_addr[0] = 64'h2000; ci.sq.fwd_pos[0] = 5'd1; #1;
    for (int j = 0; j < NCORE; j++) begin
      chk(co[j].sq.fwd_hit[0], "SQ forwards");
      chk((co[j].sq.fwd_data[0] == 64'h77) == hard(j, C_SQ), "SQ upset masked exactly when hardened");
    end

    // ---- switched-off core accepts no new work -----------------------------
    @(negedge clk); quiet(); core_en = 3'b101;
    ci.int_rf.wr_en[0] = 1; ci.int_rf.wr_addr[0] = 8'd33; ci.int_rf.wr_data[0] = 64'h5;
    ci.rob.disp_valid = 4'b0011;
    @(negedge clk); quiet(); core_en = '1;
    ci.int_rf.rd_addr[0] = 8'd33; #1;
    chk(co[0].int_rf.rd_data[0] == 64'h5 && co[2].int_rf.rd_data[0] == 64'h5, "enabled cores write");
    chk(co[1].int_rf.rd_data[0] == 64'h0, "disabled core ignores the write");
    chk(co[1].rob.count == 0 && co[0].rob.count == 2, "disabled core dispatches nothing");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
