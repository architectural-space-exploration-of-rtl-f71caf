// tb_issue_queue: self-checking test of the issue queue (hardened build,
// 8 slots, 2 insert / 2 issue / 2 wakeup lanes).
// Random inserts, wakeups and functional-unit availability are driven and a
// scoreboard, which knows only when each instruction entered and when its
// source tags were broadcast, checks every issue: the instruction was in the
// queue, issues once, not before the cycle after its last source woke, only
// on a free lane, and as many instructions issue as there are ready ones and
// free lanes.  Occupancy and ins_ready are checked each cycle; a drain phase
// checks that everything inserted issues; a final flush must empty the
// queue.  Upsets are injected into replica 1 throughout and must never show.
module tb_issue_queue;
  import hrm_pkg::*;
  localparam int N = 8, DW = 2, IW = 2, WW = 2, NTAG = 16, MAXID = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush;
  logic [DW-1:0] ins_valid;
  iq_entry_t [DW-1:0] ins_entry;
  logic ins_ready;
  logic [WW-1:0] wake_valid;
  logic [WW-1:0][PREG_W-1:0] wake_tag;
  logic [IW-1:0] fu_ready, iss_valid;
  iq_entry_t [IW-1:0] iss_entry;
  logic [3:0] count;
  logic fi_en; logic [1:0] fi_rep; logic [15:0] fi_idx, fi_bitpos; logic mm;

  issue_queue #(.ENTRIES(N), .DISP_W(DW), .ISSUE_W(IW), .WAKE_W(WW), .HARDEN(1'b1)) dut (
    .clk, .rst_n, .flush, .ins_valid, .ins_entry, .ins_ready, .wake_valid, .wake_tag,
    .fu_ready, .iss_valid, .iss_entry, .count, .fi_en, .fi_rep, .fi_idx, .fi_bitpos, .mismatch(mm));

  int checks = 0, failures = 0;
  // scoreboard per instruction id
  int ins_cyc [MAXID], rdy1 [MAXID], rdy2 [MAXID];
  logic [PREG_W-1:0] t1 [MAXID], t2 [MAXID];
  bit inq [MAXID], issued [MAXID];
  int next_id = 1, occ = 0, masked_upsets = 0;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one cycle: inputs already set; check outputs, then update scoreboard
  task automatic step(input int cyc);
    int nready, nfree, nissued, id;
    #1;
    chk(int'(count) == occ - $countones(ins_valid), "occupancy");
    chk(ins_ready == (occ - $countones(ins_valid) + DW <= N), "ins_ready");
    nready = 0;
    for (int i = 1; i < next_id; i++)
      if (inq[i] && rdy1[i] < cyc && rdy2[i] < cyc) nready++;
    nfree = 0;
    for (int l = 0; l < IW; l++) nfree += int'(fu_ready[l]);
    nissued = 0;
    for (int l = 0; l < IW; l++) begin
      if (iss_valid[l]) begin
        id = int'(iss_entry[l].payload);
        nissued++;
        chk(fu_ready[l], "issue only on a free lane");
        chk(id > 0 && id < next_id && inq[id] && !issued[id], "issued instruction was waiting");
        if (id > 0 && id < MAXID) begin
          chk(rdy1[id] < cyc && rdy2[id] < cyc, "issue after both sources woke");
          chk(iss_entry[l].src1 == t1[id] && iss_entry[l].src2 == t2[id], "issued entry intact");
          issued[id] = 1; inq[id] = 0;
        end
      end
    end
    chk(nissued == ((nready < nfree) ? nready : nfree), "issue as many as ready and free");
    occ -= nissued;
    // wakeups of this cycle reach waiting entries and the ones inserted now
    for (int w = 0; w < WW; w++)
      if (wake_valid[w])
        for (int i = 1; i < next_id; i++)
          if (inq[i]) begin
            if (rdy1[i] > cyc && t1[i] == wake_tag[w]) rdy1[i] = cyc;
            if (rdy2[i] > cyc && t2[i] == wake_tag[w]) rdy2[i] = cyc;
          end
  endtask

  task automatic drive_insert(input int cyc, input int max_ins, input bit allow_unready);
    iq_entry_t e;
    ins_valid = '0;
    ins_entry = '0;
    if (occ + DW <= N) begin
      for (int d = 0; d < DW; d++) begin
        if (d < max_ins && $urandom_range(3) != 0) begin
          e = '0;
          e.src1 = PREG_W'($urandom_range(NTAG - 1));
          e.src2 = PREG_W'($urandom_range(NTAG - 1));
          e.src1_rdy = allow_unready ? 1'($urandom_range(1)) : 1'b1;
          e.src2_rdy = allow_unready ? 1'($urandom_range(1)) : 1'b1;
          e.dst = PREG_W'($urandom);
          e.payload = IQ_PAYLOAD_W'(next_id);
          ins_valid[d] = 1'b1;
          ins_entry[d] = e;
          t1[next_id] = e.src1; t2[next_id] = e.src2;
          ins_cyc[next_id] = cyc;
          rdy1[next_id] = e.src1_rdy ? cyc : 1 << 30;
          rdy2[next_id] = e.src2_rdy ? cyc : 1 << 30;
          inq[next_id] = 1; issued[next_id] = 0;
          next_id++; occ++;
        end
      end
    end
  endtask

  initial begin
    int cyc;
    flush = 0; ins_valid = '0; ins_entry = '0; wake_valid = '0; wake_tag = '0; fu_ready = '0;
    fi_en = 0; fi_rep = 2'd1; fi_idx = 0; fi_bitpos = 0;
    for (int i = 0; i < MAXID; i++) begin inq[i] = 0; issued[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    cyc = 0;
    // directed: an instruction waiting on tag 5 issues the cycle after tag 5 wakes
    @(negedge clk); cyc++;
    begin
      iq_entry_t e;
      e = '0; e.src1 = 8'd5; e.src2 = 8'd6; e.src2_rdy = 1'b1; e.payload = IQ_PAYLOAD_W'(next_id);
      t1[next_id] = 8'd5; t2[next_id] = 8'd6; rdy1[next_id] = 1 << 30; rdy2[next_id] = cyc;
      inq[next_id] = 1; ins_cyc[next_id] = cyc; next_id++; occ++;
      ins_valid = 2'b01; ins_entry[0] = e; fu_ready = 2'b11;
    end
    step(cyc);
    @(negedge clk); cyc++; ins_valid = '0; step(cyc);
    chk(iss_valid == 2'b00, "waiting instruction does not issue");
    @(negedge clk); cyc++; wake_valid = 2'b10; wake_tag[1] = 8'd5; step(cyc);
    chk(iss_valid == 2'b00, "no issue in the wakeup cycle");
    @(negedge clk); cyc++; wake_valid = '0; step(cyc);
    chk(iss_valid == 2'b01 && int'(iss_entry[0].payload) == 1, "issue one cycle after wakeup");
    // random phase with upsets in replica 1
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk); cyc++;
      drive_insert(cyc, DW, 1'b1);
      for (int w = 0; w < WW; w++) begin
        wake_valid[w] = 1'($urandom_range(1));
        wake_tag[w] = PREG_W'($urandom_range(NTAG - 1));
      end
      fu_ready = IW'($urandom);
      fi_en = ($urandom_range(9) == 0);
      fi_idx = 16'($urandom_range(N - 1));
      fi_bitpos = 16'($urandom_range(IQ_ENTRY_W));
      if (fi_en) masked_upsets++;
      step(cyc);
    end
    fi_en = 0;
    // drain: wake every tag, all lanes free
    for (int n = 0; n < 40; n++) begin
      @(negedge clk); cyc++;
      ins_valid = '0;
      wake_valid = 2'b11; wake_tag[0] = PREG_W'(n % NTAG); wake_tag[1] = PREG_W'((n + 8) % NTAG);
      fu_ready = 2'b11;
      step(cyc);
    end
    for (int i = 1; i < next_id; i++) chk(issued[i], "every instruction issued");
    // flush: fill with waiting entries, then flush
    @(negedge clk); cyc++; wake_valid = '0; fu_ready = '0;
    begin
      iq_entry_t e;
      e = '0; e.src1 = 8'd200; e.src2 = 8'd201;
      ins_valid = 2'b11; ins_entry[0] = e; ins_entry[1] = e;
    end
    @(negedge clk); ins_valid = '0; #1;
    chk(count == 4'd2, "entries held before flush");
    flush = 1;
    @(negedge clk); flush = 0; #1;
    chk(count == 4'd0 && ins_ready, "flush empties the queue");
    chk(mm == 1'b1 || masked_upsets > 0, "upsets were injected");
    $display("masked upsets: %0d", masked_upsets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
