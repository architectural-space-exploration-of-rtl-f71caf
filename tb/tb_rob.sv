// tb_rob: self-checking test of the re-order buffer (hardened build, 12
// entries so that the pointers wrap at a non-power-of-two size).
// Instructions are dispatched in order with increasing ids and completed in
// random order; a reference queue predicts, each cycle, the slots handed
// out, the occupancy, and which ids must commit (the oldest completed ones,
// in order, at most two, never past an incomplete one, one cycle after
// completion).  Upsets go into replica 2 and must never show.  A final
// flush must empty the buffer.
module tb_rob;
  localparam int N = 12, DW = 2, CW = 2, KW = 2, PW = 16, IW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush;
  logic [DW-1:0] disp_valid; logic [DW-1:0][PW-1:0] disp_payload;
  logic disp_ready; logic [DW-1:0][IW-1:0] disp_idx;
  logic [CW-1:0] cmp_valid; logic [CW-1:0][IW-1:0] cmp_idx;
  logic [KW-1:0] commit_valid; logic [KW-1:0][PW-1:0] commit_payload;
  logic [3:0] count;
  logic fi_en; logic [1:0] fi_rep; logic [15:0] fi_idx, fi_bitpos; logic mm;

  rob #(.ENTRIES(N), .DISP_W(DW), .CMP_W(CW), .COMMIT_W(KW), .PW(PW), .HARDEN(1'b1)) dut (
    .clk, .rst_n, .flush, .disp_valid, .disp_payload, .disp_ready, .disp_idx,
    .cmp_valid, .cmp_idx, .commit_valid, .commit_payload, .count,
    .fi_en, .fi_rep, .fi_idx, .fi_bitpos, .mismatch(mm));

  int checks = 0, failures = 0;
  int q_id [$];      // in-flight ids, oldest first
  int q_idx [$];     // their slots
  bit done_slot [N];
  int tail = 0, next_id = 1, commits = 0;

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

  initial begin
    int nd, nexp, pick, ncmp;
    int cand [$];
    flush = 0; disp_valid = '0; disp_payload = '0; cmp_valid = '0; cmp_idx = '0;
    fi_en = 0; fi_rep = 2'd2; fi_idx = 0; fi_bitpos = 0;
    for (int i = 0; i < N; i++) done_slot[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // dispatch (lanes packed from 0) only when the model has room
      nd = (q_id.size() + DW <= N) ? $urandom_range(DW) : 0;
      disp_valid = '0;
      for (int k = 0; k < DW; k++) begin
        disp_valid[k] = (k < nd);
        disp_payload[k] = PW'(next_id + k);
      end
      // complete up to two random in-flight, not yet done instructions
      cand.delete();
      for (int i = 0; i < q_id.size(); i++) if (!done_slot[q_idx[i]]) cand.push_back(q_idx[i]);
      cmp_valid = '0;
      ncmp = $urandom_range(CW);
      for (int p = 0; p < ncmp && cand.size() > 0; p++) begin
        pick = $urandom_range(cand.size() - 1);
        cmp_valid[p] = 1; cmp_idx[p] = IW'(cand[pick]);
        cand.delete(pick);
      end
      fi_en = ($urandom_range(7) == 0);
      fi_idx = 16'($urandom_range(N - 1)); fi_bitpos = 16'($urandom_range(PW));
      #1;
      chk(int'(count) == q_id.size(), "occupancy");
      chk(disp_ready == (q_id.size() + DW <= N), "disp_ready");
      for (int k = 0; k < nd; k++) chk(int'(disp_idx[k]) == (tail + k) % N, "slot given to dispatch lane");
      // expected commits: leading completed entries, at most KW
      nexp = 0;
      while (nexp < KW && nexp < q_id.size() && done_slot[q_idx[nexp]]) nexp++;
      for (int k = 0; k < KW; k++) begin
        chk(commit_valid[k] == (k < nexp), "commit lanes");
        if (k < nexp) chk(int'(commit_payload[k]) == q_id[k], "commit in program order");
      end
      // update the model
      for (int k = 0; k < nexp; k++) begin
        done_slot[q_idx[0]] = 0;
        void'(q_id.pop_front()); void'(q_idx.pop_front());
        commits++;
      end
      for (int p = 0; p < CW; p++) if (cmp_valid[p]) done_slot[cmp_idx[p]] = 1;
      for (int k = 0; k < nd; k++) begin
        q_id.push_back(next_id); q_idx.push_back(tail); done_slot[tail] = 0;
        tail = (tail + 1) % N; next_id++;
      end
    end
    chk(commits > 1000, "instructions kept committing");
    // flush empties it
    @(negedge clk); disp_valid = '0; cmp_valid = '0; fi_en = 0; flush = 1;
    @(negedge clk); flush = 0; #1;
    chk(count == 0 && commit_valid == '0, "flush empties the buffer");
    $display("committed %0d", commits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
