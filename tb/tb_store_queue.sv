// tb_store_queue: self-checking test of the store queue (hardened build, 8
// entries).  Directed cases: forwarding returns the youngest store older
// than the load to the same 8-byte word; stores leave only after commit, in
// order, and only when the data cache accepts; a flush drops uncommitted
// stores but keeps committed ones.  A random phase compares forwarding and
// drain against a reference queue.  Upsets go into replica 1 only.
module tb_store_queue;
  localparam int N = 8, AW = 16, DW = 16, IW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush;
  logic [3:0] alloc_valid; logic alloc_ready; logic [3:0][IW-1:0] alloc_idx; logic [IW-1:0] tail_pos;
  logic [1:0] wr_en; logic [1:0][IW-1:0] wr_idx; logic [1:0][AW-1:0] wr_addr; logic [1:0][DW-1:0] wr_data;
  logic [2:0] commit_n;
  logic drain_valid, drain_ready; logic [AW-1:0] drain_addr; logic [DW-1:0] drain_data;
  logic [1:0] fwd_valid; logic [1:0][AW-1:0] fwd_addr; logic [1:0][IW-1:0] fwd_pos;
  logic [1:0] fwd_hit; logic [1:0][DW-1:0] fwd_data;
  logic [3:0] count;
  logic fi_en; logic [1:0] fi_rep; logic [15:0] fi_idx, fi_bitpos; logic mm;

  store_queue #(.ENTRIES(N), .ALLOC_W(4), .AP(2), .FWD_P(2), .COMMIT_W(4), .AW(AW), .DW(DW),
                .HARDEN(1'b1)) dut (
    .clk, .rst_n, .flush, .alloc_valid, .alloc_ready, .alloc_idx, .tail_pos,
    .wr_en, .wr_idx, .wr_addr, .wr_data, .commit_n,
    .drain_valid, .drain_addr, .drain_data, .drain_ready,
    .fwd_valid, .fwd_addr, .fwd_pos, .fwd_hit, .fwd_data, .count,
    .fi_en, .fi_rep, .fi_idx, .fi_bitpos, .mismatch(mm));

  int checks = 0, failures = 0;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic idle();
    alloc_valid = '0; wr_en = '0; commit_n = '0; drain_ready = 0; fwd_valid = '0; flush = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference queue for the random phase
  int head = 0, occ = 0, cocc = 0, drains = 0;
  bit ex [N]; logic [AW-1:0] ad [N]; logic [DW-1:0] da [N];

  initial begin
    idle(); wr_idx = '0; wr_addr = '0; wr_data = '0; fwd_addr = '0; fwd_pos = '0;
    fi_en = 0; fi_rep = 2'd1; fi_idx = 0; fi_bitpos = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // S0, S1, S2 allocated
    @(negedge clk); alloc_valid = 4'b0111; #1;
    chk(alloc_idx[0] == 0 && alloc_idx[2] == 2 && tail_pos == 0, "allocation");
    @(negedge clk); idle();
    wr_en = 2'b11; wr_idx[0] = 3'd0; wr_addr[0] = 16'h0040; wr_data[0] = 16'h1111;
                   wr_idx[1] = 3'd2; wr_addr[1] = 16'h0044; wr_data[1] = 16'h3333;
    @(negedge clk); idle();
    wr_en = 2'b01; wr_idx[0] = 3'd1; wr_addr[0] = 16'h0080; wr_data[0] = 16'h2222;
    fi_en = 1; fi_idx = 16'd0; fi_bitpos = 16'd3;       // upset S0's data in replica 1
    @(negedge clk); idle(); fi_en = 0;
    // a load after all three stores to word 0x40: youngest older store is S2
    fwd_valid = 2'b11; fwd_addr[0] = 16'h0040; fwd_pos[0] = 3'd3;
    // a load between S0 and S1: only S0 is older
    fwd_addr[1] = 16'h0040; fwd_pos[1] = 3'd1; #1;
    chk(fwd_hit[0] && fwd_data[0] == 16'h3333, "forward from the youngest older store");
    chk(fwd_hit[1] && fwd_data[1] == 16'h1111, "forward respects program order");
    fwd_pos[1] = 3'd0; #1;
    chk(!fwd_hit[1], "no store older than the first load");
    fwd_addr[0] = 16'h0100; #1;
    chk(!fwd_hit[0], "no forward for another word");
    chk(!drain_valid, "nothing drains before commit");
    // commit S0, S1; drain one per accepted cycle
    @(negedge clk); idle(); commit_n = 3'd2;
    @(negedge clk); idle(); #1;
    chk(drain_valid && drain_addr == 16'h0040 && drain_data == 16'h1111, "S0 drains first");
    @(negedge clk); idle(); #1;
    chk(drain_valid && count == 4'd3, "drain waits for the cache");
    drain_ready = 1;
    @(negedge clk); idle(); #1;
    chk(drain_valid && drain_addr == 16'h0080 && count == 4'd2, "S1 drains next");
    // flush: S2 (uncommitted) goes, S1 (committed) stays
    flush = 1;
    @(negedge clk); idle(); #1;
    chk(count == 4'd1 && drain_valid && drain_data == 16'h2222, "flush keeps committed store");
    drain_ready = 1;
    @(negedge clk); idle(); #1;
    chk(count == 4'd0 && !drain_valid, "queue empty");
    // random phase
    head = int'(tail_pos); occ = 0; cocc = 0;
    for (int n = 0; n < 1500; n++) begin
      int fd_exp_h, sd;
      logic [DW-1:0] fd_exp;
      bit dv_exp;
      @(negedge clk); idle();
      alloc_valid = (occ + 4 <= N) ? 4'((1 << $urandom_range(2)) - 1) : 4'b0;
      wr_en[0] = (occ > 0) && $urandom_range(1);
      wr_idx[0] = 3'((head + $urandom_range(occ > 0 ? occ - 1 : 0)) % N);
      wr_addr[0] = 16'($urandom_range(7) << 3); wr_data[0] = 16'($urandom);
      commit_n = 3'($urandom_range((occ - cocc) < 2 ? (occ - cocc) : 2));
      drain_ready = 1'($urandom_range(1));
      sd = $urandom_range(occ);
      fwd_valid[0] = 1; fwd_addr[0] = 16'($urandom_range(7) << 3); fwd_pos[0] = 3'((head + sd) % N);
      fi_en = ($urandom_range(5) == 0); fi_idx = 16'($urandom_range(N - 1));
      fi_bitpos = 16'($urandom_range(AW + DW + 1));
      #1;
      fd_exp_h = 0; fd_exp = '0;
      for (int d = 0; d < sd; d++) begin
        int i;
        i = (head + d) % N;
        if (ex[i] && ad[i][AW-1:3] == fwd_addr[0][AW-1:3]) begin fd_exp_h = 1; fd_exp = da[i]; end
      end
      dv_exp = (cocc > 0) && ex[head];
      chk(int'(count) == occ, "random occupancy");
      chk(fwd_hit[0] == fd_exp_h && (!fd_exp_h || fwd_data[0] == fd_exp), "random forward");
      chk(drain_valid == dv_exp && (!dv_exp || (drain_addr == ad[head] && drain_data == da[head])),
          "random drain");
      for (int k = 0; k < 4; k++) if (alloc_valid[k]) ex[(head + occ + k) % N] = 0;
      if (wr_en[0]) begin ex[wr_idx[0]] = 1; ad[wr_idx[0]] = wr_addr[0]; da[wr_idx[0]] = wr_data[0]; end
      cocc += commit_n;
      if (dv_exp && drain_ready) begin head = (head + 1) % N; occ--; cocc--; drains++; end
      occ += $countones(alloc_valid);
    end
    chk(drains > 50, "stores kept draining");
    $display("drained %0d", drains);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
