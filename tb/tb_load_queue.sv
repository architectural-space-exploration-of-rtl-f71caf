// tb_load_queue: self-checking test of the load queue (hardened build, 8
// entries).  Directed cases: allocation slots and tail position, the
// memory-order check (only executed loads younger than the store and to the
// same 8-byte word are reported, the oldest first), retirement, wrap-around
// of the circular pointers, and flush.  A random phase compares the order
// check against a reference list.  Upsets go into replica 0 only and must
// never show.
module tb_load_queue;
  localparam int N = 8, AW = 16, IW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush;
  logic [3:0] alloc_valid; logic alloc_ready; logic [3:0][IW-1:0] alloc_idx; logic [IW-1:0] tail_pos;
  logic [1:0] addr_en; logic [1:0][IW-1:0] addr_idx; logic [1:0][AW-1:0] addr;
  logic [1:0] chk_valid; logic [1:0][AW-1:0] chk_addr; logic [1:0][IW-1:0] chk_pos;
  logic [1:0] violation; logic [1:0][IW-1:0] viol_idx;
  logic [2:0] retire_n; logic [3:0] count;
  logic fi_en; logic [1:0] fi_rep; logic [15:0] fi_idx, fi_bitpos; logic mm;

  load_queue #(.ENTRIES(N), .ALLOC_W(4), .AP(2), .CP(2), .RET_W(4), .AW(AW), .HARDEN(1'b1)) dut (
    .clk, .rst_n, .flush, .alloc_valid, .alloc_ready, .alloc_idx, .tail_pos,
    .addr_en, .addr_idx, .addr, .chk_valid, .chk_addr, .chk_pos, .violation, .viol_idx,
    .retire_n, .count, .fi_en, .fi_rep, .fi_idx, .fi_bitpos, .mismatch(mm));

  int checks = 0, failures = 0;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  task automatic idle();
    alloc_valid = '0; addr_en = '0; chk_valid = '0; retire_n = '0; flush = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference for the random phase
  int head = 0, occ = 0;
  bit ex [N]; logic [AW-1:0] ad [N];

  initial begin
    logic [IW-1:0] st_pos;
    int exp_idx, sd;
    bit exp_v;
    idle(); addr_idx = '0; addr = '0; chk_addr = '0; chk_pos = '0;
    fi_en = 0; fi_rep = 2'd0; fi_idx = 0; fi_bitpos = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // allocate L0 (slot 0); a store follows (records tail 1); then L1..L3
    @(negedge clk); alloc_valid = 4'b0001; #1;
    chk(alloc_ready && alloc_idx[0] == 0 && tail_pos == 0, "first allocation at slot 0");
    @(negedge clk); idle(); st_pos = tail_pos;
    chk(st_pos == 3'd1, "tail recorded by the store");
    alloc_valid = 4'b0111; #1;
    chk(alloc_idx[0] == 1 && alloc_idx[1] == 2 && alloc_idx[2] == 3, "group allocation slots");
    @(negedge clk); idle();
    // loads execute: L0 and L2 read word 0x100, L3 reads 0x208
    addr_en = 2'b11; addr_idx[0] = 3'd0; addr[0] = 16'h0100; addr_idx[1] = 3'd2; addr[1] = 16'h0104;
    @(negedge clk); idle();
    addr_en = 2'b01; addr_idx[0] = 3'd3; addr[0] = 16'h0208;
    // upset replica 0 of slot 2's address meanwhile
    fi_en = 1; fi_idx = 16'd2; fi_bitpos = 16'd8;
    @(negedge clk); idle(); fi_en = 0;
    chk(count == 4'd4, "four loads in flight");
    // store to 0x100 resolves: L2 (younger, executed, same word) violates, L0 is older
    chk_valid = 2'b01; chk_addr[0] = 16'h0100; chk_pos[0] = st_pos;
    // second port: store to a word nobody read
    chk_valid[1] = 1'b1; chk_addr[1] = 16'h0300; chk_pos[1] = st_pos; #1;
    chk(violation[0] && viol_idx[0] == 3'd2, "younger load to the same word is reported");
    chk(!violation[1], "no report for an unread word");
    chk(mm == 1'b1, "upset replica disagrees");
    // a store older than everything (pos = head) sees L0 too: oldest reported
    chk_pos[0] = 3'd0; #1;
    chk(violation[0] && viol_idx[0] == 3'd0, "oldest violating load reported");
    // L1 has not executed: a store to its future address is not a violation
    chk_addr[0] = 16'h0208; chk_pos[0] = 3'd1; #1;
    chk(violation[0] && viol_idx[0] == 3'd3, "executed L3 violates");
    @(negedge clk); idle();
    // retire 3 and wrap around the ring
    retire_n = 3'd3;
    @(negedge clk); idle(); #1;
    chk(count == 4'd1, "retire three");
    for (int k = 0; k < 3; k++) begin
      alloc_valid = 4'b1111; #1;
      chk(alloc_idx[0] == 3'((4 + 4 * k) % N), "allocation wraps");
      @(negedge clk); idle(); retire_n = 3'd4;
      @(negedge clk); idle();
    end
    flush = 1;
    @(negedge clk); idle(); #1;
    chk(count == 0 && alloc_ready, "flush empties");
    // random phase: reference model of the order check
    head = 0; occ = 0;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk); idle();
      alloc_valid = (occ + 4 <= N) ? 4'((1 << $urandom_range(2)) - 1) : 4'b0;
      addr_en[0] = (occ > 0) && $urandom_range(1);
      addr_idx[0] = 3'((head + $urandom_range(occ > 0 ? occ - 1 : 0)) % N);
      addr[0] = 16'($urandom_range(7) << 3);
      chk_valid[0] = 1; chk_addr[0] = 16'($urandom_range(7) << 3);
      sd = $urandom_range(occ);
      chk_pos[0] = 3'((head + sd) % N);
      retire_n = 3'($urandom_range(occ < 2 ? occ : 2));
      fi_en = ($urandom_range(5) == 0); fi_idx = 16'($urandom_range(N - 1)); fi_bitpos = 16'($urandom_range(AW));
      #1;
      exp_v = 0; exp_idx = 0;
      for (int d = occ - 1; d >= sd; d--) begin
        int i;
        i = (head + d) % N;
        if (ex[i] && ad[i][AW-1:3] == chk_addr[0][AW-1:3]) begin exp_v = 1; exp_idx = i; end
      end
      chk(int'(count) == occ, "random occupancy");
      chk(violation[0] == exp_v && (!exp_v || int'(viol_idx[0]) == exp_idx), "random order check");
      for (int k = 0; k < 4; k++) if (alloc_valid[k]) begin ex[(head + occ + k) % N] = 0; end
      if (addr_en[0]) begin ex[addr_idx[0]] = 1; ad[addr_idx[0]] = addr[0]; end
      head = (head + retire_n) % N;
      occ = occ + $countones(alloc_valid) - retire_n;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
