// tb_rename_map: self-checking test of the rename map table (hardened
// build).  Checks the identity mapping after reset, that an update is seen
// by lookups after one edge, that the higher update port wins a clash, and
// random update/lookup traffic against a reference table, with single-replica
// upsets injected that the voter must hide.
module tb_rename_map;
  localparam int ARCH = 32, PW = 8, NL = 4, NU = 2, AW = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NL-1:0][AW-1:0] lk_areg;
  logic [NL-1:0][PW-1:0] lk_preg;
  logic [NU-1:0]         up_en;
  logic [NU-1:0][AW-1:0] up_areg;
  logic [NU-1:0][PW-1:0] up_preg;
  logic fi_en; logic [1:0] fi_rep; logic [15:0] fi_idx, fi_bitpos; logic mm;
  logic [PW-1:0] model [ARCH];
  int checks = 0, failures = 0;

  rename_map #(.ARCH(ARCH), .PW(PW), .NL(NL), .NU(NU), .HARDEN(1'b1)) dut (
    .clk, .rst_n, .lk_areg, .lk_preg, .up_en, .up_areg, .up_preg,
    .fi_en, .fi_rep, .fi_idx, .fi_bitpos, .mismatch(mm));

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    up_en = '0; up_areg = '0; up_preg = '0; lk_areg = '0;
    fi_en = 0; fi_rep = 0; fi_idx = 0; fi_bitpos = 0;
    for (int i = 0; i < ARCH; i++) model[i] = PW'(i);
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < ARCH; i += NL) begin
      for (int p = 0; p < NL; p++) lk_areg[p] = AW'(i + p);
      #1;
      for (int p = 0; p < NL; p++) chk(lk_preg[p] == PW'(i + p), "identity map after reset");
    end
    // clash: both ports rename r7, port 1 wins
    @(negedge clk);
    up_en = 2'b11; up_areg[0] = 5'd7; up_areg[1] = 5'd7; up_preg[0] = 8'd100; up_preg[1] = 8'd200;
    lk_areg[0] = 5'd7; #1;
    chk(lk_preg[0] == 8'd7, "update not visible before the edge");
    @(negedge clk); up_en = '0; model[7] = 8'd200; #1;
    chk(lk_preg[0] == 8'd200, "later rename of the same register wins");
    if (lk_preg[0] != 8'd200) $display("got %0d", lk_preg[0]);
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int p = 0; p < NU; p++) begin
        up_en[p] = 1'($urandom); up_areg[p] = AW'($urandom); up_preg[p] = PW'($urandom);
      end
      for (int p = 0; p < NL; p++) lk_areg[p] = AW'($urandom);
      fi_en = (n % 7 == 3); fi_rep = 2'($urandom_range(2));
      fi_idx = 16'($urandom_range(ARCH - 1)); fi_bitpos = 16'($urandom_range(PW - 1));
      #1;
      for (int p = 0; p < NL; p++) chk(lk_preg[p] == model[lk_areg[p]], "random lookup");
      for (int p = 0; p < NU; p++) if (up_en[p]) model[up_areg[p]] = up_preg[p];
      // keep at most one replica corrupted per entry: rewrite the upset entry
      if (fi_en) begin
        @(negedge clk);
        fi_en = 0;
        up_en = 2'b01; up_areg[0] = fi_idx[AW-1:0]; up_preg[0] = model[fi_idx[AW-1:0]];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
