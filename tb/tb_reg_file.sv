// tb_reg_file: self-checking test of the register file in both builds.
// A reference array follows every write; random reads are compared with it.
// Soft errors are injected into single replicas: the hardened build must
// keep returning the reference value (and flag the disagreement), the
// unprotected build must return the flipped value.  Reads are
// combinational and a write is visible after one edge; both are checked.
module tb_reg_file;
  localparam int NREGS = 16, W = 16, NR = 2, NW = 2, AW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NR-1:0][AW-1:0] rd_addr;
  logic [NR-1:0][W-1:0]  rd_h, rd_u;
  logic [NW-1:0]         wr_en;
  logic [NW-1:0][AW-1:0] wr_addr;
  logic [NW-1:0][W-1:0]  wr_data;
  logic fi_en, fi_en_u;
  logic [1:0]  fi_rep;
  logic [15:0] fi_idx, fi_bitpos;
  logic mm_h, mm_u;
  int checks = 0, failures = 0;
  logic [W-1:0] model [NREGS];

  reg_file #(.NREGS(NREGS), .W(W), .NR(NR), .NW(NW), .HARDEN(1'b1)) dut_h (
    .clk, .rst_n, .rd_addr, .rd_data(rd_h), .wr_en, .wr_addr, .wr_data,
    .fi_en, .fi_rep, .fi_idx, .fi_bitpos, .mismatch(mm_h));
  reg_file #(.NREGS(NREGS), .W(W), .NR(NR), .NW(NW), .HARDEN(1'b0)) dut_u (
    .clk, .rst_n, .rd_addr, .rd_data(rd_u), .wr_en, .wr_addr, .wr_data,
    .fi_en(fi_en_u), .fi_rep(2'd0), .fi_idx, .fi_bitpos, .mismatch(mm_u));

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
    wr_en = '0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    fi_en = 0; fi_en_u = 0; fi_rep = 0; fi_idx = 0; fi_bitpos = 0;
    for (int i = 0; i < NREGS; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // reset value
    @(negedge clk);
    rd_addr[0] = 4'd3; rd_addr[1] = 4'd9; #1;
    chk(rd_h[0] == 0 && rd_h[1] == 0 && rd_u[0] == 0, "reset clears registers");
    // write-port priority: both ports write register 5, port 1 wins
    wr_en = 2'b11; wr_addr[0] = 4'd5; wr_addr[1] = 4'd5; wr_data[0] = 16'haaaa; wr_data[1] = 16'h5555;
    rd_addr[0] = 4'd5; #1;
    chk(rd_h[0] == 16'h0, "write not visible before the edge");
    @(negedge clk); wr_en = '0; model[5] = 16'h5555; #1;
    chk(rd_h[0] == 16'h5555 && rd_u[0] == 16'h5555, "higher write port wins");
    // random traffic against the model
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int p = 0; p < NW; p++) begin
        wr_en[p] = 1'($urandom); wr_addr[p] = AW'($urandom); wr_data[p] = W'($urandom);
      end
      for (int p = 0; p < NR; p++) rd_addr[p] = AW'($urandom);
      #1;
      for (int p = 0; p < NR; p++)
        chk(rd_h[p] == model[rd_addr[p]] && rd_u[p] == model[rd_addr[p]], "random read");
      for (int p = 0; p < NW; p++) if (wr_en[p]) model[wr_addr[p]] = wr_data[p];
    end
    @(negedge clk); wr_en = '0;
    // soft errors: one bit in one replica at a time
    for (int n = 0; n < 60; n++) begin
      int reg_i, bit_i, rep_i;
      reg_i = $urandom_range(NREGS - 1); bit_i = $urandom_range(W - 1); rep_i = $urandom_range(2);
      @(negedge clk);
      fi_en = 1; fi_en_u = 1; fi_rep = 2'(rep_i); fi_idx = 16'(reg_i); fi_bitpos = 16'(bit_i);
      @(negedge clk);
      fi_en = 0; fi_en_u = 0;
      rd_addr[0] = AW'(reg_i); #1;
      chk(rd_h[0] == model[reg_i], "hardened read masks a replica upset");
      chk(mm_h == 1'b1, "voter reports the disagreement");
      chk(rd_u[0] == (model[reg_i] ^ (W'(1) << bit_i)), "unprotected read shows the upset");
      chk(mm_u == 1'b0, "unprotected build has no voter");
      // scrub by rewriting the register (all replicas agree again)
      wr_en[0] = 1; wr_addr[0] = AW'(reg_i); wr_data[0] = model[reg_i];
      @(negedge clk); wr_en = '0; #1;
      chk(mm_h == 1'b0, "agreement after rewrite");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
