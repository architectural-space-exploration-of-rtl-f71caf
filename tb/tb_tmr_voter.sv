// tb_tmr_voter: self-checking test of the 2-of-3 majority voter.
// Drives random replica words, and words where exactly one replica is
// corrupted, and compares y with a per-bit count of ones (a bit is 1 when at
// least two replicas hold 1) and mismatch with a direct comparison.
module tb_tmr_voter;
  localparam int W = 16;
  logic [W-1:0] a, b, c, y;
  logic         mismatch;
  int checks = 0, failures = 0;

  tmr_voter #(.W(W)) dut (.a, .b, .c, .y, .mismatch);

  function automatic logic [W-1:0] ref_major(logic [W-1:0] x, logic [W-1:0] yy, logic [W-1:0] z);
    logic [W-1:0] m;
    for (int i = 0; i < W; i++) m[i] = (int'(x[i]) + int'(yy[i]) + int'(z[i])) >= 2;
    return m;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] good, flip;
    for (int n = 0; n < 400; n++) begin
      a = W'($urandom); b = W'($urandom); c = W'($urandom);
      #1;
      checks++;
      if (y !== ref_major(a, b, c)) begin
        failures++; $display("FAIL random: a=%h b=%h c=%h y=%h", a, b, c, y);
      end
      checks++;
      if (mismatch !== ((a != b) || (b != c))) begin
        failures++; $display("FAIL mismatch flag random");
      end
    end
    // one corrupted replica must always be out-voted
    for (int n = 0; n < 300; n++) begin
      good = W'($urandom); flip = W'($urandom) | W'(1);
      a = good; b = good; c = good;
      case (n % 3)
        0: a = good ^ flip;
        1: b = good ^ flip;
        default: c = good ^ flip;
      endcase
      #1;
      checks++;
      if (y !== good || mismatch !== 1'b1) begin
        failures++; $display("FAIL single-upset: good=%h y=%h mm=%b", good, y, mismatch);
      end
    end
    a = 16'h1234; b = 16'h1234; c = 16'h1234; #1;
    checks++;
    if (y !== 16'h1234 || mismatch !== 1'b0) begin
      failures++; $display("FAIL agreement");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
