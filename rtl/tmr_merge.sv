// tmr_merge: output stage shared by every hardenable component.
//
// A component built with HARDEN=1 holds three replicas and drives all three
// rows of rep_out; the rows are then voted by tmr_voter.  With HARDEN=0 only
// row 0 exists and is passed on unchanged (the unprotected component of mode
// U); rows 1 and 2 must then be tied to zero by the component, and mismatch
// reports any non-zero bit on them (this design's own wiring check, always 0
// in a correct build).  Combinational.
module tmr_merge #(
  parameter int W      = 8,
  parameter bit HARDEN = 1'b0
) (
  input  logic [2:0][W-1:0] rep_out,
  output logic [W-1:0]      y,
  output logic              mismatch
);
  if (HARDEN) begin : g_tmr
    tmr_voter #(.W(W)) u_vote (
      .a(rep_out[0]), .b(rep_out[1]), .c(rep_out[2]),
      .y(y), .mismatch(mismatch)
    );
  end else begin : g_plain
    assign y        = rep_out[0];
    assign mismatch = |{rep_out[2], rep_out[1]};
  end
endmodule
