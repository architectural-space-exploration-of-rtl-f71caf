// tmr_voter: bitwise 2-of-3 majority voter for component-level triple
// modular redundancy.
//
// Three replicas of a component receive the same inputs; their outputs a, b
// and c meet here, and y carries, bit by bit, the value at least two of them
// agree on, so a soft error in one replica never reaches y.  The majority
// function is the paper's; writing it as (a&b)|(b&c)|(a&c) is this design's
// choice.  The mismatch flag (any replica disagrees with another) is an
// addition of this design, used to count masked faults; a plain TMR voter
// does not need it.  Purely combinational, no clock.
module tmr_voter #(
  parameter int W = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y,
  output logic         mismatch
);
  always_comb begin
    y        = (a & b) | (b & c) | (a & c);
    mismatch = |((a ^ b) | (b ^ c));
  end
endmodule
