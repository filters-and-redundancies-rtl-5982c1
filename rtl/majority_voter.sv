// majority_voter: bitwise two-out-of-three vote.
//
// The voter closes every triple modular redundancy scheme in the paper: three
// copies of a value come in, and each output bit takes the value held by at
// least two of them, so any single corrupted copy is outvoted. The paper gives
// the block's function only; the usual AND-OR form is used here.
//
// Interface: a, b, c (W bits each) in, y out. Combinational.
module majority_voter #(
  parameter int unsigned W = 12
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y
);

  always_comb y = (a & b) | (a & c) | (b & c);

endmodule
