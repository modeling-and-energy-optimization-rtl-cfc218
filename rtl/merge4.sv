// merge4: the 4-input Merge block of the MIN1,2 unit.
//
// Inputs are two sorted pairs (min1a <= min2a) and (min1b <= min2b). The first
// comparator picks the smaller of the two first minima as min1. The loser of that
// comparison is then compared with the second minimum of the winning pair (selected by
// the same comparator through the bottom multiplexer); the smaller of these two is
// min2. Two comparators and four multiplexers, as in the paper's Merge block figure.
// Purely combinational.
module merge4 #(
  parameter int W = 5
) (
  input  logic [W-1:0] min1a,
  input  logic [W-1:0] min1b,
  input  logic [W-1:0] min2a,
  input  logic [W-1:0] min2b,
  output logic [W-1:0] min1,
  output logic [W-1:0] min2
);
  logic         gt1, gt2;
  logic [W-1:0] loser, win2;

  always_comb begin
    gt1   = min1a > min1b;
    min1  = gt1 ? min1b : min1a;
    loser = gt1 ? min1a : min1b;
    win2  = gt1 ? min2b : min2a;
    gt2   = loser > win2;
    min2  = gt2 ? win2 : loser;
  end
endmodule
