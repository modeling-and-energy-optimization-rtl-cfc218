// merge3: the 3-input Merge block used when a check node has an odd number of inputs.
//
// It is the 4-input Merge block with the min2b input and the bottom multiplexer
// removed: a sorted pair (min1a <= min2a) is merged with a single unpaired value
// min1b. If min1b wins the first comparison, the loser min1a is always <= min2a, so
// the second comparison correctly returns min1a as min2. Purely combinational.
module merge3 #(
  parameter int W = 5
) (
  input  logic [W-1:0] min1a,
  input  logic [W-1:0] min1b,
  input  logic [W-1:0] min2a,
  output logic [W-1:0] min1,
  output logic [W-1:0] min2
);
  logic         gt1, gt2;
  logic [W-1:0] loser;

  always_comb begin
    gt1   = min1a > min1b;
    min1  = gt1 ? min1b : min1a;
    loser = gt1 ? min1a : min1b;
    gt2   = loser > min2a;
    min2  = gt2 ? min2a : loser;
  end
endmodule
