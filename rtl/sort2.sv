// sort2: the Sort block of the MIN1,2 unit.
//
// One magnitude comparator (x0 > x1) drives two 2:1 multiplexers: input 0 of the
// min1 multiplexer is x0 and input 1 is x1, the min2 multiplexer takes them the other
// way round. The result is the pair sorted as (min1 <= min2). Purely combinational.
// The structure follows the paper's Sort block figure.
module sort2 #(
  parameter int W = 5                 // magnitude width
) (
  input  logic [W-1:0] x0,
  input  logic [W-1:0] x1,
  output logic [W-1:0] min1,
  output logic [W-1:0] min2
);
  logic gt;

  always_comb begin
    gt   = x0 > x1;
    min1 = gt ? x1 : x0;
    min2 = gt ? x0 : x1;
  end
endmodule
