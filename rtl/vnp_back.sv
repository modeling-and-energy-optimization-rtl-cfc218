// vnp_back: the back half of a variable node processor.
//
// Converts the CN-to-VN message from the check node processor's sign & magnitude form
// to two's complement ("to 2's") and adds it to the extrinsic message mu held in the
// extr pipeline register, giving the new belief total Lambda = mu + lambda (the VN
// update of the row-layered offset min-sum algorithm). Both terms are within
// +-(2^(W-1)-1), so the (W+1)-bit belief total holds the sum exactly and needs no
// saturation. The hard decision is the sign of Lambda: negative gives bit 1 (x = -1),
// otherwise bit 0 (x = +1). The paper draws a random bit when Lambda = 0; this design
// decides x = +1 there. Combinational.
module vnp_back #(
  parameter int W = 6
) (
  input  logic signed [W-1:0] extr,     // mu from the extr register
  input  logic                sign,     // CN-to-VN message sign (1 = negative)
  input  logic        [W-2:0] magn,     // CN-to-VN message magnitude
  output logic signed [W:0]   belief,   // Lambda_i (W+1 bits)
  output logic signed [W-1:0] cmsg,     // lambda^(t)_{i,J(i,l)}
  output logic                hard      // hard decision bit
);
  always_comb begin
    cmsg = sign ? -$signed({1'b0, magn}) : $signed({1'b0, magn});
    belief = $signed({extr[W-1], extr}) + $signed({cmsg[W-1], cmsg});
    hard   = belief[W];
  end
endmodule
