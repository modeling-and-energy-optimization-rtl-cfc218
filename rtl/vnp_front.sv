// vnp_front: the front half of a variable node processor.
//
// Computes the VN-to-CN message mu = Lambda' - lambda, the previous belief total minus
// the previous CN-to-VN message of the current layer (line 3 of the row-layered offset
// min-sum algorithm), and converts it to sign & magnitude for the check node
// processor. Lambda' is a (W+1)-bit belief total, lambda a W-bit message. The
// difference is exact in W+2 bits and is saturated to the symmetric range +-(2^(W-1)-1) so that
// the magnitude fits in W-1 bits; the saturation range is this design's choice (the
// paper only says messages saturate at the largest representable magnitude).
// sgn(0) = +1, so the sign bit is 1 only for negative messages. Combinational.
module vnp_front #(
  parameter int W = 6
) (
  input  logic signed [W:0]   belief_prev,  // Lambda'_i (W+1 bits)
  input  logic signed [W-1:0] cmsg_prev,    // lambda^(t-1)_{i,J(i,l)}
  output logic signed [W-1:0] mu,           // VN-to-CN message (to the extr register)
  output logic                sign,         // 1 = negative
  output logic        [W-2:0] magn          // |mu|
);
  localparam int MAXV = 2 ** (W - 1) - 1;

  logic signed [W+1:0] diff;

  always_comb begin
    diff = $signed({belief_prev[W], belief_prev}) - $signed({{2{cmsg_prev[W-1]}}, cmsg_prev});
    if (diff > (W+2)'(MAXV))        mu = W'(MAXV);
    else if (diff < -(W+2)'(MAXV))  mu = W'(-MAXV);
    else                            mu = diff[W-1:0];
    sign = mu[W-1];
    magn = sign ? (W-1)'(-mu) : mu[W-2:0];
  end
endmodule
