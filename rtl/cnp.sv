// cnp: offset min-sum check node processor with its internal pipeline register.
//
// Receives DC messages in sign & magnitude form, all in the same cycle.
//  * CNP sign: the XOR of all input signs is the product of the signs; XOR-ing it again
//    with each input's own sign gives the sign of each output message.
//  * CNP min: the MIN1,2 unit (min12_tree) finds the two smallest magnitudes, and one
//    equality comparator per input flags the input whose magnitude equals min1.
//  * Pipeline register: min1, min2, the DC equality flags and the DC output signs.
//  * After the register, C is subtracted from min1 and from min2 (floored at 0), and for
//    each output a multiplexer picks min2-C for the input that equals min1 and min1-C for
//    every other one (input 0 of the multiplexer is the min2 path, input 1 the min1 path,
//    as labelled in the paper's architecture figure, so the select is "not equal").
// Timing: the outputs are combinational from the pipeline register, i.e. they belong to
// the inputs presented one clock edge earlier. The register has no enable and no reset;
// validity is tracked by the enclosing processor. The split of logic around the register
// follows the paper's architecture figure.
module cnp #(
  parameter int W  = 6,   // message width, magnitudes are W-1 bits
  parameter int DC = 30,  // check node degree
  parameter int C  = 1    // offset
) (
  input  logic         clk,
  input  logic         sign_in  [DC],
  input  logic [W-2:0] magn_in  [DC],
  output logic         sign_out [DC],
  output logic [W-2:0] magn_out [DC]
);
  logic [DC-1:0][W-2:0] magn_vec;
  logic [W-2:0]         min1, min2;
  logic                 sign_tot;
  logic [DC-1:0]        eq, sgn;

  // registered state
  logic [W-2:0]         min1_q, min2_q;
  logic [DC-1:0]        eq_q, sgn_q;
  logic [W-2:0]         m1_off, m2_off;

  always_comb begin
    sign_tot = 1'b0;
    for (int i = 0; i < DC; i++) begin
      magn_vec[i] = magn_in[i];
      sign_tot    = sign_tot ^ sign_in[i];
    end
  end

  min12_tree #(.W(W-1), .N(DC)) u_min12 (.x(magn_vec), .min1(min1), .min2(min2));

  always_comb begin
    for (int i = 0; i < DC; i++) begin
      eq[i]  = magn_in[i] == min1;
      sgn[i] = sign_tot ^ sign_in[i];
    end
  end

  always_ff @(posedge clk) begin
    min1_q <= min1;
    min2_q <= min2;
    eq_q   <= eq;
    sgn_q  <= sgn;
  end

  always_comb begin
    m1_off = (min1_q > (W-1)'(C)) ? min1_q - (W-1)'(C) : '0;
    m2_off = (min2_q > (W-1)'(C)) ? min2_q - (W-1)'(C) : '0;
    for (int i = 0; i < DC; i++) begin
      magn_out[i] = (!eq_q[i]) ? m1_off : m2_off;
      sign_out[i] = sgn_q[i];
    end
  end
endmodule
