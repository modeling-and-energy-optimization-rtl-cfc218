// oms_processor: processing unit computing every message to and from one check node
// in each clock cycle.
//
// Structure (paper's architecture figure, with its two pipeline stages plus the input
// and output registers of the processor, latency 3 clock cycles):
//   input register  : DC pairs (Lambda'_i, lambda^(t-1)_i) and a valid bit; belief
//                     totals are W+1 bits wide, messages W bits
//   VNP fronts      : DC of them, mu_i = Lambda'_i - lambda_i, to sign & magnitude
//   CNP             : sign XOR, MIN1,2 tree and equality flags, then its internal
//                     pipeline register, offset subtraction and min1/min2 selection
//   extr register   : mu of each VN with a back part, in parallel with the CNP register
//   VNP backs       : NB of them, Lambda_i = mu_i + lambda_i and the hard decision
//   output register : NB pairs (Lambda_i, lambda^(t)_i), hard decisions and valid
// NB = DC is the processor of the complete decoder (every VN gets its update). NB = 1
// is the paper's test circuit: one full VNP (index 0 here, index 1 in the paper) and
// DC-1 VNPs reduced to their front part.
//
// Interface: in_valid qualifies the inputs of a cycle; out_valid rises exactly three
// clock edges later with the corresponding results. The processor accepts a new check
// node every cycle and never stalls. Only the valid bits are reset.
module oms_processor #(
  parameter int W  = ldpc_pkg::MSG_W,
  parameter int DC = ldpc_pkg::CODE_DC,
  parameter int C  = ldpc_pkg::OMS_C,
  parameter int NB = ldpc_pkg::CODE_DC   // VNPs with a back part (DC: decoder, 1: test circuit)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W:0]   belief_in  [DC],   // Lambda'_i
  input  logic signed [W-1:0] cmsg_in    [DC],   // lambda^(t-1)_{i,J(i,l)}
  output logic                out_valid,
  output logic signed [W:0]   belief_out [NB],   // Lambda_i
  output logic signed [W-1:0] cmsg_out   [NB],   // lambda^(t)_{i,J(i,l)}
  output logic                hard_out   [NB]    // 1 = decided x_i = -1
);
  // stage 1: input register
  logic                v1, v2;
  logic signed [W:0]   belief_q [DC];
  logic signed [W-1:0] cmsg_q   [DC];

  always_ff @(posedge clk) begin
    belief_q <= belief_in;
    cmsg_q   <= cmsg_in;
  end

  // VNP fronts
  logic signed [W-1:0] mu     [DC];
  logic                f_sign [DC];
  logic        [W-2:0] f_magn [DC];

  for (genvar i = 0; i < DC; i++) begin : g_front
    vnp_front #(.W(W)) u_front (
      .belief_prev(belief_q[i]), .cmsg_prev(cmsg_q[i]),
      .mu(mu[i]), .sign(f_sign[i]), .magn(f_magn[i]));
  end

  // stage 2: CNP (its pipeline register is inside) and the extr registers
  logic                c_sign [DC];
  logic        [W-2:0] c_magn [DC];
  logic signed [W-1:0] extr_q [NB];

  cnp #(.W(W), .DC(DC), .C(C)) u_cnp (
    .clk(clk), .sign_in(f_sign), .magn_in(f_magn), .sign_out(c_sign), .magn_out(c_magn));

  always_ff @(posedge clk) begin
    for (int i = 0; i < NB; i++) extr_q[i] <= mu[i];
  end

  // VNP backs
  logic signed [W:0]   b_belief [NB];
  logic signed [W-1:0] b_cmsg   [NB];
  logic                b_hard   [NB];

  for (genvar i = 0; i < NB; i++) begin : g_back
    vnp_back #(.W(W)) u_back (
      .extr(extr_q[i]), .sign(c_sign[i]), .magn(c_magn[i]),
      .belief(b_belief[i]), .cmsg(b_cmsg[i]), .hard(b_hard[i]));
  end

  // stage 3: output register
  always_ff @(posedge clk) begin
    belief_out <= b_belief;
    cmsg_out   <= b_cmsg;
    hard_out   <= b_hard;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      v2        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      v2        <= v1;
      out_valid <= v2;
    end
  end

  if (NB < 1 || NB > DC) begin : g_bad
    $error("oms_processor needs 1 <= NB <= DC");
  end
endmodule
