// ldpc_decoder: row-layered offset min-sum LDPC decoder with one processing unit.
//
// The decoder holds one codeword's belief totals Lambda_i (belief_mem, DC banks of Z
// words), the CN-to-VN messages of the last iteration (cmsg_mem, one word of DC
// messages per check node) and the hard decisions (one bit per variable node). A
// single oms_processor computes every message to and from one check node per clock
// cycle; layer_ctrl walks it through rows, layers and iterations.
//
// Operation
//  1. Load: while idle, write the channel beliefs mu^(0)_i with ld_en / ld_bank /
//     ld_addr / ld_llr (variable node i = ld_bank*Z + ld_addr). The hard decision of
//     the node is initialised from the sign of its channel belief.
//  2. Decode: pulse start with n_iter = T. For every row the processor reads
//     Lambda' from bank k at the row's address in block column k and the row's old
//     CN-to-VN messages (zero in iteration 1), and LAT = 3 cycles later the new Lambda,
//     the new messages and the hard decisions are written back. busy is high for
//     T * DV * (Z + 3) cycles and done pulses at the end.
//     cur_iter gives the iteration in progress, so that an external controller can
//     change the supply voltage or clock period from one iteration to the next.
//  3. Read out: while idle, rd_bank / rd_addr select a node; rd_belief and rd_hard
//     (1 = decided -1) show its belief total and hard decision combinationally.
// Belief totals are stored with W+1 = 7 bits, one more than the messages.
// The datapath (processing unit, 6-bit messages, offset min-sum) follows the paper; the
// code construction, memory organisation, layer stall and load/read ports are this
// design's own choices, since the paper names the memories but leaves them out of its
// architecture figure. Loads and reads during busy are ignored.
module ldpc_decoder #(
  parameter int W  = ldpc_pkg::MSG_W,
  parameter int DV = ldpc_pkg::CODE_DV,
  parameter int DC = ldpc_pkg::CODE_DC,
  parameter int Z  = ldpc_pkg::CODE_Z,
  parameter int C  = ldpc_pkg::OMS_C,
  parameter int IW = 8,
  localparam int AW = $clog2(Z),
  localparam int BW = $clog2(DC)
) (
  input  logic                clk,
  input  logic                rst_n,
  // channel belief load
  input  logic                ld_en,
  input  logic        [BW-1:0] ld_bank,
  input  logic        [AW-1:0] ld_addr,
  input  logic signed [W-1:0]  ld_llr,
  // decode control
  input  logic                 start,
  input  logic        [IW-1:0] n_iter,
  output logic                 busy,
  output logic                 done,
  output logic        [IW-1:0] cur_iter,   // iteration in progress, from 1
  // read out
  input  logic        [BW-1:0] rd_bank,
  input  logic        [AW-1:0] rd_addr,
  output logic signed [W:0]    rd_belief,   // W+1 bits
  output logic                 rd_hard
);
  localparam int LAT  = ldpc_pkg::PROC_LAT;
  localparam int ROWS = Z * DV;
  localparam int RW   = $clog2(ROWS);

  // controller
  logic          issue, stall, first_iter;
  logic [AW-1:0] c_rd_addr [DC];
  logic [AW-1:0] c_wb_addr [DC];
  logic [RW-1:0] c_rd_row, c_wb_row;

  layer_ctrl #(.DC(DC), .DV(DV), .Z(Z), .LAT(LAT), .IW(IW)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .n_iter(n_iter), .busy(busy), .done(done),
    .issue(issue), .stall(stall), .first_iter(first_iter),
    .rd_addr(c_rd_addr), .rd_row(c_rd_row), .wb_addr(c_wb_addr), .wb_row(c_wb_row),
    .iter(cur_iter));

  // memories
  logic [AW-1:0]       m_rd_addr [DC];
  logic signed [W:0]   m_rd_data [DC];
  logic                m_we      [DC];
  logic [AW-1:0]       m_wr_addr [DC];
  logic signed [W:0]   m_wr_data [DC];
  logic signed [W-1:0] lam_rd    [DC];

  belief_mem #(.W(W + 1), .DC(DC), .Z(Z)) u_belief (
    .clk(clk), .rd_addr(m_rd_addr), .rd_data(m_rd_data),
    .we(m_we), .wr_addr(m_wr_addr), .wr_data(m_wr_data));

  // processor
  logic                p_valid;
  logic signed [W-1:0] p_cmsg_in  [DC];
  logic signed [W:0]   p_belief   [DC];
  logic signed [W-1:0] p_cmsg     [DC];
  logic                p_hard     [DC];

  cmsg_mem #(.W(W), .DC(DC), .ROWS(ROWS)) u_cmsg (
    .clk(clk), .rd_row(c_rd_row), .rd_data(lam_rd),
    .we(p_valid), .wr_row(c_wb_row), .wr_data(p_cmsg));

  always_comb begin
    for (int k = 0; k < DC; k++) p_cmsg_in[k] = first_iter ? '0 : lam_rd[k];
  end

  oms_processor #(.W(W), .DC(DC), .C(C), .NB(DC)) u_proc (
    .clk(clk), .rst_n(rst_n), .in_valid(issue),
    .belief_in(m_rd_data), .cmsg_in(p_cmsg_in),
    .out_valid(p_valid), .belief_out(p_belief), .cmsg_out(p_cmsg), .hard_out(p_hard));

  // memory port multiplexing between the decode and the load / read-out ports
  always_comb begin
    for (int k = 0; k < DC; k++) begin
      m_rd_addr[k] = busy ? c_rd_addr[k] : rd_addr;
      if (p_valid) begin
        m_we[k]      = 1'b1;
        m_wr_addr[k] = c_wb_addr[k];
        m_wr_data[k] = p_belief[k];
      end else begin
        m_we[k]      = ld_en && !busy && (ld_bank == BW'(k));
        m_wr_addr[k] = ld_addr;
        m_wr_data[k] = {ld_llr[W-1], ld_llr};
      end
    end
  end

  // hard decisions x_hat (1 = -1)
  logic hard_q [DC][Z];

  always_ff @(posedge clk) begin
    for (int k = 0; k < DC; k++) begin
      if (p_valid)
        hard_q[k][c_wb_addr[k]] <= p_hard[k];
      else if (ld_en && !busy && ld_bank == BW'(k))
        hard_q[k][ld_addr] <= ld_llr[W-1];
    end
  end

  always_comb begin
    rd_belief = '0;
    rd_hard   = 1'b0;
    for (int k = 0; k < DC; k++)
      if (rd_bank == BW'(k)) begin
        rd_belief = m_rd_data[k];
        rd_hard   = hard_q[k][rd_addr];
      end
  end

  // the controller must never write back a row outside a decode
  a_wb_in_decode: assert property (@(posedge clk) disable iff (!rst_n) p_valid |-> busy);
  // stall and issue are exclusive
  a_issue_stall: assert property (@(posedge clk) disable iff (!rst_n) !(issue && stall));
  // rows issued in consecutive cycles touch distinct variable nodes in every bank (the
  // condition under which the processor's successive inputs are independent)
  for (genvar k = 0; k < DC; k++) begin : g_distinct
    a_distinct: assert property (@(posedge clk) disable iff (!rst_n)
      (issue && $past(issue)) |-> c_rd_addr[k] != $past(c_rd_addr[k]));
  end
endmodule
