// belief_mem: memory of the belief totals Lambda_i, one bank per check node input.
//
// The variable nodes are split into DC block columns of Z nodes each; bank k holds the
// Z belief totals of block column k. Because every row of the parity-check matrix has
// exactly one non-zero in each block column, VNP k of the processor always reads and
// writes bank k: the connections between VNPs and the CNP stay fixed and the routing is
// done by choosing which VN of the bank each VNP works on, as the paper prescribes.
// The banking is this design's choice; the paper names the memory but does not
// describe it.
// Ports: per bank, one asynchronous read port and one synchronous write port
// (written at the rising clock edge when we[k] is set). Contents are not reset.
module belief_mem #(
  parameter int W  = ldpc_pkg::BEL_W,   // belief total width
  parameter int DC = ldpc_pkg::CODE_DC,
  parameter int Z  = ldpc_pkg::CODE_Z,
  localparam int AW = $clog2(Z)
) (
  input  logic                clk,
  input  logic        [AW-1:0] rd_addr [DC],
  output logic signed [W-1:0]  rd_data [DC],
  input  logic                 we      [DC],
  input  logic        [AW-1:0] wr_addr [DC],
  input  logic signed [W-1:0]  wr_data [DC]
);
  logic signed [W-1:0] mem [DC][Z];

  always_ff @(posedge clk) begin
    for (int k = 0; k < DC; k++)
      if (we[k]) mem[k][wr_addr[k]] <= wr_data[k];
  end

  always_comb begin
    for (int k = 0; k < DC; k++) rd_data[k] = mem[k][rd_addr[k]];
  end
endmodule
