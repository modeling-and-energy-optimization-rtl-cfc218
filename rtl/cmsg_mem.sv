// cmsg_mem: memory of the CN-to-VN messages lambda_{i,j} of the previous iteration.
//
// One word per check node (row of the parity-check matrix), holding the DC messages
// that check node sent in the last iteration, one per block column. Rows are numbered
// layer*Z + r. The word layout is this design's choice; the paper names the memory but
// does not describe it.
// Ports: one asynchronous read port and one synchronous write port (written at the
// rising clock edge when we is set). Contents are not reset: the decoder ignores them
// during the first iteration, where the algorithm starts from lambda = 0.
module cmsg_mem #(
  parameter int W    = ldpc_pkg::MSG_W,
  parameter int DC   = ldpc_pkg::CODE_DC,
  parameter int ROWS = ldpc_pkg::CODE_Z * ldpc_pkg::CODE_DV,
  localparam int RW  = $clog2(ROWS)
) (
  input  logic                 clk,
  input  logic        [RW-1:0] rd_row,
  output logic signed [W-1:0]  rd_data [DC],
  input  logic                 we,
  input  logic        [RW-1:0] wr_row,
  input  logic signed [W-1:0]  wr_data [DC]
);
  logic signed [W-1:0] mem [ROWS][DC];

  always_ff @(posedge clk) begin
    if (we) mem[wr_row] <= wr_data;
  end

  assign rd_data = mem[rd_row];
endmodule
