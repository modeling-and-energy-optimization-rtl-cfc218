// cmsg_mem_tb: the CN-to-VN message memory at its default size (93 rows of 30
// messages). Random row writes and random row reads, compared with a shadow copy.
module cmsg_mem_tb;
  localparam int W = 6, DC = 30, ROWS = 93, RW = 7;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [RW-1:0]       rr, wr;
  logic signed [W-1:0] rd [DC], wd [DC];
  logic                we;
  int shadow [ROWS][DC];
  bit known [ROWS];
  int checks = 0, failures = 0;

  cmsg_mem dut (.clk(clk), .rd_row(rr), .rd_data(rd), .we(we), .wr_row(wr), .wr_data(wd));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) known[r] = 0;
    we = 1'b0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      rr = RW'($urandom % ROWS);
      #1;
      if (known[rr])
        for (int i = 0; i < DC; i++) begin
          checks++;
          if (int'(rd[i]) != shadow[rr][i]) begin
            failures++;
            if (failures < 10) $display("row %0d msg %0d: %0d expected %0d", rr, i, rd[i], shadow[rr][i]);
          end
        end
      we = ($urandom % 2) == 1;
      wr = RW'($urandom % ROWS);
      for (int i = 0; i < DC; i++) wd[i] = W'(int'($urandom % 63) - 31);
      if (we) begin
        for (int i = 0; i < DC; i++) shadow[wr][i] = int'(wd[i]);
        known[wr] = 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
