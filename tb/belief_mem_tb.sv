// belief_mem_tb: the banked belief-total memory at its default size (30 banks of 31
// words). Random writes to random banks and addresses, with every bank reading its own
// random address each cycle, compared with a shadow copy held in the testbench.
module belief_mem_tb;
  localparam int W = 7, DC = 30, Z = 31, AW = 5;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [AW-1:0]       ra [DC], wa [DC];
  logic signed [W-1:0] rd [DC], wd [DC];
  logic                we [DC];
  int shadow [DC][Z];
  bit known [DC][Z];
  int checks = 0, failures = 0;

  belief_mem dut (.clk(clk), .rd_addr(ra), .rd_data(rd), .we(we), .wr_addr(wa), .wr_data(wd));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < DC; k++) begin
      for (int a = 0; a < Z; a++) known[k][a] = 0;
      we[k] = 1'b0;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // check reads of the previous cycle's addresses (memory unchanged since)
      for (int k = 0; k < DC; k++) begin
        ra[k] = AW'($urandom % Z);
      end
      #1;
      for (int k = 0; k < DC; k++)
        if (known[k][ra[k]]) begin
          checks++;
          if (int'(rd[k]) != shadow[k][ra[k]]) begin
            failures++;
            if (failures < 10) $display("bank %0d addr %0d: %0d expected %0d", k, ra[k], rd[k], shadow[k][ra[k]]);
          end
        end
      for (int k = 0; k < DC; k++) begin
        we[k] = ($urandom % 2) == 1;
        wa[k] = AW'($urandom % Z);
        wd[k] = W'(int'($urandom % 128) - 64);
        if (we[k]) begin
          shadow[k][wa[k]] = int'(wd[k]);
          known[k][wa[k]]  = 1;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
