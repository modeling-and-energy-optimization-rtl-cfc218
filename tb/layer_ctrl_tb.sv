// layer_ctrl_tb: the layered-schedule sequencer at its default size (DC = 30, DV = 3,
// Z = 31, latency 3), running a 2-iteration and a 1-iteration decode. Checks, cycle by
// cycle, the issued rows and read addresses against the array-code formula, the stall
// cycles between layers, the write-back addresses delayed by the processor latency, the
// first-iteration flag, and the total decode time n_iter * DV * (Z + 3).
module layer_ctrl_tb;
  import oms_ref_pkg::*;
  localparam int DC = 30, DV = 3, Z = 31, LAT = 3, AW = 5, RW = 7, IW = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done, issue, stall, first_iter;
  logic [IW-1:0] n_iter, iter;
  logic [AW-1:0] rd_addr [DC], wb_addr [DC];
  logic [RW-1:0] rd_row, wb_row;
  int checks = 0, failures = 0;

  layer_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .n_iter(n_iter), .busy(busy), .done(done),
                  .issue(issue), .stall(stall), .first_iter(first_iter), .rd_addr(rd_addr),
                  .rd_row(rd_row), .wb_addr(wb_addr), .wb_row(wb_row), .iter(iter));

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("%0t: %s", $time, s);
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected sequence of one decode, cycle by cycle after start
  task automatic run(int t_iter);
    int cyc, stalls, exp_cycles;
    int hist_row [$];
    int hist_addr [$];
    @(negedge clk);
    n_iter = IW'(t_iter);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    stalls = 0;
    for (int t = 1; t <= t_iter; t++)
      for (int l = 0; l < DV; l++) begin
        for (int r = 0; r < Z; r++) begin
          checks++;
          if (!issue || stall || !busy || int'(rd_row) != l * Z + r || int'(iter) != t || first_iter != (t == 1))
            fail($sformatf("issue t%0d l%0d r%0d: issue %0d row %0d iter %0d", t, l, r, issue, rd_row, iter));
          for (int k = 0; k < DC; k++) begin
            checks++;
            if (int'(rd_addr[k]) != qc_addr(l, k, r, Z)) fail($sformatf("rd_addr bank %0d", k));
          end
          hist_row.push_back(l * Z + r);
          hist_addr.push_back(qc_addr(l, 7, r, Z));
          check_wb(hist_row, hist_addr, cyc);
          @(negedge clk);
          cyc++;
        end
        for (int s = 0; s < LAT; s++) begin
          checks++;
          if (issue || !stall) fail("expected a stall cycle");
          if (stall) stalls++;
          hist_row.push_back(-1);
          hist_addr.push_back(-1);
          check_wb(hist_row, hist_addr, cyc);
          if (!(t == t_iter && l == DV - 1 && s == LAT - 1)) begin
            @(negedge clk);
            cyc++;
          end
        end
      end
    @(negedge clk);
    cyc++;
    exp_cycles = t_iter * DV * (Z + LAT);
    checks++;
    if (busy || !done || cyc != exp_cycles) fail($sformatf("decode took %0d cycles, expected %0d", cyc, exp_cycles));
    checks++;
    if (stalls != t_iter * DV * LAT) fail("stall count");
    $display("decode of %0d iterations: %0d cycles, %0d stall cycles", t_iter, cyc, stalls);
  endtask

  // write-back of the row issued LAT cycles ago
  task automatic check_wb(ref int hr [$], ref int ha [$], input int cyc);
    if (cyc >= LAT && hr[cyc - LAT] >= 0) begin
      checks++;
      if (int'(wb_row) != hr[cyc - LAT] || int'(wb_addr[7]) != ha[cyc - LAT])
        fail($sformatf("write-back row %0d expected %0d", wb_row, hr[cyc - LAT]));
    end
  endtask

  initial begin
    rst_n = 1'b0;
    start = 1'b0;
    n_iter = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(2);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
