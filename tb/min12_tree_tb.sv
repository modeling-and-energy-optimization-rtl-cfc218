// min12_tree_tb: the MIN1,2 tree at its default size (30 inputs) and at 2, 3, 5, 7 and
// 11 inputs (odd sizes use the 3-input Merge block), against a direct search for the
// two smallest values. Inputs are random, with runs that favour small values and ties.
module min12_tree_tb;
  localparam int W = 5;
  localparam int NMAX = 30;
  localparam int NN = 6;
  localparam int NS[NN] = '{30, 2, 3, 5, 7, 11};

  logic [NMAX-1:0][W-1:0] x;
  logic [W-1:0] m1 [NN];
  logic [W-1:0] m2 [NN];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NN; g++) begin : g_dut
    if (g == 0) begin : g_def
      min12_tree dut (.x(x), .min1(m1[g]), .min2(m2[g]));
    end else begin : g_par
      min12_tree #(.W(W), .N(NS[g])) dut (.x(x[NS[g]-1:0]), .min1(m1[g]), .min2(m2[g]));
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int range;
      range = (t % 3 == 0) ? 4 : 32;
      for (int i = 0; i < NMAX; i++) x[i] = W'($urandom % range);
      #1;
      for (int g = 0; g < NN; g++) begin
        int e1, e2;
        e1 = 99;
        e2 = 99;
        for (int i = 0; i < NS[g]; i++) begin
          if (int'(x[i]) < e1) begin e2 = e1; e1 = int'(x[i]); end
          else if (int'(x[i]) < e2) e2 = int'(x[i]);
        end
        checks++;
        if (int'(m1[g]) != e1 || int'(m2[g]) != e2) begin
          failures++;
          if (failures < 10) $display("N=%0d got %0d %0d expected %0d %0d", NS[g], m1[g], m2[g], e1, e2);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
