// sort2_tb: exhaustive test of the Sort block over all pairs of 5-bit magnitudes.
module sort2_tb;
  localparam int W = 5;
  logic [W-1:0] x0, x1, min1, min2;
  int checks = 0, failures = 0;

  sort2 #(.W(W)) dut (.x0(x0), .x1(x1), .min1(min1), .min2(min2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 2 ** W; a++)
      for (int b = 0; b < 2 ** W; b++) begin
        x0 = W'(a);
        x1 = W'(b);
        #1;
        checks++;
        if (int'(min1) != (a < b ? a : b) || int'(min2) != (a < b ? b : a)) begin
          failures++;
          if (failures < 10) $display("sort2 %0d %0d -> %0d %0d", a, b, min1, min2);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
