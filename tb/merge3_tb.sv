// merge3_tb: the 3-input Merge block against a direct two-minima search, exhaustively
// over a sorted 5-bit pair and a single 5-bit value.
module merge3_tb;
  localparam int W = 5;
  logic [W-1:0] a1, b1, a2, min1, min2;
  int checks = 0, failures = 0;

  merge3 #(.W(W)) dut (.min1a(a1), .min1b(b1), .min2a(a2), .min1(min1), .min2(min2));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 32; p++)
      for (int q = p; q < 32; q++)
        for (int r = 0; r < 32; r++) begin
          int m1, m2;
          m1 = p; m2 = q;
          if (r < m1) begin m2 = m1; m1 = r; end
          else if (r < m2) m2 = r;
          a1 = W'(p); a2 = W'(q); b1 = W'(r);
          #1;
          checks++;
          if (int'(min1) != m1 || int'(min2) != m2) begin
            failures++;
            if (failures < 10) $display("merge3 (%0d,%0d) %0d -> %0d %0d", p, q, r, min1, min2);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
