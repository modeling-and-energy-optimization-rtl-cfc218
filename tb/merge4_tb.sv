// merge4_tb: the 4-input Merge block against a direct two-minima search, on all
// sorted input pairs drawn from a 4-bit range plus random 5-bit pairs.
module merge4_tb;
  localparam int W = 5;
  logic [W-1:0] a1, b1, a2, b2, min1, min2;
  int checks = 0, failures = 0;

  merge4 #(.W(W)) dut (.min1a(a1), .min1b(b1), .min2a(a2), .min2b(b2), .min1(min1), .min2(min2));

  task automatic check(int p, int q, int r, int s);  // pairs (p<=q), (r<=s)
    int v[4] = '{p, q, r, s};
    int m1 = 99, m2 = 99;
    foreach (v[i]) begin
      if (v[i] < m1) begin m2 = m1; m1 = v[i]; end
      else if (v[i] < m2) m2 = v[i];
    end
    a1 = W'(p); a2 = W'(q); b1 = W'(r); b2 = W'(s);
    #1;
    checks++;
    if (int'(min1) != m1 || int'(min2) != m2) begin
      failures++;
      if (failures < 10) $display("merge4 (%0d,%0d)(%0d,%0d) -> %0d %0d, expected %0d %0d",
                                  p, q, r, s, min1, min2, m1, m2);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 16; p++)
      for (int q = p; q < 16; q++)
        for (int r = 0; r < 16; r++)
          for (int s = r; s < 16; s++) check(p, q, r, s);
    repeat (20000) begin
      int x, y, u, t;
      x = $urandom % 32; y = $urandom % 32; u = $urandom % 32; t = $urandom % 32;
      check(x < y ? x : y, x < y ? y : x, u < t ? u : t, u < t ? t : u);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
