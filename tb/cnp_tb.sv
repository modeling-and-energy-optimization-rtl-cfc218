// cnp_tb: check node processor at its default size (DC = 30, C = 1) and at DC = 5 with
// C = 2, fed a new random check node every cycle. The outputs of each cycle are compared
// one clock edge later with the reference check node update (signs, two minima, offset
// floored at zero). Magnitudes are sometimes drawn from a narrow range to provoke
// duplicate minima and results below the offset.
module cnp_tb;
  import oms_ref_pkg::*;
  localparam int W = 6;
  localparam int NCYC = 20000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         s30_in [30], s30_out [30], s5_in [5], s5_out [5];
  logic [W-2:0] m30_in [30], m30_out [30], m5_in [5], m5_out [5];
  int checks = 0, failures = 0, dup_min = 0, floored = 0;

  cnp                        dut30 (.clk(clk), .sign_in(s30_in), .magn_in(m30_in), .sign_out(s30_out), .magn_out(m30_out));
  cnp #(.W(W), .DC(5), .C(2)) dut5 (.clk(clk), .sign_in(s5_in), .magn_in(m5_in), .sign_out(s5_out), .magn_out(m5_out));

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_cn(input vec_t mu, input int n, input int c, input logic so [], input logic [W-2:0] mo []);
    vec_t lam;
    int st, nmin, m1;
    lam = cn_update(mu, n, c);
    st = 0;
    m1 = 99;
    nmin = 0;
    for (int i = 0; i < n; i++) begin
      st ^= int'(mu[i] < 0);
      if (iabs(mu[i]) < m1) m1 = iabs(mu[i]);
    end
    for (int i = 0; i < n; i++) if (iabs(mu[i]) == m1) nmin++;
    if (nmin > 1) dup_min++;
    if (m1 <= c) floored++;
    for (int i = 0; i < n; i++) begin
      checks++;
      if (int'(mo[i]) != iabs(lam[i]) || so[i] != logic'(st ^ int'(mu[i] < 0))) begin
        failures++;
        if (failures < 10) $display("n=%0d i=%0d got %0d/%0d expected %0d", n, i, so[i], mo[i], lam[i]);
      end
    end
  endtask

  task automatic rand_vec(output vec_t mu, input int n);
    int range;
    range = ($urandom % 4 == 0) ? 4 : 32;
    for (int i = 0; i < MAXN; i++) mu[i] = 0;
    for (int i = 0; i < n; i++) begin
      mu[i] = int'($urandom % range);
      if ($urandom % 2 == 1) mu[i] = -mu[i];
    end
  endtask

  initial begin
    vec_t mu30, mu5;
    logic so30 [], so5 [];
    logic [W-2:0] mo30 [], mo5 [];
    so30 = new[30]; mo30 = new[30]; so5 = new[5]; mo5 = new[5];
    for (int t = 0; t < NCYC; t++) begin
      @(negedge clk);
      if (t > 0) begin
        for (int i = 0; i < 30; i++) begin so30[i] = s30_out[i]; mo30[i] = m30_out[i]; end
        for (int i = 0; i < 5; i++)  begin so5[i]  = s5_out[i];  mo5[i]  = m5_out[i];  end
        expect_cn(mu30, 30, 1, so30, mo30);
        expect_cn(mu5, 5, 2, so5, mo5);
      end
      rand_vec(mu30, 30);
      rand_vec(mu5, 5);
      for (int i = 0; i < 30; i++) begin s30_in[i] = mu30[i] < 0; m30_in[i] = (W-1)'(iabs(mu30[i])); end
      for (int i = 0; i < 5; i++)  begin s5_in[i]  = mu5[i] < 0;  m5_in[i]  = (W-1)'(iabs(mu5[i]));  end
    end
    $display("duplicate minima %0d, minimum at or below offset %0d", dup_min, floored);
    if (dup_min == 0 || floored == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
