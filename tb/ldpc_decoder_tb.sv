// ldpc_decoder_tb: end-to-end test of the layered offset min-sum decoder at its default
// parameters ((3,30) array code, Z = 31, 930 variable nodes, 6-bit messages, C = 1).
//
// Each frame transmits the all-(+1) codeword over a simulated BIAWGN channel, forms the
// channel beliefs mu = round(alpha*y/sigma^2) with alpha = 4, loads them, decodes for
// n_iter iterations and reads every belief total and hard decision back. The results
// are compared bit for bit with a reference decoder that runs the row-layered offset
// min-sum algorithm row after row, written from the algorithm. The decode time must be
// n_iter * DV * (Z + 3) cycles. Frames are run at the channel error rates 0.015 (the
// operating point of the paper's (3,30) results), 0.019 (near the ensemble threshold)
// and 0.05 (beyond it), and with different iteration counts.
//
// Mechanisms counted (each must occur): layer stall cycles, rows of the first iteration
// (lambda forced to 0), check node outputs taking the second minimum, outputs floored
// at zero by the offset, VN-to-CN messages saturated at +-31, and frames whose channel
// errors the decoder removed completely.
module ldpc_decoder_tb;
  import oms_ref_pkg::*;
  localparam int W = ldpc_pkg::MSG_W, DV = ldpc_pkg::CODE_DV, DC = ldpc_pkg::CODE_DC;
  localparam int Z = ldpc_pkg::CODE_Z, C = ldpc_pkg::OMS_C, LAT = ldpc_pkg::PROC_LAT;
  localparam int AW = $clog2(Z), BW = $clog2(DC), IW = 8, ROWS = DV * Z;
  localparam int NFRAMES = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, ld_en, start, busy, done, rd_hard;
  logic [BW-1:0] ld_bank, rd_bank;
  logic [AW-1:0] ld_addr, rd_addr;
  logic signed [W-1:0] ld_llr;
  logic signed [W:0]   rd_belief;
  logic [IW-1:0] n_iter, cur_iter;

  ldpc_decoder dut (.clk(clk), .rst_n(rst_n), .ld_en(ld_en), .ld_bank(ld_bank), .ld_addr(ld_addr),
                    .ld_llr(ld_llr), .start(start), .n_iter(n_iter), .busy(busy), .done(done),
                    .cur_iter(cur_iter), .rd_bank(rd_bank), .rd_addr(rd_addr),
                    .rd_belief(rd_belief), .rd_hard(rd_hard));

  int checks = 0, failures = 0;
  int n_stall = 0, n_first = 0, n_min2 = 0, n_floor = 0, n_sat = 0, n_corrected = 0;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("%0t: %s", $time, s);
  endtask

  // mechanism monitors on the decoder's internal signals
  always @(posedge clk) begin
    if (dut.stall) n_stall++;
    if (dut.issue && dut.first_iter) n_first++;
    if (dut.u_proc.v1)
      for (int k = 0; k < DC; k++) begin
        int d;
        d = int'(dut.u_proc.belief_q[k]) - int'(dut.u_proc.cmsg_q[k]);
        if (d > 31 || d < -31) n_sat++;
      end
    if (dut.u_proc.v2)
      for (int k = 0; k < DC; k++) begin
        if (dut.u_proc.u_cnp.eq_q[k]) n_min2++;
        if (dut.u_proc.c_magn[k] == '0) n_floor++;
      end
  end

  // reference decoder state
  int ch [DC][Z];
  int rb [DC][Z];
  int rc [ROWS][DC];

  task automatic ref_decode(int t_iter);
    vec_t mu, lam;
    int a;
    for (int k = 0; k < DC; k++) for (int i = 0; i < Z; i++) rb[k][i] = ch[k][i];
    for (int t = 1; t <= t_iter; t++)
      for (int l = 0; l < DV; l++)
        for (int r = 0; r < Z; r++) begin
          for (int i = 0; i < MAXN; i++) mu[i] = 0;
          for (int k = 0; k < DC; k++) begin
            a = qc_addr(l, k, r, Z);
            mu[k] = sat(rb[k][a] - (t == 1 ? 0 : rc[l*Z+r][k]), W);
          end
          lam = cn_update(mu, DC, C);
          for (int k = 0; k < DC; k++) begin
            a = qc_addr(l, k, r, Z);
            rb[k][a] = mu[k] + lam[k];
            rc[l*Z+r][k] = lam[k];
          end
        end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic frame(real pe, int t_iter);
    real sigma;
    int cyc, ch_err, dec_err, exp_cycles;
    // sigma from pe = Q(1/sigma), Q^-1 found by bisection
    begin
      real lo = 0.5, hi = 6.0, mid;
      repeat (60) begin
        mid = (lo + hi) / 2.0;
        if (0.5 * qfunc_erfc(mid / $sqrt(2.0)) > pe) lo = mid; else hi = mid;
      end
      sigma = 1.0 / mid;
    end
    ch_err = 0;
    for (int k = 0; k < DC; k++)
      for (int i = 0; i < Z; i++) begin
        ch[k][i] = channel_llr(4.0, sigma, W);
        if (ch[k][i] <= 0) ch_err++;
      end
    // load
    for (int k = 0; k < DC; k++)
      for (int i = 0; i < Z; i++) begin
        @(negedge clk);
        ld_en = 1'b1;
        ld_bank = BW'(k);
        ld_addr = AW'(i);
        ld_llr = W'(ch[k][i]);
      end
    @(negedge clk);
    ld_en = 1'b0;
    // decode
    n_iter = IW'(t_iter);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    while (busy) begin
      @(negedge clk);
      cyc++;
    end
    exp_cycles = t_iter * DV * (Z + LAT);
    checks++;
    if (cyc != exp_cycles || !done) fail($sformatf("decode took %0d cycles, expected %0d", cyc, exp_cycles));
    ref_decode(t_iter);
    // read out
    dec_err = 0;
    for (int k = 0; k < DC; k++)
      for (int i = 0; i < Z; i++) begin
        rd_bank = BW'(k);
        rd_addr = AW'(i);
        #1;
        checks++;
        if (int'(rd_belief) != rb[k][i] || rd_hard != (rb[k][i] < 0))
          fail($sformatf("VN %0d: belief %0d hard %0d, expected %0d", k * Z + i, rd_belief, rd_hard, rb[k][i]));
        if (rd_hard) dec_err++;
      end
    if (ch_err > 0 && dec_err == 0) n_corrected++;
    $display("frame pe=%.3f T=%0d: %0d channel errors (incl. zero beliefs), %0d decision errors, %0d cycles",
             pe, t_iter, ch_err, dec_err, cyc);
  endtask

  // erfc by numerical integration (Simpson), adequate for choosing sigma
  function automatic real qfunc_erfc(real x);
    real s = 0.0, h, t;
    int n = 400;
    h = x / n;
    for (int i = 0; i <= n; i++) begin
      t = i * h;
      s += ((i == 0 || i == n) ? 1.0 : ((i % 2) ? 4.0 : 2.0)) * $exp(-t * t);
    end
    return 1.0 - (2.0 / $sqrt(3.141592653589793)) * s * h / 3.0;
  endfunction

  initial begin
    rst_n = 1'b0;
    ld_en = 1'b0;
    start = 1'b0;
    n_iter = '0;
    rd_bank = '0;
    rd_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    frame(0.015, 10);
    frame(0.015, 13);
    frame(0.019, 10);
    frame(0.019, 4);
    frame(0.05, 3);
    frame(0.015, 1);
    $display("mechanisms: stall cycles %0d, first-iteration rows %0d, min2 outputs %0d, offset-floored outputs %0d, saturated VN-to-CN messages %0d, frames fully corrected %0d",
             n_stall, n_first, n_min2, n_floor, n_sat, n_corrected);
    if (n_stall == 0)     fail("layer stall never happened");
    if (n_first == 0)     fail("first-iteration rows never issued");
    if (n_min2 == 0)      fail("second minimum never selected");
    if (n_floor == 0)     fail("offset never floored an output at zero");
    if (n_sat == 0)       fail("VN-to-CN message saturation never happened");
    if (n_corrected == 0) fail("no frame was fully corrected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
