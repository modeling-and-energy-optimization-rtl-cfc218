// ensemble_runner: testbench helper that decodes frames on one ldpc_decoder
// configuration and compares every result with the reference layered decoder.
//
// Parameters give the code ensemble (DV, DC), the circulant size Z, the offset C, the
// channel scaling alpha, the channel error rate PE and the iteration count T. On `go`
// it runs NFRAMES frames of the all-(+1) codeword through a BIAWGN channel, checks the
// decode time T * DV * (Z + 3) and every belief total and hard decision, then raises
// `finished`. Check and failure counts are outputs.
module ensemble_runner #(
  parameter int  DV = 3,
  parameter int  DC = 6,
  parameter int  Z  = 7,
  parameter int  C  = 1,
  parameter real ALPHA = 4.0,
  parameter real PE = 0.09,
  parameter int  T  = 10,
  parameter int  NFRAMES = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   corrected
);
  import oms_ref_pkg::*;
  localparam int W = 6, LAT = 3, IW = 8, ROWS = DV * Z;
  localparam int AW = $clog2(Z), BW = $clog2(DC);

  logic ld_en, start, busy, done, rd_hard;
  logic [BW-1:0] ld_bank, rd_bank;
  logic [AW-1:0] ld_addr, rd_addr;
  logic signed [W-1:0] ld_llr;
  logic signed [W:0]   rd_belief;
  logic [IW-1:0] n_iter, cur_iter;

  ldpc_decoder #(.W(W), .DV(DV), .DC(DC), .Z(Z), .C(C), .IW(IW)) dut (
    .clk(clk), .rst_n(rst_n), .ld_en(ld_en), .ld_bank(ld_bank), .ld_addr(ld_addr),
    .ld_llr(ld_llr), .start(start), .n_iter(n_iter), .busy(busy), .done(done),
    .cur_iter(cur_iter), .rd_bank(rd_bank), .rd_addr(rd_addr),
    .rd_belief(rd_belief), .rd_hard(rd_hard));

  int ch [DC][Z];
  int rb [DC][Z];
  int rc [ROWS][DC];

  function automatic real erfc_pos(real x);
    real s = 0.0, h, t;
    int n = 400;
    h = x / n;
    for (int i = 0; i <= n; i++) begin
      t = i * h;
      s += ((i == 0 || i == n) ? 1.0 : ((i % 2) ? 4.0 : 2.0)) * $exp(-t * t);
    end
    return 1.0 - (2.0 / $sqrt(3.141592653589793)) * s * h / 3.0;
  endfunction

  task automatic ref_decode();
    vec_t mu, lam;
    int a;
    for (int k = 0; k < DC; k++) for (int i = 0; i < Z; i++) rb[k][i] = ch[k][i];
    for (int t = 1; t <= T; t++)
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
    real sigma, lo, hi, mid;
    int cyc, ch_err, dec_err;
    finished = 1'b0;
    checks = 0;
    failures = 0;
    corrected = 0;
    ld_en = 1'b0;
    start = 1'b0;
    n_iter = IW'(T);
    rd_bank = '0;
    rd_addr = '0;
    lo = 0.5;
    hi = 6.0;
    repeat (60) begin
      mid = (lo + hi) / 2.0;
      if (0.5 * erfc_pos(mid / $sqrt(2.0)) > PE) lo = mid; else hi = mid;
    end
    sigma = 1.0 / mid;
    wait (go);
    for (int f = 0; f < NFRAMES; f++) begin
      ch_err = 0;
      for (int k = 0; k < DC; k++)
        for (int i = 0; i < Z; i++) begin
          ch[k][i] = channel_llr(ALPHA, sigma, W);
          if (ch[k][i] <= 0) ch_err++;
        end
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
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 0;
      while (busy) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != T * DV * (Z + LAT) || !done) begin
        failures++;
        $display("(%0d,%0d): decode took %0d cycles, expected %0d", DV, DC, cyc, T * DV * (Z + LAT));
      end
      ref_decode();
      dec_err = 0;
      for (int k = 0; k < DC; k++)
        for (int i = 0; i < Z; i++) begin
          rd_bank = BW'(k);
          rd_addr = AW'(i);
          #1;
          checks++;
          if (int'(rd_belief) != rb[k][i] || rd_hard != (rb[k][i] < 0)) begin
            failures++;
            if (failures < 5) $display("(%0d,%0d) VN %0d: %0d expected %0d", DV, DC, k * Z + i, rd_belief, rb[k][i]);
          end
          if (rd_hard) dec_err++;
        end
      if (ch_err > 0 && dec_err == 0) corrected++;
      $display("(%0d,%0d) Z=%0d C=%0d pe=%.3f T=%0d: %0d channel errors, %0d decision errors, %0d cycles",
               DV, DC, Z, C, PE, T, ch_err, dec_err, cyc);
    end
    finished = 1'b1;
  end
endmodule
