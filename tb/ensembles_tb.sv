// ensembles_tb: the decoder at the other code ensembles of the published results, each
// decoded bit-exactly against the reference layered decoder:
//   (3,6)  rate 1/2, alpha = 4, C = 1, channel error rate 0.09, 11 iterations, Z = 7
//   (4,8)  rate 1/2, alpha = 2, C = 1, channel error rate 0.09, 10 iterations, Z = 11
//   (4,40) rate 0.9, alpha = 4, C = 2, channel error rate 0.015, 9 iterations, Z = 41
// The circulant sizes are this testbench's choice (smallest prime >= DC), so the codes
// are short; the (4,40) one has 1640 variable nodes. The three run one after another.
module ensembles_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic go36, go48, go440;
  logic f36, f48, f440;
  int c36, c48, c440, e36, e48, e440, k36, k48, k440;

  ensemble_runner #(.DV(3), .DC(6),  .Z(7),  .C(1), .ALPHA(4.0), .PE(0.09),  .T(11), .NFRAMES(4))
    r36  (.clk(clk), .rst_n(rst_n), .go(go36),  .finished(f36),  .checks(c36),  .failures(e36),  .corrected(k36));
  ensemble_runner #(.DV(4), .DC(8),  .Z(11), .C(1), .ALPHA(2.0), .PE(0.09),  .T(10), .NFRAMES(4))
    r48  (.clk(clk), .rst_n(rst_n), .go(go48),  .finished(f48),  .checks(c48),  .failures(e48),  .corrected(k48));
  ensemble_runner #(.DV(4), .DC(40), .Z(41), .C(2), .ALPHA(4.0), .PE(0.015), .T(9),  .NFRAMES(3))
    r440 (.clk(clk), .rst_n(rst_n), .go(go440), .finished(f440), .checks(c440), .failures(e440), .corrected(k440));

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c36 + c48 + c440, e36 + e48 + e440 + 1);
    $finish;
  end

  initial begin
    rst_n = 1'b0;
    go36 = 1'b0;
    go48 = 1'b0;
    go440 = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    go36 = 1'b1;
    wait (f36);
    go48 = 1'b1;
    wait (f48);
    go440 = 1'b1;
    wait (f440);
    $display("frames fully corrected: (3,6) %0d, (4,8) %0d, (4,40) %0d", k36, k48, k440);
    $display("TB_RESULT checks=%0d failures=%0d", c36 + c48 + c440, e36 + e48 + e440);
    $finish;
  end
endmodule
