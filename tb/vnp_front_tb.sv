// vnp_front_tb: exhaustive test of the VNP front over every 7-bit belief total Lambda'
// and every 6-bit message lambda: difference, saturation and sign & magnitude.
module vnp_front_tb;
  import oms_ref_pkg::*;
  localparam int W = 6;
  logic signed [W:0]   bp;
  logic signed [W-1:0] cp, mu;
  logic sign;
  logic [W-2:0] magn;
  int checks = 0, failures = 0;

  vnp_front dut (.belief_prev(bp), .cmsg_prev(cp), .mu(mu), .sign(sign), .magn(magn));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = -64; a <= 63; a++)
      for (int b = -31; b <= 31; b++) begin
        int e;
        e = sat(a - b, W);
        bp = (W+1)'(a);
        cp = W'(b);
        #1;
        checks++;
        if (int'(mu) != e || sign != (e < 0) || int'(magn) != iabs(e)) begin
          failures++;
          if (failures < 10) $display("front %0d - %0d -> %0d s%0d m%0d", a, b, mu, sign, magn);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
