// vnp_back_tb: exhaustive test of the VNP back over every extrinsic message and every
// CN-to-VN message in sign & magnitude form: conversion, exact 7-bit sum, hard decision.
module vnp_back_tb;
  import oms_ref_pkg::*;
  localparam int W = 6;
  logic signed [W-1:0] extr, cmsg;
  logic signed [W:0]   belief;
  logic sign, hard;
  logic [W-2:0] magn;
  int checks = 0, failures = 0;

  vnp_back dut (.extr(extr), .sign(sign), .magn(magn), .belief(belief), .cmsg(cmsg), .hard(hard));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = -31; a <= 31; a++)
      for (int s = 0; s < 2; s++)
        for (int m = 0; m < 32; m++) begin
          int l, e;
          l = s ? -m : m;
          e = a + l;
          extr = W'(a);
          sign = s[0];
          magn = (W-1)'(m);
          #1;
          checks++;
          if (int'(cmsg) != l || int'(belief) != e || hard != (e < 0)) begin
            failures++;
            if (failures < 10) $display("back %0d + %0d -> %0d %0d %0d", a, l, belief, cmsg, hard);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
