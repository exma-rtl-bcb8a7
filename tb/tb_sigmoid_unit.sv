// tb_sigmoid_unit -- compares the activation unit with the real sigmoid
// over the whole input range (error of the piecewise-linear approximation
// at most 0.02) and checks symmetry and saturation.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_sigmoid_unit;
  int checks = 0, failures = 0;
  logic signed [15:0] z;
  logic [7:0] y, y2;
  sigmoid_unit dut (.z(z), .y(y));

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    `TB_END
  end

  initial begin
    for (int v = -200; v <= 200; v++) begin
      real ex, err;
      z = 16'(v);
      #1;
      ex  = 256.0 / (1.0 + $exp(-v / 16.0));
      if (ex > 255.0) ex = 255.0;
      err = (real'(y) - ex);
      if (err < 0) err = -err;
      `CHECK(err <= 0.02 * 256 + 1.0, $sformatf("z=%0d y=%0d exp=%f", v, y, ex));
      y2 = y;
      z = 16'(-v);
      #1;
      if (v != 0) `CHECK(int'(y) + int'(y2) >= 255 && int'(y) + int'(y2) <= 256, "symmetry")
    end
    z = 16'sd32000; #1; `CHECK(y == 8'd255, "saturate high");
    z = -16'sd32000; #1; `CHECK(y == 8'd0, "saturate low");
    z = 0; #1; `CHECK(y == 8'd128, "half at 0");
    `TB_END
  end
endmodule
