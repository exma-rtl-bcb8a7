// sigmoid_unit -- activation unit of the inference engine.
//
// The MTL index's non-leaf nodes use sigmoid neurons (paper).  The paper does
// not say how the activation is computed; this unit uses the piecewise-
// linear PLAN approximation, which needs only shifts and adds:
//   |z| >= 5          : 1
//   2.375 <= |z| < 5  : |z|/32 + 0.84375
//   1 <= |z| < 2.375  : |z|/8  + 0.625
//   0 <= |z| < 1      : |z|/4  + 0.5
// and sigmoid(-z) = 1 - sigmoid(z).
// Input z is signed fixed point with 4 fraction bits (value z/16); output is
// an unsigned 8-bit activation y/256, saturated at 255.  Combinational.
module sigmoid_unit #(
  parameter int unsigned IN_W = 16
) (
  input  logic signed [IN_W-1:0] z,
  output logic [7:0]             y
);

  logic [IN_W-1:0] a;      // |z|, 4 fraction bits
  logic [IN_W+3:0] r;      // result, 8 fraction bits (x256)

  always_comb begin
    a = z[IN_W-1] ? IN_W'(-z) : IN_W'(z);
    if (a >= IN_W'(80))                       // 5.0
      r = (IN_W+4)'(256);
    else if (a >= IN_W'(38))                  // 2.375
      r = (IN_W+4)'((a >> 1) + 216);          // a*16/32/16*256 = a/2 ; 0.84375*256
    else if (a >= IN_W'(16))                  // 1.0
      r = (IN_W+4)'((a << 1) + 160);          // a*2 ; 0.625*256
    else
      r = (IN_W+4)'((a << 2) + 128);          // a*4 ; 0.5*256
    if (z[IN_W-1]) r = (IN_W+4)'(256) - r;
    y = (r > (IN_W+4)'(255)) ? 8'd255 : r[7:0];
  end

endmodule
