// sigmoid_unit: piecewise-linear logistic function in Q7.8.
//
// The paper's hidden layers use a sigmoid activation. This block uses the
// well-known PLAN approximation, which needs only shifts and adds:
//   |x| >= 5          : 1
//   2.375 <= |x| < 5  : |x|/32 + 0.84375
//   1 <= |x| < 2.375  : |x|/8  + 0.625
//   |x| < 1           : |x|/4  + 0.5
// and y(-x) = 1 - y(x). Input and output are Q7.8 (256 = 1.0); the output
// lies in [0, 256]. The approximation (maximum error about 0.019) is this
// design's choice. Purely combinational.
module sigmoid_unit
  import squad_pkg::*;
(
  input  act_t x,
  output act_t y
);

  logic [ACT_W:0] ax;   // |x|, one bit wider so that -32768 fits
  logic [ACT_W:0] yp;

  always_comb begin
    ax = x[ACT_W-1] ? (ACT_W+1)'(-$signed({x[ACT_W-1], x})) : {1'b0, x};
    if (ax >= 17'd1280)     yp = 17'd256;
    else if (ax >= 17'd608) yp = (ax >> 5) + 17'd216;
    else if (ax >= 17'd256) yp = (ax >> 3) + 17'd160;
    else                    yp = (ax >> 2) + 17'd128;
    y = x[ACT_W-1] ? act_t'(17'd256 - yp) : act_t'(yp);
  end

endmodule
