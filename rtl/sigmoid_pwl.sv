// sigmoid_pwl: piecewise-linear sigmoid for the colour path of the VRU.
//
// The paper applies a sigmoid to the raw colour from the network but does not
// say how it is built; this is the common four-segment PLAN approximation:
//   |x| >= 5          : 1
//   2.375 <= |x| < 5  : |x|/32 + 0.84375
//   1 <= |x| < 2.375  : |x|/8  + 0.625
//   0 <= |x| < 1      : |x|/4  + 0.5
// and 1 - y for negative x (maximum error about 0.019). All slopes are shifts.
// Input: signed, 8 fraction bits. Output: unsigned Q1.15. Combinational.
module sigmoid_pwl
  import icarus_pkg::*;
(
  input  logic signed [OUT_W-1:0] x,
  output logic [UQ_W-1:0]         y
);
  logic [OUT_W-1:0] ax;
  logic [23:0] a15, yp;
  always_comb begin
    ax  = x[OUT_W-1] ? OUT_W'(-x) : OUT_W'(x);
    a15 = 24'(ax) << 7;
    if (ax >= OUT_W'(1280))     yp = 24'd32768;
    else if (ax >= OUT_W'(608)) yp = (a15 >> 5) + 24'd27648;
    else if (ax >= OUT_W'(256)) yp = (a15 >> 3) + 24'd20480;
    else                        yp = (a15 >> 2) + 24'd16384;
    y = x[OUT_W-1] ? UQ_W'(24'd32768 - yp) : UQ_W'(yp);
  end
endmodule
