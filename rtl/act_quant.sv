// act_quant: activation & quantization stage of the network blocks.
//
// Turns a finished inner product into the next layer's activation: the
// accumulator (activation x weight scale, ACT_FRAC+WGT_FRAC fraction bits) is
// shifted right by WGT_FRAC with round-half-up, the bias (ACT_FRAC fraction
// bits) is added, ReLU is applied when relu=1, and the result saturates to the
// OUT_BITS-bit signed output. The paper names these three steps (bias
// accumulation, activation, re-quantization); rounding, saturation and the
// formats are this design's choice. Purely combinational.
module act_quant
  import icarus_pkg::*;
#(
  parameter int unsigned ACC_W    = PSUM_W,
  parameter int unsigned OUT_BITS = ACT_W
) (
  input  logic signed [ACC_W-1:0]    acc,
  input  logic signed [BIAS_W-1:0]   bias,
  input  logic                       relu,
  output logic signed [OUT_BITS-1:0] y
);
  localparam logic signed [ACC_W:0] MAXV = (ACC_W+1)'((1 << (OUT_BITS-1)) - 1);
  localparam logic signed [ACC_W:0] MINV = -(ACC_W+1)'(1 << (OUT_BITS-1));
  logic signed [ACC_W:0] r;
  always_comb begin
    r = ((ACC_W+1)'(acc) + (ACC_W+1)'(1 << (WGT_FRAC-1))) >>> WGT_FRAC;
    r = r + (ACC_W+1)'(bias);
    if (relu && r < 0) r = '0;
    if (r > MAXV)      y = MAXV[OUT_BITS-1:0];
    else if (r < MINV) y = MINV[OUT_BITS-1:0];
    else               y = r[OUT_BITS-1:0];
  end
endmodule
