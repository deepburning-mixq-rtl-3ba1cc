// bn_relu_quant -- batch normalisation, ReLU and requantisation.
//
// Converts a convolution sum into the next layer's OB-bit unsigned
// activation:
//   y = clamp( (acc * scale + bias) >>> SHIFT, 0, 2^OB - 1 )
// The multiply-add is batch normalisation folded into an integer scale and
// bias per output channel, the lower clamp is the ReLU and the upper clamp
// saturates to the next layer's activation width.  The paper only names this
// step (BN + ReLU after each convolution, and notes that it may use DSPs); the
// fixed-point form, the truncating shift and the saturation are this
// design's choice.  Purely combinational.
module bn_relu_quant #(
  parameter int unsigned IW    = 16,  // convolution sum width (signed)
  parameter int unsigned SW    = 16,  // scale width (signed)
  parameter int unsigned BW    = 32,  // bias width (signed)
  parameter int unsigned SHIFT = 8,
  parameter int unsigned OB    = 4
) (
  input  logic signed [IW-1:0] acc,
  input  logic signed [SW-1:0] scale,
  input  logic signed [BW-1:0] bias,
  output logic        [OB-1:0] y
);
  localparam int unsigned MW = ((IW + SW > BW) ? IW + SW : BW) + 1;

  logic signed [MW-1:0] t;

  always_comb begin
    t = (MW'(acc) * MW'(scale) + MW'(bias)) >>> SHIFT;
    if (t < 0)                           y = '0;
    else if (t > MW'((1 << OB) - 1))     y = '1;
    else                                 y = OB'(t);
  end
endmodule
