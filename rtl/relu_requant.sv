// relu_requant: activation function and requantisation of a layer output.
//
// The wide sum is shifted right arithmetically by SHIFT bits (fixed-point
// rescaling), passed through ReLU when RELU is set, and saturated to the
// OW-bit signed output format. Purely combinational.
module relu_requant #(
  parameter int unsigned IW    = 24,
  parameter int unsigned OW    = 8,
  parameter int unsigned SHIFT = 8,
  parameter bit          RELU  = 1'b1
) (
  input  logic signed [IW-1:0] in,
  output logic signed [OW-1:0] out
);
  localparam logic signed [IW-1:0] MAXV = IW'((1 << (OW - 1)) - 1);
  localparam logic signed [IW-1:0] MINV = -IW'(1 << (OW - 1));
  logic signed [IW-1:0] v;

  always_comb begin
    v = in >>> SHIFT;
    if (RELU && v < 0) v = '0;
    if (v > MAXV)      out = MAXV[OW-1:0];
    else if (v < MINV) out = MINV[OW-1:0];
    else               out = v[OW-1:0];
  end
endmodule
