// qrelu: quantized ReLU between the hidden and the output layer.
//
// It maps a signed neuron sum to a small unsigned activation in three steps:
//   negative         -> 0
//   drop SHIFT LSBs  -> in >> SHIFT
//   saturate         -> min(in >> SHIFT, 2^OUT_W - 1)
// The result needs no further re-quantization. It is purely combinational.
//
// Follows the paper (Sec. 3.2.1): clamping, LSB truncation and saturation.
// This design's own choices: the number of truncated LSBs (SHIFT) and the
// activation width OUT_W. The default OUT_W equals the 4-bit input width, so
// the output layer's shifters are as wide as the hidden layer's.
module qrelu #(
  parameter int unsigned IN_W  = 16,  // signed input width
  parameter int unsigned OUT_W = 4,   // activation width
  parameter int unsigned SHIFT = 9    // truncated LSBs
) (
  input  logic signed [IN_W-1:0] in,
  output logic [OUT_W-1:0]       out
);

  localparam logic [IN_W-1:0] MAXV = IN_W'((64'(1) << OUT_W) - 1);

  logic [IN_W-1:0] t;

  always_comb begin
    t = IN_W'($unsigned(in) >> SHIFT);
    if (in < 0)        out = '0;
    else if (t > MAXV) out = '1;
    else               out = OUT_W'(t);
  end

endmodule
