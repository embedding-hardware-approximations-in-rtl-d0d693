// qrelu: quantized ReLU activation.
//
// A negative neuron sum gives 0. A non-negative sum is shifted right by
// SHIFT bits and clipped to the largest OUT_W-bit value, so the activation
// always fits in OUT_W = 8 bits and the next layer's adders stay narrow.
//
// Interface: acc (IN_W-bit signed) in, act (OUT_W-bit unsigned) out.
// Purely combinational.
//
// Follows the paper: QReLU with an 8-bit output. Own choices: the optional
// right shift (default 0, plain clipping), since the scaling is not given.
module qrelu #(
  parameter int IN_W  = 16,
  parameter int OUT_W = 8,
  parameter int SHIFT = 0
) (
  input  logic [IN_W-1:0]  acc,
  output logic [OUT_W-1:0] act
);

  localparam logic [IN_W-1:0] MAX_OUT = IN_W'((1 << OUT_W) - 1);

  logic [IN_W-1:0] scaled;

  always_comb begin
    scaled = acc >> SHIFT;
    if (acc[IN_W-1])
      act = '0;
    else if (scaled > MAX_OUT)
      act = '1;
    else
      act = scaled[OUT_W-1:0];
  end

endmodule
