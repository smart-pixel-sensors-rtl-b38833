// qrelu -- quantized ReLU activation for a vector of N neurons.
//
// Converts the signed accumulator of each hidden neuron (IN_FRAC fraction bits)
// into an unsigned OUT_W-bit activation with OUT_FRAC fraction bits: negative
// values become 0, extra fraction bits are dropped (rounding toward minus
// infinity), and values above the largest code saturate at all ones. The 8-bit
// output width and 58 neurons are the paper's; truncation, saturation and the
// default binary point (3 fraction bits, the same as the first-layer
// accumulator, so no bits are dropped) are this design's choices.
// Combinational.
module qrelu #(
  parameter int unsigned N        = 58,
  parameter int unsigned IN_W     = 16,
  parameter int unsigned IN_FRAC  = 3,
  parameter int unsigned OUT_W    = 8,
  parameter int unsigned OUT_FRAC = 3
) (
  input  logic signed [IN_W-1:0]  x [N],
  output logic        [OUT_W-1:0] y [N]
);

  localparam int unsigned SHIFT = IN_FRAC - OUT_FRAC;
  localparam logic signed [IN_W-1:0] MAX_CODE = IN_W'(2**OUT_W - 1);

  initial begin
    assert (IN_FRAC >= OUT_FRAC)
      else $error("qrelu: output has more fraction bits than the input");
  end

  always_comb begin
    for (int n = 0; n < N; n++) begin
      logic signed [IN_W-1:0] s;
      s = x[n] >>> SHIFT;
      if (x[n] < 0)
        y[n] = '0;
      else if (s > MAX_CODE)
        y[n] = '1;
      else
        y[n] = OUT_W'(s);
    end
  end

endmodule
