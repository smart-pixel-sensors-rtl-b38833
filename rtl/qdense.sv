// qdense -- fully parallel quantized dense (fully connected) layer.
//
// y[o] = b[o] + sum_i x[i] * w[o][i], computed for every output at once with one
// multiplier per weight, so the layer is purely combinational and finishes
// within the bunch crossing, as in the published design. Inputs are unsigned
// fixed point with IN_FRAC fraction bits; weights and biases are two's
// complement with W_FRAC and B_FRAC fraction bits. The accumulator keeps every
// bit: its fraction is IN_FRAC + W_FRAC, the bias is shifted up to that binary
// point, and its width ACC_W follows the static sizing rule of the paper
// (a product needs the sum of the operand widths, each addition one bit more;
// for a tree of N_IN + 1 terms that is clog2(N_IN + 1) bits), so no weight set
// can make it overflow. The defaults are the first layer of the network
// (16 inputs of 6 bits, 58 neurons, 4-bit weights and biases); the second layer
// is the same module with 58 inputs of 8 bits and 3 outputs. The fraction-bit
// split is this design's choice; the paper gives only total widths.
module qdense #(
  parameter int unsigned N_IN    = 16,
  parameter int unsigned N_OUT   = 58,
  parameter int unsigned IN_W    = 6,
  parameter int unsigned IN_FRAC = 0,
  parameter int unsigned W_W     = 4,
  parameter int unsigned W_FRAC  = 3,
  parameter int unsigned B_W     = 4,
  parameter int unsigned B_FRAC  = 3,
  parameter int unsigned ACC_W   = IN_W + 1 + W_W + $clog2(N_IN + 1)
) (
  input  logic        [IN_W-1:0]  x [N_IN],
  input  logic signed [W_W-1:0]   w [N_OUT][N_IN],
  input  logic signed [B_W-1:0]   b [N_OUT],
  output logic signed [ACC_W-1:0] y [N_OUT]
);

  localparam int unsigned B_SHIFT = IN_FRAC + W_FRAC - B_FRAC;

  initial begin
    assert (IN_FRAC + W_FRAC >= B_FRAC)
      else $error("qdense: bias has more fraction bits than the accumulator");
  end

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      logic signed [ACC_W-1:0] acc;
      acc = ACC_W'(b[o]) <<< B_SHIFT;
      for (int i = 0; i < N_IN; i++) begin
        acc += ACC_W'(signed'({1'b0, x[i]})) * ACC_W'(w[o][i]);
      end
      y[o] = acc;
    end
  end

endmodule
