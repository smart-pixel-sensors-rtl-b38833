// momentum_classifier -- the on-sensor neural network that filters clusters.
//
// Input: the y-profile of the cluster, 16 unsigned 6-bit bins (one per sensor
// row, each the sum of the row's 2-bit ADC codes). Output: a 2-bit class,
// 0 = low-pT positive, 1 = low-pT negative (both rejected), 2 = high-pT (kept).
// The network is Dense(16x58) with batch normalization folded into its weights
// and biases, ReLU with 8-bit output, Dense(58x3), then argmax. Weights and
// biases are 4-bit and come from the reprogrammable storage. Everything is
// combinational and fully parallel (one multiplier per weight) so that a new
// cluster can be classified in every 25 ns bunch crossing. Layer sizes, bit
// widths and the argmax are the paper's; the fixed-point binary points are set
// in smart_pixel_pkg and are this design's choice. The raw output scores are
// brought out for monitoring.
module momentum_classifier
  import smart_pixel_pkg::*;
#(
  parameter int unsigned N_IN  = N_ROWS,
  parameter int unsigned N_H   = N_HID,
  parameter int unsigned N_C   = N_CLS,
  parameter int unsigned ACC1_W = SUM_W + 1 + W_W + $clog2(N_IN + 1),
  parameter int unsigned ACC2_W = ACT_W + 1 + W_W + $clog2(N_H + 1)
) (
  input  logic        [SUM_W-1:0]  yprof [N_IN],
  input  logic signed [W_W-1:0]    w1 [N_H][N_IN],
  input  logic signed [B_W-1:0]    b1 [N_H],
  input  logic signed [W_W-1:0]    w2 [N_C][N_H],
  input  logic signed [B_W-1:0]    b2 [N_C],
  output logic signed [ACC2_W-1:0] score [N_C],
  output logic        [CLS_W-1:0]  cls
);

  logic signed [ACC1_W-1:0] h_acc [N_H];
  logic        [ACT_W-1:0]  h_act [N_H];

  qdense #(
    .N_IN(N_IN), .N_OUT(N_H), .IN_W(SUM_W), .IN_FRAC(0),
    .W_W(W_W), .W_FRAC(W_FRAC), .B_W(B_W), .B_FRAC(W_FRAC), .ACC_W(ACC1_W)
  ) u_dense1 (.x(yprof), .w(w1), .b(b1), .y(h_acc));

  qrelu #(
    .N(N_H), .IN_W(ACC1_W), .IN_FRAC(W_FRAC), .OUT_W(ACT_W), .OUT_FRAC(ACT_FRAC)
  ) u_relu (.x(h_acc), .y(h_act));

  qdense #(
    .N_IN(N_H), .N_OUT(N_C), .IN_W(ACT_W), .IN_FRAC(ACT_FRAC),
    .W_W(W_W), .W_FRAC(W_FRAC), .B_W(B_W), .B_FRAC(W_FRAC), .ACC_W(ACC2_W)
  ) u_dense2 (.x(h_act), .w(w2), .b(b2), .y(score));

  argmax #(.N(N_C), .W(ACC2_W), .IDX_W(CLS_W)) u_argmax (.score(score), .idx(cls));

endmodule
