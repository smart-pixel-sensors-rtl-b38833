// config_chain -- reprogrammable weight and bias storage of the classifier.
//
// The network weights are not fixed in silicon: each super-pixel stores its own
// set, so that the same network can be retrained for the region of the detector
// it sits in (its y0 position) or for changed detector conditions. The storage
// is a chain of flip-flops written serially: while cfg_shift is high, every
// clock edge moves the chain by one bit, takes cfg_in at bit 0 and presents the
// previous top bit at cfg_out, so the chains of many super-pixels can be
// daisy-chained from Config In to Config Out. A word V is loaded by shifting
// V[CFG_BITS-1] first and V[0] last; it then appears unchanged at cfg_out bit by
// bit during the next load, which reads the old word back.
//
// Word layout, from bit 0 upwards (all fields two's complement, W_W bits):
//   w1[o][i] at W_W*(o*N_IN + i)            first dense layer, N_HID x N_IN
//   b1[o]    after w1, at W_W*o              first-layer biases (batch norm folded in)
//   w2[c][h] after b1, at W_W*(c*N_HID + h)  second dense layer, N_CLS x N_HID
//   b2[c]    after w2, at W_W*c              second-layer biases
// The four fields, their sizes (3712, 232, 696 and 12 bits) and the Config
// In / Config Out ports follow the paper; the serial one-bit interface, the
// field order and the lack of a reset (the registers are set up once after
// power-up) are this design's choices.
module config_chain
  import smart_pixel_pkg::*;
#(
  parameter int unsigned N_IN  = N_ROWS,
  parameter int unsigned N_H   = N_HID,
  parameter int unsigned N_C   = N_CLS,
  parameter int unsigned WW    = W_W,
  parameter int unsigned BW    = B_W,
  parameter int unsigned NBITS = N_IN*N_H*WW + N_H*BW + N_H*N_C*WW + N_C*BW
) (
  input  logic                 clk,
  input  logic                 cfg_shift,    // 1: shift one bit per clock
  input  logic                 cfg_in,       // serial data in (Config In)
  output logic                 cfg_out,      // serial data out (Config Out)
  output logic signed [WW-1:0] w1 [N_H][N_IN],
  output logic signed [BW-1:0] b1 [N_H],
  output logic signed [WW-1:0] w2 [N_C][N_H],
  output logic signed [BW-1:0] b2 [N_C]
);

  localparam int unsigned OFS_B1 = N_IN*N_H*WW;
  localparam int unsigned OFS_W2 = OFS_B1 + N_H*BW;
  localparam int unsigned OFS_B2 = OFS_W2 + N_H*N_C*WW;

  logic [NBITS-1:0] cfg;

  // At the network's own sizes the chain must hold exactly the published word.
  if (N_IN == N_ROWS && N_H == N_HID && N_C == N_CLS && WW == W_W && BW == B_W) begin : g_size_check
    initial assert (NBITS == CFG_BITS) else $error("config_chain: NBITS does not match CFG_BITS");
  end

  always_ff @(posedge clk) begin
    if (cfg_shift) cfg <= {cfg[NBITS-2:0], cfg_in};
  end

  assign cfg_out = cfg[NBITS-1];

  always_comb begin
    for (int o = 0; o < N_H; o++) begin
      for (int i = 0; i < N_IN; i++) w1[o][i] = cfg[WW*(o*N_IN + i) +: WW];
      b1[o] = cfg[OFS_B1 + BW*o +: BW];
    end
    for (int c = 0; c < N_C; c++) begin
      for (int h = 0; h < N_H; h++) w2[c][h] = cfg[OFS_W2 + WW*(c*N_H + h) +: WW];
      b2[c] = cfg[OFS_B2 + BW*c +: BW];
    end
  end

endmodule
