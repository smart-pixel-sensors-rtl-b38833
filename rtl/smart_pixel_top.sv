// smart_pixel_top -- one smart super-pixel: 16 x 16 sensor pixels that classify
// their own cluster every bunch crossing.
//
// Data path (one 40 MHz clock, 25 ns per bunch crossing):
//   ROIC pixel analog front ends (behavioural model) -> 3 comparator bits each
//   -> roic_island: 2-bit flash ADC codes, registered, remapped to sensor order
//   -> row_sum: one 6-bit y-profile bin per sensor row (sum over 16 columns)
//   -> momentum_classifier: Dense(16x58)-ReLU-Dense(58x3)-Argmax, combinational
//   -> output register: class, accept flag, valid flag.
// The weights and biases sit in config_chain, a serial chain from cfg_in
// (Config In) to cfg_out (Config Out).
//
// Geometry: sensor pixels are 50 um (x) by 12.5 um (y). A sensor row is a fixed
// y; the y-profile sums along x. A 2x2 island of 25 um ROIC pixels covers one
// sensor column over four rows, so the super-pixel is 16 x 4 islands, i.e.
// 8 rows by 32 columns of ROIC pixels. Input roic_charge[r][c] is the charge of
// ROIC pixel row r, column c: island (iy, ix) has A at (2iy, 2ix), D at
// (2iy, 2ix+1), B at (2iy+1, 2ix) and C at (2iy+1, 2ix+1), and feeds sensor rows
// 4iy..4iy+3 of sensor column ix with pixels A, D, B, C in that order.
//
// Timing: the charge of a bunch crossing must be stable at the rising edge that
// samples the ADCs (edge n). The class for it is registered at edge n+1: one
// clock of latency, a new result every clock. valid is low while the weight
// chain shifts and for the clock after, since the result then mixes old and new
// weights. score holds the three raw output scores of the same result. accept is high for the high-pT class, the clusters kept for further
// processing. The sizes, the ROIC-to-sensor mapping, the widths and the
// single-crossing inference follow the paper; the island placement, the output
// register, valid and accept are this design's choices.
module smart_pixel_top
  import smart_pixel_pkg::*;
#(
  parameter int unsigned Q_W = 16                    // charge input width, electrons
) (
  input  logic               clk,                     // 40 MHz bunch-crossing clock
  input  logic               rst_n,                   // asynchronous, active low
  input  logic [Q_W-1:0]     roic_charge [N_ROWS/2][2*N_COLS],
  input  logic               cfg_shift,
  input  logic               cfg_in,
  output logic               cfg_out,
  output logic [CLS_W-1:0]   cls,                     // 0 +low, 1 -low, 2 high
  output logic               accept,                  // cls == high: keep cluster
  output logic               valid,
  output logic signed [ACT_W+W_W+$clog2(N_HID+1):0] score [N_CLS]  // registered raw scores
);

  localparam int unsigned N_IY = N_ROWS / ISL_PIX;    // island rows (4)
  localparam int unsigned ACC2_W = ACT_W + 1 + W_W + $clog2(N_HID + 1);

  // ---- analog front ends and ADC islands ----------------------------------
  logic [2:0] comp [N_ROWS/2][2*N_COLS];
  adc_t       code [N_ROWS][N_COLS];                  // sensor order [y][x]

  for (genvar r = 0; r < N_ROWS/2; r++) begin : g_afe_r
    for (genvar c = 0; c < 2*N_COLS; c++) begin : g_afe_c
      pixel_afe #(.Q_W(Q_W)) u_afe (.charge_e(roic_charge[r][c]), .comp(comp[r][c]));
    end
  end

  for (genvar iy = 0; iy < N_IY; iy++) begin : g_isl_y
    for (genvar ix = 0; ix < N_COLS; ix++) begin : g_isl_x
      logic [2:0] isl_comp [4];
      adc_t       isl_code [4];
      assign isl_comp[0] = comp[2*iy][2*ix];          // A
      assign isl_comp[1] = comp[2*iy+1][2*ix];        // B
      assign isl_comp[2] = comp[2*iy+1][2*ix+1];      // C
      assign isl_comp[3] = comp[2*iy][2*ix+1];        // D
      roic_island u_island (
        .clk(clk), .rst_n(rst_n), .comp(isl_comp), .sensor_code(isl_code)
      );
      for (genvar k = 0; k < ISL_PIX; k++) begin : g_pix
        assign code[ISL_PIX*iy + k][ix] = isl_code[k];
      end
    end
  end

  // ---- y-profile ----------------------------------------------------------
  ysum_t yprof [N_ROWS];

  for (genvar y = 0; y < N_ROWS; y++) begin : g_row
    row_sum #(.N(N_COLS), .IN_W(ADC_W), .OUT_W(SUM_W)) u_sum (
      .code(code[y]), .sum(yprof[y])
    );
  end

  // ---- weights and classifier --------------------------------------------
  logic signed [W_W-1:0]    w1 [N_HID][N_ROWS];
  logic signed [B_W-1:0]    b1 [N_HID];
  logic signed [W_W-1:0]    w2 [N_CLS][N_HID];
  logic signed [B_W-1:0]    b2 [N_CLS];
  logic signed [ACC2_W-1:0] score_d [N_CLS];
  logic        [CLS_W-1:0]  cls_d;

  config_chain u_cfg (
    .clk(clk), .cfg_shift(cfg_shift), .cfg_in(cfg_in), .cfg_out(cfg_out),
    .w1(w1), .b1(b1), .w2(w2), .b2(b2)
  );

  momentum_classifier u_nn (
    .yprof(yprof), .w1(w1), .b1(b1), .w2(w2), .b2(b2), .score(score_d), .cls(cls_d)
  );

  // ---- output register ------------------------------------------------------
  logic adc_valid;   // ADC registers hold a sample taken with settled weights

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_valid <= 1'b0;
      valid     <= 1'b0;
      cls       <= '0;
      accept    <= 1'b0;
      score     <= '{default: '0};
    end else begin
      adc_valid <= !cfg_shift;
      valid     <= adc_valid && !cfg_shift;
      cls       <= cls_d;
      accept    <= (cls_d == CLS_HIGH);
      score     <= score_d;
    end
  end

  // The argmax of three scores can never produce index 3.
  a_cls_range: assert property (@(posedge clk) cls_d != 2'd3);

endmodule
