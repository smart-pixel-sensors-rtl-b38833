// smart_pixel_pkg -- shared constants and types of the smart-pixel cluster filter.
//
// The super-pixel is a 16 x 16 array of sensor pixels (50 um in x, 12.5 um in y)
// read by a 2-bit flash ADC per pixel. A y-profile (one 6-bit sum per sensor row)
// feeds a fully parallel network Dense(16x58) - ReLU - Dense(58x3) - Argmax that
// labels the cluster as a low-pT positive track, a low-pT negative track or a
// high-pT track. Array sizes, bit widths of weights (4), biases (4), activations
// (8), inputs (6) and output (2) follow the published architecture. The fixed-point
// split of weights and activations (fraction bits), the class order and the layout
// of the serial configuration word are choices of this implementation.
package smart_pixel_pkg;

  // Geometry of the super-pixel (sensor pixels)
  localparam int unsigned N_ROWS = 16;   // sensor rows (y), one y-profile bin each
  localparam int unsigned N_COLS = 16;   // sensor columns (x), summed per row
  localparam int unsigned ISL_PIX = 4;   // sensor pixels per 2x2 ROIC island

  // ADC and y-profile
  localparam int unsigned ADC_W = 2;     // flash ADC output bits
  localparam int unsigned SUM_W = 6;     // y-profile bin width: 16 * 3 = 48 < 64

  // Network
  localparam int unsigned N_HID  = 58;   // hidden neurons
  localparam int unsigned N_CLS  = 3;    // output classes
  localparam int unsigned CLS_W  = 2;    // class index width
  localparam int unsigned W_W    = 4;    // weight bits
  localparam int unsigned B_W    = 4;    // bias bits
  localparam int unsigned ACT_W  = 8;    // hidden activation bits
  localparam int unsigned W_FRAC = 3;    // weight/bias fraction bits: range [-1, 0.875]
  localparam int unsigned ACT_FRAC = 3;  // activation fraction bits: range [0, 31.875]

  // Serial configuration word: w1 | b1 | w2 | b2 from bit 0 upwards
  localparam int unsigned W1_BITS = N_ROWS * N_HID * W_W;  // 3712
  localparam int unsigned B1_BITS = N_HID * B_W;           // 232
  localparam int unsigned W2_BITS = N_HID * N_CLS * W_W;   // 696
  localparam int unsigned B2_BITS = N_CLS * B_W;           // 12
  localparam int unsigned CFG_BITS = W1_BITS + B1_BITS + W2_BITS + B2_BITS; // 4652

  // Output classes, in the order of the training labels
  typedef enum logic [CLS_W-1:0] {
    CLS_POS_LOW = 2'd0,   // positively charged, pT < 200 MeV: reject
    CLS_NEG_LOW = 2'd1,   // negatively charged, pT < 200 MeV: reject
    CLS_HIGH    = 2'd2    // pT > 200 MeV: keep for further processing
  } cls_e;

  typedef logic [ADC_W-1:0] adc_t;
  typedef logic [SUM_W-1:0] ysum_t;

endpackage
