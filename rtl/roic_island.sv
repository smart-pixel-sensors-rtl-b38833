// roic_island -- one 2x2 island of ROIC pixels and its ADC logic.
//
// Four ROIC pixels of 25 x 25 um share one island of analog front ends,
// surrounded by their digital logic. The island covers 50 x 50 um, which is a
// column of four sensor pixels of 50 x 12.5 um. This module holds the four
// flash-ADC encoders and restores sensor order: ROIC pixels A, D, B, C feed
// sensor pixels 1, 2, 3, 4, as in the published mapping. Inputs are indexed by
// ROIC pixel (0 = A, 1 = B, 2 = C, 3 = D); outputs by sensor pixel (0 = pixel 1,
// the lowest y of the island, up to 3 = pixel 4). Which end of the island is
// the lowest y is this design's choice.
//
// Timing: one register (the ADC sampling register), 40 MHz.
module roic_island
  import smart_pixel_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] comp [4],          // comparator outputs of ROIC pixels A,B,C,D
  output adc_t       sensor_code [4]    // ADC codes of sensor pixels 1..4
);

  localparam int unsigned PIX_A = 0, PIX_B = 1, PIX_C = 2, PIX_D = 3;

  adc_t roic_code [4];

  for (genvar p = 0; p < 4; p++) begin : g_adc
    flash_adc_encoder u_adc (
      .clk  (clk),
      .rst_n(rst_n),
      .comp (comp[p]),
      .code (roic_code[p])
    );
  end

  // ROIC-to-sensor mapping: A->1, D->2, B->3, C->4
  assign sensor_code[0] = roic_code[PIX_A];
  assign sensor_code[1] = roic_code[PIX_D];
  assign sensor_code[2] = roic_code[PIX_B];
  assign sensor_code[3] = roic_code[PIX_C];

endmodule
