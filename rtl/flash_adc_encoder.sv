// flash_adc_encoder -- digital back end of the per-pixel 2-bit flash ADC.
//
// The three comparator outputs of a pixel (a thermometer code, comp[0] for the
// lowest threshold) are sampled on every rising edge of the 40 MHz bunch-crossing
// clock and encoded into a 2-bit binary ADC code: 00 below the noise threshold,
// 01, 10, and 11 above the highest threshold. The code is the number of
// comparators that fired, so a bubble in the thermometer code (an upper
// comparator set without a lower one) still gives a code within range instead
// of a large error. The synchronous 40 MHz sampling follows the paper; the
// population-count encoding and the asynchronous active-low reset to code 00
// are this design's choices.
//
// Timing: code is valid from the clock edge that sampled comp, one register.
module flash_adc_encoder (
  input  logic       clk,        // 40 MHz bunch-crossing clock
  input  logic       rst_n,      // asynchronous, active low
  input  logic [2:0] comp,       // comparator outputs (thermometer code)
  output logic [1:0] code        // registered ADC code
);

  logic [1:0] code_d;

  always_comb begin
    code_d = 2'(comp[0]) + 2'(comp[1]) + 2'(comp[2]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) code <= '0;
    else        code <= code_d;
  end

endmodule
