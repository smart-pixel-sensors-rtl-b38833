// pixel_afe -- BEHAVIOURAL MODEL of the analog front end of one ROIC pixel.
//
// The real circuit is a charge sensitive preamplifier followed by three
// auto-zero comparators that together form a 2-bit flash ADC. It is analog and
// is not synthesized from this file. The model takes the collected charge of
// the current bunch crossing as an integer number of electrons and produces the
// three comparator decisions as a thermometer code: comp[k] is 1 when the
// charge reaches threshold k. The default thresholds, 400, 1600 and 2400
// electrons, give the published charge intervals of the baseline ADC
// (<400, 400-1600, 1600-2400, >2400). Charge exactly on a boundary is counted
// in the upper interval, which is this model's choice. Preamplifier shaping,
// auto-zeroing and noise are not modelled: the outputs follow the input after
// a fixed delay of DELAY time units, ready before the next 40 MHz sampling edge.
module pixel_afe #(
  parameter int unsigned Q_W   = 16,     // charge input width (electrons)
  parameter int unsigned THR0  = 400,    // noise threshold, code 00 / 01
  parameter int unsigned THR1  = 1600,   // code 01 / 10
  parameter int unsigned THR2  = 2400,   // code 10 / 11
  parameter int unsigned DELAY = 1       // comparator settling, time units
) (
  input  logic [Q_W-1:0] charge_e,       // collected charge, electrons
  output logic [2:0]     comp            // thermometer: comp[0] lowest threshold
);

  logic [2:0] comp_now;

  always_comb begin
    comp_now[0] = (32'(charge_e) >= THR0);
    comp_now[1] = (32'(charge_e) >= THR1);
    comp_now[2] = (32'(charge_e) >= THR2);
  end

  assign #(DELAY) comp = comp_now;

endmodule
