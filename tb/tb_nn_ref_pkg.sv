// tb_nn_ref_pkg -- integer reference model of the cluster classifier, for the
// testbenches only. It recomputes the network with plain 32-bit integers,
// independently of the RTL: values are kept as integer multiples of their least
// significant bit (weights and biases 1/8, first-layer sums 1/8, activations
// 1/8, output scores 1/64 with the default binary points). It also reports how
// many hidden neurons were clipped at zero or saturated, so a testbench can
// show that both ReLU limits were exercised.
package tb_nn_ref_pkg;

  localparam int NI = 16, NH = 58, NC = 3;
  localparam int WFRAC = 3, AFRAC = 3, ACT_MAX = 255;

  // 2-bit ADC code of a charge in electrons (thresholds 400 / 1600 / 2400)
  function automatic int adc_code(int q);
    if (q < 400)  return 0;
    if (q < 1600) return 1;
    if (q < 2400) return 2;
    return 3;
  endfunction

  function automatic int classify(
    input  int yp [NI],
    input  int w1 [NH][NI], input int b1 [NH],
    input  int w2 [NC][NH], input int b2 [NC],
    output int sc [NC], output int n_neg, output int n_sat);
    int h [NH];
    int best;
    n_neg = 0; n_sat = 0;
    for (int o = 0; o < NH; o++) begin
      int a;
      a = b1[o];                           // bias and sum share 3 fraction bits
      for (int i = 0; i < NI; i++) a += yp[i] * w1[o][i];
      a = a >>> (WFRAC - AFRAC);
      if (a < 0) begin h[o] = 0; n_neg++; end
      else if (a > ACT_MAX) begin h[o] = ACT_MAX; n_sat++; end
      else h[o] = a;
    end
    for (int c = 0; c < NC; c++) begin
      sc[c] = b2[c] * (1 << AFRAC);         // align bias to 6 fraction bits
      for (int k = 0; k < NH; k++) sc[c] += h[k] * w2[c][k];
    end
    best = 0;
    for (int c = 1; c < NC; c++) if (sc[c] > sc[best]) best = c;
    return best;
  endfunction

  // random signed 4-bit value, -8..7
  function automatic int rnd4();
    return int'($urandom_range(15)) - 8;
  endfunction

endpackage
