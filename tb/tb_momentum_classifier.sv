// tb_momentum_classifier -- random weight sets and y-profiles through the whole
// network; class and raw scores are compared with the integer reference model.
// Counts that both ReLU limits and all three classes were reached.
`timescale 1ns/1ps
module tb_momentum_classifier;
  import tb_nn_ref_pkg::*;
  logic        [5:0]  yprof [16];
  logic signed [3:0]  w1 [58][16];
  logic signed [3:0]  b1 [58];
  logic signed [3:0]  w2 [3][58];
  logic signed [3:0]  b2 [3];
  logic signed [18:0] score [3];
  logic        [1:0]  cls;
  int checks = 0, failures = 0;
  int n_cls [3] = '{0, 0, 0};
  int tot_neg = 0, tot_sat = 0;

  momentum_classifier dut (.yprof(yprof), .w1(w1), .b1(b1), .w2(w2), .b2(b2),
                           .score(score), .cls(cls));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int yp [16];
    int rw1 [58][16], rb1 [58], rw2 [3][58], rb2 [3], sc [3];
    int e, nneg, nsat;
    for (int set = 0; set < 20; set++) begin
      for (int o = 0; o < 58; o++) begin
        for (int i = 0; i < 16; i++) begin rw1[o][i] = rnd4(); w1[o][i] = 4'(rw1[o][i]); end
        rb1[o] = rnd4(); b1[o] = 4'(rb1[o]);
      end
      for (int c = 0; c < 3; c++) begin
        for (int k = 0; k < 58; k++) begin rw2[c][k] = rnd4(); w2[c][k] = 4'(rw2[c][k]); end
        rb2[c] = rnd4(); b2[c] = 4'(rb2[c]);
      end
      for (int n = 0; n < 50; n++) begin
        for (int i = 0; i < 16; i++) begin
          yp[i] = int'($urandom_range(48)) >> int'($urandom_range(5));
          yprof[i] = 6'(yp[i]);
        end
        #1;
        e = classify(yp, rw1, rb1, rw2, rb2, sc, nneg, nsat);
        tot_neg += nneg; tot_sat += nsat;
        n_cls[e]++;
        checks++;
        if (int'(cls) != e) begin failures++; $display("FAIL cls=%0d exp=%0d", cls, e); end
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (int'(score[c]) != sc[c]) begin
            failures++; $display("FAIL score[%0d]=%0d exp=%0d", c, score[c], sc[c]);
          end
        end
      end
    end
    $display("classes: +low %0d, -low %0d, high %0d; relu clipped %0d, saturated %0d",
             n_cls[0], n_cls[1], n_cls[2], tot_neg, tot_sat);
    for (int c = 0; c < 3; c++) begin checks++; if (n_cls[c] == 0) failures++; end
    checks++; if (tot_neg == 0) failures++;
    checks++; if (tot_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
