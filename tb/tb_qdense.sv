// tb_qdense -- both layer shapes of the network (16x58 with 6-bit inputs and
// 58x3 with 8-bit inputs of 3 fraction bits) against integer sums computed
// here, with random and extreme weights, biases and inputs.
`timescale 1ns/1ps
module tb_qdense;
  logic        [5:0]  x1 [16];
  logic signed [3:0]  w1 [58][16];
  logic signed [3:0]  b1 [58];
  logic signed [15:0] y1 [58];
  logic        [7:0]  x2 [58];
  logic signed [3:0]  w2 [3][58];
  logic signed [3:0]  b2 [3];
  logic signed [18:0] y2 [3];
  int checks = 0, failures = 0;

  qdense dut1 (.x(x1), .w(w1), .b(b1), .y(y1));
  qdense #(.N_IN(58), .N_OUT(3), .IN_W(8), .IN_FRAC(3)) dut2 (.x(x2), .w(w2), .b(b2), .y(y2));

  task automatic run(input int mode);   // 0 random, 1 most negative, 2 most positive
    int e;
    for (int i = 0; i < 16; i++) x1[i] = 6'(mode == 0 ? $urandom_range(48) : 48);
    for (int o = 0; o < 58; o++) begin
      for (int i = 0; i < 16; i++) w1[o][i] = 4'(mode == 0 ? $urandom_range(15) : (mode == 1 ? 8 : 7));
      b1[o] = 4'(mode == 0 ? $urandom_range(15) : (mode == 1 ? 8 : 7));
    end
    for (int k = 0; k < 58; k++) x2[k] = 8'(mode == 0 ? $urandom_range(255) : 255);
    for (int c = 0; c < 3; c++) begin
      for (int k = 0; k < 58; k++) w2[c][k] = 4'(mode == 0 ? $urandom_range(15) : (mode == 1 ? 8 : 7));
      b2[c] = 4'(mode == 0 ? $urandom_range(15) : (mode == 1 ? 8 : 7));
    end
    #1;
    for (int o = 0; o < 58; o++) begin
      e = int'(b1[o]);
      for (int i = 0; i < 16; i++) e += int'(x1[i]) * int'(w1[o][i]);
      checks++;
      if (int'(y1[o]) != e) begin failures++; $display("FAIL L1 o=%0d y=%0d exp=%0d", o, y1[o], e); end
    end
    for (int c = 0; c < 3; c++) begin
      e = int'(b2[c]) * 8;
      for (int k = 0; k < 58; k++) e += int'(x2[k]) * int'(w2[c][k]);
      checks++;
      if (int'(y2[c]) != e) begin failures++; $display("FAIL L2 c=%0d y=%0d exp=%0d", c, y2[c], e); end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(1);
    run(2);
    for (int n = 0; n < 100; n++) run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
