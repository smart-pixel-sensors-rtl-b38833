// tb_argmax -- random scores, equal scores and every possible winner position.
`timescale 1ns/1ps
module tb_argmax;
  logic signed [18:0] score [3];
  logic [1:0] idx;
  int checks = 0, failures = 0;
  int hits [3] = '{0, 0, 0};

  argmax dut (.score(score), .idx(idx));

  task automatic check(input int a, input int b, input int c);
    int e;
    score[0] = 19'(a); score[1] = 19'(b); score[2] = 19'(c);
    #1;
    e = 0;
    if (b > a) e = 1;
    if (c > ((e == 1) ? b : a)) e = 2;
    hits[e]++;
    checks++;
    if (int'(idx) != e) begin failures++; $display("FAIL %0d %0d %0d idx=%0d exp=%0d", a, b, c, idx, e); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(5, 5, 5); check(-3, 7, 7); check(7, -3, 7); check(-1, -1, -2);
    check(-262144, -262144, 262143); check(262143, 0, 262143);
    for (int n = 0; n < 500; n++)
      check(int'($urandom_range(2000)) - 1000, int'($urandom_range(2000)) - 1000,
            int'($urandom_range(2000)) - 1000);
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (hits[k] == 0) begin failures++; $display("FAIL class %0d never won", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
