// tb_row_sum -- random and extreme rows of 2-bit codes into the y-profile
// adder; the expected sum is counted in the testbench.
`timescale 1ns/1ps
module tb_row_sum;
  logic [1:0] code [16];
  logic [5:0] sum;
  int checks = 0, failures = 0;

  row_sum dut (.code(code), .sum(sum));

  task automatic check_row(input int mode);
    int exp = 0;
    for (int i = 0; i < 16; i++) begin
      int v;
      v = (mode == 0) ? int'($urandom_range(3)) : (mode == 1 ? 3 : 0);
      code[i] = 2'(v);
      exp += v;
    end
    #1;
    checks++;
    if (int'(sum) != exp) begin
      failures++;
      $display("FAIL sum=%0d exp=%0d", sum, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_row(1);          // all pixels at code 3: 48, the largest bin
    check_row(2);          // empty row
    for (int n = 0; n < 500; n++) check_row(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
