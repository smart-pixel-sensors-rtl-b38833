// tb_roic_island -- drives each ROIC pixel of an island with its own
// comparator pattern and checks the sensor-ordered codes: A->1, D->2, B->3, C->4.
`timescale 1ns/1ps
module tb_roic_island;
  import smart_pixel_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [2:0] comp [4];
  adc_t sensor_code [4];
  int checks = 0, failures = 0;

  roic_island dut (.clk(clk), .rst_n(rst_n), .comp(comp), .sensor_code(sensor_code));

  always #12.5 clk = ~clk;

  function automatic logic [2:0] therm(int code);
    return 3'((1 << code) - 1);
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cA, cB, cC, cD;
    for (int p = 0; p < 4; p++) comp[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int exp [4];
      cA = int'($urandom_range(3)); cB = int'($urandom_range(3));
      cC = int'($urandom_range(3)); cD = int'($urandom_range(3));
      @(negedge clk);
      comp[0] = therm(cA); comp[1] = therm(cB); comp[2] = therm(cC); comp[3] = therm(cD);
      exp = '{cA, cD, cB, cC};   // sensor pixels 1..4
      @(posedge clk); #1;
      for (int s = 0; s < 4; s++) begin
        checks++;
        if (int'(sensor_code[s]) != exp[s]) begin
          failures++;
          $display("FAIL sensor pixel %0d code=%0d exp=%0d", s + 1, sensor_code[s], exp[s]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
