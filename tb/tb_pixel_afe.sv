// tb_pixel_afe -- checks the comparator thresholds of the front-end model
// against the published charge intervals, including charges on each boundary.
`timescale 1ns/1ps
module tb_pixel_afe;
  logic [15:0] q;
  logic [2:0]  comp;
  int checks = 0, failures = 0;

  pixel_afe dut (.charge_e(q), .comp(comp));

  task automatic check(input int charge);
    logic [2:0] exp;
    q = 16'(charge);
    #5;
    // interval boundaries: <400 -> 000, 400..1599 -> 001, 1600..2399 -> 011, else 111
    if (charge < 400) exp = 3'b000;
    else if (charge < 1600) exp = 3'b001;
    else if (charge < 2400) exp = 3'b011;
    else exp = 3'b111;
    checks++;
    if (comp !== exp) begin
      failures++;
      $display("FAIL charge=%0d comp=%b exp=%b", charge, comp, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0); check(399); check(400); check(1599); check(1600);
    check(2399); check(2400); check(65535);
    for (int n = 0; n < 200; n++) check(int'($urandom_range(5000)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
