// tb_flash_adc_encoder -- drives random comparator patterns (with bubbles) into
// the ADC encoder and checks the registered code one clock later, and reset.
`timescale 1ns/1ps
module tb_flash_adc_encoder;
  logic clk = 0, rst_n = 0;
  logic [2:0] comp = '0;
  logic [1:0] code;
  int checks = 0, failures = 0;

  flash_adc_encoder dut (.clk(clk), .rst_n(rst_n), .comp(comp), .code(code));

  always #12.5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    comp = 3'b111;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (code !== 2'b00) begin failures++; $display("FAIL reset code=%b", code); end
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      logic [2:0] c;
      c = 3'($urandom_range(7));
      @(negedge clk) comp = c;
      exp = int'(c[0]) + int'(c[1]) + int'(c[2]);
      @(posedge clk);
      #1;
      checks++;
      if (int'(code) != exp) begin
        failures++;
        $display("FAIL comp=%b code=%0d exp=%0d", c, code, exp);
      end
    end
    // the code must hold between sampling edges
    @(negedge clk) comp = 3'b001;
    @(posedge clk); #1;
    comp = 3'b111;
    #5;
    checks++;
    if (code !== 2'd1) begin failures++; $display("FAIL code changed between edges"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
