// tb_config_chain -- loads a random configuration word serially, checks every
// weight and bias field against the word (layout recomputed here), checks
// that the word holds when not shifting, that a load takes exactly one clock
// per bit, and that the next load reads the old word back at cfg_out.
`timescale 1ns/1ps
module tb_config_chain;
  localparam int NI = 16, NH = 58, NC = 3, NB = 4652;
  logic clk = 0, cfg_shift = 0, cfg_in = 0, cfg_out;
  logic signed [3:0] w1 [NH][NI];
  logic signed [3:0] b1 [NH];
  logic signed [3:0] w2 [NC][NH];
  logic signed [3:0] b2 [NC];
  logic word_a [NB];
  logic word_b [NB];
  int checks = 0, failures = 0;

  config_chain dut (.clk(clk), .cfg_shift(cfg_shift), .cfg_in(cfg_in), .cfg_out(cfg_out),
                    .w1(w1), .b1(b1), .w2(w2), .b2(b2));

  always #12.5 clk = ~clk;

  function automatic int field(ref logic wd [NB], input int ofs);
    logic [3:0] v;
    for (int k = 0; k < 4; k++) v[k] = wd[ofs + k];
    return int'($signed(v));
  endfunction

  task automatic check_fields(ref logic wd [NB]);
    for (int o = 0; o < NH; o++) begin
      for (int i = 0; i < NI; i++) begin
        checks++;
        if (int'(w1[o][i]) != field(wd, 4*(o*NI + i))) failures++;
      end
      checks++;
      if (int'(b1[o]) != field(wd, 3712 + 4*o)) failures++;
    end
    for (int c = 0; c < NC; c++) begin
      for (int h = 0; h < NH; h++) begin
        checks++;
        if (int'(w2[c][h]) != field(wd, 3944 + 4*(c*NH + h))) failures++;
      end
      checks++;
      if (int'(b2[c]) != field(wd, 4640 + 4*c)) failures++;
    end
  endtask

  initial begin
    repeat (3 * NB + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1, rb_err;
    foreach (word_a[k]) word_a[k] = 1'($urandom_range(1));
    foreach (word_b[k]) word_b[k] = 1'($urandom_range(1));
    @(negedge clk);
    t0 = 0;
    cfg_shift = 1;
    for (int k = NB - 1; k >= 0; k--) begin
      cfg_in = word_a[k];
      @(negedge clk);
      t0++;
    end
    cfg_shift = 0;
    checks++;
    if (t0 != NB) failures++;
    check_fields(word_a);
    // hold: clocks without cfg_shift change nothing
    cfg_in = 1;
    repeat (20) @(negedge clk);
    check_fields(word_a);
    // second load reads the first word back, MSB first
    rb_err = 0;
    t1 = 0;
    cfg_shift = 1;
    for (int k = NB - 1; k >= 0; k--) begin
      cfg_in = word_b[k];
      if (cfg_out !== word_a[k]) rb_err++;
      @(negedge clk);
      t1++;
    end
    cfg_shift = 0;
    checks++;
    if (rb_err != 0) begin failures++; $display("FAIL readback errors=%0d", rb_err); end
    check_fields(word_b);
    $display("load took %0d clocks for %0d bits", t1, NB);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
