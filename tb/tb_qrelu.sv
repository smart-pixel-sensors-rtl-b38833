// tb_qrelu -- negative, in-range and saturating inputs, for the default
// binary point (no fraction bits dropped) and for one that drops two bits.
`timescale 1ns/1ps
module tb_qrelu;
  logic signed [15:0] x [58];
  logic        [7:0]  y [58];
  logic        [7:0]  z [58];
  int checks = 0, failures = 0;

  qrelu dut (.x(x), .y(y));
  qrelu #(.OUT_FRAC(1)) dut_s (.x(x), .y(z));

  function automatic int ref_relu(int v, int shift);
    int s;
    if (v < 0) return 0;
    s = v / (1 << shift);
    return (s > 255) ? 255 : s;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 60; n++) begin
      for (int k = 0; k < 58; k++) begin
        int v;
        case (k % 4)
          0: v = -int'($urandom_range(32768));
          1: v = int'($urandom_range(255));
          2: v = int'($urandom_range(32767));
          default: v = int'($urandom_range(1100));
        endcase
        x[k] = 16'(v);
      end
      x[0] = 16'sh7fff; x[1] = -16'sd1; x[2] = 16'sd255; x[3] = 16'sd256;
      #1;
      for (int k = 0; k < 58; k++) begin
        checks += 2;
        if (int'(y[k]) != ref_relu(int'(x[k]), 0)) begin
          failures++; $display("FAIL x=%0d y=%0d", x[k], y[k]);
        end
        if (int'(z[k]) != ref_relu(int'(x[k]), 2)) begin
          failures++; $display("FAIL shift x=%0d z=%0d", x[k], z[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
