// row_sum -- one bin of the cluster y-profile.
//
// Adds the 2-bit ADC codes of all N pixels of one sensor row (the pixels that
// share a y position, spread along x). With the default 16 pixels of at most
// 3 each, the sum is at most 48 and fits the 6-bit network input, which is the
// width the paper gives. The adder is combinational; its result is used within
// the same 25 ns bunch crossing. Output width is derived from N and IN_W so the
// sum can never overflow.
module row_sum #(
  parameter int unsigned N     = 16,                              // pixels per row
  parameter int unsigned IN_W  = 2,                               // ADC code bits
  parameter int unsigned OUT_W = $clog2(N * (2**IN_W - 1) + 1)    // 6 for defaults
) (
  input  logic [IN_W-1:0]  code [N],
  output logic [OUT_W-1:0] sum
);

  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++) sum += OUT_W'(code[i]);
  end

endmodule
