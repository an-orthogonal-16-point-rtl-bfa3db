// m4_stage: last adder stage (M4) of the 16-point approximate DCT.
//
// M4 = diag(H, I6, H, I6) with H = [[1, 1], [1, -1]]: 2-point butterflies on
// positions (0, 1) and (8, 9); the other twelve values pass unchanged. Four
// adders, then one register row.
//
// Interface: x is sampled on every rising edge; y = M4 * x one clock later.
// No enable, no reset. The default OUT_W = IN_W + 1 is exact for any input.
// The 1-D core instantiates it with OUT_W = IN_W: there the butterfly
// results are outputs of T, sums of at most 16 input samples, and already
// fit the width of the M3 results.
module m4_stage
  import dct16_pkg::*;
#(
  parameter int IN_W  = 13,
  parameter int OUT_W = IN_W + 1
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  x [N],
  output logic signed [OUT_W-1:0] y [N]
);
  logic signed [OUT_W-1:0] sum [N];

  always_comb begin
    for (int i = 0; i < N; i++) sum[i] = OUT_W'(x[i]);
    sum[0] = OUT_W'(x[0]) + OUT_W'(x[1]);
    sum[1] = OUT_W'(x[0]) - OUT_W'(x[1]);
    sum[8] = OUT_W'(x[8]) + OUT_W'(x[9]);
    sum[9] = OUT_W'(x[8]) - OUT_W'(x[9]);
  end

  always_ff @(posedge clk) y <= sum;
endmodule
