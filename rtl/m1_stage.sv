// m1_stage: first adder stage (M1) of the 16-point approximate DCT.
//
// M1 = [[I8, J8], [J8, -I8]] (I = identity, J = counter-identity) is a
// 16-point butterfly: the first eight outputs are the sums x[i] + x[15-i],
// the last eight the differences x[15-i] - x[i]. Sixteen adders, then one
// register row, as in the architecture drawing of the transform.
//
// Interface: x is sampled on every rising clock edge; y = M1 * x appears one
// clock later. There is no enable and no reset: the surrounding 1-D core
// tracks which register contents are valid. OUT_W = IN_W + 1 holds every
// result exactly; the default input width is this design's choice.
module m1_stage
  import dct16_pkg::*;
#(
  parameter int IN_W  = 9,
  parameter int OUT_W = IN_W + 1
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  x [N],
  output logic signed [OUT_W-1:0] y [N]
);
  logic signed [OUT_W-1:0] sum [N];

  always_comb begin
    for (int i = 0; i < N/2; i++) begin
      sum[i]         = OUT_W'(x[i]) + OUT_W'(x[N-1-i]);
      sum[N/2 + i]   = OUT_W'(x[N/2-1-i]) - OUT_W'(x[N/2 + i]);
    end
  end

  always_ff @(posedge clk) y <= sum;
endmodule
