// m2_stage: second adder stage (M2) of the 16-point approximate DCT.
//
// M2 = diag(B8, B8) with B8 = [[I4, J4], [J4, -I4]]: two independent 8-point
// butterflies, one on positions 0..7 and one on 8..15. Within a half with
// base b, outputs b+i (i < 4) are x[b+i] + x[b+7-i] and outputs b+4+i are
// x[b+3-i] - x[b+4+i]. Sixteen adders, then one register row.
//
// Interface: x is sampled on every rising edge; y = M2 * x one clock later.
// No enable, no reset. OUT_W = IN_W + 1 holds every result exactly.
module m2_stage
  import dct16_pkg::*;
#(
  parameter int IN_W  = 10,
  parameter int OUT_W = IN_W + 1
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  x [N],
  output logic signed [OUT_W-1:0] y [N]
);
  logic signed [OUT_W-1:0] sum [N];

  always_comb begin
    for (int b = 0; b < N; b += N/2) begin
      for (int i = 0; i < N/4; i++) begin
        sum[b + i]       = OUT_W'(x[b + i]) + OUT_W'(x[b + 7 - i]);
        sum[b + 4 + i]   = OUT_W'(x[b + 3 - i]) - OUT_W'(x[b + 4 + i]);
      end
    end
  end

  always_ff @(posedge clk) y <= sum;
endmodule
