// dct16_1d: pipelined 1-D 16-point approximate DCT, X = T * x.
//
// T is a 16x16 matrix of 0 and +-1 entries with T * T^T diagonal; the
// orthogonalizing scale factors are left to the quantizer, so X is the
// unscaled product. The datapath follows the factorization
//   T = P2 * M4 * M3 * M2 * P1 * M1
// with 60 adders and no multipliers or shifts: m1_stage (16 adders),
// the fixed permutation P1 (wiring), m2_stage (16), m3_stage (24, two
// register rows), m4_stage (4) and the fixed output permutation P2 (wiring).
//
// Timing: one 16-sample vector per clock, result LAT_1D = 5 clocks after it
// is sampled. in_valid travels through a 5-stage shift register next to the
// data and comes out as out_valid; there is no stall or back-pressure. The
// valid bit and its reset are this design's own addition; the stage structure
// and register placement follow the architecture drawing.
//
// Widths: stage widths grow by 1, 1, 2 and 0 bits; OUT_W = IN_W + 4 is
// exact because no row of T has more than 16 non-zero entries.
module dct16_1d
  import dct16_pkg::*;
#(
  parameter int IN_W  = 9,
  parameter int OUT_W = IN_W + GROWTH_1D
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x [N],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] X [N]
);
  localparam int W1 = IN_W + 1;   // after M1
  localparam int W2 = IN_W + 2;   // after M2
  localparam int W3 = IN_W + 4;   // after M3 and M4

  logic signed [W1-1:0] s1   [N];
  logic signed [W1-1:0] s1_p [N];
  logic signed [W2-1:0] s2   [N];
  logic signed [W3-1:0] s3   [N];
  logic signed [W3-1:0] s4   [N];
  logic [LAT_1D-1:0]    vld;

  m1_stage #(.IN_W(IN_W), .OUT_W(W1)) u_m1 (.clk, .x(x),    .y(s1));

  // P1: wiring only.
  always_comb
    for (int i = 0; i < N; i++) s1_p[i] = s1[p1_src(i)];

  m2_stage #(.IN_W(W1), .OUT_W(W2)) u_m2 (.clk, .x(s1_p), .y(s2));
  m3_stage #(.IN_W(W2), .OUT_W(W3)) u_m3 (.clk, .x(s2),   .y(s3));
  m4_stage #(.IN_W(W3), .OUT_W(W3)) u_m4 (.clk, .x(s3),   .y(s4));

  // P2: wiring only.
  always_comb
    for (int k = 0; k < N; k++) X[k] = OUT_W'(s4[p2_src(k)]);

  always_ff @(posedge clk)
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT_1D-2:0], in_valid};

  assign out_valid = vld[LAT_1D-1];
endmodule
