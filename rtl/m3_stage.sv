// m3_stage: third adder stage (M3) of the 16-point approximate DCT.
//
// M3 = diag(A, B, C, D) of four 4x4 blocks acting on positions 0-3, 4-7,
// 8-11 and 12-15:
//   A: y0 = a0+a3, y1 = a1+a2, y2 = a2-a1, y3 = a0-a3
//   B: y4 = a5+a6+a7, y5 = a7-a4-a5, y6 = a5-a4-a6, y7 = a4-a6+a7
//   C: y8 = c0+c3, y9 = c1+c2, y10 = c2-c1, y11 = c3-c0
//   D: y12 = d1+d2+d3, y13 = d0+d1-d3, y14 = d0-d1+d2, y15 = d0-d2+d3
// A and C are plain butterflies. Every row of B and D sums three inputs and
// needs two adders in series, so the stage has two register rows, as drawn
// in the architecture: a first adder level, registers, a second adder level,
// registers. The butterfly results of A and C simply pass through the second
// register row. The first level of each 3-term row adds two of its inputs;
// the third input is carried in a delay register. The pairing below is this
// design's choice, made so that each of B and D needs only two delayed
// inputs (a4, a7 for B; d2, d3 for D), the number of extra delay boxes the
// drawing shows per block. 24 adders in all.
//
// Interface: x is sampled on every rising edge; y = M3 * x two clocks later.
// No enable, no reset. OUT_W = IN_W + 2 holds every result exactly.
module m3_stage
  import dct16_pkg::*;
#(
  parameter int IN_W  = 11,
  parameter int OUT_W = IN_W + 2
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  x [N],
  output logic signed [OUT_W-1:0] y [N]
);
  // First level: 16 partial results and 4 delayed operands.
  logic signed [OUT_W-1:0] lvl1   [N];
  logic signed [OUT_W-1:0] lvl1_q [N];
  logic signed [OUT_W-1:0] dly_q  [4];   // a4, a7, d2, d3
  logic signed [OUT_W-1:0] lvl2   [N];

  function automatic logic signed [OUT_W-1:0] ext(logic signed [IN_W-1:0] v);
    return OUT_W'(v);
  endfunction

  always_comb begin
    // Block A (0..3) and block C (8..11): complete after one adder.
    lvl1[0]  = ext(x[0]) + ext(x[3]);
    lvl1[1]  = ext(x[1]) + ext(x[2]);
    lvl1[2]  = ext(x[2]) - ext(x[1]);
    lvl1[3]  = ext(x[0]) - ext(x[3]);
    lvl1[8]  = ext(x[8])  + ext(x[11]);
    lvl1[9]  = ext(x[9])  + ext(x[10]);
    lvl1[10] = ext(x[10]) - ext(x[9]);
    lvl1[11] = ext(x[11]) - ext(x[8]);
    // Block B (4..7): pair sums.
    lvl1[4]  = ext(x[5]) + ext(x[6]);    // + a7
    lvl1[5]  = ext(x[4]) + ext(x[5]);    // a7 - ( )
    lvl1[6]  = ext(x[5]) - ext(x[6]);    // - a4
    lvl1[7]  = ext(x[7]) - ext(x[6]);    // + a4
    // Block D (12..15): pair sums.
    lvl1[12] = ext(x[13]) + ext(x[14]);  // + d3
    lvl1[13] = ext(x[12]) + ext(x[13]);  // - d3
    lvl1[14] = ext(x[12]) - ext(x[13]);  // + d2
    lvl1[15] = ext(x[12]) - ext(x[14]);  // + d3
  end

  always_ff @(posedge clk) begin
    lvl1_q   <= lvl1;
    dly_q[0] <= ext(x[4]);
    dly_q[1] <= ext(x[7]);
    dly_q[2] <= ext(x[14]);
    dly_q[3] <= ext(x[15]);
  end

  always_comb begin
    lvl2 = lvl1_q;                       // A and C pass
    lvl2[4]  = lvl1_q[4]  + dly_q[1];
    lvl2[5]  = dly_q[1]   - lvl1_q[5];
    lvl2[6]  = lvl1_q[6]  - dly_q[0];
    lvl2[7]  = lvl1_q[7]  + dly_q[0];
    lvl2[12] = lvl1_q[12] + dly_q[3];
    lvl2[13] = lvl1_q[13] - dly_q[3];
    lvl2[14] = lvl1_q[14] + dly_q[2];
    lvl2[15] = lvl1_q[15] + dly_q[3];
  end

  always_ff @(posedge clk) y <= lvl2;
endmodule
