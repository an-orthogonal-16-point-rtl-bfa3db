// dct16_2d: 2-D 16x16 approximate DCT, B = T * A * T^T (unscaled).
//
// The transform is separable, so it is built from two copies of the 1-D
// core with a transposition buffer between them. A 16x16 block A enters one
// row per clock (in_row[i] = A[j][i] for rows j = 0..15 in order). The first
// dct16_1d transforms each row; transpose_buffer collects the 16 transformed
// rows and hands them on as columns, one per clock; the second dct16_1d
// transforms each column. Output column k of the block, out_col[i] = B[i][k],
// appears with out_idx = k.
//
// Timing: one block every 16 clocks with no gaps needed between blocks.
// Column 0 of a block comes out 12 clocks after its last row went in
// (5 clocks row transform, 2 clocks buffer, 5 clocks column transform), and
// the other columns follow on consecutive clocks. The three-block structure
// follows the source; the input width (9 bits, enough for unsigned 8-bit
// pixels and signed 9-bit prediction residuals), the valid handshake and
// the column index output are this design's choices. Widths grow by 4 bits
// per pass, so OUT_W = IN_W + 8 holds every coefficient exactly.
module dct16_2d
  import dct16_pkg::*;
#(
  parameter int IN_W  = 9,
  parameter int OUT_W = IN_W + 2 * GROWTH_1D
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_row  [N],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_col [N],
  output logic [IDX_W-1:0]        out_idx
);
  localparam int MID_W = IN_W + GROWTH_1D;

  logic                    row_valid;
  logic signed [MID_W-1:0] row_X   [N];
  logic                    col_valid;
  logic signed [MID_W-1:0] col_x   [N];
  logic [IDX_W-1:0]        col_idx;
  logic [IDX_W-1:0]        idx_pipe [LAT_1D];

  dct16_1d #(.IN_W(IN_W), .OUT_W(MID_W)) u_row_dct (
    .clk, .rst_n,
    .in_valid (in_valid),
    .x        (in_row),
    .out_valid(row_valid),
    .X        (row_X)
  );

  transpose_buffer #(.W(MID_W)) u_transpose (
    .clk, .rst_n,
    .in_valid (row_valid),
    .in_row   (row_X),
    .out_valid(col_valid),
    .out_col  (col_x),
    .out_idx  (col_idx)
  );

  dct16_1d #(.IN_W(MID_W), .OUT_W(OUT_W)) u_col_dct (
    .clk, .rst_n,
    .in_valid (col_valid),
    .x        (col_x),
    .out_valid(out_valid),
    .X        (out_col)
  );

  // Column index travels alongside the column transform.
  always_ff @(posedge clk) begin
    idx_pipe[0] <= col_idx;
    for (int s = 1; s < LAT_1D; s++) idx_pipe[s] <= idx_pipe[s-1];
  end
  assign out_idx = idx_pipe[LAT_1D-1];
endmodule
